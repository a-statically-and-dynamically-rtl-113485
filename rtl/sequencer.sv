// sequencer: instruction fetch, decode, control flow and thread generator.
//
// Fetch: the program-memory read address is the next PC, computed in the
// same clock as the current instruction finishes, so sequential code and
// taken jumps both run without a bubble (the memory's output register holds
// the instruction being executed).
//
// Control instructions take one clock and issue nothing:
//   JMP a   PC = a                 JSR a   push PC+1, PC = a
//   RTS     PC = pop               STOP    halt, raise done
//   INIT n  push loop count n      LOOP a  decrement the innermost count;
//           if it is still non-zero PC = a, else pop it and fall through
// (so INIT n ... LOOP runs the loop body n times). Call and loop counts
// live in small stacks of CALL_DEPTH and LOOP_DEPTH entries.
// NOP takes one clock.
//
// Thread generator: every other instruction is expanded into thread
// operations, one per clock. The 4-bit thread-space field selects:
//   width [43:42]: 00 all SPs, 01 first 4 SPs, 10 SP0 only, 11 (undefined
//                  in the source; treated here as all SPs)
//   depth [41:40]: 00 wavefront 0 only, 01 all wavefronts, 10 first half,
//                  11 first quarter (at least one wavefront)
// "All wavefronts" is cfg_depth, the thread-block depth set by the host
// (initialised threads / number of SPs). Per wavefront an ordinary
// instruction takes one clock for all selected SPs; LOD takes one clock per
// group of four SPs (four shared-memory read ports, SP j uses port j mod 4);
// STO takes one clock per selected SP (one write port; one clock per two
// SPs with WPORTS = 2); INVSQR runs on SP0
// only. The issue bundle and per-SP enables are registered outputs.
//
// The field meanings and the per-instruction changes of width and depth
// follow the source; the fetch scheme, the loop and call semantics, the
// stack sizes and how the depth is configured are this design's choices.
module sequencer
  import egpu_pkg::*;
#(
  parameter int unsigned NSP        = 16,
  parameter int unsigned THREADS    = 32,   // wavefronts (threads per SP)
  parameter int unsigned IMEM_DEPTH = 512,
  parameter int unsigned CALL_DEPTH = 4,
  parameter int unsigned LOOP_DEPTH = 4,
  parameter int unsigned WPORTS     = 1,    // shared-memory write ports (1 DP, 2 QP)
  localparam int unsigned PCW       = $clog2(IMEM_DEPTH),
  localparam int unsigned WFW       = (THREADS > 1) ? $clog2(THREADS) : 1,
  localparam int unsigned DW        = $clog2(THREADS + 1)
) (
  input  logic           clk,
  input  logic           rst,
  input  logic           start,
  input  logic [DW-1:0]  cfg_depth,      // wavefronts in the thread block
  output logic [PCW-1:0] imem_raddr,
  input  iw_t            iw,
  output issue_t         issue,
  output logic [NSP-1:0] lane_en,
  output logic           running,
  output logic           done,
  output logic [PCW-1:0] pc
);
  logic [PCW-1:0] call_stk [CALL_DEPTH];
  logic [$clog2(CALL_DEPTH+1)-1:0] call_sp;
  logic [15:0]    loop_stk [LOOP_DEPTH];
  logic [$clog2(LOOP_DEPTH+1)-1:0] loop_sp;

  logic [WFW-1:0] wf_cnt;
  logic [4:0]     sub_cnt;
  logic [DW-1:0]  n_wf;
  logic [4:0]     n_lanes, n_sub;
  logic           last, advance;
  logic [PCW-1:0] next_pc;
  logic [NSP-1:0] width_mask, en_c;

  // ------------------------------------------------ thread-space decode
  always_comb begin
    unique case (iw.depth)
      D_WF0:   n_wf = DW'(1);
      D_ALL:   n_wf = cfg_depth;
      D_HALF:  n_wf = (cfg_depth >> 1) == '0 ? DW'(1) : cfg_depth >> 1;
      default: n_wf = (cfg_depth >> 2) == '0 ? DW'(1) : cfg_depth >> 2;
    endcase
    if (n_wf == '0) n_wf = DW'(1);
    unique case (iw.width)
      W_QTR:   n_lanes = (NSP < 4) ? 5'(NSP) : 5'd4;
      W_SP0:   n_lanes = 5'd1;
      default: n_lanes = 5'(NSP);
    endcase
    if (iw.opcode == OP_INVSQR) n_lanes = 5'd1;
    for (int j = 0; j < int'(NSP); j++) width_mask[j] = (j < int'(n_lanes));
    unique case (iw.opcode)
      OP_LOD:  n_sub = (n_lanes + 5'd3) >> 2;
      OP_STO:  n_sub = (n_lanes + 5'(WPORTS - 1)) / 5'(WPORTS);
      default: n_sub = 5'd1;
    endcase
    for (int j = 0; j < int'(NSP); j++) begin
      unique case (iw.opcode)
        OP_LOD:  en_c[j] = width_mask[j] && (j / 4 == int'(sub_cnt));
        OP_STO:  en_c[j] = width_mask[j] && (j / int'(WPORTS) == int'(sub_cnt));
        default: en_c[j] = width_mask[j];
      endcase
    end
    last = (sub_cnt == n_sub - 5'd1) && (DW'(wf_cnt) == n_wf - DW'(1));
  end

  // ------------------------------------------------ next PC
  always_comb begin
    advance = 1'b0;
    next_pc = pc + PCW'(1);
    if (running) begin
      if (is_control(iw.opcode)) begin
        advance = (iw.opcode != OP_STOP);
        unique case (iw.opcode)
          OP_JMP, OP_JSR: next_pc = PCW'(iw.imm);
          OP_RTS:         next_pc = (call_sp != '0) ? call_stk[call_sp - 1'b1] : pc + PCW'(1);
          OP_LOOP:        if (loop_sp != '0 && loop_stk[loop_sp - 1'b1] > 16'd1)
                            next_pc = PCW'(iw.imm);
          default: ;
        endcase
      end else if (iw.opcode == OP_NOP) begin
        advance = 1'b1;
      end else begin
        advance = last;
      end
    end
    imem_raddr = start ? '0 : (advance ? next_pc : pc);
  end

  // ------------------------------------------------ state
  always_ff @(posedge clk) begin
    if (rst) begin
      running <= 1'b0;
      done    <= 1'b0;
      pc      <= '0;
      call_sp <= '0;
      loop_sp <= '0;
      wf_cnt  <= '0;
      sub_cnt <= '0;
      issue   <= '0;
      lane_en <= '0;
    end else begin
      issue.valid <= 1'b0;
      lane_en     <= '0;
      if (start) begin
        running <= 1'b1;
        done    <= 1'b0;
        pc      <= '0;
        call_sp <= '0;
        loop_sp <= '0;
        wf_cnt  <= '0;
        sub_cnt <= '0;
      end else if (running) begin
        if (is_control(iw.opcode)) begin
          unique case (iw.opcode)
            OP_STOP: begin running <= 1'b0; done <= 1'b1; end
            OP_JSR: if (call_sp != CALL_DEPTH[$bits(call_sp)-1:0]) begin
                      call_stk[call_sp] <= pc + PCW'(1);
                      call_sp <= call_sp + 1'b1;
                    end
            OP_RTS: if (call_sp != '0) call_sp <= call_sp - 1'b1;
            OP_INIT: if (loop_sp != LOOP_DEPTH[$bits(loop_sp)-1:0]) begin
                      loop_stk[loop_sp] <= iw.imm;
                      loop_sp <= loop_sp + 1'b1;
                    end
            OP_LOOP: if (loop_sp != '0) begin
                      if (loop_stk[loop_sp - 1'b1] > 16'd1)
                        loop_stk[loop_sp - 1'b1] <= loop_stk[loop_sp - 1'b1] - 16'd1;
                      else
                        loop_sp <= loop_sp - 1'b1;
                    end
            default: ;
          endcase
        end else if (iw.opcode != OP_NOP) begin
          issue.valid <= 1'b1;
          issue.op    <= iw.opcode;
          issue.dtype <= iw.dtype;
          issue.rd    <= iw.rd;
          issue.ra    <= iw.ra;
          issue.rb    <= iw.rb;
          issue.imm   <= iw.imm;
          issue.wf    <= WF_MAX_W'(wf_cnt);
          lane_en     <= en_c;
          if (last) begin
            sub_cnt <= '0;
            wf_cnt  <= '0;
          end else if (sub_cnt == n_sub - 5'd1) begin
            sub_cnt <= '0;
            wf_cnt  <= wf_cnt + 1'b1;
          end else begin
            sub_cnt <= sub_cnt + 5'd1;
          end
        end
        if (advance) pc <= next_pc;
      end
    end
  end

  // each shared-memory write port takes one store per clock
  a_one_store: assert property (@(posedge clk) disable iff (rst)
    issue.valid && issue.op == OP_STO |-> $countones(lane_en) <= int'(WPORTS));
endmodule
