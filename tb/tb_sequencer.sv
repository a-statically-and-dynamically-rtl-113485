// tb_sequencer: self-checking test of fetch, control flow and the thread
// generator (16 SPs, 32 wavefronts, thread-block depth 8). A program using
// every width and depth code, LOD/STO expansion, INVSQR, INIT/LOOP,
// JSR/RTS and STOP is run from a behavioural program memory. Every issued
// thread operation (opcode, wavefront, SP enables) is compared in order with
// a list built here from the instruction definitions, and the number of
// clocks from start to done must equal the sum of the expected per-
// instruction cycle counts.
module tb_sequencer;
  import egpu_pkg::*;
  import egpu_asm_pkg::*;
  localparam int N = 16, TH = 32, DEPTH = 8;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst, start, running, done;
  logic [8:0] raddr, pc;
  logic [42:0] prog [512];
  iw_t iw;
  issue_t issue;
  logic [N-1:0] lane_en;
  int checks = 0, failures = 0;

  sequencer #(.NSP(N), .THREADS(TH)) dut (.clk(clk), .rst(rst), .start(start),
    .cfg_depth(6'(DEPTH)), .imem_raddr(raddr), .iw(iw), .issue(issue),
    .lane_en(lane_en), .running(running), .done(done), .pc(pc));

  always_ff @(posedge clk) iw <= iw_t'(prog[raddr]);

  typedef struct { opcode_e op; int wf; logic [N-1:0] en; } iss_t;
  iss_t expq [$];
  int exp_cycles = 0;

  // expected expansion of one thread instruction
  task automatic expand(logic [42:0] w);
    iw_t i; int nwf, nl; logic [N-1:0] m, e;
    i = iw_t'(w);
    case (i.depth) 2'b00: nwf = 1; 2'b01: nwf = DEPTH; 2'b10: nwf = DEPTH / 2; default: nwf = DEPTH / 4; endcase
    case (i.width) 2'b01: nl = 4; 2'b10: nl = 1; default: nl = N; endcase
    if (i.opcode == OP_INVSQR) nl = 1;
    m = '0; for (int j = 0; j < nl; j++) m[j] = 1'b1;
    for (int f = 0; f < nwf; f++) begin
      if (i.opcode == OP_LOD) begin
        for (int g = 0; g < (nl + 3) / 4; g++) begin
          e = '0; for (int j = 4*g; j < 4*g + 4; j++) if (j < nl) e[j] = 1'b1;
          expq.push_back('{i.opcode, f, e}); exp_cycles++;
        end
      end else if (i.opcode == OP_STO) begin
        for (int j = 0; j < nl; j++) begin
          e = '0; e[j] = 1'b1; expq.push_back('{i.opcode, f, e}); exp_cycles++;
        end
      end else begin
        expq.push_back('{i.opcode, f, m}); exp_cycles++;
      end
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int trace [$];
    int cyc;
    iss_t e;
    prog[0]  = ins(W_ALL, D_ALL, OP_LDI, T_INT, 1, 0, 0, 5);
    prog[1]  = ins(W_ALL, D_ALL, OP_LOD, T_INT, 2, 1, 0, 0);
    prog[2]  = ins(W_QTR, D_HALF, OP_STO, T_INT, 2, 1, 0, 0);
    prog[3]  = ins(W_SP0, D_WF0, OP_ADD, T_INT, 3, 1, 2, 0);
    prog[4]  = ctl(OP_INIT, 3);
    prog[5]  = ins(W_QTR, D_QTR, OP_ADD, T_INT, 3, 3, 1, 0);
    prog[6]  = ctl(OP_LOOP, 5);
    prog[7]  = ctl(OP_JSR, 10);
    prog[8]  = ins(W_ALL, D_ALL, OP_INVSQR, T_FP32, 4, 1, 0, 0);
    prog[9]  = ctl(OP_STOP);
    prog[10] = ins(W_ALL, D_WF0, OP_SUB, T_INT, 5, 1, 2, 0);
    prog[11] = ctl(OP_RTS);
    for (int a = 12; a < 512; a++) prog[a] = ctl(OP_STOP);
    trace = '{0, 1, 2, 3, 4, 5, 6, 5, 6, 5, 6, 7, 10, 11, 8, 9};
    foreach (trace[k]) begin
      iw_t ti;
      ti = iw_t'(prog[trace[k]]);
      if (is_control(ti.opcode)) exp_cycles++;
      else expand(prog[trace[k]]);
    end

    rst = 1; start = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done && cyc < 1000) begin
      if (issue.valid) begin
        checks++;
        if (expq.size() == 0) begin
          failures++;
        end else begin
          e = expq.pop_front();
          if (issue.op != e.op || int'(issue.wf) != e.wf || lane_en != e.en) begin
            failures++;
            if (failures < 10) $display("FAIL issue op=%s wf=%0d en=%h exp %s %0d %h",
                                        issue.op.name(), issue.wf, lane_en, e.op.name(), e.wf, e.en);
          end
        end
      end
      @(negedge clk);
      cyc++;
    end
    // the last issue appears together with the following cycles; drain it
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d issues missing", expq.size()); end
    checks++;
    if (cyc - 1 != exp_cycles) begin
      failures++; $display("FAIL cycles %0d expected %0d", cyc - 1, exp_cycles);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
