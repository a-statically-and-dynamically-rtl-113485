// sp: one scalar processor (SP) of the eGPU streaming multiprocessor.
//
// Each SP runs one thread of the current wavefront per clock. It holds the
// thread registers of its THREADS threads (regfile, two read ports, one
// write port), an FP32 ALU (fp_alu), an integer ALU (int_alu), an optional
// predicate block and the muxing and pipelining around them.
//
// Pipeline (stage numbers count clocks after the issue bundle is presented):
//   S0  issue bundle in; register-file read addresses {wf,Ra}, {wf,Rb}
//       (for STO the second port reads Rd, the data to store)
//   S1  register-file data out, registered into the operand stage
//   S2  operands to the ALUs; IF/ELSE/ENDIF update the predicate block;
//       thread_active sampled; shared-memory address Ra + offset formed
//   S3  address, store data, load/store requests and dot-core operands leave
//       the SP (registered outputs)
//   S2+ALU_LAT (= S7) ALU result, load data (ld_data, which must arrive at
//       S6) or an immediate/thread ID is selected by the write-back mux
//   S8  register file written (one write-back pipeline stage)
// The FP ALU (4 stages) is balanced by one register to match the 5-stage
// integer ALU so all results reach write-back at the same stage. There is no
// hazard detection: as in the source, a program waits (NOPs) for a result
// it needs. ext_we/ext_waddr/ext_wdata is a second write source used by the
// dot-product core on SP0; it takes the write port when asserted. There is
// no arbitration: while dot-core results are being written (from about 13
// to 14 + depth clocks after the DOT/SUM/INVSQR issues), the program must not
// let an instruction that writes SP0's registers reach write-back, or that
// write is lost (an assertion reports it).
//
// thread_active from the predicate block gates the register write enable and
// the shared-memory write enable, as the source describes. An IF pushes its
// condition ANDed with the thread's current status (nesting). With
// PRED_LEVELS = 0 the predicate block is left out.
//
// What follows the source: the two-port register memory, the operand and
// write-back pipeline registers, the write-back mux inputs (ALU, shared
// memory, immediate, thread ID), the predicate gating. This design's own
// choices: the stage timing above, Ra + zero-extended offset addressing,
// TDx = SP number and TDy = wavefront number, and LOD #imm extension by type
// (UINT zero-extends, INT sign-extends, FP32 puts the immediate in the upper
// half-word).
module sp
  import egpu_pkg::*;
#(
  parameter int unsigned SP_ID       = 0,
  parameter int unsigned THREADS     = 32,   // threads (wavefronts) per SP
  parameter int unsigned REGS        = 32,
  parameter int unsigned PRED_LEVELS = 5,    // 0 = no predicates
  parameter int unsigned SMEM_AW     = 15,   // shared-memory word address bits
  parameter int unsigned ALU_LAT     = 5,
  parameter int unsigned FP_LAT      = 4,
  localparam int unsigned WFW        = (THREADS > 1) ? $clog2(THREADS) : 1,
  localparam int unsigned RAW        = $clog2(THREADS * REGS),
  localparam int unsigned RGW        = $clog2(REGS)
) (
  input  logic               clk,
  input  logic               rst,
  input  issue_t             issue,
  input  logic               lane_en,     // this SP takes part in the issue
  // shared memory
  output logic               mem_rd,      // S3: load request
  output logic               mem_wr,      // S3: store request (active threads)
  output logic [SMEM_AW-1:0] mem_addr,    // S3
  output logic [31:0]        mem_wdata,   // S3
  input  logic [31:0]        ld_data,     // load data, must be valid at S6
  // dot-product core
  output logic               dot_en,      // S3: lane contributes to DOT/SUM
  output logic [31:0]        dot_a,       // S3
  output logic [31:0]        dot_b,       // S3
  input  logic               ext_we,
  input  logic [RAW-1:0]     ext_waddr,
  input  logic [31:0]        ext_wdata,
  output logic               thread_active_dbg
);
  localparam int unsigned OFS_LAT = ALU_LAT;  // S2 -> write-back select stage

  typedef struct packed {
    logic         valid;
    opcode_e      op;
    logic [4:0]   rd;
    logic [WFW-1:0] wf;
    logic         active;   // thread_active sampled at S2
    logic [31:0]  misc;     // immediate or thread ID
  } ctl_t;

  // ---------------------------------------------------------------- S0/S1
  issue_t      s1_iss, s2_iss;
  logic        s1_en, s2_en;
  logic [31:0] rf_a, rf_b, opa, opb;
  logic [WFW-1:0] wf0;
  logic [4:0]  rb_sel;
  logic        rf_we;
  logic [RAW-1:0] rf_waddr;
  logic [31:0] rf_wdata;

  assign wf0    = WFW'(issue.wf);
  assign rb_sel = (issue.op == OP_STO) ? issue.rd : issue.rb;

  regfile #(.THREADS(THREADS), .REGS(REGS)) u_rf (
    .clk    (clk),
    .we     (rf_we),
    .waddr  (rf_waddr),
    .wdata  (rf_wdata),
    .raddr_a(RAW'({wf0, RGW'(issue.ra)})),
    .raddr_b(RAW'({wf0, RGW'(rb_sel)})),
    .rdata_a(rf_a),
    .rdata_b(rf_b)
  );

  always_ff @(posedge clk) begin
    if (rst) begin
      s1_iss.valid <= 1'b0;
      s2_iss.valid <= 1'b0;
    end else begin
      s1_iss <= issue;
      s2_iss <= s1_iss;
    end
    s1_en <= lane_en;
    s2_en <= s1_en;
    opa   <= rf_a;         // operand pipeline register
    opb   <= rf_b;
  end

  // ---------------------------------------------------------------- S2
  logic        s2_go, active, cond;
  logic [WFW-1:0] wf2;
  logic [31:0] misc2;

  assign s2_go = s2_iss.valid && s2_en;
  assign wf2   = WFW'(s2_iss.wf);

  if (PRED_LEVELS > 0) begin : g_pred
    predicate_block #(.THREADS(THREADS), .LEVELS(PRED_LEVELS)) u_pred (
      .clk          (clk),
      .rst          (rst),
      .wavefront    (wf2),
      .do_if        (s2_go && s2_iss.op == OP_IF),
      .do_else      (s2_go && s2_iss.op == OP_ELSE),
      .do_endif     (s2_go && s2_iss.op == OP_ENDIF),
      .condition    (cond),
      .thread_active(active)
    );
  end else begin : g_nopred
    assign active = 1'b1;
  end

  assign cond = active && eval_cc(cc_e'(s2_iss.rd[2:0]), s2_iss.dtype, opa, opb);
  assign thread_active_dbg = active;

  always_comb begin
    unique case (s2_iss.op)
      OP_TDX:  misc2 = 32'(SP_ID);
      OP_TDY:  misc2 = 32'(wf2);
      default: begin
        unique case (s2_iss.dtype)
          T_INT:   misc2 = {{16{s2_iss.imm[15]}}, s2_iss.imm};
          T_FP32:  misc2 = {s2_iss.imm, 16'd0};
          default: misc2 = {16'd0, s2_iss.imm};
        endcase
      end
    endcase
  end

  // functional units
  logic [31:0] int_y, fp_y, fp_y_bal;
  int_alu #(.LAT(ALU_LAT)) u_int (
    .clk(clk), .op(s2_iss.op), .dtype(s2_iss.dtype), .a(opa), .b(opb), .y(int_y)
  );
  fp_alu #(.LAT(FP_LAT)) u_fp (
    .clk(clk), .op(s2_iss.op), .a(opa), .b(opb), .y(fp_y)
  );

  // balancing delay so the FP result lines up with the integer result
  if (ALU_LAT > FP_LAT) begin : g_bal
    logic [31:0] bal [ALU_LAT-FP_LAT];
    always_ff @(posedge clk) begin
      bal[0] <= fp_y;
      for (int i = 1; i < int'(ALU_LAT - FP_LAT); i++) bal[i] <= bal[i-1];
    end
    assign fp_y_bal = bal[ALU_LAT-FP_LAT-1];
  end else begin : g_nobal
    assign fp_y_bal = fp_y;
  end

  // shared-memory request and dot operands, registered at S3
  always_ff @(posedge clk) begin
    if (rst) begin
      mem_rd <= 1'b0;
      mem_wr <= 1'b0;
      dot_en <= 1'b0;
    end else begin
      mem_rd <= s2_go && s2_iss.op == OP_LOD;
      mem_wr <= s2_go && s2_iss.op == OP_STO && active;
      dot_en <= s2_go && s2_iss.op inside {OP_DOT, OP_SUM, OP_INVSQR};
    end
    mem_addr  <= SMEM_AW'(opa + {16'd0, s2_iss.imm});
    mem_wdata <= opb;
    dot_a     <= opa;
    dot_b     <= opb;
  end

  // control pipeline S2 -> S2+ALU_LAT
  ctl_t ctl [OFS_LAT];
  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < int'(OFS_LAT); i++) ctl[i].valid <= 1'b0;
    end else begin
      ctl[0].valid <= s2_go && writes_reg(s2_iss.op);
      for (int i = 1; i < int'(OFS_LAT); i++) ctl[i].valid <= ctl[i-1].valid;
    end
    ctl[0].op     <= s2_iss.op;
    ctl[0].rd     <= s2_iss.rd;
    ctl[0].wf     <= wf2;
    ctl[0].active <= active;
    ctl[0].misc   <= misc2;
    for (int i = 1; i < int'(OFS_LAT); i++) begin
      ctl[i].op     <= ctl[i-1].op;
      ctl[i].rd     <= ctl[i-1].rd;
      ctl[i].wf     <= ctl[i-1].wf;
      ctl[i].active <= ctl[i-1].active;
      ctl[i].misc   <= ctl[i-1].misc;
    end
  end

  // load data: arrives at S6, one register to S7
  logic [31:0] ld_q;
  always_ff @(posedge clk) ld_q <= ld_data;

  // ---------------------------------------------------------------- write-back
  ctl_t        cw;
  logic        wb_we;
  logic [RAW-1:0] wb_addr;
  logic [31:0] wb_data;

  assign cw = ctl[OFS_LAT-1];

  // the type decides INT versus FP for the opcodes both ALUs share
  dtype_e dt_pipe [OFS_LAT];
  always_ff @(posedge clk) begin
    dt_pipe[0] <= s2_iss.dtype;
    for (int i = 1; i < int'(OFS_LAT); i++) dt_pipe[i] <= dt_pipe[i-1];
  end

  logic [31:0] wb_sel;
  assign wb_sel = (cw.op == OP_LOD) ? ld_q :
                  (cw.op inside {OP_LDI, OP_TDX, OP_TDY}) ? cw.misc :
                  (cw.op == OP_MUL || dt_pipe[OFS_LAT-1] == T_FP32) ? fp_y_bal : int_y;

  always_ff @(posedge clk) begin
    if (rst) wb_we <= 1'b0;
    else     wb_we <= cw.valid && cw.active;
    wb_addr <= RAW'({cw.wf, RGW'(cw.rd)});
    wb_data <= wb_sel;
  end

  assign rf_we    = ext_we | wb_we;
  assign rf_waddr = ext_we ? ext_waddr : wb_addr;
  assign rf_wdata = ext_we ? ext_wdata : wb_data;

  // The register file has one write port. A dot-core write-back and an
  // ordinary write-back in the same clock would lose the ordinary one; the
  // program must keep them apart (see the opening comment).
  a_one_rf_write: assert property (@(posedge clk) disable iff (rst) !(ext_we && wb_we))
    else $error("SP%0d: dot-core write-back collides with a register write", SP_ID);

endmodule
