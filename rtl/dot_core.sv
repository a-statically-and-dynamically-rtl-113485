// dot_core: optional dot-product core with the reciprocal-square-root unit.
//
// Shared by all SPs of the streaming multiprocessor. One FP32 multiplier per
// SP takes that SP's Ra and Rb operands; an adder tree sums the NSP products
// into one value. The operations:
//   DOT    Rd = sum over SPs of Ra*Rb                (one wavefront per clock)
//   SUM    Rd = sum over SPs of Ra (multipliers fed 1.0 in place of Rb)
//   INVSQR Rd = 1/sqrt(Ra of SP0)                    (invsqrt unit)
// SPs not enabled for the instruction contribute 0. An output mux chooses
// the tree or the invsqrt result, and the result is written into register
// Rd of the same wavefront in SP0, through SP0's second write source.
//
// Timing: fully pipelined, one wavefront per clock. The tree and the invsqrt
// paths are balanced to the same latency, LAT = max(1 + log2(NSP),
// invsqrt latency) clocks from operands in to result out, plus the output
// register. There is no interlock: a program waits for the write-back with
// NOPs, as the source's benchmarks do.
//
// The multiplier row, adder, 1/sqrt(x) unit, output mux and the write-back
// to an SP follow the source's block diagram; which SP receives the result,
// how SUM uses the tree and how INVSQR selects its operand are this design's
// choices.
module dot_core
  import egpu_pkg::*;
#(
  parameter int unsigned NSP = 16,
  parameter int unsigned WFW = 5,
  parameter int unsigned RAW = 10
) (
  input  logic           clk,
  input  logic           rst,
  input  logic           valid,        // an extension instruction is present
  input  opcode_e        op,
  input  logic [4:0]     rd,
  input  logic [WFW-1:0] wf,
  input  logic           en  [NSP],
  input  logic [31:0]    a   [NSP],
  input  logic [31:0]    b   [NSP],
  output logic           wb_we,
  output logic [RAW-1:0] wb_addr,
  output logic [31:0]    wb_data
);
  localparam int unsigned LVL     = (NSP > 1) ? $clog2(NSP) : 1;
  localparam int unsigned NP      = 1 << LVL;
  localparam int unsigned INV_LAT = 9;
  localparam int unsigned TREE_LAT = 1 + LVL;
  localparam int unsigned LAT     = (TREE_LAT > INV_LAT) ? TREE_LAT : INV_LAT;
  localparam logic [31:0] ONE     = 32'h3F80_0000;

  // ---------------------------------------------------------------- multipliers
  logic [31:0] prod [NP];
  logic [31:0] tree [LVL+1][NP];
  for (genvar j = 0; j < NP; j++) begin : g_mul
    if (j < NSP) begin : g_real
      logic [31:0] mb;
      assign mb = (op == OP_SUM) ? ONE : b[j];
      fp32_mul u_mul (.a(a[j]), .b(mb), .y(prod[j]));
      always_ff @(posedge clk) tree[0][j] <= en[j] ? prod[j] : 32'd0;
    end else begin : g_pad
      assign prod[j] = '0;
      always_ff @(posedge clk) tree[0][j] <= '0;
    end
  end

  // ---------------------------------------------------------------- adder tree
  for (genvar l = 0; l < LVL; l++) begin : g_lvl
    for (genvar j = 0; j < (NP >> (l + 1)); j++) begin : g_add
      logic [31:0] s;
      fp32_add u_add (.a(tree[l][2*j]), .b(tree[l][2*j+1]), .sub(1'b0), .y(s));
      always_ff @(posedge clk) tree[l+1][j] <= s;
    end
    for (genvar j = (NP >> (l + 1)); j < NP; j++) begin : g_zero
      always_ff @(posedge clk) tree[l+1][j] <= '0;
    end
  end

  // ---------------------------------------------------------------- invsqrt
  logic [31:0] inv_y;
  invsqrt u_inv (.clk(clk), .x(a[0]), .y(inv_y));

  // balance the tree path to LAT
  logic [31:0] tree_bal [LAT-TREE_LAT+1];
  assign tree_bal[0] = tree[LVL][0];
  for (genvar i = 0; i < LAT - TREE_LAT; i++) begin : g_bal
    always_ff @(posedge clk) tree_bal[i+1] <= tree_bal[i];
  end

  // control pipeline
  typedef struct packed {
    logic           v;
    logic           inv;
    logic [4:0]     rd;
    logic [WFW-1:0] wf;
  } dctl_t;
  dctl_t ctl [LAT];
  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < int'(LAT); i++) ctl[i].v <= 1'b0;
    end else begin
      ctl[0].v <= valid && op inside {OP_DOT, OP_SUM, OP_INVSQR};
      for (int i = 1; i < int'(LAT); i++) ctl[i].v <= ctl[i-1].v;
    end
    ctl[0].inv <= (op == OP_INVSQR);
    ctl[0].rd  <= rd;
    ctl[0].wf  <= wf;
    for (int i = 1; i < int'(LAT); i++) begin
      ctl[i].inv <= ctl[i-1].inv;
      ctl[i].rd  <= ctl[i-1].rd;
      ctl[i].wf  <= ctl[i-1].wf;
    end
  end

  // output mux and register
  always_ff @(posedge clk) begin
    if (rst) wb_we <= 1'b0;
    else     wb_we <= ctl[LAT-1].v;
    wb_addr <= RAW'({ctl[LAT-1].wf, (RAW - WFW)'(ctl[LAT-1].rd)});
    wb_data <= ctl[LAT-1].inv ? inv_y : tree_bal[LAT-TREE_LAT];
  end
endmodule
