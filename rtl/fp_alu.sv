// fp_alu: FP32 ALU of one scalar processor (SP).
//
// Executes ADD, SUB, NEG, ABS, MUL, MAX and MIN on IEEE-754 single-precision
// operands. ADD/SUB use fp32_add and MUL uses fp32_mul (round to nearest
// even, subnormals flushed to zero); NEG and ABS only touch the sign bit, and
// MAX/MIN compare the operands as sign-magnitude numbers. Any other opcode
// returns 0.
//
// Timing: fully pipelined, one operation per clock, result LAT clocks after
// the operands are presented (default 4, the pipeline depth the source gives
// for the FPGA's hard FP32 multiply-add block). The result is computed in the
// first stage and then carried through LAT-1 further registers, leaving the
// synthesis tool free to retime. The operation set follows the source's
// instruction table; the internal staging is this design's choice.
module fp_alu
  import egpu_pkg::*;
#(
  parameter int unsigned LAT = 4
) (
  input  logic        clk,
  input  opcode_e     op,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  logic [31:0] sum, prod, r;
  logic [31:0] pipe [LAT];

  fp32_add u_add (.a(a), .b(b), .sub(op == OP_SUB), .y(sum));
  fp32_mul u_mul (.a(a), .b(b), .y(prod));

  always_comb begin
    unique case (op)
      OP_ADD, OP_SUB: r = sum;
      OP_MUL:         r = prod;
      OP_NEG:         r = {~a[31], a[30:0]};
      OP_ABS:         r = {1'b0, a[30:0]};
      OP_MAX:         r = fp_lt(a, b) ? b : a;
      OP_MIN:         r = fp_lt(b, a) ? b : a;
      default:        r = '0;
    endcase
  end

  always_ff @(posedge clk) begin
    pipe[0] <= r;
    for (int i = 1; i < int'(LAT); i++) pipe[i] <= pipe[i-1];
  end

  assign y = pipe[LAT-1];
endmodule
