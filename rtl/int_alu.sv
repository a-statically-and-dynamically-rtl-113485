// int_alu: integer ALU of one scalar processor (SP), full 32-bit feature set.
//
// Implements the integer groups of the instruction set: ADD, SUB, NEG, ABS,
// MUL16LO/HI, MUL24LO/HI, AND, OR, XOR, NOT, cNOT, BVS (bit reverse), SHL,
// SHR, POP (population count), MAX and MIN. The type input selects signed
// (T_INT) or unsigned (T_UINT) behaviour for the multiplies, SHR (arithmetic
// or logical), MAX and MIN. The 16- and 24-bit multiplies take the low 16 or
// 24 bits of each operand; the LO forms return the low 32 bits of the
// product, the HI forms the product shifted right by 16 or 24. Shift amounts
// are Rb[4:0]. NOT is a bitwise inversion, cNOT returns 1 when Ra is zero.
//
// Timing: fully pipelined, one operation per clock, result LAT clocks after
// the operands (default 5, the depth the source gives for its 32-bit ALU).
// As in the source, only one stage does the operators' work; the remaining
// stages only carry the result, to break up the long routes between the
// register memories and the ALU. The operation list and the 5-stage depth
// follow the source; operand widths of the partial multiplies are this
// design's reading of the instruction names.
module int_alu
  import egpu_pkg::*;
#(
  parameter int unsigned LAT = 5
) (
  input  logic        clk,
  input  opcode_e     op,
  input  dtype_e      dtype,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  logic        sgn;
  logic [31:0] r, rev;
  logic [5:0]  pop;
  logic signed [32:0] sa33, sb33;
  logic signed [65:0] p16, p24;
  logic        a_lt_b;
  logic [31:0] pipe [LAT];

  always_comb begin
    sgn    = (dtype == T_INT);
    a_lt_b = sgn ? ($signed(a) < $signed(b)) : (a < b);
    // partial-width operands, sign- or zero-extended
    sa33 = sgn ? 33'($signed(a[15:0])) : 33'(a[15:0]);
    sb33 = sgn ? 33'($signed(b[15:0])) : 33'(b[15:0]);
    p16  = 66'(sa33 * sb33);
    sa33 = sgn ? 33'($signed(a[23:0])) : 33'(a[23:0]);
    sb33 = sgn ? 33'($signed(b[23:0])) : 33'(b[23:0]);
    p24  = 66'(sa33 * sb33);
    pop  = '0;
    for (int i = 0; i < 32; i++) begin
      pop    = pop + 6'(a[i]);
      rev[i] = a[31-i];
    end
    unique case (op)
      OP_ADD:     r = a + b;
      OP_SUB:     r = a - b;
      OP_NEG:     r = -a;
      OP_ABS:     r = (sgn && a[31]) ? -a : a;
      OP_MUL16LO: r = p16[31:0];
      OP_MUL16HI: r = p16[47:16];
      OP_MUL24LO: r = p24[31:0];
      OP_MUL24HI: r = p24[55:24];
      OP_AND:     r = a & b;
      OP_OR:      r = a | b;
      OP_XOR:     r = a ^ b;
      OP_NOT:     r = ~a;
      OP_CNOT:    r = (a == '0) ? 32'd1 : 32'd0;
      OP_BVS:     r = rev;
      OP_SHL:     r = a << b[4:0];
      OP_SHR:     r = sgn ? 32'($signed(a) >>> b[4:0]) : (a >> b[4:0]);
      OP_POP:     r = 32'(pop);
      OP_MAX:     r = a_lt_b ? b : a;
      OP_MIN:     r = a_lt_b ? a : b;
      default:    r = '0;
    endcase
  end

  always_ff @(posedge clk) begin
    pipe[0] <= r;
    for (int i = 1; i < int'(LAT); i++) pipe[i] <= pipe[i-1];
  end

  assign y = pipe[LAT-1];
endmodule
