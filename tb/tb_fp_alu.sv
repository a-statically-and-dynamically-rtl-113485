// tb_fp_alu: self-checking test of the FP32 ALU. Random normal operands are
// applied one per clock with ADD, SUB, MUL, NEG, ABS, MAX and MIN; results
// are checked LAT clocks later against real-number arithmetic rounded to
// FP32 (operand exponents are kept close enough that the double-precision
// reference is exact before its single rounding). Also checks 0 * inf = NaN
// and x - x = +0.
module tb_fp_alu;
  import egpu_pkg::*;
  import fp_ref_pkg::*;
  localparam int LAT = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  opcode_e op; logic [31:0] a, b, y;
  int checks = 0, failures = 0;

  fp_alu #(.LAT(LAT)) dut (.clk(clk), .op(op), .a(a), .b(b), .y(y));

  opcode_e ops [7] = '{OP_ADD, OP_SUB, OP_MUL, OP_NEG, OP_ABS, OP_MAX, OP_MIN};
  logic [31:0] expq [$];

  function automatic logic [31:0] ref_model(opcode_e o, logic [31:0] x, logic [31:0] z);
    case (o)
      OP_ADD: return r2f(f2r(x) + f2r(z));
      OP_SUB: return r2f(f2r(x) - f2r(z));
      OP_MUL: return r2f(f2r(x) * f2r(z));
      OP_NEG: return {~x[31], x[30:0]};
      OP_ABS: return {1'b0, x[30:0]};
      OP_MAX: return (f2r(x) >= f2r(z)) ? x : z;
      OP_MIN: return (f2r(x) <= f2r(z)) ? x : z;
      default: return 0;
    endcase
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    op = OP_NOP; a = 0; b = 0;
    for (int n = 0; n < 3000 + LAT; n++) begin
      @(negedge clk);
      if (n >= LAT) begin
        checks++;
        if (y !== expq[0]) begin
          failures++;
          if (failures < 10) $display("FAIL n=%0d got %h exp %h", n, y, expq[0]);
        end
        void'(expq.pop_front());
      end
      op = ops[$urandom % 7];
      a  = rand_f(100, 150);
      b  = {1'($urandom), 8'(int'(a[30:23]) - 10 + int'($urandom % 21)), 23'($urandom)};
      if ($urandom % 10 == 0) b = {~a[31], a[30:0]};           // cancellation
      if ($urandom % 10 == 0) b = {a[31], a[30:23], 23'($urandom)}; // near
      if (n == 5) begin op = OP_MUL; a = 32'h0; b = 32'h7F80_0000; end
      if (n == 6) begin op = OP_SUB; b = a; end
      if (n == 5) expq.push_back(32'h7FC0_0000);
      else if (n == 6) expq.push_back(32'h0);
      else expq.push_back(ref_model(op, a, b));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
