// tb_invsqrt: self-checking test of the reciprocal-square-root unit. Random
// positive normal inputs over a wide exponent range are applied one per
// clock; the result LAT = 9 clocks later must be within a relative error of
// 2e-5 of 1/sqrt(x). Special inputs: +0 -> +inf, negative -> NaN,
// +inf -> +0.
module tb_invsqrt;
  import fp_ref_pkg::*;
  localparam int LAT = 9;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [31:0] x, y;
  logic [31:0] xq [$];
  int checks = 0, failures = 0;

  invsqrt dut (.clk(clk), .x(x), .y(y));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real r, e;
    logic [31:0] xi;
    x = 32'h3F80_0000;
    for (int n = 0; n < 2000 + LAT; n++) begin
      @(negedge clk);
      if (n >= LAT) begin
        xi = xq.pop_front();
        checks++;
        if (xi == 32'h0) begin
          if (y !== 32'h7F80_0000) failures++;
        end else if (xi[31]) begin
          if (y !== 32'h7FC0_0000) failures++;
        end else if (xi == 32'h7F80_0000) begin
          if (y !== 32'h0) failures++;
        end else begin
          r = 1.0 / $sqrt(f2r(xi));
          e = (f2r(y) - r) / r;
          if (e < 0) e = -e;
          if (e > 2.0e-5) begin
            failures++;
            if (failures < 10) $display("FAIL x=%h y=%h err=%g", xi, y, e);
          end
        end
      end
      x = rand_f(20, 230);
      x[31] = 1'b0;
      if (n == 3) x = 32'h0;
      if (n == 4) x = 32'hC080_0000;
      if (n == 5) x = 32'h7F80_0000;
      xq.push_back(x);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
