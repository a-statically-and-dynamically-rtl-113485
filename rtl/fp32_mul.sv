// fp32_mul: combinational IEEE-754 single-precision multiplier.
//
// Computes y = a * b with round-to-nearest-even. Subnormal inputs are read as
// zero and subnormal results are flushed to zero, as the hard floating-point
// blocks of the target FPGA family do; NaN and infinity propagate, and
// 0 * inf gives the quiet NaN 0x7FC00000. The 24x24-bit significand product
// is normalised by at most one place. Purely combinational: the callers add
// the pipeline registers. Used by the FP ALU, the dot-product core and the
// reciprocal-square-root unit. The FP32 format follows the source design;
// the flush-to-zero behaviour is this design's choice.
module fp32_mul (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  logic        sa, sb, sy;
  logic [7:0]  ea, eb;
  logic        a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;
  logic [47:0] p;
  logic [22:0] m;
  logic        g, s, rnd;
  logic [23:0] mr;
  logic signed [10:0] e;

  always_comb begin
    sa = a[31]; sb = b[31]; sy = sa ^ sb;
    ea = a[30:23]; eb = b[30:23];
    a_zero = (ea == 8'd0);
    b_zero = (eb == 8'd0);
    a_inf  = (ea == 8'hFF) && (a[22:0] == '0);
    b_inf  = (eb == 8'hFF) && (b[22:0] == '0);
    a_nan  = (ea == 8'hFF) && (a[22:0] != '0);
    b_nan  = (eb == 8'hFF) && (b[22:0] != '0);
    p  = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    e  = $signed({3'b0, ea}) + $signed({3'b0, eb}) - 11'sd127;
    if (p[47]) begin
      m = p[46:24]; g = p[23]; s = |p[22:0]; e = e + 11'sd1;
    end else begin
      m = p[45:23]; g = p[22]; s = |p[21:0];
    end
    rnd = g & (s | m[0]);
    mr = {1'b0, m} + {23'd0, rnd};
    if (mr[23]) e = e + 11'sd1;   // rounding carried out: mantissa becomes 0
    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero))
      y = 32'h7FC0_0000;
    else if (a_inf || b_inf)
      y = {sy, 8'hFF, 23'd0};
    else if (a_zero || b_zero)
      y = {sy, 31'd0};
    else if (e >= 11'sd255)
      y = {sy, 8'hFF, 23'd0};
    else if (e <= 11'sd0)
      y = {sy, 31'd0};
    else
      y = {sy, e[7:0], mr[22:0]};
  end
endmodule
