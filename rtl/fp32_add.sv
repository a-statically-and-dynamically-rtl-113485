// fp32_add: combinational IEEE-754 single-precision adder / subtractor.
//
// Computes y = a + b (sub = 0) or y = a - b (sub = 1) with round-to-nearest-
// even, using the classic guard/round/sticky scheme: the operands are ordered
// by magnitude, the smaller significand is shifted right with a sticky bit,
// added or subtracted, renormalised with a leading-zero count and rounded.
// Subnormal inputs are read as zero and subnormal results flushed to zero;
// NaN and infinity propagate, inf - inf gives 0x7FC00000. Purely
// combinational. The FP32 format follows the source design; the flush-to-zero
// behaviour is this design's choice.
module fp32_add (
  input  logic [31:0] a,
  input  logic [31:0] b,
  input  logic        sub,
  output logic [31:0] y
);
  logic [31:0] bb, big, sml;
  logic        a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;
  logic [7:0]  d;
  logic [26:0] mb, ms, shifted;
  logic [27:0] sum;
  logic [26:0] norm;
  logic        stk;
  logic [4:0]  lz;
  logic        found, rnd;
  logic [24:0] mr;
  logic signed [9:0] e;

  always_comb begin
    bb     = {b[31] ^ sub, b[30:0]};
    stk    = 1'b0;
    found  = 1'b0;
    a_zero = (a[30:23] == 8'd0);
    b_zero = (bb[30:23] == 8'd0);
    a_inf  = (a[30:23] == 8'hFF) && (a[22:0] == '0);
    b_inf  = (bb[30:23] == 8'hFF) && (bb[22:0] == '0);
    a_nan  = (a[30:23] == 8'hFF) && (a[22:0] != '0);
    b_nan  = (bb[30:23] == 8'hFF) && (bb[22:0] != '0);
    if (a[30:0] >= bb[30:0]) begin big = a; sml = bb; end
    else                     begin big = bb; sml = a; end
    d  = big[30:23] - sml[30:23];
    mb = {1'b1, big[22:0], 3'b000};
    ms = {1'b1, sml[22:0], 3'b000};
    // alignment shift with sticky
    if (d >= 8'd27) begin
      shifted = 27'd1;
    end else begin
      shifted = ms >> d;
      for (int i = 0; i < 27; i++)
        if (i < int'(d) && ms[i]) stk = 1'b1;
      shifted[0] = shifted[0] | stk;
    end
    e = $signed({2'b0, big[30:23]});
    if (big[31] == sml[31]) sum = {1'b0, mb} + {1'b0, shifted};
    else                    sum = {1'b0, mb} - {1'b0, shifted};
    // normalise
    lz = 5'd0;
    if (sum[27]) begin
      norm = {sum[27:2], sum[1] | sum[0]};
      e = e + 10'sd1;
    end else begin
      for (int i = 0; i <= 26; i++)
        if (sum[26-i] && !found) begin
          lz = 5'(i);
          found = 1'b1;
        end
      norm = sum[26:0] << lz;
      e = e - 10'($signed({1'b0, lz}));
    end
    // round to nearest even
    rnd = norm[2] & ((|norm[1:0]) | norm[3]);
    mr = {1'b0, norm[26:3]} + {24'd0, rnd};
    if (mr[24]) begin
      e = e + 10'sd1;
    end
    if (a_nan || b_nan || (a_inf && b_inf && (a[31] != bb[31])))
      y = 32'h7FC0_0000;
    else if (a_inf)
      y = a;
    else if (b_inf)
      y = bb;
    else if (a_zero && b_zero)
      y = {a[31] & bb[31], 31'd0};
    else if (b_zero)
      y = a;
    else if (a_zero)
      y = bb;
    else if (sum == '0)
      y = 32'd0;
    else if (e >= 10'sd255)
      y = {big[31], 8'hFF, 23'd0};
    else if (e <= 10'sd0)
      y = {big[31], 31'd0};
    else
      y = {big[31], e[7:0], mr[24] ? mr[23:1] : mr[22:0]};
  end
endmodule
