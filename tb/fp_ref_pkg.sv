// fp_ref_pkg: reference conversions between FP32 bit patterns and real
// numbers, used by the testbenches to compute expected results independently
// of the design's floating-point units. r2f rounds to nearest even and
// flushes results below the normal range to zero, matching the FP32 rules
// of the design.
package fp_ref_pkg;

  function automatic real f2r(logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(real r);
    logic [63:0] d;
    int          e;
    logic [23:0] m;
    logic        g, s;
    d = $realtobits(r);
    if (d[62:52] == 11'd0) return {d[63], 31'd0};
    e = int'(d[62:52]) - 1023 + 127;
    m = {1'b0, d[51:29]};
    g = d[28];
    s = |d[27:0];
    if (g && (s || m[0])) m = m + 24'd1;
    if (m[23]) e = e + 1;
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    if (e <= 0)   return {d[63], 31'd0};
    return {d[63], 8'(e), m[22:0]};
  endfunction

  // random normal FP32 with exponent field in [lo, hi]
  function automatic logic [31:0] rand_f(int lo, int hi);
    logic [31:0] f;
    f[31]    = 1'($urandom);
    f[30:23] = 8'(lo + int'($urandom % 32'(hi - lo + 1)));
    f[22:0]  = 23'($urandom);
    return f;
  endfunction

endpackage
