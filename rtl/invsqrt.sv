// invsqrt: special function unit computing the FP32 reciprocal square root.
//
// y = 1/sqrt(x). The source names this unit but not its method. Here a
// bit-level initial estimate (0x5F3759DF - (x >> 1)) is refined by ITER
// Newton-Raphson steps y <- y * (1.5 - (x/2) * y * y), each step built from
// the same FP32 multiplier and adder as the ALUs. With the default two
// steps the relative error is below 1e-5 over the normal range. x = +0 gives
// +inf, negative x or NaN gives NaN, +inf gives +0.
//
// Timing: fully pipelined, one result per clock, LAT = 1 + 4*ITER clocks
// (9 by default): one stage for the estimate, then one registered stage per
// multiply or subtract.
module invsqrt #(
  parameter int unsigned ITER = 2,
  localparam int unsigned LAT = 1 + 4 * ITER
) (
  input  logic        clk,
  input  logic [31:0] x,
  output logic [31:0] y
);
  localparam logic [31:0] THREE_HALVES = 32'h3FC0_0000;
  localparam logic [31:0] ONE_HALF     = 32'h3F00_0000;
  localparam int unsigned NS = 4 * ITER;

  typedef enum logic [1:0] {SPC_NONE, SPC_INF, SPC_NAN, SPC_ZERO} spc_e;

  // per-stage state: current estimate, x/2, temporary, special case
  logic [31:0] st_y  [NS+1];
  logic [31:0] st_hx [NS+1];
  logic [31:0] st_t  [NS+1];
  spc_e        st_s  [NS+1];

  logic [31:0] hx0;
  spc_e        s0;
  fp32_mul u_half (.a(x), .b(ONE_HALF), .y(hx0));

  always_comb begin
    if (x[30:23] == 8'd0)                           s0 = x[31] ? SPC_NAN : SPC_INF; // zero (FTZ)
    else if (x[30:23] == 8'hFF && x[22:0] != '0)    s0 = SPC_NAN;
    else if (x[31])                                 s0 = SPC_NAN;
    else if (x[30:23] == 8'hFF)                     s0 = SPC_ZERO;
    else                                            s0 = SPC_NONE;
  end

  always_ff @(posedge clk) begin
    st_y[0]  <= 32'h5F37_59DF - {1'b0, x[31:1]};
    st_hx[0] <= hx0;
    st_t[0]  <= '0;
    st_s[0]  <= s0;
  end

  for (genvar i = 0; i < NS; i++) begin : g_step
    logic [31:0] m_a, m_b, m_y, a_y, r;
    fp32_mul u_m (.a(m_a), .b(m_b), .y(m_y));
    fp32_add u_a (.a(THREE_HALVES), .b(st_t[i]), .sub(1'b1), .y(a_y));
    always_comb begin
      unique case (i % 4)
        0:       begin m_a = st_y[i];  m_b = st_y[i]; end   // y*y
        1:       begin m_a = st_hx[i]; m_b = st_t[i]; end   // (x/2)*y*y
        3:       begin m_a = st_y[i];  m_b = st_t[i]; end   // y*(1.5-..)
        default: begin m_a = '0;       m_b = '0;      end
      endcase
      r = (i % 4 == 2) ? a_y : m_y;
    end
    always_ff @(posedge clk) begin
      st_hx[i+1] <= st_hx[i];
      st_s[i+1]  <= st_s[i];
      if (i % 4 == 3) begin
        st_y[i+1] <= r;
        st_t[i+1] <= '0;
      end else begin
        st_y[i+1] <= st_y[i];
        st_t[i+1] <= r;
      end
    end
  end

  always_comb begin
    unique case (st_s[NS])
      SPC_INF:  y = 32'h7F80_0000;
      SPC_NAN:  y = 32'h7FC0_0000;
      SPC_ZERO: y = 32'h0000_0000;
      default:  y = st_y[NS];
    endcase
  end
endmodule
