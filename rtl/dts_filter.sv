// dts_filter: digital trapezoidal shaper (DTS) with bypass.
//
// Turns exponentially decaying detector pulses into trapezoids whose height
// is proportional to the pulse amplitude. A programmable offset (the
// baseline level) is subtracted first: the shaper has a DC gain of K*L, so a
// residual offset B would appear as a constant B*K*L >> SHIFT at the output.
// The recursive form used is the classic one, on v = x - offset:
//   d[n] = v[n] - v[n-K] - v[n-L] + v[n-K-L]
//   p[n] = p[n-1] + d[n]
//   r[n] = p[n] + M * d[n]          (M: pole-zero coefficient ~ decay time)
//   s[n] = s[n-1] + r[n]
//   y[n] = saturate16(s[n] >>> SHIFT)
// K is the rise time and L-K the flat top, in samples. All accumulators wrap
// modulo 2^ACC_W, which is exact because the filter's impulse response is
// finite. The 'offset' input is sampled with x. With 'bypass' set, y is the raw input delayed by the same latency,
// so later stages see the same timing in both modes.
//
// Interface: one 16-bit sample per clock in (unsigned), one signed 16-bit
// sample per clock out. m_coef and shift are run-time settings.
// Timing: LATENCY = 4 clocks (x in cycle n is reflected by y in cycle n+4), for both modes.
// The DTS as the example filter, and its bypass, follow the description of
// the design; the offset subtraction, K, L, the fixed-point scaling and the
// saturation are this design's choices (the authors' variant that produces near-Gaussian shapes
// is not described and is not reproduced).
module dts_filter #(
  parameter int unsigned K     = 8,
  parameter int unsigned L     = 12,
  parameter int unsigned ACC_W = 48
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        bypass,
  input  logic [15:0] m_coef,
  input  logic [4:0]  shift,
  input  logic [15:0] offset,
  input  logic [15:0] x,
  output logic [15:0] y
);
  localparam int unsigned DEPTH = K + L;
  localparam int unsigned LATENCY = 4;

  logic signed [16:0] hist [DEPTH+1];     // hist[i] = v[n-i]
  logic signed [ACC_W-1:0] d, p, r, s, s_sh;
  logic [15:0] raw_d [LATENCY-1];
  logic signed [ACC_W-1:0] d_next;
  logic [15:0] y_next;

  always_comb begin
    hist[0] = signed'({1'b0, x}) - signed'({1'b0, offset});
    d_next = ACC_W'(hist[0]) - ACC_W'(hist[K]) - ACC_W'(hist[L]) + ACC_W'(hist[K+L]);
    s_sh   = s >>> shift;
    if (s_sh > 48'sd32767)       y_next = 16'h7FFF;
    else if (s_sh < -48'sd32768) y_next = 16'h8000;
    else                         y_next = s_sh[15:0];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 1; i <= DEPTH; i++) hist[i] <= '0;
      d <= '0; p <= '0; r <= '0; s <= '0; y <= '0;
      for (int i = 0; i < LATENCY-1; i++) raw_d[i] <= '0;
    end else begin
      for (int i = 1; i <= DEPTH; i++) hist[i] <= hist[i-1];
      d <= d_next;
      p <= p + d;
      r <= p + d + ACC_W'(signed'({1'b0, m_coef})) * d;
      s <= s + r;
      raw_d[0] <= x;
      for (int i = 1; i < LATENCY-1; i++) raw_d[i] <= raw_d[i-1];
      y <= bypass ? raw_d[LATENCY-2] : y_next;
    end
  end
endmodule
