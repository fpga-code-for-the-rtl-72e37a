// event_detector: level ("basic") or derivative ("advanced") trigger.
//
// Basic trigger: fires when the signal crosses the threshold upwards
// (x[n] >= T while x[n-1] < T). Advanced trigger: the same test applied to
// the first difference x[n] - x[n-1], so it fires on the fast leading edge of
// a pulse and ignores slow baseline movement. The input is the output of the
// filter stage, i.e. filtered data, or raw data when the filter is bypassed.
// Firing on the upward crossing only (so one trigger per pulse edge) is this
// design's choice.
//
// Interface: x and threshold are signed 16-bit; trig is a one-cycle pulse.
// Timing: trig is registered and refers to the sample presented one cycle
// earlier (LATENCY = 1).
module event_detector (
  input  logic        clk,
  input  logic        rst,
  input  logic        enable,
  input  logic        deriv_mode,
  input  logic [15:0] threshold,
  input  logic [15:0] x,
  output logic        trig
);
  logic signed [16:0] x_s, x_prev, diff, diff_prev, metric, metric_prev, thr;

  always_comb begin
    x_s    = 17'(signed'(x));
    diff   = x_s - x_prev;
    thr    = 17'(signed'(threshold));
    metric      = deriv_mode ? diff : x_s;
    metric_prev = deriv_mode ? diff_prev : x_prev;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      x_prev    <= '0;
      diff_prev <= '0;
      trig      <= 1'b0;
    end else begin
      x_prev    <= x_s;
      diff_prev <= diff;
      trig      <= enable && (metric >= thr) && (metric_prev < thr);
    end
  end
endmodule
