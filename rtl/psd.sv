// psd: pulse-shape discrimination from the trapezoid peak and its area.
//
// From a trigger on, for psd_len samples of the filter output, it keeps the
// maximum (peak) and the sum of the positive samples (charge integration,
// CI). The ratio CI/peak separates neutrons from gammas; instead of dividing,
// it compares CI * 256 with slope * peak, where 'slope' is the separation
// slope in 8.8 fixed point: above the slope is classed as neutron, otherwise
// gamma. Further triggers inside the integration window are counted as
// pileup (PU, saturating at 7). At the end it emits two Q-words:
//   Q-word 1: reserved [63:49], time stamp of the trigger [48:0]
//   Q-word 2: rsv [63:57], CI [56:32], rsv [31:22], PU [21:19],
//             N/gamma/L [18:16], rsv [15:13], Peak [12:0]
// Peak and CI saturate at their field widths. LED pulses are not detected
// (the L bit is never set), as in the prototype this design describes.
//
// Interface: x is signed 16-bit, one per clock, aligned with trig.
// out_valid is high for two consecutive cycles (Q-word 1, then 2), with no
// back-pressure. Timing: the packet starts 2 cycles after the last sample of
// the window; a new window can start the cycle after the packet.
// Peak, CI, PU, the particle type and the two-Q-word packet follow the
// design; the field at [56:32] for CI (the printed layout marks CI from
// bit 56 to bit 24 and the next field from bit 31, so the two overlap; the
// non-overlapping reading is used), the window length control, the
// comparison direction and the fixed-point slope are this design's choices.
module psd
  import rnc_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        enable,
  input  logic [15:0] psd_len,
  input  logic [15:0] slope,
  input  logic [15:0] x,
  input  logic        trig,
  input  logic [63:0] ts,
  output logic        out_valid,
  output logic [63:0] out_data
);
  typedef enum logic [1:0] {S_IDLE, S_INTEG, S_QW1, S_QW2} state_e;
  state_e state;

  logic [15:0] cnt;
  logic [48:0] ts_lat;
  logic [15:0] peak;      // 15-bit magnitude of the positive maximum
  logic [24:0] ci;
  logic [2:0]  pu;
  logic [14:0] xpos;
  logic [25:0] ci_sum;
  logic [32:0] lhs, rhs;
  psd_qw1_t    qw1;
  psd_qw2_t    qw2;

  always_comb begin
    xpos   = x[15] ? 15'd0 : x[14:0];
    ci_sum = {1'b0, ci} + 26'(xpos);
    lhs    = {ci, 8'd0};
    rhs    = 33'(slope) * 33'(peak);
    qw1 = '0;
    qw1.ts = ts_lat;
    qw2 = '0;
    qw2.ci    = ci;
    qw2.pu    = pu;
    qw2.ptype = (lhs > rhs) ? PT_NEUTRON : PT_GAMMA;
    qw2.peak  = (peak > 16'd8191) ? 13'h1FFF : peak[12:0];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= S_IDLE;
      cnt       <= '0;
      ts_lat    <= '0;
      peak      <= '0;
      ci        <= '0;
      pu        <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (enable && trig) begin
          state  <= (psd_len > 16'd1) ? S_INTEG : S_QW1;
          cnt    <= psd_len - 1'b1;
          ts_lat <= ts[48:0];
          peak   <= 16'(xpos);
          ci     <= 25'(xpos);
          pu     <= '0;
        end
        S_INTEG: begin
          if (16'(xpos) > peak) peak <= 16'(xpos);
          ci <= ci_sum[25] ? 25'h1FF_FFFF : ci_sum[24:0];
          if (trig && pu != 3'd7) pu <= pu + 1'b1;
          cnt <= cnt - 1'b1;
          if (cnt == 16'd1) state <= S_QW1;
        end
        S_QW1: begin
          out_valid <= 1'b1;
          out_data  <= qw1;
          state     <= S_QW2;
        end
        S_QW2: begin
          out_valid <= 1'b1;
          out_data  <= qw2;
          state     <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
