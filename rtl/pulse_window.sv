// pulse_window: event-storage state machine (the "Pulse Window").
//
// On a trigger it writes one event of n x PWIDTH 16-bit words:
//   words 0..3        time stamp of the trigger, least significant word first
//   words 4..         samples, starting PTRG samples before the trigger
//   last two words    P: number of triggers seen in the event (16 bit),
//                     then {n-1 (8 bit), end-of-event tag W (8 bit)}
// A down-counter runs from PWIDTH to 1 over each PWIDTH (the time stamp
// uses the first four counts of the first one). A trigger that arrives in the
// second half of the PWIDTH being stored (counter <= PWIDTH/2) marks pileup:
// when the window reaches its last three words the event is extended by a
// further PWIDTH instead of being closed. Every trigger during the event
// increments P. Samples come from a delay line tapped at PTRG+4, so the
// pre-trigger baseline is stored although the time stamp is written first.
//
// Before an event starts, and before each extension, 'space_ok' must say
// that the packet buffer can take one more PWIDTH; otherwise the event is not
// started (lost_events counts it) or it is closed without extension. A
// trigger during the two trailer words can neither join the event nor start
// one and is counted in lost_events as well, so every trigger is either in
// some event's P or in lost_events.
// Interface: 'sample' is the raw conditioned stream, aligned so that the
// sample present in the cycle 'trig' is high is the one that triggered.
// pwidth (>= 8, multiple of 4) and ptrg (<= PTRG_MAX) are run-time settings.
// Output: one word per clock while an event is written (out_valid), with
// out_last on the final word; no back-pressure.
// Timing: the first time-stamp word appears two cycles after the trigger.
// Word order, TS-first layout, counters, the second-half pileup rule and the
// trailer follow the event-storage flowchart and text of the design; the tag
// value, the time-stamp word order, the point where the extension is decided
// and the space check are this design's choices.
module pulse_window
  import rnc_pkg::*;
#(
  parameter int unsigned PTRG_MAX = 60
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        enable,
  input  logic [15:0] pwidth,
  input  logic [15:0] ptrg,
  input  logic [15:0] sample,
  input  logic        trig,
  input  logic [63:0] ts,
  input  logic        space_ok,
  output logic        out_valid,
  output logic [15:0] out_data,
  output logic        out_last,
  output logic [31:0] lost_events,
  output logic        busy
);
  localparam int unsigned DMAX = PTRG_MAX + 5;

  typedef enum logic [1:0] {S_IDLE, S_TS, S_DATA, S_TRAIL} state_e;
  state_e state;

  logic [15:0] dline [DMAX];
  logic [15:0] cnt;
  logic [1:0]  widx;
  logic [63:0] ts_lat;
  logic [15:0] p_cnt;
  logic [7:0]  ext_cnt;
  logic        pu_half;
  logic        extend;
  logic [15:0] tap;
  logic [15:0] delayed;

  always_comb begin
    tap     = (ptrg > 16'(PTRG_MAX)) ? 16'(PTRG_MAX + 4) : ptrg + 16'd4;
    delayed = dline[tap[$clog2(DMAX)-1:0]];
  end

  always_ff @(posedge clk) begin
    dline[0] <= sample;
    for (int i = 1; i < DMAX; i++) dline[i] <= dline[i-1];
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (rst) begin
      state       <= S_IDLE;
      cnt         <= '0;
      widx        <= '0;
      ts_lat      <= '0;
      p_cnt       <= '0;
      ext_cnt     <= '0;
      pu_half     <= 1'b0;
      extend      <= 1'b0;
      out_valid   <= 1'b0;
      out_data    <= '0;
      out_last    <= 1'b0;
      lost_events <= '0;
    end else begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      // Triggers inside an event: count them, note second-half pileup.
      if ((state == S_TS || state == S_DATA) && trig) begin
        if (p_cnt != 16'hFFFF) p_cnt <= p_cnt + 1'b1;
        if (cnt <= (pwidth >> 1)) pu_half <= 1'b1;
      end
      unique case (state)
        S_IDLE: begin
          if (enable && trig) begin
            if (space_ok) begin
              state   <= S_TS;
              ts_lat  <= ts;
              p_cnt   <= 16'd1;
              ext_cnt <= '0;
              pu_half <= 1'b0;
              extend  <= 1'b0;
              cnt     <= pwidth;
              widx    <= '0;
            end else begin
              lost_events <= lost_events + 1'b1;
            end
          end
        end
        S_TS: begin
          out_valid <= 1'b1;
          out_data  <= ts_lat[16*widx +: 16];
          cnt       <= cnt - 1'b1;
          widx      <= widx + 1'b1;
          if (widx == 2'd3) state <= S_DATA;
        end
        S_DATA: begin
          out_valid <= 1'b1;
          out_data  <= delayed;
          if (cnt == 16'd1) begin
            // end of a PWIDTH that was committed to extension
            cnt     <= pwidth;
            ext_cnt <= ext_cnt + 1'b1;
            pu_half <= 1'b0;
            extend  <= 1'b0;
          end else begin
            cnt <= cnt - 1'b1;
          end
          if (cnt == 16'd3 && !extend) begin
            if (pu_half && space_ok && ext_cnt != 8'hFF) begin
              extend <= 1'b1;
            end else begin
              state <= S_TRAIL;
              widx  <= '0;
            end
          end
        end
        S_TRAIL: begin
          if (trig) lost_events <= lost_events + 1'b1;   // too late for P
          out_valid <= 1'b1;
          cnt       <= cnt - 1'b1;
          widx      <= widx + 1'b1;
          if (widx == 2'd0) begin
            out_data <= p_cnt;
          end else begin
            out_data <= {ext_cnt, EVENT_END_TAG};
            out_last <= 1'b1;
            state    <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
