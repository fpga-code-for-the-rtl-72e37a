// phs_counts: real-time pulse-height spectra (PHS) and counters.
//
// Receives the two PSD Q-words of each event, picks the peak or the CI value
// as the pulse height, and turns it into a histogram bin, bin = value >>
// shift (1024 bins with shift 5 cover 0..32767). Events without pileup are
// added to the neutron or the gamma spectrum; all events are counted:
// total, single, pileup, LED, neutron total, gamma total, and for each
// particle the events whose bin lies inside two configurable bin windows
// (DT and DD, e.g. around the 14 MeV D-T and 2.5 MeV D-D neutron lines).
// Counters and bins are 16 bits and saturate.
//
// The spectra sit in two banks of NBINS/2 x 64-bit words, one word holding
// {N_bin(2k+1), N_bin(2k), gamma_bin(2k+1), gamma_bin(2k)}, so that a word is
// directly a line of the output packet. An event is a read-modify-write of
// one 16-bit lane (read one cycle, write the next). At each real-time cycle
// tick (sdn_tick, the Synchronous Data Network period, e.g. 2 ms) the banks
// swap: new events go to the other bank while the finished one is sent out
// and cleared word by word. The packet is
//   word 0                 {16'h0, time stamp of the tick [47:0]}
//   words 1 .. NBINS/2     spectrum words as above, bins 0,1 first
//   3 count words          {LED, Single, Pileup, Total}
//                          {16'h0, 16'h0, gamma total, n total}
//                          {n window DT, n window DD, gamma window DT, gamma window DD}
// A tick that comes while the previous packet is still being sent is not
// honoured; it is counted in 'overruns' and the cycle continues. After
// reset both banks are cleared, one word per cycle (NBINS/2 cycles); events
// in that time are counted but not added to the spectra.
//
// Interface: in_valid/in_data carry Q-word 1 then Q-word 2 on consecutive
// valid cycles; out_valid/out_ready/out_data/out_last is a stream handshake.
// Timing: a packet takes about 3 x (NBINS/2 + 4) cycles when never stalled.
// The packet layout, bin count, shift and the list of counters follow the
// design; excluding pileup events from the spectra, the bank swap, the bin
// window meaning and the saturation are this design's choices.
module phs_counts
  import rnc_pkg::*;
#(
  parameter int unsigned NBINS = 1024
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        in_valid,
  input  logic [63:0] in_data,
  input  logic        use_ci,
  input  logic [4:0]  shift,
  input  logic [15:0] dt_lo, dt_hi, dd_lo, dd_hi,
  input  logic        sdn_tick,
  input  logic [63:0] ts,
  output logic        out_valid,
  output logic [63:0] out_data,
  output logic        out_last,
  input  logic        out_ready,
  output logic [31:0] overruns,
  output logic [31:0] packets
);
  localparam int unsigned NW = NBINS / 2;
  localparam int unsigned WA = $clog2(NW);

  typedef struct packed {
    logic [15:0] led, single, pileup, total, g_total, n_total, n_dt, n_dd, g_dt, g_dd;
  } counts_t;

  // ---------------- event decode ----------------
  logic        beat2;
  psd_qw2_t    qw2;
  logic        ev_in;
  logic [24:0] value, binv;
  logic        is_n, is_g, single_ev, in_range, win_dt, win_dd;
  counts_t     cnt, snap, inc;

  always_comb begin
    qw2       = psd_qw2_t'(in_data);
    ev_in     = in_valid && beat2;
    value     = use_ci ? qw2.ci : 25'(qw2.peak);
    binv      = value >> shift;
    in_range  = binv < 25'(NBINS);
    single_ev = (qw2.pu == 3'd0);
    is_n      = single_ev && qw2.ptype == PT_NEUTRON;
    is_g      = single_ev && qw2.ptype == PT_GAMMA;
    win_dt    = binv >= 25'(dt_lo) && binv <= 25'(dt_hi);
    win_dd    = binv >= 25'(dd_lo) && binv <= 25'(dd_hi);
    inc         = '0;
    inc.total   = 16'(ev_in);
    inc.single  = 16'(ev_in && single_ev);
    inc.pileup  = 16'(ev_in && !single_ev);
    inc.led     = 16'(ev_in && single_ev && qw2.ptype == PT_LED);
    inc.n_total = 16'(ev_in && is_n);
    inc.g_total = 16'(ev_in && is_g);
    inc.n_dt    = 16'(ev_in && is_n && win_dt);
    inc.n_dd    = 16'(ev_in && is_n && win_dd);
    inc.g_dt    = 16'(ev_in && is_g && win_dt);
    inc.g_dd    = 16'(ev_in && is_g && win_dd);
  end

  function automatic logic [15:0] sat_add(input logic [15:0] a, input logic [15:0] b);
    logic [16:0] s;
    s = {1'b0, a} + {1'b0, b};
    return s[16] ? 16'hFFFF : s[15:0];
  endfunction

  function automatic counts_t add_counts(input counts_t a, input counts_t b);
    counts_t r;
    r.led = sat_add(a.led, b.led);           r.single = sat_add(a.single, b.single);
    r.pileup = sat_add(a.pileup, b.pileup);  r.total = sat_add(a.total, b.total);
    r.g_total = sat_add(a.g_total, b.g_total); r.n_total = sat_add(a.n_total, b.n_total);
    r.n_dt = sat_add(a.n_dt, b.n_dt);        r.n_dd = sat_add(a.n_dd, b.n_dd);
    r.g_dt = sat_add(a.g_dt, b.g_dt);        r.g_dd = sat_add(a.g_dd, b.g_dd);
    return r;
  endfunction

  // ---------------- histogram banks ----------------
  logic          acc_bank;
  logic          rmw_rd, rmw_wr;
  logic [WA-1:0] rmw_addr;
  logic [1:0]    rmw_lane;       // 0: g even, 1: g odd, 2: n even, 3: n odd
  logic [63:0]   rmw_wdata;

  logic          ro_rd;
  logic [WA-1:0] ro_addr;

  logic [WA-1:0] b_addr [2];
  logic          b_we   [2];
  logic [63:0]   b_wdata[2];
  logic [63:0]   b_rdata[2];
  logic [63:0]   mem0 [NW];
  logic [63:0]   mem1 [NW];

  logic          init;
  logic [WA-1:0] init_addr;

  always_comb begin
    for (int b = 0; b < 2; b++) begin
      if (init) begin               // clearing sweep after reset
        b_addr[b]  = init_addr;
        b_we[b]    = 1'b1;
        b_wdata[b] = '0;
      end else if (acc_bank == b[0]) begin
        b_addr[b]  = rmw_addr;
        b_we[b]    = rmw_wr;
        b_wdata[b] = rmw_wdata;
      end else begin
        b_addr[b]  = ro_addr;
        b_we[b]    = ro_rd;     // read and clear in the same cycle
        b_wdata[b] = '0;
      end
    end
  end

  always_ff @(posedge clk) begin
    b_rdata[0] <= mem0[b_addr[0]];
    if (b_we[0]) mem0[b_addr[0]] <= b_wdata[0];
  end

  always_ff @(posedge clk) begin
    b_rdata[1] <= mem1[b_addr[1]];
    if (b_we[1]) mem1[b_addr[1]] <= b_wdata[1];
  end

  always_comb begin
    rmw_wdata = b_rdata[acc_bank];
    rmw_wdata[16*rmw_lane +: 16] = sat_add(b_rdata[acc_bank][16*rmw_lane +: 16], 16'd1);
  end

  // ---------------- readout ----------------
  typedef enum logic [2:0] {R_IDLE, R_SEND, R_RD, R_LOAD, R_CNT} rstate_e;
  rstate_e   rstate;
  logic [WA:0] ridx;
  logic [1:0]  cidx;
  logic [47:0] ts_tick;
  logic        tick_pend;
  logic        swap;

  assign swap = !init && tick_pend && rstate == R_IDLE && !out_valid && !rmw_rd && !rmw_wr;

  always_ff @(posedge clk) begin
    if (rst) begin
      beat2     <= 1'b0;
      cnt       <= '0;
      snap      <= '0;
      acc_bank  <= 1'b0;
      rmw_rd    <= 1'b0;
      rmw_wr    <= 1'b0;
      rmw_addr  <= '0;
      rmw_lane  <= '0;
      tick_pend <= 1'b0;
      ts_tick   <= '0;
      overruns  <= '0;
      packets   <= '0;
      rstate    <= R_IDLE;
      init      <= 1'b1;
      init_addr <= '0;
      ridx      <= '0;
      cidx      <= '0;
      ro_rd     <= 1'b0;
      ro_addr   <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
      out_last  <= 1'b0;
    end else begin
      // de-serialisation of the two PSD Q-words
      if (in_valid) begin
        beat2 <= !beat2;
      end

      if (init) begin
        init_addr <= init_addr + 1'b1;
        if (init_addr == WA'(NW - 1)) init <= 1'b0;
      end

      // histogram read-modify-write
      rmw_wr <= rmw_rd;
      rmw_rd <= 1'b0;
      if (ev_in && (is_n || is_g) && in_range && !init) begin
        rmw_rd   <= 1'b1;
        rmw_addr <= binv[WA:1];
        rmw_lane <= {is_n, binv[0]};
      end

      // SDN tick, bank swap and counters
      if (sdn_tick) begin
        if (tick_pend || rstate != R_IDLE || out_valid) overruns <= overruns + 1'b1;
        else begin
          tick_pend <= 1'b1;
          ts_tick   <= ts[47:0];
        end
      end
      if (swap) begin
        tick_pend <= 1'b0;
        acc_bank  <= !acc_bank;
        snap      <= cnt;
        cnt       <= inc;
      end else begin
        cnt <= add_counts(cnt, inc);
      end

      // packet output
      ro_rd <= 1'b0;
      if (out_valid && out_ready) begin
        out_valid <= 1'b0;
        out_last  <= 1'b0;
      end
      unique case (rstate)
        R_IDLE: if (swap) begin
          out_valid <= 1'b1;
          out_data  <= {16'h0, ts_tick};
          ridx      <= '0;
          cidx      <= '0;
          rstate    <= R_SEND;
        end
        R_SEND: if (out_valid && out_ready) begin
          if (ridx < (WA+1)'(NW)) begin
            ro_rd   <= 1'b1;
            ro_addr <= ridx[WA-1:0];
            rstate  <= R_RD;
          end else begin
            rstate  <= R_CNT;
          end
        end
        R_RD: rstate <= R_LOAD;
        R_LOAD: begin
          out_valid <= 1'b1;
          out_data  <= b_rdata[!acc_bank];
          ridx      <= ridx + 1'b1;
          rstate    <= R_SEND;
        end
        R_CNT: if (!out_valid || out_ready) begin
          out_valid <= 1'b1;
          cidx      <= cidx + 1'b1;
          unique case (cidx)
            2'd0: out_data <= {snap.led, snap.single, snap.pileup, snap.total};
            2'd1: out_data <= {16'h0, 16'h0, snap.g_total, snap.n_total};
            default: begin
              out_data <= {snap.n_dt, snap.n_dd, snap.g_dt, snap.g_dd};
              out_last <= 1'b1;
              packets  <= packets + 1'b1;
              rstate   <= R_IDLE;
            end
          endcase
        end
        default: rstate <= R_IDLE;
      endcase
    end
  end
endmodule
