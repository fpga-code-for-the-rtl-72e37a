// channel_proc: the complete acquisition and processing chain of one ADC.
//
//   DDR capture -> averaging/inversion -> filter (DTS or bypass)
//     -> event detector (trigger)
//     -> pulse window -> event packet buffer          (DMA 0 source)
//     -> PSD -> [PHS and counts] -> process buffer    (DMA 1 source)
// The trigger is computed on the filter output, which is raw data when the
// filter is bypassed. The pulse window stores raw conditioned samples; they
// are delayed by the filter and trigger latency (5 cycles) so that the
// trigger cycle shows the triggering sample. The PSD works on the filter
// output delayed by the trigger latency (1 cycle). With phs_en the PSD
// packets feed the PHS builder and DMA 1 carries PHS packets; without it
// DMA 1 carries the PSD packets themselves.
//
// Interface: ADC DDR buses and configuration in, two FIFO read ports in the
// PCIe clock domain out, plus loss/overflow counters. The configuration is
// taken as quasi-static: it is set while acquisition is stopped.
// The chain and its connections follow the block diagram of the design; the
// latency compensation is this design's.
module channel_proc
  import rnc_pkg::*;
#(
  parameter int unsigned PTRG_MAX = 60,
  parameter int unsigned EV_AW    = 12,
  parameter int unsigned RT_AW    = 10,
  parameter int unsigned NBINS    = 1024
) (
  input  logic             clk,
  input  logic             rst,
  input  logic [11:0]      ddr_a,
  input  logic [11:0]      ddr_b,
  input  chan_cfg_t        cfg,
  input  logic             acq_en,
  input  logic [63:0]      ts,
  input  logic             sdn_tick,
  // PCIe side
  input  logic             rd_clk,
  input  logic             rd_rst,
  input  logic             ev_rd,
  output logic [63:0]      ev_data,
  output logic [EV_AW:0]   ev_count,
  input  logic             rt_rd,
  output logic [63:0]      rt_data,
  output logic [RT_AW:0]   rt_count,
  // observation
  output logic             trig,
  output logic [31:0]      lost_events,
  output logic [31:0]      ev_overflows,
  output logic [31:0]      rt_drops,
  output logic [31:0]      phs_overruns,
  output logic [31:0]      phs_packets
);
  localparam int unsigned RAW_DLY = 5;

  logic [11:0] samples [4];
  logic [15:0] cond, filt;
  logic [15:0] raw_dly [RAW_DLY];
  logic [15:0] filt_d;
  logic        space_ok;
  logic        pw_valid, pw_last;
  logic [15:0] pw_data;
  logic        psd_valid;
  logic [63:0] psd_data;
  logic        phs_valid, phs_last, phs_ready;
  logic [63:0] phs_data;
  logic        ev_empty, rt_empty;

  ddr_capture u_ddr (.clk, .ddr_a, .ddr_b, .samples);

  averaging_inv u_avg (.clk, .invert(cfg.invert), .samples, .avg(cond));

  dts_filter u_filt (
    .clk, .rst, .bypass(cfg.filter_bypass), .m_coef(cfg.dts_m), .shift(cfg.dts_shift),
    .offset(cfg.offset),
    .x(cond), .y(filt)
  );

  event_detector u_trig (
    .clk, .rst, .enable(acq_en), .deriv_mode(cfg.trig_deriv), .threshold(cfg.threshold),
    .x(filt), .trig
  );

  always_ff @(posedge clk) begin
    raw_dly[0] <= cond;
    for (int i = 1; i < int'(RAW_DLY); i++) raw_dly[i] <= raw_dly[i-1];
    filt_d <= filt;
  end

  pulse_window #(.PTRG_MAX(PTRG_MAX)) u_pw (
    .clk, .rst, .enable(acq_en), .pwidth(cfg.pwidth), .ptrg(cfg.ptrg),
    .sample(raw_dly[RAW_DLY-1]), .trig, .ts, .space_ok,
    .out_valid(pw_valid), .out_data(pw_data), .out_last(pw_last), .lost_events, .busy()
  );

  event_packet_buffer #(.AW(EV_AW)) u_evbuf (
    .wr_clk(clk), .wr_rst(rst), .in_valid(pw_valid), .in_data(pw_data), .pwidth(cfg.pwidth),
    .space_ok, .overflows(ev_overflows),
    .rd_clk, .rd_rst, .rd_en(ev_rd), .rd_data(ev_data), .rd_empty(ev_empty), .rd_count(ev_count)
  );

  psd u_psd (
    .clk, .rst, .enable(acq_en), .psd_len(cfg.psd_len), .slope(cfg.slope),
    .x(filt_d), .trig, .ts, .out_valid(psd_valid), .out_data(psd_data)
  );

  phs_counts #(.NBINS(NBINS)) u_phs (
    .clk, .rst, .in_valid(psd_valid && cfg.phs_en), .in_data(psd_data),
    .use_ci(cfg.phs_use_ci), .shift(cfg.phs_shift),
    .dt_lo(cfg.dt_lo), .dt_hi(cfg.dt_hi), .dd_lo(cfg.dd_lo), .dd_hi(cfg.dd_hi),
    .sdn_tick(sdn_tick && cfg.phs_en), .ts,
    .out_valid(phs_valid), .out_data(phs_data), .out_last(phs_last), .out_ready(phs_ready),
    .overruns(phs_overruns), .packets(phs_packets)
  );

  process_packet_buffer #(.AW(RT_AW)) u_rtbuf (
    .wr_clk(clk), .wr_rst(rst), .phs_en(cfg.phs_en),
    .psd_valid, .psd_data, .phs_valid, .phs_data, .phs_ready, .drops(rt_drops),
    .rd_clk, .rd_rst, .rd_en(rt_rd), .rd_data(rt_data), .rd_empty(rt_empty), .rd_count(rt_count)
  );
endmodule
