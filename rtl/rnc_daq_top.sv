// rnc_daq_top: FPGA design of the RNC data-acquisition prototype.
//
// Two ADC channels (12 bit, 1.6 GS/s, delivered as two DDR buses each at the
// 400 MHz sampling clock) are each conditioned to one 13-bit sample per
// sampling clock and processed by a channel_proc: filter, trigger, event
// storage (DMA 0 data) and real-time PSD/PHS (DMA 1 data). A common 64-bit
// time stamp marks every event and packet. On the PCIe side the DMA engine
// streams the four packet FIFOs (2 channels x DMA 0/1) to host ring buffers
// and writes a status Q-word (DMA 2) after every transfer; the TX engine
// formats the packets for the PCIe endpoint, the RX engine decodes register
// accesses for the system-control register file, which also drives the
// programming of the ADC clock synthesizer.
//
// Clock domains: adc_clk (sampling clock, CLKacq/4) for the data path,
// pcie_clk (endpoint user clock) for streaming and control. The packet
// buffers are dual-clock FIFOs; the acq_en and ts_clear controls pass
// through two-flop synchronisers; the remaining configuration is quasi-static
// (changed only while acquisition is stopped) and the loss counters read by
// the host are a snapshot. The PCIe endpoint itself, the ADCs and the
// synthesizer are outside: their signals are the ports of this module.
// The structure follows the block diagram of the design; the clock-crossing
// scheme is this design's.
module rnc_daq_top
  import rnc_pkg::*;
#(
  parameter int unsigned NCH          = 2,
  parameter int unsigned PTRG_MAX     = 60,
  parameter int unsigned EV_AW        = 12,
  parameter int unsigned RT_AW        = 10,
  parameter int unsigned NBINS        = 1024,
  parameter int unsigned BURST        = 32,
  parameter int unsigned FLUSH_CYCLES = 4096,
  parameter int unsigned PLL_CLK_DIV  = 4
) (
  // ADC side
  input  logic        adc_clk,
  input  logic        adc_rst,
  input  logic [11:0] adc_ddr_a [NCH],
  input  logic [11:0] adc_ddr_b [NCH],
  input  logic        sdn_tick,
  // ADC clock synthesizer serial port
  output logic        pll_sclk,
  output logic        pll_sdata,
  output logic        pll_le,
  // PCIe endpoint transaction interface
  input  logic        pcie_clk,
  input  logic        pcie_rst,
  input  logic [15:0] completer_id,
  input  logic [63:0] rx_tdata,
  input  logic        rx_tvalid,
  input  logic        rx_tlast,
  output logic        rx_tready,
  output logic [63:0] tx_tdata,
  output logic [7:0]  tx_tkeep,
  output logic        tx_tlast,
  output logic        tx_tvalid,
  input  logic        tx_tready
);
  localparam int unsigned CW = EV_AW + 1;

  chan_cfg_t   cfg;
  logic        acq_en_p, ts_clear_p, dma_en;
  logic [1:0]  acq_sync, clr_sync;
  logic [63:0] ts;

  logic [63:0] ev_data  [2];
  logic [EV_AW:0] ev_count [2];
  logic [63:0] rt_data  [2];
  logic [RT_AW:0] rt_count [2];
  logic        src_rd   [4];
  logic [63:0] src_data [4];
  logic [CW-1:0] src_count [4];
  logic [31:0] lost [2], ovf [2], drops [2], overruns [2], packets [2];
  logic        trig [2];

  logic        reg_wr_en, rd_req_valid;
  logic [4:0]  reg_wr_idx, rd_req_idx;
  logic [31:0] reg_wr_data;
  logic [15:0] rd_req_id;
  logic [7:0]  rd_req_tag;
  logic [6:0]  rd_req_lower_addr;
  logic        cpl_valid, cpl_ready;
  logic [15:0] cpl_req_id;
  logic [7:0]  cpl_tag;
  logic [6:0]  cpl_lower_addr;
  logic [31:0] cpl_data;
  logic [63:0] dma_base [4];
  logic [63:0] stat_addr;
  logic [31:0] ring_mask;
  logic [23:0] pll_words [11];
  logic        pll_start;
  logic        req_valid, req_ready, dat_valid, dat_ready;
  logic [63:0] req_addr, dat_data;
  logic [9:0]  req_len;
  logic [15:0] dma_count [2];

  // ---------------- clock-domain crossing of the run controls ----------------
  always_ff @(posedge adc_clk) begin
    acq_sync <= {acq_sync[0], acq_en_p};
    clr_sync <= {clr_sync[0], ts_clear_p};
  end

  timestamp u_ts (.clk(adc_clk), .rst(adc_rst), .clear(clr_sync[1]), .enable(acq_sync[1]), .ts);

  // ---------------- acquisition channels ----------------
  for (genvar c = 0; c < 2; c++) begin : g_ch
    if (c < int'(NCH)) begin : g_on
      channel_proc #(.PTRG_MAX(PTRG_MAX), .EV_AW(EV_AW), .RT_AW(RT_AW), .NBINS(NBINS)) u_ch (
        .clk(adc_clk), .rst(adc_rst), .ddr_a(adc_ddr_a[c]), .ddr_b(adc_ddr_b[c]),
        .cfg, .acq_en(acq_sync[1]), .ts, .sdn_tick,
        .rd_clk(pcie_clk), .rd_rst(pcie_rst),
        .ev_rd(src_rd[c]), .ev_data(ev_data[c]), .ev_count(ev_count[c]),
        .rt_rd(src_rd[2+c]), .rt_data(rt_data[c]), .rt_count(rt_count[c]),
        .trig(trig[c]), .lost_events(lost[c]), .ev_overflows(ovf[c]), .rt_drops(drops[c]),
        .phs_overruns(overruns[c]), .phs_packets(packets[c])
      );
    end else begin : g_off
      assign ev_data[c]  = '0;
      assign ev_count[c] = '0;
      assign rt_data[c]  = '0;
      assign rt_count[c] = '0;
      assign trig[c]     = 1'b0;
      assign lost[c]     = '0;
      assign ovf[c]      = '0;
      assign drops[c]    = '0;
      assign overruns[c] = '0;
      assign packets[c]  = '0;
    end
  end

  always_comb begin
    for (int c = 0; c < 2; c++) begin
      src_data[c]    = ev_data[c];
      src_count[c]   = CW'(ev_count[c]);
      src_data[2+c]  = rt_data[c];
      src_count[2+c] = CW'(rt_count[c]);
    end
  end

  // ---------------- PCIe side ----------------
  pcie_rx_engine #(.BAR_AW(7)) u_rx (
    .clk(pcie_clk), .rst(pcie_rst), .rx_tdata, .rx_tvalid, .rx_tlast, .rx_tready,
    .reg_wr_en, .reg_wr_idx, .reg_wr_data,
    .rd_req_valid, .rd_req_idx, .rd_req_id, .rd_req_tag, .rd_req_lower_addr
  );

  system_control u_sys (
    .clk(pcie_clk), .rst(pcie_rst),
    .wr_en(reg_wr_en), .wr_idx(reg_wr_idx), .wr_data(reg_wr_data),
    .rd_req(rd_req_valid), .rd_idx(rd_req_idx), .rd_req_id, .rd_tag(rd_req_tag),
    .rd_lower_addr(rd_req_lower_addr),
    .cpl_valid, .cpl_ready, .cpl_req_id, .cpl_tag, .cpl_lower_addr, .cpl_data,
    .lost_count({lost[1][7:0] + ovf[1][7:0] + drops[1][7:0] + overruns[1][7:0],
                 lost[0][7:0] + ovf[0][7:0] + drops[0][7:0] + overruns[0][7:0],
                 packets[1][7:0], packets[0][7:0]}),
    .cfg, .acq_en(acq_en_p), .dma_en, .ts_clear(ts_clear_p),
    .dma_base, .stat_addr, .ring_mask, .pll_words, .pll_start
  );

  pll_control #(.NWORDS(11), .CLK_DIV(PLL_CLK_DIV)) u_pll (
    .clk(pcie_clk), .rst(pcie_rst), .start(pll_start), .words(pll_words),
    .pll_sclk, .pll_sdata, .pll_le, .busy(), .done()
  );

  dma_engine #(.BURST(BURST), .FLUSH_CYCLES(FLUSH_CYCLES), .CW(CW)) u_dma (
    .clk(pcie_clk), .rst(pcie_rst), .enable(dma_en), .base(dma_base), .ring_mask, .stat_addr,
    .src_count, .src_data, .src_rd,
    .req_valid, .req_ready, .req_addr, .req_len, .dat_valid, .dat_ready, .dat_data, .dma_count
  );

  pcie_tx_engine u_tx (
    .clk(pcie_clk), .rst(pcie_rst), .completer_id,
    .req_valid, .req_ready, .req_addr, .req_len, .dat_valid, .dat_ready, .dat_data,
    .cpl_valid, .cpl_ready, .cpl_req_id, .cpl_tag, .cpl_lower_addr, .cpl_data,
    .tx_tdata, .tx_tkeep, .tx_tlast, .tx_tvalid, .tx_tready
  );
endmodule
