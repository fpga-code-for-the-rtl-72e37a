// system_control: the register file shared between host and FPGA.
//
// Holds 32 registers of 32 bits in the endpoint's BAR space. The host
// writes them through the RX engine; a read returns the register through a
// completion sent by the TX engine. The register contents are decoded into
// the configuration of the processing channels (trigger, window, filter,
// PSD and PHS settings), the DMA addresses and the eleven 24-bit words of
// the ADC clock synthesizer. Registers 30 and 31 are read-only: the number
// of lost events and overruns reported by the data path, and an
// identification word. Writing 1 to CTRL bit 7 starts the programming of the
// synthesizer (the bit reads back as 0).
//
// Register map (index = byte address / 4), see rnc_pkg:
//   0 CTRL [0] acq_en [1] filter_bypass [2] trig_deriv [3] phs_en
//          [4] phs_use_ci [5] invert [6] ts_clear [7] pll_start (pulse)
//          [8] dma_en
//   1 THRESH [15:0] threshold [31:16] DTS offset   2 WINDOW [15:0] pwidth [31:16] ptrg
//   3 DTS [15:0] M [20:16] shift        4 PSD [15:0] length [31:16] slope
//   5 PHS [4:0] shift      6 DT window [15:0] lo [31:16] hi   7 DD window
//   8..15 DMA base addresses {lo,hi} of DMA0 ch0, DMA0 ch1, DMA1 ch0, DMA1 ch1
//   16,17 status address lo,hi   18 ring mask   19..29 synthesizer words
// Timing: a write is visible the next cycle; a completion request is raised
// the cycle after a read request and held until the TX engine takes it.
// The register-based system control over PCIe follows the design; the
// register map, reset values and one outstanding read are this design's.
module system_control
  import rnc_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        wr_en,
  input  logic [4:0]  wr_idx,
  input  logic [31:0] wr_data,
  input  logic        rd_req,
  input  logic [4:0]  rd_idx,
  input  logic [15:0] rd_req_id,
  input  logic [7:0]  rd_tag,
  input  logic [6:0]  rd_lower_addr,
  output logic        cpl_valid,
  input  logic        cpl_ready,
  output logic [15:0] cpl_req_id,
  output logic [7:0]  cpl_tag,
  output logic [6:0]  cpl_lower_addr,
  output logic [31:0] cpl_data,
  input  logic [31:0] lost_count,
  output chan_cfg_t   cfg,
  output logic        acq_en,
  output logic        dma_en,
  output logic        ts_clear,
  output logic [63:0] dma_base [4],
  output logic [63:0] stat_addr,
  output logic [31:0] ring_mask,
  output logic [23:0] pll_words [11],
  output logic        pll_start
);
  logic [31:0] regs [NREGS];

  function automatic logic [31:0] reset_value(input int unsigned i);
    unique case (i)
      R_THRESH:    return 32'd200;
      R_WINDOW:    return {16'd16, 16'd64};
      R_DTS:       return {11'd0, 5'd4, 16'd20};
      R_PSD:       return {16'h0300, 16'd32};
      R_PHS:       return 32'd5;
      R_WIN_DT:    return {16'd1023, 16'd0};
      R_WIN_DD:    return {16'd1023, 16'd0};
      R_RING_MASK: return 32'h0000_FFFF;
      default:     return 32'd0;
    endcase
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < int'(NREGS); i++) regs[i] <= reset_value(i);
      pll_start <= 1'b0;
    end else begin
      pll_start <= 1'b0;
      if (wr_en && wr_idx < 5'(R_LOST)) begin
        regs[wr_idx] <= wr_data;
        if (wr_idx == 5'(R_CTRL)) begin
          regs[R_CTRL][7] <= 1'b0;
          pll_start       <= wr_data[7];
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      cpl_valid      <= 1'b0;
      cpl_req_id     <= '0;
      cpl_tag        <= '0;
      cpl_lower_addr <= '0;
      cpl_data       <= '0;
    end else begin
      if (cpl_valid && cpl_ready) cpl_valid <= 1'b0;
      if (rd_req) begin
        cpl_valid      <= 1'b1;
        cpl_req_id     <= rd_req_id;
        cpl_tag        <= rd_tag;
        cpl_lower_addr <= rd_lower_addr;
        cpl_data       <= (rd_idx == 5'(R_LOST)) ? lost_count :
                          (rd_idx == 5'(R_ID))   ? ID_VALUE   : regs[rd_idx];
      end
    end
  end

  always_comb begin
    acq_en            = regs[R_CTRL][0];
    ts_clear          = regs[R_CTRL][6];
    dma_en            = regs[R_CTRL][8];
    cfg.filter_bypass = regs[R_CTRL][1];
    cfg.trig_deriv    = regs[R_CTRL][2];
    cfg.phs_en        = regs[R_CTRL][3];
    cfg.phs_use_ci    = regs[R_CTRL][4];
    cfg.invert        = regs[R_CTRL][5];
    cfg.threshold     = regs[R_THRESH][15:0];
    cfg.offset        = regs[R_THRESH][31:16];
    cfg.pwidth        = regs[R_WINDOW][15:0];
    cfg.ptrg          = regs[R_WINDOW][31:16];
    cfg.dts_m         = regs[R_DTS][15:0];
    cfg.dts_shift     = regs[R_DTS][20:16];
    cfg.psd_len       = regs[R_PSD][15:0];
    cfg.slope         = regs[R_PSD][31:16];
    cfg.phs_shift     = regs[R_PHS][4:0];
    cfg.dt_lo         = regs[R_WIN_DT][15:0];
    cfg.dt_hi         = regs[R_WIN_DT][31:16];
    cfg.dd_lo         = regs[R_WIN_DD][15:0];
    cfg.dd_hi         = regs[R_WIN_DD][31:16];
    for (int i = 0; i < 4; i++) dma_base[i] = {regs[R_DMA_BASE + 2*i + 1], regs[R_DMA_BASE + 2*i]};
    stat_addr = {regs[R_STAT_HI], regs[R_STAT_LO]};
    ring_mask = regs[R_RING_MASK];
    for (int i = 0; i < 11; i++) pll_words[i] = regs[R_PLL0 + i][23:0];
  end
endmodule
