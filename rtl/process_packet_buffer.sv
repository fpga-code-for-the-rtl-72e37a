// process_packet_buffer: selects the real-time packets for DMA 1 and carries
// them to the PCIe clock domain.
//
// Two sources: the PSD packets (two Q-words per event), sent directly to the
// host when phs_en is low, and the PHS packets, sent when phs_en is high (the
// PSD packets then feed the PHS builder only). Both go into a dual-clock FIFO
// of 2**AW Q-words. The PHS stream is throttled with phs_ready; a PSD packet
// finding fewer than two free words is dropped whole and counted in 'drops'.
//
// Timing: a Q-word is written the cycle it is presented.
// Routing PSD or PHS data through DMA 1 follows the design; the drop policy
// and depth are this design's choices.
module process_packet_buffer #(
  parameter int unsigned AW = 10
) (
  input  logic        wr_clk,
  input  logic        wr_rst,
  input  logic        phs_en,
  input  logic        psd_valid,
  input  logic [63:0] psd_data,
  input  logic        phs_valid,
  input  logic [63:0] phs_data,
  output logic        phs_ready,
  output logic [31:0] drops,
  input  logic        rd_clk,
  input  logic        rd_rst,
  input  logic        rd_en,
  output logic [63:0] rd_data,
  output logic        rd_empty,
  output logic [AW:0] rd_count
);
  logic        full;
  logic [AW:0] free;
  logic        psd_second, psd_keep, psd_take;
  logic        wr_en;
  logic [63:0] wr_data;

  always_comb begin
    psd_take  = !psd_second ? (free >= (AW+1)'(2)) : psd_keep;
    phs_ready = phs_en && !full;
    if (phs_en) begin
      wr_en   = phs_valid && !full;
      wr_data = phs_data;
    end else begin
      wr_en   = psd_valid && psd_take;
      wr_data = psd_data;
    end
  end

  always_ff @(posedge wr_clk) begin
    if (wr_rst) begin
      psd_second <= 1'b0;
      psd_keep   <= 1'b0;
      drops      <= '0;
    end else if (psd_valid && !phs_en) begin
      psd_second <= !psd_second;
      if (!psd_second) begin
        psd_keep <= psd_take;
        if (!psd_take) drops <= drops + 1'b1;
      end
    end else if (phs_en) begin
      psd_second <= 1'b0;
    end
  end

  async_fifo #(.DW(64), .AW(AW)) u_fifo (
    .wr_clk, .wr_rst, .wr_en, .wr_data, .wr_full(full), .wr_free(free),
    .rd_clk, .rd_rst, .rd_en, .rd_data, .rd_empty, .rd_count
  );
endmodule
