// async_fifo: dual-clock first-in first-out buffer.
//
// Gray-coded read and write pointers are passed between the two clock domains
// through two-stage synchronisers; each side compares its own binary pointer
// with the synchronised pointer of the other side. The read side is
// first-word-fall-through: rd_data shows the oldest word while rd_empty is
// low, and rd_en removes it. wr_free and rd_count are conservative (they see
// the other side's pointer with a two-to-three-cycle delay).
//
// Interface: write side wr_clk/wr_rst/wr_en/wr_data, read side
// rd_clk/rd_rst/rd_en/rd_data. A write while full, or a read while empty,
// is ignored. DEPTH = 2**AW words of DW bits.
// The packet buffers of the design are described as two-clock-domain FIFOs;
// this implementation (Gray pointers, asynchronous-read array) is the usual
// one and is this design's choice.
module async_fifo #(
  parameter int unsigned DW = 64,
  parameter int unsigned AW = 12
) (
  input  logic          wr_clk,
  input  logic          wr_rst,
  input  logic          wr_en,
  input  logic [DW-1:0] wr_data,
  output logic          wr_full,
  output logic [AW:0]   wr_free,
  input  logic          rd_clk,
  input  logic          rd_rst,
  input  logic          rd_en,
  output logic [DW-1:0] rd_data,
  output logic          rd_empty,
  output logic [AW:0]   rd_count
);
  localparam int unsigned DEPTH = 1 << AW;

  logic [DW-1:0] mem [DEPTH];
  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] rgray_w1, rgray_w2, wgray_r1, wgray_r2;
  logic [AW:0] rbin_w, wbin_r;

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  function automatic logic [AW:0] gray2bin(input logic [AW:0] g);
    logic [AW:0] b;
    b[AW] = g[AW];
    for (int i = int'(AW) - 1; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  // write side
  always_comb begin
    rbin_w  = gray2bin(rgray_w2);
    wr_free = (AW+1)'(DEPTH) - (wbin - rbin_w);
    wr_full = (wbin - rbin_w) == (AW+1)'(DEPTH);
  end

  always_ff @(posedge wr_clk) begin
    if (wr_en && !wr_full) mem[wbin[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge wr_clk) begin
    if (wr_rst) begin
      wbin     <= '0;
      wgray    <= '0;
      rgray_w1 <= '0;
      rgray_w2 <= '0;
    end else begin
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
      if (wr_en && !wr_full) begin
        wbin  <= wbin + 1'b1;
        wgray <= bin2gray(wbin + 1'b1);
      end
    end
  end

  // read side
  always_comb begin
    wbin_r   = gray2bin(wgray_r2);
    rd_count = wbin_r - rbin;
    rd_empty = (rd_count == '0);
    rd_data  = mem[rbin[AW-1:0]];
  end

  always_ff @(posedge rd_clk) begin
    if (rd_rst) begin
      rbin     <= '0;
      rgray    <= '0;
      wgray_r1 <= '0;
      wgray_r2 <= '0;
    end else begin
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
      if (rd_en && !rd_empty) begin
        rbin  <= rbin + 1'b1;
        rgray <= bin2gray(rbin + 1'b1);
      end
    end
  end
endmodule
