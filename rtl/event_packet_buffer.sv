// event_packet_buffer: packs 16-bit event words into 64-bit words and
// carries them from the sampling-clock domain to the PCIe clock domain.
//
// Four consecutive words of the event stream become one Q-word, the first
// word in bits [15:0]. Because an event is n x PWIDTH words and PWIDTH is a
// multiple of four, events always start on a Q-word boundary. The packed
// words go through a dual-clock FIFO (async_fifo) of 2**AW Q-words.
// 'space_ok' tells the event writer that at least one more PWIDTH fits; a
// word that arrives while the FIFO is full is dropped and counted in
// 'overflows' (this does not happen while the writer honours space_ok).
//
// Timing: a Q-word enters the FIFO one cycle after its fourth 16-bit word.
// The 16-bit input, 64-bit output and the two clock domains follow the block
// diagram and text of the design; the depth is this design's choice.
module event_packet_buffer #(
  parameter int unsigned AW = 12
) (
  input  logic        wr_clk,
  input  logic        wr_rst,
  input  logic        in_valid,
  input  logic [15:0] in_data,
  input  logic [15:0] pwidth,
  output logic        space_ok,
  output logic [31:0] overflows,
  input  logic        rd_clk,
  input  logic        rd_rst,
  input  logic        rd_en,
  output logic [63:0] rd_data,
  output logic        rd_empty,
  output logic [AW:0] rd_count
);
  logic [47:0] pack;
  logic [1:0]  idx;
  logic        push;
  logic [63:0] push_data;
  logic        full;
  logic [AW:0] free;

  always_ff @(posedge wr_clk) begin
    if (wr_rst) begin
      pack      <= '0;
      idx       <= '0;
      push      <= 1'b0;
      push_data <= '0;
      overflows <= '0;
    end else begin
      push <= 1'b0;
      if (in_valid) begin
        idx <= idx + 1'b1;
        if (idx == 2'd3) begin
          push      <= 1'b1;
          push_data <= {in_data, pack};
        end else begin
          pack[16*idx +: 16] <= in_data;
        end
      end
      if (push && full) overflows <= overflows + 1'b1;
    end
  end

  // one PWIDTH = pwidth/4 Q-words, plus one in flight
  assign space_ok = (32'(free) >= 32'(pwidth >> 2) + 32'd2);

  async_fifo #(.DW(64), .AW(AW)) u_fifo (
    .wr_clk, .wr_rst, .wr_en(push), .wr_data(push_data), .wr_full(full), .wr_free(free),
    .rd_clk, .rd_rst, .rd_en, .rd_data, .rd_empty, .rd_count
  );
endmodule
