// dma_engine: the DMA state machine of the PCIe RX/TX interface.
//
// Four data sources are streamed to host memory: DMA 0 (event packets) and
// DMA 1 (real-time PSD/PHS packets), each for two ADC channels. Each source
// has its own ring buffer in host memory (base address from the register
// file, common size ring_mask+1 bytes). A source is served when it holds a
// full burst of BURST Q-words, or when it has held some data for
// FLUSH_CYCLES cycles without reaching a burst (so the tail of a run is
// delivered). Sources are served round-robin. Every DMA 0/1 transfer is
// followed by a DMA 2 transfer of one status Q-word to the status address,
// so the host learns by polling its own memory which data have arrived:
//   [63:62] DMA number of the transfer just made (0 or 1)
//   [61:60] ADC channel
//   [59:44] number of DMA 0 transfers so far (wraps)
//   [43:28] number of DMA 1 transfers so far (wraps)
//   [27:0]  ring offset (bytes) just past the last Q-word written
// Requests go to the TX engine as {address, length in Q-words} followed by
// the data Q-words on a valid/ready stream; data are read from the source
// FIFOs (first-word-fall-through) as the TX engine accepts them.
// Timing: the next transfer is chosen in the clock that sends the status
// Q-word, so with the TX engine a full transfer takes 39 endpoint clocks
// (2 header + 32 data + 3 status beats, 2 turnaround clocks): 0.82 payload
// Q-words per clock, 1.64 GB/s at 250 MHz. The default BURST of 32 Q-words
// (256 bytes) needs a host that allows 256-byte write payloads; set it to
// 16 for a host limited to 128 bytes.
//
// Host buffers: each base address must be aligned to the smaller of the
// ring size and 4 KiB; transfers never cross the end of a ring or a 4 KiB
// boundary, so a burst may be shortened there.
//
// The three DMA channels and a status write after every DMA 0/1 transfer
// follow the design; burst size, flush rule, round-robin order, ring
// buffers and the status-word layout are this design's choices.
module dma_engine #(
  parameter int unsigned BURST        = 32,
  parameter int unsigned FLUSH_CYCLES = 4096,
  parameter int unsigned CW           = 13     // width of the source counts
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          enable,
  input  logic [63:0]   base [4],
  input  logic [31:0]   ring_mask,
  input  logic [63:0]   stat_addr,
  input  logic [CW-1:0] src_count [4],
  input  logic [63:0]   src_data  [4],
  output logic          src_rd    [4],
  output logic          req_valid,
  input  logic          req_ready,
  output logic [63:0]   req_addr,
  output logic [9:0]    req_len,
  output logic          dat_valid,
  input  logic          dat_ready,
  output logic [63:0]   dat_data,
  output logic [15:0]   dma_count [2]
);
  typedef enum logic [2:0] {S_IDLE, S_REQ, S_DATA, S_SREQ, S_SDATA} state_e;
  state_e state;

  logic [1:0]  sel, last_sel;
  logic [9:0]  len, remain;
  logic [31:0] offset [4];
  logic [15:0] age    [4];
  logic [63:0] status;
  logic        found;
  logic [1:0]  pick;
  logic [9:0]  pick_len;
  logic [31:0] lim, room;
  logic        take;     // start the next transfer this clock

  // round-robin choice of the next source that is ready; a transfer is cut
  // at the end of the ring and at a 4 KiB boundary (a PCIe write may not
  // cross one), both of which are multiples of 'lim + 1' bytes
  always_comb begin
    found    = 1'b0;
    pick     = '0;
    pick_len = '0;
    lim      = ring_mask & 32'h0000_0FFF;
    room     = '0;
    for (int k = 1; k <= 4; k++) begin
      automatic logic [1:0] s = last_sel + 2'(k);
      if (!found && src_count[s] != '0 &&
          (32'(src_count[s]) >= 32'(BURST) || 32'(age[s]) >= 32'(FLUSH_CYCLES))) begin
        found    = 1'b1;
        pick     = s;
        pick_len = (32'(src_count[s]) >= 32'(BURST)) ? 10'(BURST) : 10'(src_count[s]);
        room     = ((lim - (offset[s] & lim)) >> 3) + 32'd1;
        if (32'(pick_len) > room) pick_len = 10'(room);
      end
    end
  end

  // a new transfer starts from idle or straight after the status word
  assign take = enable && found && (state == S_IDLE || (state == S_SDATA && dat_ready));

  always_comb begin
    for (int s = 0; s < 4; s++) src_rd[s] = (state == S_DATA) && dat_ready && (sel == 2'(s));
    req_valid = (state == S_REQ) || (state == S_SREQ);
    req_addr  = (state == S_SREQ) ? stat_addr : base[sel] + 64'(offset[sel] & ring_mask);
    req_len   = (state == S_SREQ) ? 10'd1 : len;
    dat_valid = (state == S_DATA) || (state == S_SDATA);
    dat_data  = (state == S_SDATA) ? status : src_data[sel];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= S_IDLE;
      sel       <= '0;
      last_sel  <= 2'd3;
      len       <= '0;
      remain    <= '0;
      status    <= '0;
      dma_count <= '{default: '0};
      offset    <= '{default: '0};
      age       <= '{default: '0};
    end else begin
      for (int s = 0; s < 4; s++) begin
        if (src_count[s] == '0 || (take && pick == 2'(s))) age[s] <= '0;
        else if (age[s] != 16'hFFFF) age[s] <= age[s] + 1'b1;
      end
      unique case (state)
        S_IDLE: ;
        S_REQ: if (req_ready) state <= S_DATA;
        S_DATA: if (dat_ready) begin
          remain <= remain - 1'b1;
          if (remain == 10'd1) begin
            offset[sel] <= (offset[sel] + 32'(len) * 32'd8) & ring_mask;
            dma_count[sel[1]] <= dma_count[sel[1]] + 1'b1;
            status <= {1'b0, sel[1], 1'b0, sel[0],
                       sel[1] ? dma_count[0] : dma_count[0] + 16'd1,
                       sel[1] ? dma_count[1] + 16'd1 : dma_count[1],
                       28'((offset[sel] + 32'(len) * 32'd8) & ring_mask)};
            state <= S_SREQ;
          end
        end
        S_SREQ: if (req_ready) state <= S_SDATA;
        S_SDATA: if (dat_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
      if (take) begin
        sel      <= pick;
        last_sel <= pick;
        len      <= pick_len;
        remain   <= pick_len;
        state    <= S_REQ;
      end
    end
  end
endmodule
