// tb_workload_stream: the continuous-acquisition throughput workload.
// Both event sources of the DMA engine are kept full, as they are when the
// two channels stream back-to-back events at 400 MS/s (2 x 400 M x 2 bytes
// = 1.6 GB/s). The DMA engine and the PCIe transmit engine, at their default
// parameters, drive a transmit stream that is never held back. After a
// warm-up the bench counts, over 200 000 endpoint clocks:
//  * the Q-words taken from the sources (payload) and the stream beats;
//  * how the payload is shared between the two sources.
// At the assumed 250 MHz endpoint clock a 64-bit stream carries 2.0 GB/s,
// so 1.6 GB/s needs at least 0.80 payload Q-words per clock. The bench also
// checks that each source gets at least 40 % of the payload, that every
// data write carries a full burst, that the stream is idle at most 10 % of
// the time and that only the DMA 0 counter moves. A transfer costs
// 2 header + 32 data + 3 status beats plus 2 turnaround clocks, so 32 of
// every 39 clocks carry payload: 0.82 per clock, 1.64 GB/s.
module tb_workload_stream;
  localparam int WARM = 20000, WIN = 200000;
  logic clk = 1'b0, rst, enable;
  logic [63:0] base [4];
  logic [31:0] ring_mask = 32'h000F_FFFF;
  logic [63:0] stat_addr = 64'h0000_0001_0000_0F00;
  logic [12:0] src_count [4];
  logic [63:0] src_data [4];
  logic src_rd [4];
  logic req_valid, req_ready, dat_valid, dat_ready;
  logic [63:0] req_addr, dat_data;
  logic [9:0] req_len;
  logic [15:0] dma_count [2];
  logic cpl_valid = 1'b0, cpl_ready;
  logic [63:0] tx_tdata;
  logic [7:0] tx_tkeep;
  logic tx_tlast, tx_tvalid;
  logic tx_tready = 1'b1;
  int checks = 0, failures = 0;
  int cyc = 0, rd [2], beats = 0, idle = 0, reqs = 0, short_reqs = 0;

  always #2 clk = ~clk;

  dma_engine u_dma (.clk, .rst, .enable, .base, .ring_mask, .stat_addr,
    .src_count, .src_data, .src_rd,
    .req_valid, .req_ready, .req_addr, .req_len, .dat_valid, .dat_ready, .dat_data, .dma_count);

  pcie_tx_engine u_tx (.clk, .rst, .completer_id(16'h0100),
    .req_valid, .req_ready, .req_addr, .req_len, .dat_valid, .dat_ready, .dat_data,
    .cpl_valid, .cpl_ready, .cpl_req_id(16'h0), .cpl_tag(8'h0), .cpl_lower_addr(7'h0), .cpl_data(32'h0),
    .tx_tdata, .tx_tkeep, .tx_tlast, .tx_tvalid, .tx_tready);

  initial begin
    #4000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sources 0 and 1 always full (their fill level is random but above a
  // burst), sources 2 and 3 (real-time data) idle
  initial for (int s = 0; s < 4; s++) begin
    base[s] = 64'h0000_0001_0000_0000 + 64'(s) * 64'h0010_0000;
    src_data[s] = 64'(s) << 56;
  end
  always_ff @(posedge clk) for (int s = 0; s < 4; s++) begin
    src_count[s] <= (s < 2) ? 13'(64 + $urandom_range(4000)) : 13'd0;
    if (src_rd[s]) src_data[s] <= src_data[s] + 64'd1;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (cyc >= WARM && cyc < WARM + WIN) begin
      for (int s = 0; s < 2; s++) if (src_rd[s]) rd[s]++;
      if (tx_tvalid && tx_tready) beats++;
      else idle++;
      if (req_valid && req_ready) begin
        reqs++;
        if (req_addr[63:32] == 32'h1 && req_addr[31:12] != 20'h0 && req_len != 10'd32) short_reqs++;
      end
    end
  end

  initial begin
    real rate, gbs;
    rd[0] = 0; rd[1] = 0;
    rst = 1'b1; enable = 1'b0;
    repeat (10) @(posedge clk);
    rst = 1'b0; enable = 1'b1;
    wait (cyc >= WARM + WIN + 2);
    rate = real'(rd[0] + rd[1]) / real'(WIN);
    gbs = rate * 8.0 * 0.25;
    $display("payload %0d Q-words in %0d clocks (%0.3f per clock, %0.2f GB/s at 250 MHz), beats %0d, idle %0d, requests %0d",
             rd[0] + rd[1], WIN, rate, gbs, beats, idle, reqs);
    checks++; if (rate < 0.80) begin failures++; $display("below 1.6 GB/s"); end
    for (int s = 0; s < 2; s++) begin
      checks++;
      if (rd[s] < (rd[0] + rd[1]) * 4 / 10) begin failures++; $display("source %0d starved: %0d", s, rd[s]); end
    end
    checks++; if (short_reqs != 0) begin failures++; $display("%0d short data writes", short_reqs); end
    checks++; if (idle > WIN / 10) begin failures++; $display("stream idle %0d clocks", idle); end
    checks++; if (dma_count[0] == 16'd0 || dma_count[1] != 16'd0) begin failures++; $display("DMA counters %0d %0d", dma_count[0], dma_count[1]); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
