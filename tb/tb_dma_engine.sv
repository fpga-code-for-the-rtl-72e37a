// tb_dma_engine: four sources are filled at random rates (with idle
// periods, so that the flush rule is exercised) and the request/data stream
// is accepted with random back-pressure. Every transfer is checked: it must
// go to the next ring position of its source (base + offset, wrapping with
// the ring mask), carry that source's next Q-words in order, be a full
// burst unless it is a flush or reaches the ring end (never crossing it), and be followed by one status Q-word to the
// status address whose fields match a model of the counters and offsets.
module tb_dma_engine;
  localparam int BURST = 8, FLUSH = 40;
  logic clk = 1'b0, rst, enable;
  logic [63:0] base [4];
  logic [31:0] ring_mask = 32'h3FF;
  logic [63:0] stat_addr = 64'h0000_0001_0000_0F00;
  logic [12:0] src_count [4];
  logic [63:0] src_data [4];
  logic src_rd [4];
  logic req_valid, req_ready, dat_valid, dat_ready;
  logic [63:0] req_addr, dat_data;
  logic [9:0] req_len;
  logic [15:0] dma_count [2];
  int wp [4], rp [4], mem_off [4];
  int checks = 0, failures = 0, nfull = 0, nflush = 0, nstat = 0;
  int cnt0 = 0, cnt1 = 0;
  // receiver state
  int cur_src = -1, cur_len = 0, got = 0;
  logic expect_status = 1'b0;
  logic in_status = 1'b0;

  always #5 clk = ~clk;

  dma_engine #(.BURST(BURST), .FLUSH_CYCLES(FLUSH), .CW(13)) dut (.*);

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial for (int s = 0; s < 4; s++) begin
    base[s] = {s[0] ? 32'h0 : 32'h0000_0002, 32'h1000_0000 + 32'(s) * 32'h0010_0000};
    wp[s] = 0; rp[s] = 0; mem_off[s] = 0;
  end

  always_comb for (int s = 0; s < 4; s++) begin
    src_count[s] = 13'(wp[s] - rp[s]);
    src_data[s]  = {32'(s), 32'(rp[s])};
  end

  always @(posedge clk) if (!rst) for (int s = 0; s < 4; s++) if (src_rd[s]) begin
    if (wp[s] == rp[s]) begin failures++; $display("read of empty source %0d", s); end
    rp[s] <= rp[s] + 1;
  end

  always @(negedge clk) begin
    req_ready = ($urandom_range(3) != 0);
    dat_ready = ($urandom_range(3) != 0);
  end

  function automatic int src_of(input logic [63:0] a);
    for (int s = 0; s < 4; s++) if (a >= base[s] && a < base[s] + 64'(ring_mask) + 1) return s;
    return -1;
  endfunction

  always @(posedge clk) if (!rst) begin
    if (req_valid && req_ready) begin
      checks++;
      if (got != cur_len) begin failures++; $display("request before data finished"); end
      if (expect_status) begin
        if (req_addr != stat_addr || req_len != 10'd1) begin failures++; $display("status request expected"); end
        in_status = 1'b1; cur_len = 1; got = 0; expect_status = 1'b0;
      end else begin
        cur_src = src_of(req_addr);
        if (cur_src < 0) begin failures++; $display("address %h outside rings", req_addr); end
        else begin
          if (req_addr != base[cur_src] + 64'(mem_off[cur_src])) begin
            failures++; $display("src %0d address %h expected offset %h", cur_src, req_addr, mem_off[cur_src]);
          end
          if (mem_off[cur_src] + 8 * int'(req_len) > int'(ring_mask) + 1) begin
            failures++; $display("transfer crosses the ring end");
          end
          if (req_len == 10'(BURST)) nfull++;
          else if (req_len > 10'(BURST) || req_len == 0) begin failures++; $display("length %0d", req_len); end
          else nflush++;
        end
        in_status = 1'b0; cur_len = int'(req_len); got = 0; expect_status = 1'b1;
      end
    end
    if (dat_valid && dat_ready) begin
      checks++;
      if (got >= cur_len) begin failures++; $display("extra data"); end
      else if (in_status) begin
        automatic logic [63:0] e;
        if (cur_src[1]) cnt1++; else cnt0++;
        e = {1'b0, cur_src[1], 1'b0, cur_src[0], 16'(cnt0), 16'(cnt1), 28'(mem_off[cur_src])};
        nstat++;
        if (dat_data !== e) begin failures++; $display("status %h expected %h", dat_data, e); end
      end else begin
        // each source's data are its read sequence numbers
        automatic logic [63:0] e = {32'(cur_src), 32'(mem_seq[cur_src])};
        if (dat_data !== e) begin failures++; $display("data %h expected %h", dat_data, e); end
        mem_seq[cur_src]++;
        mem_off[cur_src] = (mem_off[cur_src] + 8) & int'(ring_mask);
      end
      got++;
    end
  end
  int mem_seq [4] = '{0, 0, 0, 0};

  initial begin
    rst = 1; enable = 0;
    repeat (3) @(posedge clk);
    #1 rst = 0; enable = 1;
    for (int c = 0; c < 40000; c++) begin
      @(negedge clk);
      for (int s = 0; s < 4; s++) begin
        // bursty sources: busy for a while, then idle, so flushes happen
        if (((c / 1000) % 2 == 0 || s == 3) && $urandom_range(7) == 0 && wp[s] - rp[s] < 4000) wp[s]++;
      end
    end
    repeat (2 * FLUSH + 200) @(posedge clk);
    for (int s = 0; s < 4; s++) begin
      checks++;
      if (wp[s] != rp[s] || mem_seq[s] != wp[s]) begin failures++; $display("source %0d: %0d left", s, wp[s] - rp[s]); end
    end
    checks++;
    if (nfull == 0 || nflush == 0 || nstat != nfull + nflush || dma_count[0] != 16'(cnt0) || dma_count[1] != 16'(cnt1)) begin
      failures++; $display("full %0d flush %0d status %0d", nfull, nflush, nstat);
    end
    $display("full bursts %0d, flushes %0d", nfull, nflush);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
