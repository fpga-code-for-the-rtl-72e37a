// tb_async_fifo: writes on a 4 ns clock and reads on a 7 ns clock, both
// with random pauses; all words must come out once, in order. Also fills
// the FIFO to check full, wr_free = 0 and that a write while full is
// ignored, then drains it to check rd_count and empty.
module tb_async_fifo;
  localparam int AW = 4, DEPTH = 1 << AW;
  logic wclk = 1'b0, rclk = 1'b0, wrst, rrst;
  logic wr_en, rd_en, wr_full, rd_empty;
  logic [31:0] wr_data, rd_data;
  logic [AW:0] wr_free, rd_count;
  int checks = 0, failures = 0;
  int nwritten = 0, nread = 0;
  localparam int N = 3000;
  logic stop_read = 1'b0;

  always #2 wclk = ~wclk;
  always #3.5 rclk = ~rclk;

  async_fifo #(.DW(32), .AW(AW)) dut (
    .wr_clk(wclk), .wr_rst(wrst), .wr_en, .wr_data, .wr_full, .wr_free,
    .rd_clk(rclk), .rd_rst(rrst), .rd_en, .rd_data, .rd_empty, .rd_count
  );

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // writer
  initial begin
    wrst = 1; wr_en = 0; wr_data = 0;
    repeat (4) @(posedge wclk);
    #0.5 wrst = 0;
    while (nwritten < N) begin
      @(negedge wclk);
      wr_en = ($urandom % 3) != 0 && !wr_full;
      wr_data = 32'(nwritten) * 32'h9E37_79B9;
      @(posedge wclk);
      if (wr_en) nwritten++;
    end
    @(negedge wclk) wr_en = 0;
  end

  // reader
  initial begin
    rrst = 1; rd_en = 0;
    repeat (4) @(posedge rclk);
    #0.5 rrst = 0;
    while (nread < N) begin
      @(negedge rclk);
      rd_en = ($urandom % 4) != 0 && !rd_empty;
      if (rd_en) begin
        checks++;
        if (rd_data !== 32'(nread) * 32'h9E37_79B9) begin
          failures++;
          if (failures < 5) $display("word %0d: %h", nread, rd_data);
        end
      end
      @(posedge rclk);
      if (rd_en) nread++;
    end
    @(negedge rclk) rd_en = 0;
    // fill phase: write DEPTH+2 words without reading
    @(negedge wclk);
    for (int i = 0; i < DEPTH + 2; i++) begin
      @(negedge wclk);
      wr_en = 1; wr_data = 32'hA000 + 32'(i);
    end
    @(negedge wclk) wr_en = 0;
    repeat (4) @(posedge wclk);
    checks++;
    if (!wr_full || wr_free != 0) begin
      failures++;
      $display("not full after %0d writes: free=%0d", DEPTH + 2, wr_free);
    end
    repeat (4) @(posedge rclk);
    checks++;
    if (rd_count != (AW+1)'(DEPTH)) begin
      failures++;
      $display("rd_count=%0d expected %0d", rd_count, DEPTH);
    end
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge rclk);
      checks++;
      if (rd_data !== 32'hA000 + 32'(i)) begin
        failures++;
        $display("fill word %0d: %h", i, rd_data);
      end
      rd_en = 1;
      @(posedge rclk);
    end
    @(negedge rclk) rd_en = 0;
    repeat (2) @(posedge rclk);
    checks++;
    if (!rd_empty) begin
      failures++;
      $display("not empty after draining");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
