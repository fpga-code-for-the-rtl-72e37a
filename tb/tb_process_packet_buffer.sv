// tb_process_packet_buffer: in PSD mode, pairs of Q-words must reach the
// read side in order, and with the FIFO nearly full a pair must be dropped
// whole (never half) and counted, also when exactly one word is free. In PHS mode the PHS stream is written
// under phs_ready back-pressure and PSD words are ignored.
module tb_process_packet_buffer;
  localparam int AW = 3, DEPTH = 1 << AW;
  logic wclk = 1'b0, rclk = 1'b0, wrst, rrst;
  logic phs_en, psd_valid, phs_valid, phs_ready, rd_en, rd_empty;
  logic [63:0] psd_data, phs_data, rd_data;
  logic [31:0] drops;
  logic [AW:0] rd_count;
  int checks = 0, failures = 0;

  always #2.5 wclk = ~wclk;
  always #4 rclk = ~rclk;

  process_packet_buffer #(.AW(AW)) dut (
    .wr_clk(wclk), .wr_rst(wrst), .phs_en, .psd_valid, .psd_data, .phs_valid, .phs_data,
    .phs_ready, .drops, .rd_clk(rclk), .rd_rst(rrst), .rd_en, .rd_data, .rd_empty, .rd_count
  );

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic psd_pair(input logic [63:0] a, input logic [63:0] b);
    @(negedge wclk); psd_valid = 1; psd_data = a;
    @(negedge wclk); psd_data = b;
    @(negedge wclk); psd_valid = 0;
  endtask

  task automatic drain(input int n, input logic [63:0] base);
    for (int i = 0; i < n; i++) begin
      @(negedge rclk);
      checks++;
      if (rd_empty || rd_data !== base + 64'(i)) begin
        failures++;
        $display("read %0d: %h (empty=%0d) expected %h", i, rd_data, rd_empty, base + 64'(i));
      end
      rd_en = 1;
      @(posedge rclk);
      #0.1 rd_en = 0;
    end
  endtask

  initial begin
    wrst = 1; rrst = 1; phs_en = 0; psd_valid = 0; phs_valid = 0; rd_en = 0;
    psd_data = 0; phs_data = 0;
    repeat (4) @(posedge rclk);
    #0.5 wrst = 0; rrst = 0;
    // PSD mode: 3 pairs fit (6 of 8), the 4th fits (8), the 5th is dropped
    for (int p = 0; p < 5; p++) psd_pair(64'h100 + 64'(2*p), 64'h100 + 64'(2*p+1));
    repeat (6) @(posedge rclk);
    checks++;
    if (drops != 32'd1 || rd_count != (AW+1)'(DEPTH)) begin
      failures++;
      $display("drops=%0d count=%0d", drops, rd_count);
    end
    drain(DEPTH, 64'h100);
    // odd fill: with one free word left a pair must still be dropped whole
    for (int p = 0; p < 3; p++) psd_pair(64'h300 + 64'(2*p), 64'h300 + 64'(2*p+1));
    repeat (6) @(posedge rclk);
    drain(1, 64'h300);
    psd_pair(64'h306, 64'h307);
    psd_pair(64'h308, 64'h309);
    repeat (6) @(posedge rclk);
    checks++;
    if (drops != 32'd2 || rd_count != (AW+1)'(DEPTH - 1)) begin
      failures++;
      $display("odd fill: drops=%0d count=%0d", drops, rd_count);
    end
    drain(DEPTH - 1, 64'h301);
    // PHS mode: 20 words with back-pressure; PSD words ignored
    phs_en = 1;
    fork
      begin
        for (int i = 0; i < 20; i++) begin
          @(negedge wclk);
          phs_valid = 1; phs_data = 64'h2000 + 64'(i);
          psd_valid = 1; psd_data = 64'hDEAD;
          @(posedge wclk);
          while (!phs_ready) @(posedge wclk);
          #0.1;
        end
        @(negedge wclk) phs_valid = 0; psd_valid = 0;
      end
      begin
        repeat (30) @(posedge rclk);   // let the FIFO fill first
        drain(20, 64'h2000);
      end
    join
    checks++;
    if (drops != 32'd2) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
