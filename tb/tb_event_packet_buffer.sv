// tb_event_packet_buffer: 16-bit words written on the sampling clock must
// come out on the PCIe clock as 64-bit words, four per word, first word in
// bits [15:0]. With a small FIFO and no reads, space_ok must fall once less
// than one PWIDTH (plus margin) is free, and a word pushed while full must
// be counted as an overflow.
module tb_event_packet_buffer;
  localparam int AW = 4;
  logic wclk = 1'b0, rclk = 1'b0, wrst, rrst;
  logic in_valid, space_ok, rd_en, rd_empty;
  logic [15:0] in_data;
  logic [31:0] overflows;
  logic [63:0] rd_data;
  logic [AW:0] rd_count;
  int checks = 0, failures = 0;
  int nin = 0, nout = 0;
  localparam int NQ = 400;

  always #2.5 wclk = ~wclk;
  always #4 rclk = ~rclk;

  event_packet_buffer #(.AW(AW)) dut (
    .wr_clk(wclk), .wr_rst(wrst), .in_valid, .in_data, .pwidth(16'd16), .space_ok, .overflows,
    .rd_clk(rclk), .rd_rst(rrst), .rd_en, .rd_data, .rd_empty, .rd_count
  );

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [15:0] word(int i);
    return 16'(i * 7 + 3);
  endfunction

  initial begin
    wrst = 1; in_valid = 0; in_data = 0;
    repeat (4) @(posedge wclk);
    #0.5 wrst = 0;
    while (nin < 4 * NQ) begin
      @(negedge wclk);
      in_valid = space_ok && ($urandom % 2 == 0);
      in_data = word(nin);
      @(posedge wclk);
      if (in_valid) nin++;
    end
    @(negedge wclk) in_valid = 0;
  end

  initial begin
    logic [63:0] e;
    rrst = 1; rd_en = 0;
    repeat (4) @(posedge rclk);
    #0.5 rrst = 0;
    while (nout < NQ) begin
      @(negedge rclk);
      rd_en = !rd_empty && ($urandom % 3 != 0);
      if (rd_en) begin
        e = {word(4*nout+3), word(4*nout+2), word(4*nout+1), word(4*nout)};
        checks++;
        if (rd_data !== e) begin
          failures++;
          if (failures < 5) $display("qword %0d: %h expected %h", nout, rd_data, e);
        end
      end
      @(posedge rclk);
      if (rd_en) nout++;
    end
    @(negedge rclk) rd_en = 0;
    // fill without reading: space_ok must drop; then force pushes
    for (int i = 0; i < 4 * ((1 << AW) - 4) + 2; i++) begin
      @(negedge wclk); in_valid = 1; in_data = 16'(i);
    end
    @(negedge wclk) in_valid = 0;
    repeat (6) @(posedge wclk);
    checks++;
    if (space_ok) begin
      failures++;
      $display("space_ok still high with %0d free words expected", 4);
    end
    for (int i = 0; i < 4 * 8; i++) begin
      @(negedge wclk); in_valid = 1; in_data = 16'(i);
    end
    @(negedge wclk) in_valid = 0;
    repeat (4) @(posedge wclk);
    checks++;
    if (overflows != 32'd4) begin
      failures++;
      $display("overflows=%0d expected 4", overflows);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
