// tb_pll_control: the eleven 24-bit words must appear on the serial port,
// word 0 first and MSB first, sampled on rising edges of the serial clock,
// each closed by a latch-enable pulse; done must follow the last word, and
// the whole set must take 11 x (24 x 2 + 1) x CLK_DIV cycles.
module tb_pll_control;
  localparam int DIV = 2;
  logic clk = 1'b0, rst, start, sclk, sdata, le, busy, done;
  logic [23:0] words [11];
  logic [23:0] shreg;
  int nbits = 0, nwords = 0;
  int checks = 0, failures = 0;
  int t_start, t_done, cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  pll_control #(.NWORDS(11), .CLK_DIV(DIV)) dut (
    .clk, .rst, .start, .words, .pll_sclk(sclk), .pll_sdata(sdata), .pll_le(le), .busy, .done
  );

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge sclk) begin
    shreg = {shreg[22:0], sdata};
    nbits++;
  end

  always @(posedge le) begin
    checks++;
    if (nbits != 24 || shreg !== words[nwords]) begin
      failures++;
      $display("word %0d: %h after %0d bits, expected %h", nwords, shreg, nbits, words[nwords]);
    end
    nbits = 0;
    nwords++;
  end

  initial begin
    rst = 1; start = 0;
    for (int i = 0; i < 11; i++) words[i] = 24'($urandom);
    repeat (3) @(posedge clk);
    #1 rst = 0;
    @(negedge clk) start = 1;
    t_start = cyc;
    @(negedge clk) start = 0;
    while (!done) @(posedge clk);
    t_done = cyc;
    checks++;
    if (nwords != 11) begin failures++; $display("%0d words", nwords); end
    checks++;
    if (t_done - t_start < 11 * 49 * DIV || t_done - t_start > 11 * 49 * DIV + 4) begin
      failures++;
      $display("took %0d cycles", t_done - t_start);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
