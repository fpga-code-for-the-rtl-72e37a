// tb_averaging_inv: random sample sets; the output one cycle later must be
// the 4-sample sum divided by two (13 bits), or 8191 minus that when
// inverting.
module tb_averaging_inv;
  logic clk = 1'b0;
  logic invert;
  logic [11:0] samples [4];
  logic [15:0] avg;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  averaging_inv dut (.clk, .invert, .samples, .avg);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sum, expect_v;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      invert = (n % 3) == 0;
      sum = 0;
      for (int i = 0; i < 4; i++) begin
        samples[i] = (n < 4) ? 12'hFFF : 12'($urandom);
        sum += int'(samples[i]);
      end
      expect_v = invert ? 8191 - sum / 2 : sum / 2;
      @(posedge clk); #1;
      checks++;
      if (avg !== 16'(expect_v)) begin
        failures++;
        $display("n=%0d avg=%0d expected %0d", n, avg, expect_v);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
