// tb_timestamp: the counter must advance by one per enabled clock, hold
// while disabled and return to zero on clear.
module tb_timestamp;
  logic clk = 1'b0, rst, clear, enable;
  logic [63:0] ts;
  longint unsigned model;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  timestamp dut (.clk, .rst, .clear, .enable, .ts);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1; clear = 0; enable = 0; model = 0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int n = 0; n < 1000; n++) begin
      @(negedge clk);
      enable = ($urandom % 4) != 0;
      clear  = ($urandom % 97) == 0;
      @(posedge clk); #1;
      if (clear) model = 0;
      else if (enable) model++;
      checks++;
      if (ts !== model) begin
        failures++;
        $display("n=%0d ts=%0d expected %0d", n, ts, model);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
