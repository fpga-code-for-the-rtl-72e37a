// tb_event_detector: a noisy pulse train is fed in level and in derivative
// mode; each cycle the trigger must match an independent model of an upward
// crossing of the threshold by the signal (level) or by its first difference
// (derivative), one cycle after the sample.
module tb_event_detector;
  logic clk = 1'b0, rst, enable, deriv_mode;
  logic [15:0] threshold, x;
  logic trig;
  int checks = 0, failures = 0, fired = 0;

  always #5 clk = ~clk;

  event_detector dut (.clk, .rst, .enable, .deriv_mode, .threshold, .x, .trig);

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int xv, xp, dv, dp, thr, pos;
    logic expect_t;
    rst = 1; enable = 1; deriv_mode = 0; threshold = 16'd300; x = '0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int mode = 0; mode < 2; mode++) begin
      deriv_mode = mode[0];
      threshold  = mode ? 16'd150 : 16'd300;
      thr = int'(signed'(threshold));
      xp = 0; dp = 0;
      x = '0;
      @(posedge clk); @(posedge clk);   // settle the history
      for (int n = 0; n < 2000; n++) begin
        @(negedge clk);
        pos = n % 50;
        xv = (pos < 3) ? pos * 400 : (pos < 30 ? 1200 * (30 - pos) / 27 : 0);
        xv += int'($urandom % 21) - 10;
        x = 16'(xv);
        dv = xv - xp;
        expect_t = mode ? (dv >= thr && dp < thr) : (xv >= thr && xp < thr);
        xp = xv; dp = dv;
        @(posedge clk); #1;
        checks++;
        if (trig !== expect_t) begin
          failures++;
          $display("mode %0d n=%0d trig=%0d expected %0d", mode, n, trig, expect_t);
        end
        if (trig) fired++;
      end
    end
    checks++;
    if (fired < 60) begin
      failures++;
      $display("too few triggers: %0d", fired);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
