// tb_dts_filter: feeds exponential pulses on a baseline of 100 (offset
// register 100) and compares every
// output sample with a direct (non-recursive) evaluation of the trapezoidal
// shaper written here: s[n] = sum_{j<=n} sum_{i<=j} d[i] + M * sum_{j<=n} d[j],
// with d the K/L difference of input minus offset. Also checks that a constant
// baseline gives zero output, that the pulse output is a trapezoid with a
// positive flat top, and the 4-cycle latency of the bypass path.
module tb_dts_filter;
  localparam int K = 8, L = 12, LAT = 4;
  logic clk = 1'b0, rst, bypass;
  logic [15:0] m_coef, x, y;
  logic [4:0]  shift;
  logic [15:0] offset;
  int checks = 0, failures = 0;
  int xs [4096];
  longint ds [4096];
  longint cumd, cumcumd;
  int peak_seen;

  always #5 clk = ~clk;

  dts_filter #(.K(K), .L(L)) dut (.clk, .rst, .bypass, .m_coef, .shift, .offset, .x, .y);

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int xat(int n);
    return (n < 0) ? 0 : xs[n] - 100;
  endfunction

  function automatic int sat16(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  initial begin
    longint sref;
    int expect_v, n_out;
    rst = 1; bypass = 0; m_coef = 16'd20; shift = 5'd4; x = '0; offset = 16'd100;
    // stimulus: baseline 100, exponential pulses (tau = 20 samples) every 200
    for (int n = 0; n < 4096; n++) begin
      automatic int pos = n % 200;
      xs[n] = 100;
      if (n >= 200 && pos >= 10) xs[n] += int'(1500.0 * $exp(-real'(pos - 10) / 20.0));
    end
    for (int n = 0; n < 4096; n++)
      ds[n] = longint'(xat(n)) - xat(n-K) - xat(n-L) + xat(n-K-L);
    repeat (2) @(posedge clk);
    #1 rst = 0;
    cumd = 0; cumcumd = 0; peak_seen = 0;
    for (int n = 0; n < 1200 + LAT; n++) begin
      @(negedge clk);
      x = 16'(xs[n]);
      @(posedge clk); #1;
      n_out = n - LAT + 1;        // sample whose result is now on y
      if (n_out >= 0) begin
        cumd    += ds[n_out];
        cumcumd += cumd;
        sref = cumcumd + longint'(m_coef) * cumd;
        expect_v = sat16(sref >>> shift);
        checks++;
        if (int'(signed'(y)) != expect_v) begin
          failures++;
          if (failures < 10) $display("n=%0d y=%0d expected %0d", n_out, signed'(y), expect_v);
        end
        if (n_out > 40 && n_out < 200) begin
          checks++;
          if (y != 16'd0) begin
            failures++;
            $display("baseline not removed at %0d: %0d", n_out, signed'(y));
          end
        end
        if (int'(signed'(y)) > peak_seen) peak_seen = int'(signed'(y));
      end
    end
    checks++;
    if (peak_seen < 500) begin
      failures++;
      $display("trapezoid too small: %0d", peak_seen);
    end
    // bypass: raw input after LAT cycles
    bypass = 1;
    for (int n = 0; n < 50; n++) begin
      @(negedge clk);
      x = 16'($urandom);
      fork
        begin
          automatic logic [15:0] v = x;
          repeat (LAT) @(posedge clk);
          #1;
          checks++;
          if (y !== v) begin
            failures++;
            $display("bypass: y=%h expected %h", y, v);
          end
        end
      join_none
    end
    repeat (LAT + 2) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
