// tb_psd: triangular pulses of known height and length are integrated over
// psd_len = 16 samples. For each, Q-word 1 must carry the trigger time stamp
// (49 bits), Q-word 2 the peak, the sum of the positive samples (CI), the
// pileup count of extra triggers and the particle type: neutron when
// CI*256 > slope*peak, gamma otherwise. The packet must start psd_len+1
// cycles after the trigger and last two cycles. Peak and CI saturation are
// checked with a large pulse.
module tb_psd;
  import rnc_pkg::*;
  localparam int LEN = 16;
  logic clk = 1'b0, rst, enable, trig, out_valid;
  logic [15:0] x, slope;
  logic [63:0] ts, out_data;
  int checks = 0, failures = 0, cyc = 0;
  int xv [$];
  int trig_at [$];
  logic [63:0] got [$];
  int got_cyc [$];
  int n_neutron = 0, n_gamma = 0, n_pu = 0;

  always #5 clk = ~clk;

  psd dut (.clk, .rst, .enable, .psd_len(16'(LEN)), .slope, .x, .trig, .ts, .out_valid, .out_data);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    #1;
    cyc++;
    if (out_valid) begin got.push_back(out_data); got_cyc.push_back(cyc); end
    ts = 64'hABCD_0000_0000_0000 + 64'(cyc);
    x = (xv.size() > 0) ? 16'(xv.pop_front()) : 16'hFFF0;   // -16 between pulses
    trig = 1'b0;
    foreach (trig_at[i]) if (trig_at[i] == cyc) trig = 1'b1;
  end

  // one pulse: rise over 'r' samples to 'h', fall over 'f'; extra triggers
  // at the given offsets
  task automatic run_pulse(input int h, input int r, input int f, input int npu, input logic [15:0] sl);
    int t0, peak, ci, v;
    logic [63:0] q1, q2;
    psd_qw2_t w2;
    slope = sl;
    t0 = cyc + 3;
    peak = 0; ci = 0;
    xv.push_back(-16); xv.push_back(-16);
    // samples from t0 on
    for (int i = 0; i < LEN + 4; i++) begin
      v = (i < r) ? h * (i + 1) / r : ((i < r + f) ? h * (r + f - i) / f : -16);
      xv.push_back(v);
      if (i < LEN && v > 0) begin
        ci += v;
        if (v > peak) peak = v;
      end
    end
    trig_at.push_back(t0);
    for (int k = 0; k < npu; k++) trig_at.push_back(t0 + 2 + k);
    repeat (LEN + 8) @(posedge clk);
    checks++;
    if (got.size() != 2 || got_cyc[0] != t0 + LEN + 1 || got_cyc[1] != t0 + LEN + 2) begin
      failures++;
      $display("pulse at %0d: %0d words, at %p", t0, got.size(), got_cyc);
    end else begin
      q1 = got[0]; q2 = got[1];
      w2 = psd_qw2_t'(q2);
      if (peak > 8191) peak = 8191;
      if (ci > 25'h1FF_FFFF) ci = 25'h1FF_FFFF;
      checks += 5;
      if (q1 !== {15'd0, 49'(64'hABCD_0000_0000_0000 + 64'(t0))}) begin failures++; $display("qw1 %h", q1); end
      if (int'(w2.peak) != peak) begin failures++; $display("peak %0d expected %0d", w2.peak, peak); end
      if (int'(w2.ci) != ci) begin failures++; $display("ci %0d expected %0d", w2.ci, ci); end
      if (int'(w2.pu) != (npu > 7 ? 7 : npu)) begin failures++; $display("pu %0d expected %0d", w2.pu, npu); end
      if (w2.ptype != ((longint'(ci) * 256 > longint'(sl) * peak) ? PT_NEUTRON : PT_GAMMA)) begin
        failures++; $display("type %b ci=%0d peak=%0d", w2.ptype, ci, peak);
      end
      checks++;
      if (w2.rsv1 != 0 || w2.rsv2 != 0 || w2.rsv3 != 0) failures++;
      if (w2.ptype == PT_NEUTRON) n_neutron++;
      if (w2.ptype == PT_GAMMA) n_gamma++;
      if (w2.pu != 0) n_pu++;
    end
    got.delete(); got_cyc.delete();
  endtask

  initial begin
    rst = 1; enable = 1; slope = 16'h0300; trig = 0; x = 0; ts = 0;
    repeat (3) @(posedge clk);
    #2 rst = 0;
    repeat (5) @(posedge clk);
    run_pulse(1000, 2, 4, 0, 16'h0300);   // short tail: CI/peak ~ 3.5
    run_pulse(1000, 2, 12, 0, 16'h0500);  // long tail, slope 5: neutron
    run_pulse(1000, 2, 4, 0, 16'h0500);   // short tail, slope 5: gamma
    run_pulse(800, 3, 10, 2, 16'h0500);   // pileup 2
    run_pulse(12000, 2, 13, 9, 16'h0100); // peak saturates, pu saturates
    checks++;
    if (n_neutron == 0 || n_gamma == 0 || n_pu != 2) begin
      failures++;
      $display("coverage: n=%0d g=%0d pu=%0d", n_neutron, n_gamma, n_pu);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
