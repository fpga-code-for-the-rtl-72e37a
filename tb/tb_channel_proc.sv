// tb_channel_proc: one complete channel, ADC DDR buses in, the two FIFO read
// ports (separate, faster read clock) out. Isolated exponential pulses on a
// noisy baseline are driven as 12-bit DDR samples. The conditioned stream
// inside the channel is recorded, and with it:
//  phase 1 (filter bypass, level trigger, PSD mode): every event packet must
//    carry the trigger time stamp, the recorded samples from PTRG before the
//    trigger, P = 1 and the end tag; every PSD packet must carry the same
//    time stamp, the peak and charge of the window and the class given by
//    the slope rule; the trigger must be the first sample above threshold;
//  phase 2 (DTS filter, PHS mode): PHS packets of the right length must come
//    at each real-time tick and their total counts must add up to the
//    number of triggers.
module tb_channel_proc;
  import rnc_pkg::*;
  localparam int NB = 64, PW = 32, PT = 8, PL = 16;
  logic clk = 1'b0, rst, rd_clk = 1'b0, rd_rst;
  logic [11:0] ddr_a, ddr_b;
  chan_cfg_t cfg;
  logic acq_en, sdn_tick, ev_rd, rt_rd, trig;
  logic [63:0] ts = '0, ev_data, rt_data;
  logic [10:0] ev_count;
  logic [8:0] rt_count;
  logic [31:0] lost_events, ev_overflows, rt_drops, phs_overruns, phs_packets;
  logic [15:0] hist [int];
  int trig_cyc [$];
  logic [63:0] trig_ts [$];
  logic [63:0] trig_ts_psd [$];
  int psd_cyc [$];
  int cyc = 0;
  int checks = 0, failures = 0;
  int phase = 1, nev = 0, npsd = 0, nphs = 0, phs_total = 0, ntrig2 = 0;
  logic [63:0] evw [$];
  logic [63:0] rtw [$];
  int rt_psd_n_g [2] = '{0, 0};

  always #5 clk = ~clk;
  always #3 rd_clk = ~rd_clk;

  channel_proc #(.PTRG_MAX(60), .EV_AW(10), .RT_AW(8), .NBINS(NB)) dut (.*);

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    hist[cyc] = dut.cond;
    if (trig && !rst) begin
      if (phase == 1) begin
        trig_cyc.push_back(cyc);
        psd_cyc.push_back(cyc);
        trig_ts.push_back(ts);
        trig_ts_psd.push_back(ts);
      end else ntrig2++;
    end
    cyc++;
    ts <= ts + 1;
  end

  // drain both FIFOs
  assign ev_rd = (ev_count != 0);
  assign rt_rd = (rt_count != 0);
  always @(posedge rd_clk) if (!rd_rst) begin
    if (ev_rd) evw.push_back(ev_data);
    if (rt_rd) rtw.push_back(rt_data);
  end

  task automatic check_event();
    automatic logic [15:0] w [$];
    automatic int tc;
    automatic logic [63:0] t;
    for (int q = 0; q < PW / 4; q++) begin
      automatic logic [63:0] d = evw.pop_front();
      for (int k = 0; k < 4; k++) w.push_back(d[16*k +: 16]);
    end
    tc = trig_cyc.pop_front();
    t  = trig_ts.pop_front();
    nev++;
    checks++;
    if ({w[3], w[2], w[1], w[0]} !== t) begin failures++; $display("event %0d ts %h expected %h", nev, {w[3], w[2], w[1], w[0]}, t); end
    checks++;
    if (w[PW-2] != 16'd1 || w[PW-1] != 16'h00EE) begin failures++; $display("event %0d trailer %h %h", nev, w[PW-2], w[PW-1]); end
    checks++;
    for (int i = 0; i < PW - 6; i++) if (w[4 + i] !== hist[tc - 5 - PT + i]) begin
      failures++; $display("event %0d sample %0d: %0d expected %0d", nev, i, w[4 + i], hist[tc - 5 - PT + i]); break;
    end
    checks++;
    if (!(hist[tc - 5] > cfg.threshold && hist[tc - 6] <= cfg.threshold)) begin failures++; $display("event %0d: trigger not at crossing", nev); end
  endtask

  task automatic check_psd();
    automatic logic [63:0] q1 = rtw.pop_front();
    automatic logic [63:0] q2 = rtw.pop_front();
    automatic int tc;
    automatic logic [63:0] t = trig_ts_psd.pop_front();
    automatic int pk = 0, ci = 0;
    automatic logic neutron;
    tc = psd_cyc.pop_front();
    for (int i = 0; i < PL; i++) begin
      automatic int x = int'(hist[tc - 5 + i]);
      if (x > pk) pk = x;
      if (x > 0) ci += x;
    end
    neutron = (longint'(ci) * 256 > longint'(cfg.slope) * pk);
    npsd++;
    checks++;
    if (q1[48:0] !== t[48:0]) begin failures++; $display("psd %0d ts", npsd); end
    checks++;
    if (q2[12:0] != 13'(pk) || q2[56:32] != 25'(ci) || q2[21:19] != 3'd0 ||
        q2[18:16] != (neutron ? 3'b100 : 3'b010)) begin
      failures++; $display("psd %0d: %h expected peak %0d ci %0d n %0d", npsd, q2, pk, ci, neutron);
    end
    rt_psd_n_g[neutron ? 0 : 1]++;
  endtask

  // one pulse: exponential decay with a short rise, amplitude in ADC counts
  task automatic pulse(input int amp, input int tau, input int gap);
    for (int i = 0; i < gap; i++) begin
      automatic real v = 100.0;
      if (i >= 2) v += amp * (1.0 - $exp(-(i - 2) / 1.5)) * $exp(-(i - 2) / real'(tau));
      drive(int'(v));
    end
  endtask

  task automatic drive(input int v);
    // four samples per clock: A and B on the rising edge, A and B on the falling edge
    @(posedge clk) #1;
    ddr_a = 12'(v + $urandom_range(2)); ddr_b = 12'(v + $urandom_range(2));
    @(negedge clk) #1;
    ddr_a = 12'(v + $urandom_range(2)); ddr_b = 12'(v + $urandom_range(2));
  endtask

  initial begin
    cfg = '0;
    cfg.filter_bypass = 1; cfg.trig_deriv = 0; cfg.threshold = 16'd600; cfg.offset = 16'd200;
    cfg.pwidth = 16'(PW); cfg.ptrg = 16'(PT); cfg.dts_m = 16'd20; cfg.dts_shift = 5'd4;
    cfg.psd_len = 16'(PL); cfg.slope = 16'h0900; cfg.phs_en = 0; cfg.phs_shift = 5'd6;
    cfg.dt_lo = 16'd0; cfg.dt_hi = 16'd63; cfg.dd_lo = 16'd0; cfg.dd_hi = 16'd10;
    rst = 1; rd_rst = 1; acq_en = 0; sdn_tick = 0; ddr_a = 100; ddr_b = 100;
    repeat (5) @(posedge clk);
    #1 rst = 0; rd_rst = 0;
    repeat (NB) @(posedge clk);
    #1 acq_en = 1;
    // phase 1: bypass, level trigger, PSD packets
    for (int n = 0; n < 60; n++) pulse($urandom_range(400, 1500), $urandom_range(3, 12), 90);
    repeat (200) @(posedge clk);
    #1 acq_en = 0;
    repeat (50) @(posedge clk);
    checks++;
    if (evw.size() != trig_cyc.size() * PW / 4 || rtw.size() != 2 * trig_cyc.size() || trig_cyc.size() != 60) begin
      failures++; $display("phase 1: %0d triggers, %0d event words, %0d rt words", trig_cyc.size(), evw.size(), rtw.size());
    end
    while (rtw.size() >= 2 && psd_cyc.size() > 0) check_psd();
    while (evw.size() >= PW / 4 && trig_cyc.size() > 0) check_event();
    checks++;
    if (rt_psd_n_g[0] == 0 || rt_psd_n_g[1] == 0) begin failures++; $display("classes not both seen: %0d %0d", rt_psd_n_g[0], rt_psd_n_g[1]); end
    // phase 2: DTS filter on, PHS packets at each tick
    phase = 2;
    evw.delete(); rtw.delete();
    cfg.filter_bypass = 0; cfg.phs_en = 1; cfg.threshold = 16'd150;
    repeat (20) @(posedge clk);
    #1 acq_en = 1;
    for (int tk = 0; tk < 4; tk++) begin
      for (int n = 0; n < 15; n++) pulse($urandom_range(400, 1500), $urandom_range(3, 12), 90);
      @(posedge clk) #1 sdn_tick = 1;
      @(posedge clk) #1 sdn_tick = 0;
      repeat (3 * (NB / 2 + 4) + 20) @(posedge clk);
    end
    #1 acq_en = 0;
    repeat (100) @(posedge clk);
    while (rtw.size() >= NB / 2 + 4) begin
      automatic logic [63:0] c1;
      void'(rtw.pop_front());
      for (int i = 0; i < NB / 2; i++) void'(rtw.pop_front());
      c1 = rtw.pop_front();
      void'(rtw.pop_front()); void'(rtw.pop_front());
      phs_total += int'(c1[15:0]);
      nphs++;
    end
    checks++;
    if (nphs != 4 || rtw.size() != 0 || phs_total != ntrig2 || ntrig2 != 60 || phs_overruns != 0) begin
      failures++; $display("phase 2: %0d packets, %0d left, total %0d, triggers %0d", nphs, rtw.size(), phs_total, ntrig2);
    end
    checks++;
    if (lost_events != 0 || ev_overflows != 0 || rt_drops != 0) failures++;
    $display("events %0d, psd %0d (n %0d, g %0d), phs packets %0d", nev, npsd, rt_psd_n_g[0], rt_psd_n_g[1], nphs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
