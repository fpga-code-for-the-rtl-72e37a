// tb_phs_counts: random PSD events (neutron, gamma, LED, with and without
// pileup, some out of range) are sent, then an SDN tick. The packet is read
// with random back-pressure and compared word by word with spectra and
// counters accumulated here: header time stamp, the NBINS/2 bin words laid
// out as {N(2k+1), N(2k), g(2k+1), g(2k)}, and the three count words. Events
// arriving while the packet is sent must land in the next packet, whose
// spectra must start from zero. A tick during the readout is an overrun.
module tb_phs_counts;
  import rnc_pkg::*;
  localparam int NB = 64;
  logic clk = 1'b0, rst;
  logic in_valid, use_ci, sdn_tick, out_valid, out_last, out_ready;
  logic [63:0] in_data, ts, out_data;
  logic [4:0] shift;
  logic [15:0] dt_lo, dt_hi, dd_lo, dd_hi;
  logic [31:0] overruns, packets;
  int checks = 0, failures = 0;

  int hn [NB], hg [NB];
  int c_led, c_single, c_pu, c_total, c_n, c_g, c_ndt, c_ndd, c_gdt, c_gdd;
  logic [63:0] pkt [$];
  logic [47:0] tick_ts;

  always #5 clk = ~clk;

  phs_counts #(.NBINS(NB)) dut (
    .clk, .rst, .in_valid, .in_data, .use_ci, .shift, .dt_lo, .dt_hi, .dd_lo, .dd_hi,
    .sdn_tick, .ts, .out_valid, .out_data, .out_last, .out_ready, .overruns, .packets
  );

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    #1;
    ts = ts + 1;
    out_ready = ($urandom % 3) != 0;
  end

  always @(posedge clk) if (out_valid && out_ready) pkt.push_back(out_data);

  task automatic clear_model();
    for (int i = 0; i < NB; i++) begin hn[i] = 0; hg[i] = 0; end
    c_led = 0; c_single = 0; c_pu = 0; c_total = 0; c_n = 0; c_g = 0;
    c_ndt = 0; c_ndd = 0; c_gdt = 0; c_gdd = 0;
  endtask

  task automatic send_event(input int peak, input int ci, input ptype_e pt, input int pu);
    psd_qw2_t w;
    int v, bin;
    w = '0; w.peak = 13'(peak); w.ci = 25'(ci); w.ptype = pt; w.pu = 3'(pu);
    @(negedge clk); in_valid = 1; in_data = {15'd0, 49'(ts)};
    @(negedge clk); in_data = w;
    @(negedge clk); in_valid = 0;
    repeat ($urandom % 3) @(negedge clk);
    v = use_ci ? ci : peak;
    bin = v >> shift;
    c_total++;
    if (pu != 0) c_pu++;
    else begin
      c_single++;
      if (pt == PT_LED) c_led++;
      if (pt == PT_NEUTRON) begin
        c_n++;
        if (bin < NB) hn[bin]++;
        if (bin >= dt_lo && bin <= dt_hi) c_ndt++;
        if (bin >= dd_lo && bin <= dd_hi) c_ndd++;
      end
      if (pt == PT_GAMMA) begin
        c_g++;
        if (bin < NB) hg[bin]++;
        if (bin >= dt_lo && bin <= dt_hi) c_gdt++;
        if (bin >= dd_lo && bin <= dd_hi) c_gdd++;
      end
    end
  endtask

  task automatic random_events(input int n);
    for (int i = 0; i < n; i++) begin
      int r = $urandom % 10;
      ptype_e pt = (r < 5) ? PT_NEUTRON : (r < 9 ? PT_GAMMA : PT_LED);
      send_event($urandom % 8192, $urandom % 40000, pt, ($urandom % 6 == 0) ? 1 + $urandom % 7 : 0);
    end
  endtask

  logic [63:0] expq [$];

  // the tick closes the cycle: the expected packet is built from the model
  task automatic tick();
    @(negedge clk); sdn_tick = 1; tick_ts = ts[47:0];
    @(negedge clk); sdn_tick = 0;
    expq.delete();
    expq.push_back({16'h0, tick_ts});
    for (int k = 0; k < NB / 2; k++)
      expq.push_back({16'(hn[2*k+1]), 16'(hn[2*k]), 16'(hg[2*k+1]), 16'(hg[2*k])});
    expq.push_back({16'(c_led), 16'(c_single), 16'(c_pu), 16'(c_total)});
    expq.push_back({32'd0, 16'(c_g), 16'(c_n)});
    expq.push_back({16'(c_ndt), 16'(c_ndd), 16'(c_gdt), 16'(c_gdd)});
    clear_model();
  endtask

  task automatic check_packet(input string name);
    wait (pkt.size() == NB / 2 + 4);
    repeat (4) @(posedge clk);
    checks++;
    if (pkt.size() != NB / 2 + 4) begin failures++; $display("%s: %0d words", name, pkt.size()); end
    for (int k = 0; k < NB / 2 + 4; k++) begin
      checks++;
      if (pkt[k] !== expq[k]) begin failures++; $display("%s: word %0d: %h expected %h", name, k, pkt[k], expq[k]); end
    end
    pkt.delete();
  endtask

  initial begin
    rst = 1; in_valid = 0; in_data = 0; sdn_tick = 0; ts = 64'h55_0000_0000;
    use_ci = 0; shift = 5'd7; dt_lo = 16'd40; dt_hi = 16'd50; dd_lo = 16'd5; dd_hi = 16'd12;
    clear_model();
    repeat (3) @(posedge clk);
    #2 rst = 0;
    repeat (NB) @(posedge clk);   // banks are cleared after reset
    // cycle 1: peak-based spectra (8192 >> 7 = 64 bins)
    random_events(300);
    tick();
    // cycle 2: CI-based; events are sent while packet 1 is read out
    fork
      check_packet("cycle 1");
      begin
        use_ci = 1; shift = 5'd9;
        random_events(40);
      end
    join
    random_events(100);
    tick();
    check_packet("cycle 2");
    // overrun: a second tick during the readout
    random_events(10);
    tick();
    repeat (4) @(negedge clk);
    @(negedge clk); sdn_tick = 1;
    @(negedge clk); sdn_tick = 0;
    check_packet("cycle 3");
    checks++;
    if (overruns != 32'd1 || packets != 32'd3) begin
      failures++;
      $display("overruns=%0d packets=%0d", overruns, packets);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
