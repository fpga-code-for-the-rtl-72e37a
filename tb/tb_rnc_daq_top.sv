// tb_rnc_daq_top: end-to-end test of the whole acquisition system at its
// default parameters (two channels, 1024-bin spectra, 32 Q-word bursts).
//
// Detector pulses (fast rise, exponential decay, random amplitude, about
// 10 % of them followed by a pile-up pulse in the second half of the event
// window) are driven as 12-bit DDR samples into both channels. A host model
// configures the design with PCIe register writes, reads registers back
// (completions), and parses every packet the design sends: DMA 0 event
// packets, DMA 1 PSD or PHS packets and DMA 2 status words, checking
// addresses, ring positions, 4 KiB boundaries and packet contents.
// The run goes through these phases:
//   A  filter bypassed, level trigger, PSD packets
//   B  trapezoidal filter, level trigger, PHS packets, a double tick (overrun)
//   C  filter bypassed, derivative trigger, PSD packets
//   D  DMA stopped while pulses keep coming: event losses and dropped
//      PSD packets; then DMA restarted and everything drained
// Each mechanism is counted and a failure is counted for any that never
// happened. The synthesizer programming is checked on its serial port.
module tb_rnc_daq_top;
  import rnc_pkg::*;
  localparam int PW = 64, NB = 1024, QPP = 1 + NB / 2 + 3;
  logic adc_clk = 1'b0, adc_rst, pcie_clk = 1'b0, pcie_rst;
  logic [11:0] adc_ddr_a [2], adc_ddr_b [2];
  logic sdn_tick;
  logic pll_sclk, pll_sdata, pll_le;
  logic [15:0] completer_id = 16'h0100;
  logic [63:0] rx_tdata, tx_tdata;
  logic rx_tvalid, rx_tlast, rx_tready;
  logic [7:0] tx_tkeep;
  logic tx_tlast, tx_tvalid, tx_tready;

  int checks = 0, failures = 0;
  // mechanism counters
  int m_bypass = 0, m_filter = 0, m_level = 0, m_deriv = 0, m_pileup = 0, m_lost = 0, m_drop = 0;
  int m_psd = 0, m_phs = 0, m_overrun = 0, m_flush = 0, m_3dw = 0, m_4dw = 0, m_stat = 0, m_rdreg = 0, m_pll = 0;

  always #5 adc_clk = ~adc_clk;       // sampling clock
  always #8 pcie_clk = ~pcie_clk;     // endpoint user clock

  rnc_daq_top dut (.*);

  initial begin
    #20000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------------
  // host configuration kept by the testbench
  logic [63:0] base [4];
  logic [63:0] stat_addr = 64'h0000_0000_0800_0000;
  logic [31:0] ring_mask = 32'h0000_FFFF;
  int          exp_off [4] = '{0, 0, 0, 0};
  int          ndma [2] = '{0, 0};
  int          last_src = -1;
  logic [63:0] stream [4][$];          // payload Q-words per source
  logic [31:0] cpl [int];              // completion data by tag

  initial begin
    base[0] = 64'h0000_0000_1000_0000;  // below 4 GiB: 3-DW writes
    base[1] = 64'h0000_0002_0000_0000;  // above 4 GiB: 4-DW writes
    base[2] = 64'h0000_0000_3000_0000;
    base[3] = 64'h0000_0004_0000_0000;
  end

  // ------------------------------------------------------------------
  // transmit side: collect packets and interpret them as the host would
  logic [31:0] pk [$];
  always @(negedge pcie_clk) tx_tready = ($urandom_range(9) != 0);

  always @(posedge pcie_clk) if (!pcie_rst && tx_tvalid && tx_tready) begin
    pk.push_back(tx_tdata[31:0]);
    if (tx_tkeep == 8'hFF) pk.push_back(tx_tdata[63:32]);
    if (tx_tlast) begin
      handle_packet();
      pk.delete();
    end
  end

  task automatic handle_packet();
    automatic logic [2:0] fmt = pk[0][31:29];
    automatic logic [4:0] typ = pk[0][28:24];
    automatic int len = int'(pk[0][9:0]);
    automatic int hdr;
    automatic logic [63:0] addr;
    automatic int s;
    checks++;
    if (typ == 5'b01010) begin                          // completion
      if (fmt != 3'b010 || len != 1 || pk.size() != 4 || pk[1][31:16] != completer_id) begin
        failures++; $display("bad completion");
      end
      cpl[int'(pk[2][15:8])] = pk[3];
      return;
    end
    if (typ != 5'b00000 || fmt[1] != 1'b1) begin failures++; $display("unknown packet %h", pk[0]); return; end
    hdr  = fmt[0] ? 4 : 3;
    addr = fmt[0] ? {pk[2], pk[3]} : {32'h0, pk[2]};
    if (fmt[0]) m_4dw++; else m_3dw++;
    if (fmt[0] != (addr[63:32] != 0)) begin failures++; $display("header size does not match address %h", addr); end
    if (pk.size() != hdr + len || len % 2 != 0) begin failures++; $display("packet length %0d, %0d DW", len, pk.size()); return; end
    if ((addr & 64'hFFF) + 64'(4 * len) > 64'h1000) begin failures++; $display("write crosses 4 KiB at %h", addr); end
    if (addr == stat_addr) begin                        // DMA 2 status word
      automatic logic [63:0] st = {pk[hdr + 1], pk[hdr]};
      m_stat++;
      if (len != 2 || last_src < 0 ||
          st[63:62] != 2'(last_src >> 1) || st[61:60] != 2'(last_src & 1) ||
          st[59:44] != 16'(ndma[0]) || st[43:28] != 16'(ndma[1]) || st[27:0] != 28'(exp_off[last_src])) begin
        failures++; $display("status %h after source %0d", st, last_src);
      end
      last_src = -1;
      return;
    end
    s = -1;
    for (int i = 0; i < 4; i++) if (addr >= base[i] && addr < base[i] + 64'(ring_mask) + 1) s = i;
    if (s < 0) begin failures++; $display("write to %h outside the rings", addr); return; end
    if (last_src >= 0) begin failures++; $display("data write without status write before"); end
    if (addr != base[s] + 64'(exp_off[s])) begin failures++; $display("source %0d at %h, expected offset %h", s, addr, exp_off[s]); end
    if (exp_off[s] + 4 * len > int'(ring_mask) + 1) begin failures++; $display("write past ring end"); end
    for (int i = 0; i < len / 2; i++) stream[s].push_back({pk[hdr + 2*i + 1], pk[hdr + 2*i]});
    exp_off[s] = (exp_off[s] + 4 * len) & int'(ring_mask);
    if (len < 32 && ((exp_off[s] & 'hFFF) != 0)) m_flush++;
    ndma[s >> 1]++;
    last_src = s;
  endtask

  // ------------------------------------------------------------------
  // receive side: register accesses
  task automatic beat(input logic [63:0] d, input logic last);
    @(negedge pcie_clk);
    rx_tvalid = 1; rx_tdata = d; rx_tlast = last;
    @(negedge pcie_clk);
    rx_tvalid = 0;
  endtask

  task automatic reg_write(input int idx, input logic [31:0] d);
    beat({completer_id ^ 16'hFF00, 8'h00, 8'h0F, 3'b010, 5'b0, 14'h0, 10'd1}, 0);
    beat({d, 32'hF000_0000 | 32'(idx * 4)}, 1);
  endtask

  int tag_n = 0;
  task automatic reg_read(input int idx, output logic [31:0] d);
    automatic int tag = tag_n % 256;
    tag_n++;
    cpl.delete(tag);
    beat({16'h0000, 8'(tag), 8'h0F, 3'b000, 5'b0, 14'h0, 10'd1}, 0);
    beat({32'h0, 32'hF000_0000 | 32'(idx * 4)}, 1);
    for (int i = 0; i < 200 && !cpl.exists(tag); i++) @(posedge pcie_clk);
    checks++;
    if (!cpl.exists(tag)) begin failures++; $display("no completion for register %0d", idx); d = '0; end
    else begin d = cpl[tag]; m_rdreg++; end
  endtask

  // ------------------------------------------------------------------
  // detector pulse generator, one per channel
  logic gen_on = 1'b0;
  int   gap_min = 150, gap_max = 250;
  int   pulses [2] = '{0, 0}, piles [2] = '{0, 0};
  int   acyc = 0;
  int   next_at [2] = '{50, 80};
  int   t0 [2][2] = '{'{-100000, -100000}, '{-100000, -100000}};
  real  amp [2][2], tau [2][2];
  int   trig_n [2] = '{0, 0};

  function automatic real shape(input int c, input int k);
    automatic int dt = acyc - t0[c][k];
    if (dt < 0 || dt > 400) return 0.0;
    return amp[c][k] * (1.0 - $exp(-dt / 1.5)) * $exp(-dt / tau[c][k]);
  endfunction

  always @(posedge adc_clk) begin
    acyc++;
    for (int c = 0; c < 2; c++) begin
      if (gen_on && acyc >= next_at[c]) begin
        t0[c][0] = acyc; amp[c][0] = real'($urandom_range(400, 1500)); tau[c][0] = real'($urandom_range(3, 12));
        pulses[c]++;
        if ($urandom_range(9) == 0) begin
          t0[c][1] = acyc + $urandom_range(40, 55); amp[c][1] = real'($urandom_range(400, 1500)); tau[c][1] = 6.0;
          pulses[c]++; piles[c]++;
        end
        next_at[c] = acyc + $urandom_range(gap_min, gap_max);
      end
    end
  end

  always @(posedge adc_clk) begin
    #1;
    for (int c = 0; c < 2; c++) begin
      automatic int v = 100 + int'(shape(c, 0) + shape(c, 1));
      adc_ddr_a[c] = 12'(v + $urandom_range(2)); adc_ddr_b[c] = 12'(v + $urandom_range(2));
    end
  end
  always @(negedge adc_clk) begin
    #1;
    for (int c = 0; c < 2; c++) begin
      automatic int v = 100 + int'(shape(c, 0) + shape(c, 1));
      adc_ddr_a[c] = 12'(v + $urandom_range(2)); adc_ddr_b[c] = 12'(v + $urandom_range(2));
    end
  end

  always @(posedge adc_clk) begin
    if (dut.g_ch[0].g_on.u_ch.trig) trig_n[0]++;
    if (dut.g_ch[1].g_on.u_ch.trig) trig_n[1]++;
  end

  // ------------------------------------------------------------------
  // synthesizer port monitor
  logic [23:0] pll_sh;
  logic [23:0] pll_got [$];
  always @(posedge pll_sclk) pll_sh = {pll_sh[22:0], pll_sdata};
  always @(posedge pll_le) pll_got.push_back(pll_sh);

  // ------------------------------------------------------------------
  // stream parsers
  int ev_count_n, ev_psum, ev_ext;

  task automatic parse_events(input int s);
    automatic logic [15:0] w [$];
    automatic longint last_ts = -1;
    while (stream[s].size() > 0) begin
      automatic logic [63:0] q = stream[s].pop_front();
      for (int k = 0; k < 4; k++) w.push_back(q[16*k +: 16]);
    end
    while (w.size() >= PW) begin
      automatic int n = 0;
      automatic logic [63:0] t = {w[3], w[2], w[1], w[0]};
      automatic int pos = PW;
      while (pos <= w.size() && w[pos - 1][7:0] != EVENT_END_TAG && n < 8) begin pos += PW; n++; end
      checks++;
      if (pos > w.size() || int'(w[pos - 1][15:8]) != n) begin
        failures++; $display("source %0d: broken event (n %0d)", s, n); return;
      end
      if (longint'(t) <= last_ts) begin failures++; $display("time stamps out of order"); end
      last_ts = longint'(t);
      ev_count_n++;
      ev_psum += int'(w[pos - 2]);
      if (n > 0) ev_ext++;
      for (int i = 0; i < pos; i++) void'(w.pop_front());
    end
    checks++;
    if (w.size() != 0) begin failures++; $display("source %0d: %0d words left", s, w.size()); end
  endtask

  int psd_n, psd_pu;
  task automatic parse_psd(input int s);
    while (stream[s].size() >= 2) begin
      automatic logic [63:0] q1 = stream[s].pop_front();
      automatic logic [63:0] q2 = stream[s].pop_front();
      checks++;
      if (q1[63:49] != 0 || !(q2[18:16] == 3'b100 || q2[18:16] == 3'b010) || q2[12:0] == 0) begin
        failures++; $display("bad PSD packet %h %h", q1, q2);
      end
      psd_n++;
      psd_pu += int'(q2[21:19]);
    end
    checks++;
    if (stream[s].size() != 0) begin failures++; $display("odd PSD Q-word"); end
  endtask

  int phs_tot;
  task automatic parse_phs(input int s);
    while (stream[s].size() >= QPP) begin
      automatic logic [63:0] h = stream[s].pop_front();
      automatic int sum = 0;
      automatic logic [63:0] c1, c2, c3;
      for (int i = 0; i < NB / 2; i++) begin
        automatic logic [63:0] q = stream[s].pop_front();
        sum += int'(q[15:0]) + int'(q[31:16]) + int'(q[47:32]) + int'(q[63:48]);
      end
      c1 = stream[s].pop_front(); c2 = stream[s].pop_front(); c3 = stream[s].pop_front();
      m_phs++;
      checks++;
      if (h[63:48] != 0 || sum != int'(c1[47:32]) || int'(c2[15:0]) + int'(c2[31:16]) != int'(c1[47:32]) ||
          int'(c1[47:32]) + int'(c1[31:16]) != int'(c1[15:0])) begin
        failures++; $display("PHS packet: bins %0d, counts %h %h", sum, c1, c2);
      end
      phs_tot += int'(c1[15:0]);
    end
    checks++;
    if (stream[s].size() != 0) begin failures++; $display("PHS stream: %0d Q-words left", stream[s].size()); end
  endtask

  // run pulses for a number of sampling clocks, then let the DMA flush
  task automatic run(input int cycles);
    @(posedge adc_clk) gen_on = 1;
    repeat (cycles) @(posedge adc_clk);
    gen_on = 0;
    repeat (600) @(posedge adc_clk);
  endtask

  task automatic drain();
    repeat (2 * 4096 + 3000) @(posedge pcie_clk);
  endtask

  logic [31:0] ctrl;
  task automatic set_ctrl(input logic acq, input logic byp, input logic der, input logic phs, input logic dma);
    ctrl = {23'h0, dma, 1'b0, 1'b0, 1'b0, 1'b0, phs, der, byp, acq};
    reg_write(R_CTRL, ctrl);
    repeat (10) @(posedge pcie_clk);
  endtask

  task automatic phase_check(input string name, input int t0n, input int t1n, input logic psd_mode, input int lost);
    // every trigger is in an event (as its first or a pile-up trigger) or lost
    checks++;
    if (ev_psum + lost != (trig_n[0] - t0n) + (trig_n[1] - t1n)) begin
      failures++; $display("%s: P sum %0d + lost %0d, triggers %0d", name, ev_psum, lost, trig_n[0] - t0n + trig_n[1] - t1n);
    end
    $display("%s: %0d events (%0d extended), %0d triggers", name, ev_count_n, ev_ext, trig_n[0] - t0n + trig_n[1] - t1n);
  endtask

  initial begin
    automatic logic [31:0] d;
    automatic int p0, p1, tA0, tA1;
    automatic logic [23:0] pw [11];
    adc_rst = 1; pcie_rst = 1; sdn_tick = 0; rx_tvalid = 0; rx_tdata = 0; rx_tlast = 0;
    for (int c = 0; c < 2; c++) begin adc_ddr_a[c] = 100; adc_ddr_b[c] = 100; end
    repeat (10) @(posedge pcie_clk);
    adc_rst = 0; pcie_rst = 0;
    repeat (NB) @(posedge adc_clk);     // spectrum banks cleared after reset

    // identification and reset values
    reg_read(R_ID, d);
    checks++; if (d != ID_VALUE) begin failures++; $display("ID %h", d); end
    reg_read(R_WINDOW, d);
    checks++; if (d != {16'd16, 16'd64}) begin failures++; $display("WINDOW %h", d); end

    // host buffers
    for (int s = 0; s < 4; s++) begin
      reg_write(R_DMA_BASE + 2 * s, base[s][31:0]);
      reg_write(R_DMA_BASE + 2 * s + 1, base[s][63:32]);
    end
    reg_write(R_STAT_LO, stat_addr[31:0]);
    reg_write(R_STAT_HI, stat_addr[63:32]);
    reg_read(R_DMA_BASE + 3, d);
    checks++; if (d != base[1][63:32]) begin failures++; $display("base readback %h", d); end

    // synthesizer programming
    for (int i = 0; i < 11; i++) begin pw[i] = 24'($urandom); reg_write(R_PLL0 + i, 32'(pw[i])); end
    reg_write(R_CTRL, 32'h80);
    repeat (11 * 49 * 4 + 50) @(posedge pcie_clk);
    checks++;
    if (pll_got.size() != 11) begin failures++; $display("%0d synthesizer words", pll_got.size()); end
    else begin
      m_pll++;
      foreach (pw[i]) if (pll_got[i] != pw[i]) begin failures++; $display("synthesizer word %0d", i); break; end
    end

    // ---------------- phase A: bypass, level trigger, PSD ----------------
    reg_write(R_THRESH, {16'd200, 16'd400});
    set_ctrl(0, 1, 0, 0, 1);
    set_ctrl(1, 1, 0, 0, 1);
    tA0 = trig_n[0]; tA1 = trig_n[1]; p0 = pulses[0]; p1 = pulses[1];
    run(20000);
    set_ctrl(0, 1, 0, 0, 1);
    drain();
    ev_count_n = 0; ev_psum = 0; ev_ext = 0; psd_n = 0; psd_pu = 0;
    parse_events(0); parse_events(1); parse_psd(2); parse_psd(3);
    phase_check("A", tA0, tA1, 1, 0);
    checks++;
    if (trig_n[0] - tA0 != pulses[0] - p0 || trig_n[1] - tA1 != pulses[1] - p1) begin
      failures++; $display("A: %0d/%0d triggers for %0d/%0d pulses", trig_n[0] - tA0, trig_n[1] - tA1, pulses[0] - p0, pulses[1] - p1);
    end
    checks++;
    if (psd_n + psd_pu != trig_n[0] - tA0 + trig_n[1] - tA1) begin failures++; $display("A: %0d PSD packets", psd_n); end
    if (ev_count_n > 0) begin m_bypass++; m_level++; end
    if (ev_ext > 0) m_pileup++;
    if (psd_n > 0) m_psd++;

    // ---------------- phase B: DTS filter, level trigger, PHS ----------------
    reg_write(R_THRESH, {16'd200, 16'd150});
    set_ctrl(0, 0, 0, 1, 1);
    set_ctrl(1, 0, 0, 1, 1);
    tA0 = trig_n[0]; tA1 = trig_n[1]; p0 = pulses[0]; p1 = pulses[1];
    run(8000);
    @(posedge adc_clk) sdn_tick = 1;
    @(posedge adc_clk) sdn_tick = 0;
    repeat (100) @(posedge adc_clk);
    @(posedge adc_clk) sdn_tick = 1;        // too early: the packet is still being sent
    @(posedge adc_clk) sdn_tick = 0;
    run(8000);
    repeat (4000) @(posedge adc_clk);
    @(posedge adc_clk) sdn_tick = 1;
    @(posedge adc_clk) sdn_tick = 0;
    repeat (4000) @(posedge adc_clk);
    set_ctrl(0, 0, 0, 1, 1);
    drain();
    ev_count_n = 0; ev_psum = 0; ev_ext = 0; phs_tot = 0;
    parse_events(0); parse_events(1); parse_phs(2); parse_phs(3);
    phase_check("B", tA0, tA1, 0, 0);
    checks++;
    if (phs_tot != trig_n[0] - tA0 + trig_n[1] - tA1 || m_phs != 4) begin
      failures++; $display("B: %0d PHS packets, %0d counted events, %0d triggers", m_phs, phs_tot, trig_n[0] - tA0 + trig_n[1] - tA1);
    end
    if (ev_count_n > 0) m_filter++;
    if (dut.g_ch[0].g_on.u_ch.phs_overruns > 0 && dut.g_ch[1].g_on.u_ch.phs_overruns > 0) m_overrun++;

    // ---------------- phase C: bypass, derivative trigger, PSD ----------------
    reg_write(R_THRESH, {16'd200, 16'd150});
    set_ctrl(0, 1, 1, 0, 1);
    set_ctrl(1, 1, 1, 0, 1);
    tA0 = trig_n[0]; tA1 = trig_n[1]; p0 = pulses[0]; p1 = pulses[1];
    run(15000);
    set_ctrl(0, 1, 1, 0, 1);
    drain();
    ev_count_n = 0; ev_psum = 0; ev_ext = 0; psd_n = 0; psd_pu = 0;
    parse_events(0); parse_events(1); parse_psd(2); parse_psd(3);
    phase_check("C", tA0, tA1, 1, 0);
    checks++;
    if (trig_n[0] - tA0 != pulses[0] - p0 || trig_n[1] - tA1 != pulses[1] - p1) begin
      failures++; $display("C: %0d/%0d triggers for %0d/%0d pulses", trig_n[0] - tA0, trig_n[1] - tA1, pulses[0] - p0, pulses[1] - p1);
    end
    if (ev_count_n > 0) m_deriv++;
    if (psd_n > 0 && m_phs > 0) m_psd++;

    // ---------------- phase D: DMA stopped, buffers overflow ----------------
    reg_write(R_THRESH, {16'd200, 16'd400});
    set_ctrl(0, 1, 0, 0, 0);
    set_ctrl(1, 1, 0, 0, 0);
    tA0 = trig_n[0]; tA1 = trig_n[1];
    gap_min = 70; gap_max = 90;
    run(60000);
    set_ctrl(0, 1, 0, 0, 0);
    reg_read(R_LOST, d);
    checks++;
    if (d[23:16] == 0 || d[31:24] == 0) begin failures++; $display("loss register %h", d); end
    set_ctrl(0, 1, 0, 0, 1);
    drain(); drain();
    ev_count_n = 0; ev_psum = 0; ev_ext = 0; psd_n = 0; psd_pu = 0;
    parse_events(0); parse_events(1); parse_psd(2); parse_psd(3);
    phase_check("D", tA0, tA1, 1, int'(dut.g_ch[0].g_on.u_ch.lost_events + dut.g_ch[1].g_on.u_ch.lost_events));
    if (dut.g_ch[0].g_on.u_ch.lost_events > 0 && dut.g_ch[1].g_on.u_ch.lost_events > 0) m_lost++;
    if (dut.g_ch[0].g_on.u_ch.rt_drops > 0 && dut.g_ch[1].g_on.u_ch.rt_drops > 0) m_drop++;
    checks++;
    if (dut.g_ch[0].g_on.u_ch.ev_overflows != 0 || dut.g_ch[1].g_on.u_ch.ev_overflows != 0) begin
      failures++; $display("event words dropped inside a packet");
    end

    // ---------------- every mechanism must have happened ----------------
    $display("bypass %0d filter %0d level %0d deriv %0d pileup %0d lost %0d drop %0d psd %0d phs %0d overrun %0d",
             m_bypass, m_filter, m_level, m_deriv, m_pileup, m_lost, m_drop, m_psd, m_phs, m_overrun);
    $display("flush %0d 3dw %0d 4dw %0d status %0d regread %0d pll %0d", m_flush, m_3dw, m_4dw, m_stat, m_rdreg, m_pll);
    begin
      automatic int m [16] = '{m_bypass, m_filter, m_level, m_deriv, m_pileup, m_lost, m_drop, m_psd - 1,
                                m_phs, m_overrun, m_flush, m_3dw, m_4dw, m_stat, m_rdreg, m_pll};
      foreach (m[i]) begin
        checks++;
        if (m[i] <= 0) begin failures++; $display("mechanism %0d never happened", i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
