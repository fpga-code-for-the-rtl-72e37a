// tb_workload_phs: the real-time spectrum workload at its full rate, on the
// whole design with every parameter at its default.
//
// Both channels receive Poisson-distributed pulses at 500 kevents/s each
// (mean spacing 800 sampling clocks), so some pulses pile up:
// channel 0 short gamma-like pulses, channel 1 long neutron-like pulses.
// The design runs in PHS mode with a real-time cycle of 2 ms (800 000
// sampling clocks) for two cycles, streaming events on DMA 0 and spectra on
// DMA 1 at the same time. The host model checks every packet as in the
// end-to-end test, and then that:
//  * each channel sent one PHS packet per cycle, with no overrun, no buffer
//    overflow and no dropped packet (the only losses are triggers that fall
//    on the two trailer words of an event);
//  * the total counts equal the PSD results produced, the triggers missing
//    from them are those absorbed by piled-up events, and the spectra add
//    up to the single-event counts;
//  * channel 0 is classed as gamma and channel 1 as neutron (>= 95 %);
//  * piled-up events are seen, at the share a Poisson input gives (0.5 % .. 20 %);
//  * every trigger is in the event stream (sum of P) or counted as lost;
//  * the measured rate is 500 kevents/s within 10 %.
module tb_workload_phs;
  import rnc_pkg::*;
  localparam int PW = 64, NB = 1024, QPP = 1 + NB / 2 + 3;
  localparam int SDN = 800000;        // 2 ms at 400 MHz
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
    #60000000;
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
  // ------------------------------------------------------------------
  // Poisson pulse generator, one per channel
  logic gen_on = 1'b0;
  int   acyc = 0;
  int   next_at [2] = '{100, 300};
  int   t0 [2][4];
  real  amp [2][4];
  int   slot [2] = '{0, 0};
  int   trig_n [2] = '{0, 0};
  int   pulses [2] = '{0, 0};
  int   psd_n [2] = '{0, 0};
  real  taus [2] = '{4.0, 12.0};

  initial for (int c = 0; c < 2; c++) for (int k = 0; k < 4; k++) begin t0[c][k] = -100000; amp[c][k] = 0.0; end

  function automatic real shape(input int c);
    automatic real v = 0.0;
    for (int k = 0; k < 4; k++) begin
      automatic int dt = acyc - t0[c][k];
      if (dt >= 0 && dt < 300) v += amp[c][k] * (1.0 - $exp(-dt / 1.5)) * $exp(-dt / taus[c]);
    end
    return v;
  endfunction

  always @(posedge adc_clk) begin
    acyc++;
    for (int c = 0; c < 2; c++) if (gen_on && acyc >= next_at[c]) begin
      t0[c][slot[c]] = acyc; amp[c][slot[c]] = real'($urandom_range(400, 1500));
      slot[c] = (slot[c] + 1) % 4;
      pulses[c]++;
      // exponential spacing, mean 800 clocks, at least 3
      next_at[c] = acyc + 3 + int'(-797.0 * $ln(1.0 - real'($urandom_range(0, 99999)) / 100000.0));
    end
  end

  always @(posedge adc_clk) begin
    #1;
    for (int c = 0; c < 2; c++) begin
      automatic int v = 10 + int'(shape(c));
      adc_ddr_a[c] = 12'(v + $urandom_range(2)); adc_ddr_b[c] = 12'(v + $urandom_range(2));
    end
  end
  always @(negedge adc_clk) begin
    #1;
    for (int c = 0; c < 2; c++) begin
      automatic int v = 10 + int'(shape(c));
      adc_ddr_a[c] = 12'(v + $urandom_range(2)); adc_ddr_b[c] = 12'(v + $urandom_range(2));
    end
  end

  always @(posedge adc_clk) begin
    if (dut.g_ch[0].g_on.u_ch.trig) trig_n[0]++;
    if (dut.g_ch[1].g_on.u_ch.trig) trig_n[1]++;
    if (dut.g_ch[0].g_on.u_ch.psd_valid) psd_n[0]++;
    if (dut.g_ch[1].g_on.u_ch.psd_valid) psd_n[1]++;
  end

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
      while (pos <= w.size() && !(w[pos - 1][7:0] == EVENT_END_TAG && int'(w[pos - 1][15:8]) == n) && n < 256) begin pos += PW; n++; end
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

  int phs_pk [2] = '{0, 0};
  int tot [2] = '{0, 0}, single [2] = '{0, 0}, pile [2] = '{0, 0}, ntot [2] = '{0, 0}, gtot [2] = '{0, 0};
  task automatic parse_phs(input int s);
    automatic int c = s - 2;
    while (stream[s].size() >= QPP) begin
      automatic logic [63:0] h = stream[s].pop_front();
      automatic int sum = 0;
      automatic logic [63:0] c1, c2, c3;
      for (int i = 0; i < NB / 2; i++) begin
        automatic logic [63:0] q = stream[s].pop_front();
        sum += int'(q[15:0]) + int'(q[31:16]) + int'(q[47:32]) + int'(q[63:48]);
      end
      c1 = stream[s].pop_front(); c2 = stream[s].pop_front(); c3 = stream[s].pop_front();
      phs_pk[c]++;
      checks++;
      if (h[63:48] != 0 || sum != int'(c1[47:32]) || int'(c2[15:0]) + int'(c2[31:16]) != int'(c1[47:32]) ||
          int'(c1[47:32]) + int'(c1[31:16]) != int'(c1[15:0])) begin
        failures++; $display("PHS packet: bins %0d, counts %h %h", sum, c1, c2);
      end
      tot[c] += int'(c1[15:0]); single[c] += int'(c1[47:32]); pile[c] += int'(c1[31:16]);
      ntot[c] += int'(c2[15:0]); gtot[c] += int'(c2[31:16]);
    end
    checks++;
    if (stream[s].size() != 0) begin failures++; $display("PHS stream: %0d Q-words left", stream[s].size()); end
  endtask

  initial begin
    automatic logic [31:0] d;
    adc_rst = 1; pcie_rst = 1; sdn_tick = 0; rx_tvalid = 0; rx_tdata = 0; rx_tlast = 0;
    for (int c = 0; c < 2; c++) begin adc_ddr_a[c] = 10; adc_ddr_b[c] = 10; end
    repeat (10) @(posedge pcie_clk);
    adc_rst = 0; pcie_rst = 0;
    repeat (NB) @(posedge adc_clk);
    for (int s = 0; s < 4; s++) begin
      reg_write(R_DMA_BASE + 2 * s, base[s][31:0]);
      reg_write(R_DMA_BASE + 2 * s + 1, base[s][63:32]);
    end
    reg_write(R_STAT_LO, stat_addr[31:0]);
    reg_write(R_STAT_HI, stat_addr[63:32]);
    reg_write(R_THRESH, {16'd0, 16'd300});
    reg_write(R_PSD, {16'h0B00, 16'd32});          // separation slope 11.0
    reg_write(R_PHS, 32'd3);                        // peak >> 3: 1024 bins over 0..8191
    // acquisition on: filter bypassed, level trigger, PHS mode, DMA on
    reg_write(R_CTRL, 32'h109);
    repeat (10) @(posedge pcie_clk);
    @(posedge adc_clk) gen_on = 1;
    for (int cyc = 0; cyc < 2; cyc++) begin
      // the pulses stop 400 clocks before the last tick, so that every PSD
      // result is in the spectra sent
      repeat (SDN - 401) @(posedge adc_clk);
      gen_on = (cyc == 0);
      repeat (400) @(posedge adc_clk);
      sdn_tick = 1;
      @(posedge adc_clk) sdn_tick = 0;
    end
    reg_write(R_CTRL, 32'h108);
    repeat (2 * 4096 + 4000) @(posedge pcie_clk);
    reg_read(R_LOST, d);
    checks++;
    if (d[15:0] != 16'h0202 || d[23:16] != 8'(dut.g_ch[0].g_on.u_ch.lost_events) ||
        d[31:24] != 8'(dut.g_ch[1].g_on.u_ch.lost_events)) begin failures++; $display("loss register %h", d); end
    ev_count_n = 0; ev_psum = 0; ev_ext = 0;
    parse_events(0); parse_events(1); parse_phs(2); parse_phs(3);
    checks++;
    if (ev_psum + int'(dut.g_ch[0].g_on.u_ch.lost_events + dut.g_ch[1].g_on.u_ch.lost_events) != trig_n[0] + trig_n[1]) begin failures++; $display("P sum %0d, triggers %0d", ev_psum, trig_n[0] + trig_n[1]); end
    for (int c = 0; c < 2; c++) begin
      automatic real rate;
      rate = real'(pulses[c]) / (2.0 * real'(SDN) * 2.5e-9);
      $display("channel %0d: %0d pulses, %0d triggers, %0d PHS packets, total %0d, single %0d, pile-up %0d, n %0d, gamma %0d, %0.0f ev/s",
               c, pulses[c], trig_n[c], phs_pk[c], tot[c], single[c], pile[c], ntot[c], gtot[c], rate);
      checks++;
      if (phs_pk[c] != 2 || tot[c] != psd_n[c] / 2 || trig_n[c] - tot[c] < pile[c] || trig_n[c] - tot[c] > 7 * pile[c]) begin failures++; $display("channel %0d: packets or totals wrong", c); end
      checks++;
      if (pile[c] * 200 < tot[c] || pile[c] * 5 > tot[c]) begin failures++; $display("channel %0d: pile-up share", c); end
      checks++;
      if (rate < 450000.0 || rate > 550000.0) begin failures++; $display("channel %0d: rate", c); end
    end
    checks++;
    if (gtot[0] * 100 < single[0] * 95 || ntot[1] * 100 < single[1] * 95) begin failures++; $display("classification"); end
    checks++;
    if (dut.g_ch[0].g_on.u_ch.phs_overruns != 0 || dut.g_ch[1].g_on.u_ch.phs_overruns != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
