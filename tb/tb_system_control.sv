// tb_system_control: writes every writable register and reads it back
// through the completion port, checks the read-only registers (loss count,
// identification), the decoding of the configuration fields, the DMA and
// synthesizer words, and the self-clearing pll_start pulse.
module tb_system_control;
  import rnc_pkg::*;
  logic clk = 1'b0, rst;
  logic wr_en, rd_req, cpl_valid, cpl_ready;
  logic [4:0] wr_idx, rd_idx;
  logic [31:0] wr_data, cpl_data, lost_count, ring_mask;
  logic [15:0] rd_req_id, cpl_req_id;
  logic [7:0] rd_tag, cpl_tag;
  logic [6:0] rd_lower_addr, cpl_lower_addr;
  chan_cfg_t cfg;
  logic acq_en, dma_en, ts_clear, pll_start;
  logic [63:0] dma_base [4];
  logic [63:0] stat_addr;
  logic [23:0] pll_words [11];
  logic [31:0] vals [30];
  int checks = 0, failures = 0, starts = 0;

  always #5 clk = ~clk;
  always @(posedge clk) if (pll_start) starts++;

  system_control dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input int i, input logic [31:0] d);
    @(negedge clk); wr_en = 1; wr_idx = 5'(i); wr_data = d;
    @(negedge clk); wr_en = 0;
  endtask

  task automatic rd(input int i, output logic [31:0] d);
    @(negedge clk); rd_req = 1; rd_idx = 5'(i); rd_req_id = 16'h0100 + 16'(i); rd_tag = 8'(i); rd_lower_addr = 7'(i * 4);
    @(negedge clk); rd_req = 0;
    while (!cpl_valid) @(negedge clk);
    d = cpl_data;
    checks++;
    if (cpl_req_id != 16'h0100 + 16'(i) || cpl_tag != 8'(i) || cpl_lower_addr != 7'(i * 4)) begin
      failures++;
      $display("completion fields for %0d", i);
    end
    cpl_ready = 1;
    @(negedge clk); cpl_ready = 0;
  endtask

  initial begin
    logic [31:0] d;
    rst = 1; wr_en = 0; rd_req = 0; cpl_ready = 0; lost_count = 32'hCAFE_0042;
    wr_idx = 0; wr_data = 0; rd_idx = 0; rd_req_id = 0; rd_tag = 0; rd_lower_addr = 0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    rd(R_WINDOW, d);
    checks++;
    if (d != {16'd16, 16'd64}) begin failures++; $display("reset WINDOW %h", d); end
    for (int i = 1; i < 30; i++) begin
      vals[i] = $urandom;
      wr(i, vals[i]);
    end
    vals[0] = 32'h0000_01FF;       // all control bits, pll_start among them
    wr(0, vals[0]);
    for (int i = 1; i < 30; i++) begin
      rd(i, d);
      checks++;
      if (d !== vals[i]) begin failures++; $display("reg %0d: %h expected %h", i, d, vals[i]); end
    end
    rd(0, d);
    checks++;
    if (d !== 32'h0000_017F) begin failures++; $display("CTRL %h", d); end
    rd(R_LOST, d);
    checks++;
    if (d !== 32'hCAFE_0042) failures++;
    rd(R_ID, d);
    checks++;
    if (d !== ID_VALUE) failures++;
    wr(R_LOST, 32'h0);             // read only: ignored
    rd(R_LOST, d);
    checks++;
    if (d !== 32'hCAFE_0042) failures++;
    checks++;
    if (!acq_en || !dma_en || !ts_clear || !cfg.filter_bypass || !cfg.trig_deriv || !cfg.phs_en ||
        !cfg.phs_use_ci || !cfg.invert) begin failures++; $display("control bits"); end
    checks++;
    if (cfg.threshold != vals[1][15:0] || cfg.offset != vals[1][31:16] || cfg.pwidth != vals[2][15:0] ||
        cfg.ptrg != vals[2][31:16] || cfg.dts_m != vals[3][15:0] || cfg.dts_shift != vals[3][20:16] ||
        cfg.psd_len != vals[4][15:0] || cfg.slope != vals[4][31:16] || cfg.phs_shift != vals[5][4:0] ||
        cfg.dt_lo != vals[6][15:0] || cfg.dt_hi != vals[6][31:16] || cfg.dd_lo != vals[7][15:0] ||
        cfg.dd_hi != vals[7][31:16]) begin failures++; $display("cfg fields"); end
    for (int i = 0; i < 4; i++) begin
      checks++;
      if (dma_base[i] != {vals[9 + 2*i], vals[8 + 2*i]}) failures++;
    end
    checks++;
    if (stat_addr != {vals[17], vals[16]} || ring_mask != vals[18]) failures++;
    for (int i = 0; i < 11; i++) begin
      checks++;
      if (pll_words[i] != vals[19 + i][23:0]) failures++;
    end
    checks++;
    if (starts != 1) begin failures++; $display("pll_start pulses: %0d", starts); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
