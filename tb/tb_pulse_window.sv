// tb_pulse_window: event storage with PWIDTH = 16 and PTRG = 3. The input
// sample equals the cycle number, so each stored sample shows where it came
// from. Scenarios: a single pulse (n = 1, P = 1); a second pulse in the first
// half of the window (n = 1, P = 2); a pulse in the second half (n = 2);
// two chained extensions (n = 3); a trigger while the buffer has no room
// (event lost). Every word of every event is compared with an expected
// event built here from the trigger cycle, and the first word must appear
// two cycles after the trigger.
module tb_pulse_window;
  import rnc_pkg::*;
  localparam int PW = 16, PT = 3;
  logic clk = 1'b0, rst, enable, trig, space_ok;
  logic [15:0] sample, out_data;
  logic [63:0] ts;
  logic out_valid, out_last, busy;
  logic [31:0] lost_events;
  int checks = 0, failures = 0;
  int cyc = 0;
  logic [15:0] got [$];
  int first_cyc [$];
  int extensions = 0;
  int trig_at [$];

  always #5 clk = ~clk;

  pulse_window #(.PTRG_MAX(60)) dut (
    .clk, .rst, .enable, .pwidth(16'(PW)), .ptrg(16'(PT)), .sample, .trig, .ts, .space_ok,
    .out_valid, .out_data, .out_last, .lost_events, .busy
  );

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // drive the sample and time stamp from the cycle count; record the output
  logic prev_valid = 1'b0;
  always @(posedge clk) begin
    #1;
    cyc++;
    sample = 16'(cyc);
    ts = 64'(cyc) + 64'h1234_5678_0000;
    trig = 1'b0;
    foreach (trig_at[i]) if (trig_at[i] == cyc) trig = 1'b1;
    if (out_valid) begin
      got.push_back(out_data);
      if (!prev_valid) first_cyc.push_back(cyc);
    end
    prev_valid = out_valid;
  end

  task automatic check_event(input int t0, input int n, input int p, input int tcyc);
    logic [15:0] exp_w [$];
    longint unsigned tsv;
    tsv = 64'(t0) + 64'h1234_5678_0000;
    for (int i = 0; i < 4; i++) exp_w.push_back(16'(tsv >> (16 * i)));
    for (int i = 0; i < n * PW - 6; i++) exp_w.push_back(16'(t0 - PT + i));
    exp_w.push_back(16'(p));
    exp_w.push_back({8'(n - 1), EVENT_END_TAG});
    checks++;
    if (got.size() != exp_w.size()) begin
      failures++;
      $display("event at %0d: %0d words, expected %0d", t0, got.size(), exp_w.size());
    end else begin
      for (int i = 0; i < exp_w.size(); i++) if (got[i] !== exp_w[i]) begin
        failures++;
        $display("event at %0d word %0d: %h expected %h", t0, i, got[i], exp_w[i]);
        break;
      end
    end
    checks++;
    if (first_cyc.size() != 1 || first_cyc[0] != tcyc + 2) begin
      failures++;
      $display("event at %0d: first word at %p, expected %0d", t0, first_cyc, tcyc + 2);
    end
    if (n > 1) extensions++;
    got.delete();
    first_cyc.delete();
  endtask

  // raise trig during the cycle 'c' (sample value c is then on the input)
  task automatic pulse_at(input int c);
    trig_at.push_back(c);
  endtask

  initial begin
    int t0;
    rst = 1; enable = 1; trig = 0; space_ok = 1; sample = 0; ts = 0;
    repeat (3) @(posedge clk);
    #2 rst = 0;
    repeat (80) @(posedge clk);   // fill the delay line

    // 1) single pulse
    t0 = cyc + 2; pulse_at(t0);
    repeat (PW + 8) @(posedge clk);
    check_event(t0, 1, 1, t0);

    // 2) second pulse in the first half: counted, no extension
    t0 = cyc + 2; pulse_at(t0); pulse_at(t0 + 3);
    repeat (PW + 8) @(posedge clk);
    check_event(t0, 1, 2, t0);

    // 3) pulse in the second half (counter 5 <= 8): one extension
    t0 = cyc + 2; pulse_at(t0); pulse_at(t0 + 12);
    repeat (2 * PW + 8) @(posedge clk);
    check_event(t0, 2, 2, t0);

    // 4) pileup chain: extends twice
    t0 = cyc + 2; pulse_at(t0); pulse_at(t0 + 12); pulse_at(t0 + 12 + PW);
    repeat (3 * PW + 8) @(posedge clk);
    check_event(t0, 3, 3, t0);

    // 5) no room in the buffer: the event is lost and nothing is written
    space_ok = 0;
    t0 = cyc + 2; pulse_at(t0);
    repeat (PW + 6) @(posedge clk);
    checks++;
    if (got.size() != 0 || lost_events != 32'd1) begin
      failures++;
      $display("lost event: %0d words written, lost_events=%0d", got.size(), lost_events);
    end
    space_ok = 1;
    checks++;
    if (extensions != 2) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
