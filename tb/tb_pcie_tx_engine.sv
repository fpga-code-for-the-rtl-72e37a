// tb_pcie_tx_engine: random DMA write requests (addresses above and below
// 4 GiB, 1..32 Q-words) and register-read completions are offered with
// random back-pressure on the transmit stream. The stream is parsed beat by
// beat into packets and each packet is compared with the expected one:
// header fields (fmt, type, length, IDs, tag, byte count, address), the
// payload order and shift of 3-DW writes, tkeep of the last beat and tlast.
module tb_pcie_tx_engine;
  logic clk = 1'b0, rst;
  logic [15:0] completer_id = 16'h0300;
  logic req_valid, req_ready, dat_valid, dat_ready, cpl_valid, cpl_ready;
  logic [63:0] req_addr, dat_data;
  logic [9:0] req_len;
  logic [15:0] cpl_req_id;
  logic [7:0] cpl_tag;
  logic [6:0] cpl_lower_addr;
  logic [31:0] cpl_data;
  logic [63:0] tx_tdata;
  logic [7:0] tx_tkeep;
  logic tx_tlast, tx_tvalid, tx_tready;
  logic [31:0] exp_q[$][$];       // expected packets as DW lists
  logic [31:0] cur[$];
  logic [63:0] dmem [8192];
  int wp = 0, rp = 0;
  int checks = 0, failures = 0, n3 = 0, n4 = 0, ncpl = 0, npkt = 0;
  int nreq = 0, nout = 0;

  always #5 clk = ~clk;

  pcie_tx_engine dut (.*);

  initial begin
    #5000000;
    $display("stuck: n3=%0d n4=%0d ncpl=%0d npkt=%0d dq=%0d exp=%0d state=%0d", n3, n4, ncpl, npkt, wp - rp, exp_q.size(), dut.state);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // receiver: collect DWs of a packet, compare at tlast
  always @(posedge clk) begin
    if (!rst && tx_tvalid && tx_tready) begin
      cur.push_back(tx_tdata[31:0]);
      if (tx_tkeep == 8'hFF) cur.push_back(tx_tdata[63:32]);
      else if (tx_tkeep != 8'h0F || !tx_tlast) begin failures++; $display("bad tkeep %h", tx_tkeep); end
      if (tx_tlast) begin
        logic [31:0] e[$];
        checks++;
        npkt++;
        if (exp_q.size() == 0) begin failures++; $display("unexpected packet"); end
        else begin
          e = exp_q.pop_front();
          if (e.size() != cur.size()) begin failures++; $display("packet %0d: %0d DW, expected %0d", npkt, cur.size(), e.size()); end
          else foreach (e[i]) if (e[i] !== cur[i]) begin
            failures++; $display("packet %0d DW%0d: %h expected %h", npkt, i, cur[i], e[i]); break;
          end
        end
        cur.delete();
      end
    end
  end

  always @(negedge clk) tx_tready = ($urandom_range(3) != 0);

  // data source: FWFT queue of Q-words
  assign dat_valid = (wp != rp);
  assign dat_data  = dmem[rp % 8192];
  always @(posedge clk) if (!rst && dat_valid && dat_ready) rp <= rp + 1;

  initial begin
    rst = 1; req_valid = 0; cpl_valid = 0; req_addr = 0; req_len = 0;
    cpl_req_id = 0; cpl_tag = 0; cpl_lower_addr = 0; cpl_data = 0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    for (int n = 0; n < 400; n++) begin
      if ($urandom_range(3) == 0) begin
        automatic logic [31:0] e[$];
        @(negedge clk);
        cpl_valid = 1; cpl_req_id = 16'($urandom); cpl_tag = 8'($urandom);
        cpl_lower_addr = 7'($urandom) & 7'h7C; cpl_data = $urandom;
        e.push_back({3'b010, 5'b01010, 14'h0, 10'd1});
        e.push_back({completer_id, 4'h0, 12'd4});
        e.push_back({cpl_req_id, cpl_tag, 1'b0, cpl_lower_addr});
        e.push_back(cpl_data);
        exp_q.push_back(e);
        ncpl++;
        #1;
        while (!cpl_ready) @(negedge clk);
        @(posedge clk);
        #1 cpl_valid = 0;
      end else begin
        automatic logic [31:0] e[$];
        automatic logic four = $urandom_range(1);
        automatic int len = $urandom_range(1, 32);
        automatic logic [63:0] a = {four ? $urandom : 32'h0, $urandom & 32'hFFFF_FFF8};
        if (four && a[63:32] == 0) a[40] = 1'b1;
        e.push_back({four ? 3'b011 : 3'b010, 5'b0, 14'h0, 10'(2 * len)});
        e.push_back({completer_id, 8'h00, 8'hFF});
        if (four) e.push_back(a[63:32]);
        e.push_back(a[31:0]);
        @(negedge clk);
        req_valid = 1; req_addr = a; req_len = 10'(len);
        #1;
        while (!req_ready) @(negedge clk);
        @(posedge clk);
        for (int i = 0; i < len; i++) begin
          automatic logic [63:0] d = {$urandom, $urandom};
          dmem[wp % 8192] = d;
          wp++;
          e.push_back(d[31:0]);
          e.push_back(d[63:32]);
        end
        exp_q.push_back(e);
        if (four) n4++; else n3++;
        #1 req_valid = 0;
        while (wp != rp) @(posedge clk);
      end
    end
    repeat (50) @(posedge clk);
    checks++;
    if (exp_q.size() != 0 || n3 == 0 || n4 == 0 || ncpl == 0) begin failures++; $display("%0d packets missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
