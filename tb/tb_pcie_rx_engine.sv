// tb_pcie_rx_engine: sends random Memory Write / Memory Read packets of one
// DW with 3-DW and 4-DW headers, mixed with packets the engine must ignore
// (two-DW writes, completions), with random idle gaps between beats.
// Every register write and read request seen on the outputs is compared,
// in order, with the expected one built when the packet was sent.
module tb_pcie_rx_engine;
  logic clk = 1'b0, rst;
  logic [63:0] rx_tdata;
  logic rx_tvalid, rx_tlast, rx_tready;
  logic reg_wr_en, rd_req_valid;
  logic [4:0] reg_wr_idx, rd_req_idx;
  logic [31:0] reg_wr_data;
  logic [15:0] rd_req_id;
  logic [7:0] rd_req_tag;
  logic [6:0] rd_req_lower_addr;
  // expected: {kind(1=write), idx, data or {id,tag,low}}
  typedef struct packed { logic wr; logic [4:0] idx; logic [31:0] data; logic [15:0] id; logic [7:0] tag; logic [6:0] low; } exp_t;
  exp_t q[$];
  int checks = 0, failures = 0, n3 = 0, n4 = 0;

  always #5 clk = ~clk;

  pcie_rx_engine #(.BAR_AW(7)) dut (.*);

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (!rst && (reg_wr_en || rd_req_valid)) begin
      exp_t e;
      checks++;
      if (q.size() == 0) begin failures++; $display("unexpected output"); end
      else begin
        e = q.pop_front();
        if (reg_wr_en && rd_req_valid) failures++;
        else if (reg_wr_en && !(e.wr && e.idx == reg_wr_idx && e.data == reg_wr_data)) begin
          failures++; $display("write %0d %h expected %0d %h", reg_wr_idx, reg_wr_data, e.idx, e.data);
        end else if (rd_req_valid && !(!e.wr && e.idx == rd_req_idx && e.id == rd_req_id &&
                                       e.tag == rd_req_tag && e.low == rd_req_lower_addr)) begin
          failures++; $display("read request mismatch");
        end
      end
    end
  end

  task automatic beat(input logic [63:0] d, input logic last);
    while ($urandom_range(3) == 0) begin
      @(negedge clk); rx_tvalid = 0;
    end
    @(negedge clk);
    rx_tvalid = 1; rx_tdata = d; rx_tlast = last;
  endtask

  initial begin
    rst = 1; rx_tvalid = 0; rx_tdata = 0; rx_tlast = 0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    for (int n = 0; n < 2000; n++) begin
      automatic int kind = $urandom_range(5);
      automatic logic four = $urandom_range(1);
      automatic logic [31:0] a_lo = {$urandom_range(31) * 4};
      automatic logic [31:0] a_hi = four ? $urandom : 32'h0;
      automatic logic [31:0] d = $urandom;
      automatic logic [15:0] id = 16'($urandom);
      automatic logic [7:0] tag = 8'($urandom);
      automatic logic [31:0] h0, h1;
      a_lo = a_lo | ($urandom & 32'hFFFF_FF80);   // BAR offset bits above the window
      h1 = {id, tag, 8'h0F};
      if (kind <= 1) begin                          // MWr, 1 DW
        h0 = {four ? 3'b011 : 3'b010, 5'b0, 14'h0, 10'd1};
        beat({h1, h0}, 0);
        if (four) begin beat({a_lo, a_hi}, 0); beat({32'h0, d}, 1); n4++; end
        else      begin beat({d, a_lo}, 1); n3++; end
        q.push_back('{wr: 1, idx: a_lo[6:2], data: d, id: 0, tag: 0, low: 0});
      end else if (kind <= 3) begin                 // MRd, 1 DW
        h0 = {four ? 3'b001 : 3'b000, 5'b0, 14'h0, 10'd1};
        beat({h1, h0}, 0);
        if (four) begin beat({a_lo, a_hi}, 1); n4++; end
        else      begin beat({32'h0, a_lo}, 1); n3++; end
        q.push_back('{wr: 0, idx: a_lo[6:2], data: 0, id: id, tag: tag, low: a_lo[6:0]});
      end else if (kind == 4) begin                 // MWr, 2 DW: ignored
        h0 = {3'b010, 5'b0, 14'h0, 10'd2};
        beat({h1, h0}, 0); beat({d, a_lo}, 0); beat({32'h0, d}, 1);
      end else begin                                // CplD: ignored
        h0 = {3'b010, 5'b01010, 14'h0, 10'd1};
        beat({h1, h0}, 0); beat({d, a_lo}, 1);
      end
    end
    @(negedge clk) rx_tvalid = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (q.size() != 0 || n3 == 0 || n4 == 0) begin failures++; $display("%0d outputs missing", q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
