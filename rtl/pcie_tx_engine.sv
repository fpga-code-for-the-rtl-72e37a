// pcie_tx_engine: builds the transaction-layer packets sent to the host.
//
// Two kinds of packet are produced on the 64-bit transmit stream of the PCIe
// endpoint (AXI4-Stream style, DW0 in bits [31:0] of a beat):
//  * Memory Write for the DMA engine: a request {address, length in
//    Q-words} followed by its data Q-words. Addresses above 4 GiB use the
//    4-DW header (fmt 011): beats {DW1,DW0}, {DW3,DW2}, then the data.
//    Addresses below 4 GiB use the 3-DW header (fmt 010) as PCIe requires;
//    the payload is then shifted by one DW: {D0lo,DW2}, {D1lo,D0hi}, ...,
//    and a last half beat {--,Dn-1hi} with tkeep = 8'h0F.
//  * Completion with Data (fmt 010, type 01010) of one DW for a register
//    read of the host: beats {DW1,DW0}, {data,DW2}.
// Header fields follow the PCIe base specification: TC 0, no digest,
// byte enables all set, requester/completer ID from the endpoint, tag 0 for
// writes. A pending completion is sent before the next write packet.
//
// Interface: req_* / dat_* from the DMA engine, cpl_* from the register file,
// tx_* to the endpoint. Timing: one beat per cycle while tx_tready is high.
// The paper shows a TX DMA engine between the DMA state machine and the
// endpoint; the packet formats are the PCIe standard ones and the beat
// layout is that of a 64-bit endpoint interface, both this design's choices.
module pcie_tx_engine (
  input  logic        clk,
  input  logic        rst,
  input  logic [15:0] completer_id,
  // DMA write requests
  input  logic        req_valid,
  output logic        req_ready,
  input  logic [63:0] req_addr,
  input  logic [9:0]  req_len,
  input  logic        dat_valid,
  output logic        dat_ready,
  input  logic [63:0] dat_data,
  // register read completions
  input  logic        cpl_valid,
  output logic        cpl_ready,
  input  logic [15:0] cpl_req_id,
  input  logic [7:0]  cpl_tag,
  input  logic [6:0]  cpl_lower_addr,
  input  logic [31:0] cpl_data,
  // to the endpoint
  output logic [63:0] tx_tdata,
  output logic [7:0]  tx_tkeep,
  output logic        tx_tlast,
  output logic        tx_tvalid,
  input  logic        tx_tready
);
  typedef enum logic [2:0] {S_IDLE, S_C0, S_C1, S_H0, S_H1, S_D, S_TAIL} state_e;
  state_e state;

  logic [63:0] addr;
  logic [9:0]  len, remain;
  logic        is4dw;
  logic [31:0] hold;
  logic [15:0] c_req_id;
  logic [7:0]  c_tag;
  logic [6:0]  c_low;
  logic [31:0] c_data;
  logic [31:0] dw0, dw1, dw2, dw3, cdw0, cdw1, cdw2;

  always_comb begin
    // Memory Write header
    dw0  = {is4dw ? 3'b011 : 3'b010, 5'b00000, 8'h00, 6'b000000, len};
    dw1  = {completer_id, 8'h00, 4'hF, 4'hF};
    dw2  = is4dw ? addr[63:32] : {addr[31:2], 2'b00};
    dw3  = {addr[31:2], 2'b00};
    // Completion with Data header, one DW, byte count 4
    cdw0 = {3'b010, 5'b01010, 8'h00, 6'b000000, 10'd1};
    cdw1 = {completer_id, 3'b000, 1'b0, 12'd4};
    cdw2 = {c_req_id, c_tag, 1'b0, c_low};

    tx_tvalid = 1'b0;
    tx_tdata  = '0;
    tx_tkeep  = 8'hFF;
    tx_tlast  = 1'b0;
    dat_ready = 1'b0;
    unique case (state)
      S_C0: begin tx_tvalid = 1'b1; tx_tdata = {cdw1, cdw0}; end
      S_C1: begin tx_tvalid = 1'b1; tx_tdata = {c_data, cdw2}; tx_tlast = 1'b1; end
      S_H0: begin tx_tvalid = 1'b1; tx_tdata = {dw1, dw0}; end
      S_H1: begin
        if (is4dw) begin
          tx_tvalid = 1'b1;
          tx_tdata  = {dw3, dw2};
        end else begin
          tx_tvalid = dat_valid;
          tx_tdata  = {dat_data[31:0], dw2};
          dat_ready = tx_tready;
        end
      end
      S_D: begin
        tx_tvalid = dat_valid;
        dat_ready = tx_tready;
        if (is4dw) begin
          tx_tdata = dat_data;
          tx_tlast = (remain == 10'd1);
        end else begin
          tx_tdata = {dat_data[31:0], hold};
        end
      end
      S_TAIL: begin
        tx_tvalid = 1'b1;
        tx_tdata  = {32'h0, hold};
        tx_tkeep  = 8'h0F;
        tx_tlast  = 1'b1;
      end
      default: ;
    endcase
    req_ready = (state == S_IDLE) && !cpl_valid;
    cpl_ready = (state == S_IDLE);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state    <= S_IDLE;
      addr     <= '0;
      len      <= '0;
      remain   <= '0;
      is4dw    <= 1'b0;
      hold     <= '0;
      c_req_id <= '0;
      c_tag    <= '0;
      c_low    <= '0;
      c_data   <= '0;
    end else begin
      unique case (state)
        S_IDLE: begin
          if (cpl_valid) begin
            c_req_id <= cpl_req_id;
            c_tag    <= cpl_tag;
            c_low    <= cpl_lower_addr;
            c_data   <= cpl_data;
            state    <= S_C0;
          end else if (req_valid) begin
            addr   <= req_addr;
            len    <= req_len << 1;       // header length is in DWs
            remain <= req_len;
            is4dw  <= (req_addr[63:32] != '0);
            state  <= S_H0;
          end
        end
        S_C0: if (tx_tready) state <= S_C1;
        S_C1: if (tx_tready) state <= S_IDLE;
        S_H0: if (tx_tready) state <= S_H1;
        S_H1: begin
          if (is4dw) begin
            if (tx_tready) state <= S_D;
          end else if (tx_tready && dat_valid) begin
            hold   <= dat_data[63:32];
            remain <= remain - 1'b1;
            state  <= (remain == 10'd1) ? S_TAIL : S_D;
          end
        end
        S_D: if (tx_tready && dat_valid) begin
          remain <= remain - 1'b1;
          hold   <= dat_data[63:32];
          if (remain == 10'd1) state <= is4dw ? S_IDLE : S_TAIL;
        end
        S_TAIL: if (tx_tready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
