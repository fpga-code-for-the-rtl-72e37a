// pcie_rx_engine: decodes the host's register accesses from the PCIe
// receive stream.
//
// The endpoint delivers received transaction-layer packets on a 64-bit
// stream (DW0 in bits [31:0] of the first beat). Memory Writes and Memory
// Reads of one DW, with 3-DW (32-bit address) or 4-DW (64-bit address)
// headers, are turned into register writes and register read requests; the
// register index is address bits [BAR_AW-1:2] within the BAR. Other packets
// (and accesses longer than one DW) are ignored. A read request carries the
// requester ID, tag and low address bits needed for the completion.
//
// Interface: rx_* from the endpoint (always ready); reg_wr_* and rd_req_*
// are one-cycle pulses. Timing: a write takes effect, and a read request is
// issued, in the cycle after the beat holding the data/address.
// The RX engine and its read/write request role follow the PCIe interface
// diagram of the design; the packet formats are the PCIe standard ones and
// this block's decoding is this design's implementation.
module pcie_rx_engine #(
  parameter int unsigned BAR_AW = 7
) (
  input  logic              clk,
  input  logic              rst,
  input  logic [63:0]       rx_tdata,
  input  logic              rx_tvalid,
  input  logic              rx_tlast,
  output logic              rx_tready,
  output logic              reg_wr_en,
  output logic [BAR_AW-3:0] reg_wr_idx,
  output logic [31:0]       reg_wr_data,
  output logic              rd_req_valid,
  output logic [BAR_AW-3:0] rd_req_idx,
  output logic [15:0]       rd_req_id,
  output logic [7:0]        rd_req_tag,
  output logic [6:0]        rd_req_lower_addr
);
  typedef enum logic [1:0] {S_H0, S_H1, S_D, S_SKIP} state_e;
  state_e state;

  logic        is_wr, is_4dw;
  logic [15:0] req_id;
  logic [7:0]  tag;
  logic [31:0] addr_lo;
  logic [2:0]  fmt;
  logic [4:0]  ttype;
  logic [9:0]  tlen;
  logic        ours;

  assign rx_tready = 1'b1;

  always_comb begin
    fmt   = rx_tdata[31:29];
    ttype = rx_tdata[28:24];
    tlen  = rx_tdata[9:0];
    ours  = (ttype == 5'b00000) && (tlen == 10'd1) && (fmt[2] == 1'b0);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state             <= S_H0;
      is_wr             <= 1'b0;
      is_4dw            <= 1'b0;
      req_id            <= '0;
      tag               <= '0;
      addr_lo           <= '0;
      reg_wr_en         <= 1'b0;
      reg_wr_idx        <= '0;
      reg_wr_data       <= '0;
      rd_req_valid      <= 1'b0;
      rd_req_idx        <= '0;
      rd_req_id         <= '0;
      rd_req_tag        <= '0;
      rd_req_lower_addr <= '0;
    end else begin
      reg_wr_en    <= 1'b0;
      rd_req_valid <= 1'b0;
      if (rx_tvalid) begin
        unique case (state)
          S_H0: begin
            is_wr  <= fmt[1];
            is_4dw <= fmt[0];
            req_id <= rx_tdata[63:48];
            tag    <= rx_tdata[47:40];
            if (rx_tlast)  state <= S_H0;
            else if (ours) state <= S_H1;
            else           state <= S_SKIP;
          end
          S_H1: begin
            // 3DW: {data, addr}; 4DW: {addr_lo, addr_hi}
            if (is_4dw) begin
              addr_lo <= rx_tdata[63:32];
              if (is_wr) state <= rx_tlast ? S_H0 : S_D;
              else begin
                rd_req_valid      <= 1'b1;
                rd_req_idx        <= rx_tdata[32+BAR_AW-1:34];
                rd_req_lower_addr <= rx_tdata[38:32];
                rd_req_id         <= req_id;
                rd_req_tag        <= tag;
                state             <= rx_tlast ? S_H0 : S_SKIP;
              end
            end else begin
              if (is_wr) begin
                reg_wr_en   <= 1'b1;
                reg_wr_idx  <= rx_tdata[BAR_AW-1:2];
                reg_wr_data <= rx_tdata[63:32];
              end else begin
                rd_req_valid      <= 1'b1;
                rd_req_idx        <= rx_tdata[BAR_AW-1:2];
                rd_req_lower_addr <= rx_tdata[6:0];
                rd_req_id         <= req_id;
                rd_req_tag        <= tag;
              end
              state <= rx_tlast ? S_H0 : S_SKIP;
            end
          end
          S_D: begin
            reg_wr_en   <= 1'b1;
            reg_wr_idx  <= addr_lo[BAR_AW-1:2];
            reg_wr_data <= rx_tdata[31:0];
            state       <= rx_tlast ? S_H0 : S_SKIP;
          end
          S_SKIP: if (rx_tlast) state <= S_H0;
          default: state <= S_H0;
        endcase
      end
    end
  end
endmodule
