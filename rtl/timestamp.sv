// timestamp: free-running 64-bit time-stamp counter.
//
// Counts sampling clocks (2.5 ns steps at 400 MHz) while 'enable' is high;
// 'clear' sets it back to zero. Every stored event and every PSD and PHS
// packet carries this value. The 64-bit width is the design's; the clear and
// enable controls are this design's choice.
module timestamp #(
  parameter int unsigned TS_W = 64
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            clear,
  input  logic            enable,
  output logic [TS_W-1:0] ts
);
  always_ff @(posedge clk) begin
    if (rst || clear) ts <= '0;
    else if (enable)  ts <= ts + 1'b1;
  end
endmodule
