// pll_control: programs the ADC clock synthesizer (LMX2531) of the
// mezzanine card through its three-wire serial port.
//
// On 'start' it sends eleven 24-bit words, word 0 first, each MSB first:
// the data line changes while the serial clock is low and is sampled by the
// synthesizer on the rising edge; after the 24th bit the latch-enable line
// is pulsed high for one clock half-period to load the word. The words
// (which select, for instance, 800 or 1600 MHz) come from the register file.
// One serial clock period is 2*CLK_DIV system clocks.
//
// Interface: pll_sclk, pll_sdata, pll_le to the synthesizer; busy while
// sending, done pulses for one cycle at the end.
// Timing: 11 x (24 x 2 + 1) x CLK_DIV cycles for the whole set (the latch
// pulse lasts one half-period).
// Eleven 24-bit registers programmed from the FPGA follow the design; the
// word order, bit timing and divider are this design's choices.
module pll_control #(
  parameter int unsigned NWORDS  = 11,
  parameter int unsigned CLK_DIV = 4
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        start,
  input  logic [23:0] words [NWORDS],
  output logic        pll_sclk,
  output logic        pll_sdata,
  output logic        pll_le,
  output logic        busy,
  output logic        done
);
  typedef enum logic [1:0] {S_IDLE, S_LOW, S_HIGH, S_LE} state_e;
  state_e state;

  logic [$clog2(NWORDS+1)-1:0] widx;
  logic [4:0]  bidx;
  logic [15:0] div;
  logic [23:0] shreg;

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= S_IDLE;
      widx      <= '0;
      bidx      <= '0;
      div       <= '0;
      shreg     <= '0;
      pll_sclk  <= 1'b0;
      pll_sdata <= 1'b0;
      pll_le    <= 1'b0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          widx      <= '0;
          bidx      <= '0;
          div       <= '0;
          shreg     <= words[0];
          pll_sdata <= words[0][23];
          state     <= S_LOW;
        end
        S_LOW: begin            // clock low, data stable
          div <= div + 1'b1;
          if (div == 16'(CLK_DIV - 1)) begin
            div      <= '0;
            pll_sclk <= 1'b1;
            state    <= S_HIGH;
          end
        end
        S_HIGH: begin           // rising edge passed: device has sampled
          div <= div + 1'b1;
          if (div == 16'(CLK_DIV - 1)) begin
            div      <= '0;
            pll_sclk <= 1'b0;
            if (bidx == 5'd23) begin
              pll_le <= 1'b1;
              state  <= S_LE;
            end else begin
              bidx      <= bidx + 1'b1;
              shreg     <= {shreg[22:0], 1'b0};
              pll_sdata <= shreg[22];
              state     <= S_LOW;
            end
          end
        end
        S_LE: begin
          div <= div + 1'b1;
          if (div == 16'(CLK_DIV - 1)) begin
            div    <= '0;
            pll_le <= 1'b0;
            bidx   <= '0;
            if (32'(widx) == NWORDS - 1) begin
              done  <= 1'b1;
              state <= S_IDLE;
            end else begin
              widx      <= widx + 1'b1;
              shreg     <= words[widx + 1'b1];
              pll_sdata <= words[widx + 1'b1][23];
              state     <= S_LOW;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
