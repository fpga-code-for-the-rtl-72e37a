// averaging_inv: averages the four ADC samples of one sampling clock.
//
// Summing four 12-bit samples gives 14 bits; dropping one bit keeps 13, so
// the result is the average with one extra bit of resolution (the averaging
// of four samples gains about one effective bit). With 'invert' set, the
// result is mirrored (8191 - average) so that negative-going detector pulses
// become positive. The output is a 16-bit word, zero-extended: one conditioned
// sample per sampling clock, i.e. 400 MS/s from a 1.6 GS/s ADC.
//
// Timing: one register stage. Averaging four samples per clock follows the
// description of the design; the rounding (truncation) and the form of the
// inversion are this design's choices.
module averaging_inv #(
  parameter int unsigned ADC_W = 12,
  parameter int unsigned OUT_W = 16
) (
  input  logic             clk,
  input  logic             invert,
  input  logic [ADC_W-1:0] samples [4],
  output logic [OUT_W-1:0] avg
);
  localparam int unsigned AVG_W = ADC_W + 1;

  logic [ADC_W+1:0] sum;
  logic [AVG_W-1:0] half, res;

  always_comb begin
    sum  = {2'b00, samples[0]} + {2'b00, samples[1]} + {2'b00, samples[2]} + {2'b00, samples[3]};
    half = sum[ADC_W+1:1];
    res  = invert ? ~half : half;
  end

  always_ff @(posedge clk) begin
    avg <= OUT_W'(res);
  end
endmodule
