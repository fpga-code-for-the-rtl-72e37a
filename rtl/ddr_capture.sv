// ddr_capture: input DDR registers for one ADC running in demux mode.
//
// The ADC delivers its samples on two 12-bit buses (A and B), each clocked
// at both edges of the sampling clock (CLKacq/4, 400 MHz for 1.6 GS/s), so
// four samples arrive per sampling-clock period. Each bus bit is captured
// once on the rising and once on the falling edge, as an IDDR primitive in
// "same edge pipelined" mode does; the four values are then presented
// together on the next rising edge.
//
// Interface: ddr_a/ddr_b are the two DDR buses; samples[0..3] are, in time
// order, A(rise), B(rise), A(fall), B(fall) of one sampling-clock period.
// Timing: samples are registered; a rising-edge pair reaches the output one
// cycle later, the falling-edge pair that followed it half a cycle later.
// The capture with both clock edges follows the description of the design;
// the sample order on the two buses is this design's assumption.
module ddr_capture #(
  parameter int unsigned ADC_W = 12
) (
  input  logic             clk,
  input  logic [ADC_W-1:0] ddr_a,
  input  logic [ADC_W-1:0] ddr_b,
  output logic [ADC_W-1:0] samples [4]
);
  logic [ADC_W-1:0] rise_a, rise_b, fall_a, fall_b;

  always_ff @(posedge clk) begin
    rise_a <= ddr_a;
    rise_b <= ddr_b;
  end

  always_ff @(negedge clk) begin
    fall_a <= ddr_a;
    fall_b <= ddr_b;
  end

  always_ff @(posedge clk) begin
    samples[0] <= rise_a;
    samples[1] <= rise_b;
    samples[2] <= fall_a;
    samples[3] <= fall_b;
  end
endmodule
