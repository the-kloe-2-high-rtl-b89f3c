// tdc_sampler: four-phase sampling front end of one TDC channel.
//
// The input is sampled on both edges of two 400 MHz clocks that are 90
// degrees apart: rising clk0 (0 ps), rising clk90 (625 ps), falling clk0
// (1250 ps) and falling clk90 (1875 ps). On the next rising edge of clk0
// the four samples of the period are taken over into the clk0 domain
// together, so `samples` changes once per 2.5 ns. Bit k of `samples` is the
// input level at k * 625 ps after the clk0 edge that opened the period;
// `samples` is valid one clk0 period after that edge.
//
// The 625 ps bin and the 2.5 ns period are those of the original board; the
// way they are obtained (two phase-shifted clocks, both edges) is this
// design's choice. The flops on the four phases are the metastability
// boundary; the design has no further synchroniser, as usual for a TDC.
`timescale 1ps/1ps
module tdc_sampler (
  input  logic       clk0,
  input  logic       clk90,
  input  logic       din,
  output logic [3:0] samples
);
  logic q0, q1, q2, q3;

  always_ff @(posedge clk0)  q0 <= din;
  always_ff @(posedge clk90) q1 <= din;
  always_ff @(negedge clk0)  q2 <= din;
  always_ff @(negedge clk90) q3 <= din;

  // All four samples of the period that just ended, in the clk0 domain.
  always_ff @(posedge clk0) samples <= {q3, q2, q1, q0};
endmodule
