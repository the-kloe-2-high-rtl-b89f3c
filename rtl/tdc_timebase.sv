// tdc_timebase: coarse time counter and DAPHNE fiducial reference.
//
// A COARSE_W-bit counter advances once per 2.5 ns period. The fiducial
// signal is time-stamped by a TDC channel of its own (sampler plus edge
// finder, identical to the detector channels); when that channel reports an
// edge, its time {coarse, fine} is kept as the reference. `period_base` is
// the time of the start of the current period minus the reference, in
// 625 ps units, so a hit found in this period at bin f lies at
// period_base + f after the last fiducial. Because the fiducial and the
// hits go through pipelines of equal length, the latency cancels and the
// difference is exact to one bin.
//
// Timing: `fid_hit`/`fid_fine` and the detector hits of the same clock
// belong to the same period; `period_base` is combinational and refers to
// that clock. A fiducial in the same period as a hit is applied to that hit
// at once (bypass). Measuring from the fiducial follows the original board;
// doing it with a dedicated TDC channel and the counter width are this
// design's choice.
`timescale 1ps/1ps
module tdc_timebase
  import het_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      fid_hit,
  input  fine_t     fid_fine,
  output tdc_time_t period_base,
  output logic      fid_seen,
  output logic [31:0] fid_count
);
  logic [COARSE_W-1:0] coarse_q;
  tdc_time_t           ref_q;
  tdc_time_t           ref_now;

  assign ref_now     = fid_hit ? {coarse_q, fid_fine} : ref_q;
  assign period_base = {coarse_q, {FINE_W{1'b0}}} - ref_now;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      coarse_q  <= '0;
      ref_q     <= '0;
      fid_seen  <= 1'b0;
      fid_count <= '0;
    end else begin
      coarse_q <= coarse_q + 1'b1;
      if (fid_hit) begin
        ref_q     <= {coarse_q, fid_fine};
        fid_seen  <= 1'b1;
        fid_count <= fid_count + 1'b1;
      end
    end
  end
endmodule
