// tdc_edge_finder: leading-edge finder of one TDC channel.
//
// Every 2.5 ns it receives the four phase samples of one period from
// tdc_sampler. A leading edge lies in bin k when sample k is high and the
// sample before it (sample k-1, or for k = 0 the last sample of the period
// before) is low. The first such bin is reported as `fine` with `hit` high,
// one clock after `samples`. A new hit can be reported every period, which
// makes the channel multi-hit, as on the original board; a second edge in
// the same 2.5 ns period (a pulse shorter than 1.25 ns) is not reported,
// which is this design's choice.
`timescale 1ps/1ps
module tdc_edge_finder
  import het_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic [N_PHASE-1:0]  samples,
  output logic                hit,
  output fine_t               fine
);
  logic               last_q;       // last sample of the previous period
  logic [N_PHASE-1:0] rise;
  logic               any_rise;
  fine_t              first_bin;

  always_comb begin
    rise[0] = samples[0] & ~last_q;
    for (int k = 1; k < N_PHASE; k++) rise[k] = samples[k] & ~samples[k-1];
    any_rise  = |rise;
    first_bin = '0;
    for (int k = N_PHASE - 1; k >= 0; k--)
      if (rise[k]) first_bin = fine_t'(k);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last_q <= 1'b0;
      hit    <= 1'b0;
      fine   <= '0;
    end else begin
      last_q <= samples[N_PHASE-1];
      hit    <= any_rise;
      fine   <= first_bin;
    end
  end
endmodule
