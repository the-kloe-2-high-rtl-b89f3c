// event_gate: frame builder and KLOE trigger gate.
//
// Each clock (one 2.5 ns period) the hit flags and fine times of all N_CH
// channels are packed, with the period's time relative to the fiducial and
// the current trigger number, into one frame_t. The frame is written to the
// event buffer (frame_we high one clock later) only if at least one channel
// has a hit, acquisition is enabled and the synchronised KLOE trigger is
// asserted. Each rising edge of the trigger (while enabled) starts a new
// event: the trigger number counts up by one and frames of that clock
// already carry the new number. `clear` sets the trigger number to zero.
//
// Storing hits only while the trigger is asserted follows the original
// board; treating the trigger as a level gate, and the frame layout, are
// this design's choice (the trigger is expected to be aligned with the hits
// by the external trigger logic).
`timescale 1ps/1ps
module event_gate
  import het_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   enable,
  input  logic                   clear,
  input  logic                   trig,
  input  logic                   trig_rise,
  input  logic [N_CH-1:0]        hit,
  input  fine_t [N_CH-1:0]       fine,
  input  tdc_time_t              period_base,
  output frame_t                 frame,
  output logic                   frame_we,
  output logic [EVT_W-1:0]       event_count
);
  logic [EVT_W-1:0] evt_next;
  logic             store;

  assign evt_next = event_count + EVT_W'(trig_rise & enable);
  assign store    = enable & trig & (|hit);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      event_count <= '0;
      frame_we    <= 1'b0;
      frame       <= '0;
    end else begin
      event_count <= clear ? '0 : evt_next;
      frame_we    <= store & ~clear;
      if (store) begin
        frame.event_num   <= evt_next;
        frame.period_base <= period_base;
        frame.hit_mask    <= hit;
        for (int c = 0; c < N_CH; c++)
          frame.fine[c] <= hit[c] ? fine[c] : '0;
      end
    end
  end
endmodule
