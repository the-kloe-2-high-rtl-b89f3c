// het_acq_top: FPGA design of the HET data acquisition board.
//
// The board times the discriminated signals of the HET scintillators
// against the DAPHNE fiducial, keeps them only while the KLOE trigger is
// asserted, and is read out over VME. Data path:
//
//   tdc_in[c] -> tdc_sampler -> tdc_edge_finder --+
//   fiducial_in -> tdc_sampler -> tdc_edge_finder -> tdc_timebase
//                                                  |
//   trigger_in -> sig_sync ----------------------> event_gate -> event_fifo
//                                                                   |
//   VME bus <-----------------------------------------------> vme_slave
//
// Every channel is sampled at 625 ps steps (four phases of the 400 MHz
// clock); one hit per channel can be stored every 2.5 ns. The fiducial is
// timed by its own TDC channel, so the stored times are differences from
// the latest fiducial in 625 ps units. Hits reach the buffer four clocks
// after the period they fall in; the trigger, through a two-flop
// synchroniser, is applied two clocks after it is sampled.
//
// Outside this design: the clock manager that makes clk0 and clk90 (400
// MHz, 90 degrees apart), the LVDS input buffers and the VME transceivers
// (driven by vme_data_o / vme_data_oe / vme_dtack_n). The channel count,
// the 625 ps bin and the 2.5 ns period are those of the original board; the
// rest of the structure is this design's choice.
`timescale 1ps/1ps
module het_acq_top
  import het_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 1024
) (
  input  logic               clk0,
  input  logic               clk90,
  input  logic               rst_n,
  input  logic [N_CH-1:0]    tdc_in,
  input  logic               fiducial_in,
  input  logic               trigger_in,
  input  logic [7:0]         board_addr,
  input  logic               vme_as_n,
  input  logic [1:0]         vme_ds_n,
  input  logic               vme_write_n,
  input  logic [5:0]         vme_am,
  input  logic [23:1]        vme_addr,
  input  logic [31:0]        vme_data_i,
  output logic [31:0]        vme_data_o,
  output logic               vme_data_oe,
  output logic               vme_dtack_n
);
  localparam int unsigned CNT_W = $clog2(FIFO_DEPTH + 1);

  logic [N_CH-1:0][N_PHASE-1:0] ch_samples;
  logic [N_CH-1:0]              ch_hit;
  fine_t [N_CH-1:0]             ch_fine;
  logic [N_PHASE-1:0]           fid_samples;
  logic                         fid_hit;
  fine_t                        fid_fine;

  tdc_time_t        period_base;
  logic             fid_seen;
  logic [31:0]      fid_count;
  logic             trig_s, trig_rise;
  logic             ctrl_enable, ctrl_clear;
  frame_t           frame, fifo_data;
  logic             frame_we;
  logic [EVT_W-1:0] event_count;
  logic             fifo_rd, fifo_empty, fifo_full, fifo_overflow;
  logic [CNT_W-1:0] fifo_count;
  logic [15:0]      fifo_lost;
  logic [FRAME_W-1:0] fifo_rd_flat;

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    tdc_sampler u_smp (.clk0, .clk90, .din(tdc_in[c]), .samples(ch_samples[c]));
    tdc_edge_finder u_edge (.clk(clk0), .rst_n, .samples(ch_samples[c]),
                            .hit(ch_hit[c]), .fine(ch_fine[c]));
  end

  tdc_sampler u_fid_smp (.clk0, .clk90, .din(fiducial_in), .samples(fid_samples));
  tdc_edge_finder u_fid_edge (.clk(clk0), .rst_n, .samples(fid_samples),
                              .hit(fid_hit), .fine(fid_fine));

  tdc_timebase u_tb (.clk(clk0), .rst_n, .fid_hit, .fid_fine,
                     .period_base, .fid_seen, .fid_count);

  sig_sync u_trig (.clk(clk0), .rst_n, .async_in(trigger_in),
                   .sync_out(trig_s), .rise(trig_rise));

  event_gate u_gate (.clk(clk0), .rst_n, .enable(ctrl_enable), .clear(ctrl_clear),
                     .trig(trig_s), .trig_rise, .hit(ch_hit), .fine(ch_fine),
                     .period_base, .frame, .frame_we, .event_count);

  event_fifo #(.DEPTH(FIFO_DEPTH), .WIDTH(FRAME_W)) u_fifo (
    .clk(clk0), .rst_n, .clear(ctrl_clear), .wr_en(frame_we), .wr_data(frame),
    .rd_en(fifo_rd), .rd_data(fifo_rd_flat), .empty(fifo_empty), .full(fifo_full),
    .count(fifo_count), .overflow(fifo_overflow), .lost(fifo_lost));

  assign fifo_data = frame_t'(fifo_rd_flat);

  vme_slave #(.CNT_W(CNT_W)) u_vme (
    .clk(clk0), .rst_n, .board_addr, .vme_as_n, .vme_ds_n, .vme_write_n,
    .vme_am, .vme_addr, .vme_data_i, .vme_data_o, .vme_data_oe, .vme_dtack_n,
    .ctrl_enable, .ctrl_clear, .fifo_data, .fifo_empty, .fifo_full,
    .fifo_count, .fifo_overflow, .fifo_lost, .fifo_rd,
    .event_count, .fid_seen, .fid_count);
endmodule
