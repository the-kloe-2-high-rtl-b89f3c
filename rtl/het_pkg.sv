// het_pkg: types and constants shared by the HET acquisition FPGA design.
//
// The TDC samples every input at four phases of a 400 MHz clock, so one
// clock period (2.5 ns) is split into four 625 ps bins. A time is counted
// in 625 ps units: the upper bits count 2.5 ns periods, the two lower bits
// give the bin inside the period. The 625 ps bin and the 2.5 ns period are
// the numbers of the original board; the widths below are this design's
// choice.
`timescale 1ps/1ps
package het_pkg;

  localparam int unsigned N_PHASE  = 4;                 // 2.5 ns / 625 ps
  localparam int unsigned FINE_W   = $clog2(N_PHASE);   // 2
  localparam int unsigned COARSE_W = 14;                // 2.5 ns periods
  localparam int unsigned TIME_W   = COARSE_W + FINE_W; // 16, 625 ps units
  localparam int unsigned EVT_W    = 16;                // trigger number
  localparam int unsigned N_CH     = 32;                // TDC channels

  typedef logic [FINE_W-1:0] fine_t;
  typedef logic [TIME_W-1:0] tdc_time_t;

  // One frame holds every hit of one 2.5 ns period. The time of the hit on
  // channel c, relative to the last fiducial, is period_base + fine[c].
  typedef struct packed {
    logic [EVT_W-1:0]         event_num;   // trigger number
    tdc_time_t                period_base; // period start minus fiducial
    logic [N_CH-1:0]          hit_mask;    // channel c hit in this period
    logic [N_CH-1:0][FINE_W-1:0] fine;     // bin of each channel's edge
  } frame_t;                               // 16+16+32+64 = 128 bits

  localparam int unsigned FRAME_W     = $bits(frame_t);
  localparam int unsigned FRAME_WORDS = FRAME_W / 32; // VME words per frame

  // VME A24 address modifiers accepted (non-privileged / supervisory data)
  localparam logic [5:0] AM_A24_USER = 6'h39;
  localparam logic [5:0] AM_A24_SUP  = 6'h3D;

  // Register offsets (byte address bits 15:0 inside the board window)
  localparam logic [15:0] REG_CTRL = 16'h0000;
  localparam logic [15:0] REG_STATUS = 16'h0004;
  localparam logic [15:0] REG_DATA = 16'h0008;
  localparam logic [15:0] REG_EVENTS = 16'h000C;
  localparam logic [15:0] REG_LOST = 16'h0010;
  localparam logic [15:0] REG_FIDS = 16'h0014;

  localparam logic [31:0] DATA_EMPTY = 32'hFFFF_FFFF;

endpackage
