// tb_tdc_timebase: checks time measurement relative to the fiducial.
//
// The testbench counts clocks since reset itself. Fiducial edges are given
// at random periods with random bins; the reference keeps the last one as
// 4*period + bin. In every clock `period_base` must equal
// 4*period - reference (mod 2^16), including the clock of a fiducial
// itself (bypass), and the fiducial counter must match.
`timescale 1ps/1ps
module tb_tdc_timebase;
  import het_pkg::*;
  localparam int NCYC = 30000;   // longer than the 2^14 counter wrap

  logic clk = 1'b0, rst_n = 1'b0;
  logic fid_hit = 1'b0;
  fine_t fid_fine = '0;
  tdc_time_t period_base;
  logic fid_seen;
  logic [31:0] fid_count;
  int checks = 0, failures = 0, n_fid = 0, n_bypass_hits = 0;

  tdc_timebase dut (.clk, .rst_n, .fid_hit, .fid_fine, .period_base, .fid_seen, .fid_count);

  always #1250 clk = ~clk;

  initial begin
    longint ref_t, exp;
    ref_t = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int p = 0; p < NCYC; p++) begin
      // drive this period's fiducial (dut counter equals p in this clock)
      fid_hit  = ($urandom_range(0, 129) == 0);
      fid_fine = fine_t'($urandom_range(0, 3));
      if (fid_hit) begin ref_t = 4*longint'(p) + fid_fine; n_fid++; end
      #10;
      exp = (4*longint'(p) - ref_t) & 16'hFFFF;
      checks++;
      if (period_base !== tdc_time_t'(exp)) begin
        failures++;
        if (failures < 10) $display("period %0d: base %0d expected %0d", p, period_base, exp);
      end
      if (fid_hit) n_bypass_hits++;
      @(posedge clk);
      #1;
    end
    fid_hit = 1'b0;
    #10;
    checks++;
    if (fid_count != 32'(n_fid) || fid_seen !== (n_fid > 0)) failures++;
    $display("fiducials %0d", n_fid);
    if (n_fid < 10) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(2500 * (NCYC + 100));
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
