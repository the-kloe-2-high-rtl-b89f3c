// tb_event_gate: checks frame building and the trigger gate.
//
// Random hits, fine times, period bases, trigger levels and enable are
// driven each clock. The reference decides independently whether the
// clock's hits must be stored (enabled, trigger high, any hit), keeps its
// own trigger number, and compares the frame written one clock later
// field by field. Counts stored frames and frames held back by the gate.
`timescale 1ps/1ps
module tb_event_gate;
  import het_pkg::*;
  localparam int NCYC = 5000;

  logic clk = 1'b0, rst_n = 1'b0;
  logic enable = 1'b0, clear = 1'b0, trig = 1'b0, trig_rise = 1'b0;
  logic [N_CH-1:0] hit = '0;
  fine_t [N_CH-1:0] fine = '0;
  tdc_time_t period_base = '0;
  frame_t frame;
  logic frame_we;
  logic [EVT_W-1:0] event_count;
  int checks = 0, failures = 0, n_stored = 0, n_gated = 0, n_clear = 0;

  event_gate dut (.clk, .rst_n, .enable, .clear, .trig, .trig_rise, .hit, .fine,
                  .period_base, .frame, .frame_we, .event_count);

  always #1250 clk = ~clk;

  initial begin
    int evt;
    bit exp_we, last_trig;
    frame_t exp_f;
    evt = 0; last_trig = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int c = 0; c < NCYC; c++) begin
      // stimulus for this clock
      if ($urandom_range(0, 19) == 0) trig = ~trig;
      trig_rise = trig & ~last_trig;
      last_trig = trig;
      enable = ($urandom_range(0, 9) != 0);
      clear  = ($urandom_range(0, 499) == 0);
      for (int ch = 0; ch < N_CH; ch++) begin
        hit[ch]  = ($urandom_range(0, 40) == 0);
        fine[ch] = fine_t'($urandom_range(0, 3));
      end
      period_base = tdc_time_t'($urandom);
      // reference
      if (trig_rise && enable) evt++;
      exp_we = enable && trig && (|hit) && !clear;
      exp_f.event_num   = EVT_W'(evt);
      exp_f.period_base = period_base;
      exp_f.hit_mask    = hit;
      for (int ch = 0; ch < N_CH; ch++) exp_f.fine[ch] = hit[ch] ? fine[ch] : '0;
      if (clear) begin evt = 0; n_clear++; end
      if (!(enable && trig) && (|hit)) n_gated++;
      @(posedge clk);
      #1;
      checks++;
      if (frame_we !== exp_we || (exp_we && frame !== exp_f) || event_count !== EVT_W'(evt)) begin
        failures++;
        if (failures < 10) $display("cycle %0d: we %0b/%0b evt %0d/%0d frame %h exp %h",
                                    c, frame_we, exp_we, event_count, evt, frame, exp_f);
      end
      if (exp_we) n_stored++;
    end
    $display("stored %0d gated %0d clears %0d events %0d", n_stored, n_gated, n_clear, evt);
    if (n_stored < 50 || n_gated < 50) failures++;
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
