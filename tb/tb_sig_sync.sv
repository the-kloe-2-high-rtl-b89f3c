// tb_sig_sync: checks the two-flop synchroniser and its edge pulse.
//
// The input is changed at random times between clock edges and held for
// random lengths. The reference samples the input at each clock edge
// itself; the synchronised level must equal the reference sample from
// STAGES clocks before, and `rise` must be high exactly when that level
// goes from 0 to 1.
`timescale 1ps/1ps
module tb_sig_sync;
  localparam int STAGES = 2;   // the default depth of sig_sync
  localparam int NCYC = 4000;

  logic clk = 1'b0, rst_n = 1'b0, async_in = 1'b0;
  logic sync_out, rise;
  bit   hist [$];
  int   checks = 0, failures = 0, n_rise = 0;

  sig_sync dut (.clk, .rst_n, .async_in, .sync_out, .rise);

  always #1250 clk = ~clk;

  // input changes 300..2200 ps after a clock edge, never on one
  initial begin
    @(posedge clk);
    forever begin
      #($urandom_range(300, 2200));
      async_in = $urandom_range(0, 1);
      @(posedge clk);
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int i = 0; i < STAGES + 1; i++) hist.push_back(1'b0);
    for (int c = 0; c < NCYC; c++) begin
      @(posedge clk);
      hist.push_back(async_in);   // value the first flop takes now
      #1;
      checks++;
      if (sync_out !== hist[hist.size()-STAGES] ||
          rise !== (hist[hist.size()-STAGES] && !hist[hist.size()-STAGES-1])) begin
        failures++;
        if (failures < 10) $display("cycle %0d: sync %0b rise %0b", c, sync_out, rise);
      end
      if (rise) n_rise++;
    end
    if (n_rise < 100) failures++;
    $display("rises %0d", n_rise);
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
