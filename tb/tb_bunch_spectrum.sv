// tb_bunch_spectrum: bunch-crossing spectrum through the full design.
//
// Reproduces the situation of the channel-0 TDC spectrum of the detector
// commissioning: the machine fiducial comes once per revolution (130
// periods, 325 ns here), bunches cross every 2.7 ns, and a particle hits
// channel 0 at a random one of ten consecutive bunches, 81.25 ns (130 TDC
// counts) after the fiducial, with +-150 ps of timing jitter. The trigger
// is held on; afterwards every frame is read back over VME.
// Checks: each stored time equals j(hit) - j(fiducial) worked out from the
// stimulus (sampling instant j = 1250 ps + j * 625 ps), and the spectrum
// separates the bunches: the largest count of bunch k is below the
// smallest count of bunch k+1, i.e. a 2.7 ns bunch spacing (4.32 counts)
// is resolved with 625 ps bins. The histogram is printed.
`timescale 1ps/1ps
module tb_bunch_spectrum;
  import het_pkg::*;
  localparam longint T_CLK = 2500, T_PH = 625, T0 = 1250;
  localparam longint T_BC = 2700, T_REV = 130 * 2500, OFFSET = 81250;
  localparam int NREV = 600, NBUNCH = 10;
  localparam logic [7:0] BOARD = 8'h10;

  logic clk0 = 1'b0, clk90 = 1'b0, rst_n = 1'b0;
  logic [N_CH-1:0] tdc_in = '0;
  logic fiducial_in = 1'b0, trigger_in = 1'b0;
  logic vme_as_n = 1'b1, vme_write_n = 1'b1;
  logic [1:0] vme_ds_n = 2'b11;
  logic [5:0] vme_am = 6'h39;
  logic [23:1] vme_addr = '0;
  logic [31:0] vme_data_i = '0, vme_data_o;
  logic vme_data_oe, vme_dtack_n;

  het_acq_top dut (.clk0, .clk90, .rst_n, .tdc_in, .fiducial_in, .trigger_in,
    .board_addr(BOARD), .vme_as_n, .vme_ds_n, .vme_write_n, .vme_am, .vme_addr,
    .vme_data_i, .vme_data_o, .vme_data_oe, .vme_dtack_n);

  always #(T_CLK/2) clk0 = ~clk0;
  initial begin #(T_PH); forever #(T_CLK/2) clk90 = ~clk90; end

  int checks = 0, failures = 0;
  longint exp_time [$];
  int     exp_bunch [$];
  int     hist [int];
  int     bmin [NBUNCH], bmax [NBUNCH], bcnt [NBUNCH];

  function automatic longint jidx(longint t);
    return (t - T0 + T_PH - 1) / T_PH;
  endfunction

  // move a time off the sampling instants
  function automatic longint safe(longint t);
    return (((t - T0) % T_PH) == 0) ? t + 1 : t;
  endfunction

  task automatic vme_cycle(input logic [15:0] off, input bit write, input logic [31:0] wdata,
                           output logic [31:0] rdata);
    int t;
    vme_addr = {BOARD, off[15:1]}; vme_write_n = ~write; vme_data_i = wdata;
    #(5000);
    vme_as_n = 1'b0;
    #(2000);
    vme_ds_n = 2'b00;
    t = 0;
    while (vme_dtack_n && t < 400) begin #500; t++; end
    if (vme_dtack_n) begin failures++; $display("no DTACK at %h", off); end
    rdata = vme_data_o;
    #(1000);
    vme_ds_n = 2'b11; vme_as_n = 1'b1;
    t = 0;
    while (!vme_dtack_n && t < 400) begin #500; t++; end
  endtask

  initial begin
    logic [31:0] d, w [4];
    longint t, tf, th;
    frame_t f;
    repeat (4) @(posedge clk0);
    rst_n = 1'b1;
    vme_cycle(REG_CTRL, 1, 32'h1, d);
    trigger_in = 1'b1;
    t = ($time / T_CLK + 20) * T_CLK;
    for (int r = 0; r < NREV; r++) begin
      int k;
      tf = safe(t + r * T_REV + 400 + $urandom_range(0, 1800));
      k  = $urandom_range(0, NBUNCH - 1);
      th = safe(tf + OFFSET + k * T_BC + $urandom_range(0, 300) - 150);
      exp_time.push_back(jidx(th) - jidx(tf));
      exp_bunch.push_back(k);
      #(tf - $time)  fiducial_in = 1'b1;
      #(th - $time)  tdc_in[0] = 1'b1;
      #(3000)        fiducial_in = 1'b0;
      #(th + 4000 - $time) tdc_in[0] = 1'b0;
    end
    #(50 * T_CLK);
    trigger_in = 1'b0;
    vme_cycle(REG_STATUS, 0, '0, d);
    checks++;
    if (d[31:16] != 16'(NREV)) begin failures++; $display("%0d frames stored, expected %0d", d[31:16], NREV); end
    foreach (bmin[k]) begin bmin[k] = 1 << 30; bmax[k] = -1; bcnt[k] = 0; end
    for (int i = 0; i < NREV; i++) begin
      for (int x = 0; x < 4; x++) vme_cycle(REG_DATA, 0, '0, w[x]);
      f = {w[0], w[1], w[2], w[3]};
      checks++;
      if (f.hit_mask !== 32'h1 || longint'(f.period_base) + f.fine[0] != exp_time[i]) begin
        failures++;
        if (failures < 10) $display("hit %0d: mask %h time %0d expected %0d", i, f.hit_mask,
                                    longint'(f.period_base) + f.fine[0], exp_time[i]);
      end else begin
        int m, k;
        m = int'(f.period_base) + f.fine[0];
        k = exp_bunch[i];
        if (hist.exists(m)) hist[m]++; else hist[m] = 1;
        if (m < bmin[k]) bmin[k] = m;
        if (m > bmax[k]) bmax[k] = m;
        bcnt[k]++;
      end
    end
    foreach (hist[m]) $display("TDC count %0d : %0d", m, hist[m]);
    for (int k = 0; k + 1 < NBUNCH; k++) begin
      checks++;
      if (bcnt[k] == 0 || bcnt[k+1] == 0 || bmax[k] >= bmin[k+1]) begin
        failures++;
        $display("bunches %0d and %0d not separated: [%0d,%0d] [%0d,%0d]", k, k+1, bmin[k], bmax[k], bmin[k+1], bmax[k+1]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(longint'(2_000_000_000));
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
