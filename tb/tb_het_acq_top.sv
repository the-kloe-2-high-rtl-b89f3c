// tb_het_acq_top: end-to-end test of the HET acquisition FPGA design at
// its full size (32 channels, 1024-frame buffer, no parameter overrides).
//
// The 400 MHz clocks are made here (clk90 625 ps behind clk0). Every input
// pulse edge is placed between sampling instants; sampling instant j is
// 1250 ps + j * 625 ps, so an edge at time t is first seen by instant
// j(t) = ceil((t - 1250) / 625). The expected stored time of a hit is
// j(hit) - j(last fiducial) in 625 ps units, grouped into frames by period
// j div 4, all worked out from the pulse schedule alone.
//
// Phase 1: fiducials every 130 periods (325 ns), random pulses on all 32
// channels, KLOE trigger windows; hits are kept well away from the window
// edges so the expected set is unambiguous. It includes a burst with a hit
// on one channel in each of 20 consecutive 2.5 ns periods (multi-hit at the
// full rate) and hits in the same period as a fiducial (bypass). All frames
// are read back over VME and compared.
// Phase 2: a long trigger window with a hit in every other period fills
// the buffer; the overflow flag, the lost-frame count and the first 1024
// frames are checked, then the buffer is cleared.
// Counted mechanisms (each must occur): stored frames, hits held back by
// the trigger gate, multi-hit in consecutive periods, fiducial bypass,
// buffer overflow, empty-buffer marker, clear.
`timescale 1ps/1ps
module tb_het_acq_top;
  import het_pkg::*;
  localparam longint T_CLK = 2500, T_PH = 625, T0 = 1250;
  localparam logic [7:0] BOARD = 8'h42;
  localparam int DEPTH = 1024;
  localparam int NIN = N_CH + 2;     // channels, fiducial, trigger
  localparam int FID = N_CH, TRG = N_CH + 1;

  logic clk0 = 1'b0, clk90 = 1'b0, rst_n = 1'b0;
  logic [NIN-1:0] din = '0;
  logic vme_as_n = 1'b1, vme_write_n = 1'b1;
  logic [1:0] vme_ds_n = 2'b11;
  logic [5:0] vme_am = 6'h39;
  logic [23:1] vme_addr = '0;
  logic [31:0] vme_data_i = '0, vme_data_o;
  logic vme_data_oe, vme_dtack_n;

  het_acq_top dut (.clk0, .clk90, .rst_n, .tdc_in(din[N_CH-1:0]), .fiducial_in(din[FID]),
    .trigger_in(din[TRG]), .board_addr(BOARD), .vme_as_n, .vme_ds_n, .vme_write_n,
    .vme_am, .vme_addr, .vme_data_i, .vme_data_o, .vme_data_oe, .vme_dtack_n);

  always #(T_CLK/2) clk0 = ~clk0;
  initial begin #(T_PH); forever #(T_CLK/2) clk90 = ~clk90; end

  int checks = 0, failures = 0;
  int n_stored_hits = 0, n_gated = 0, n_multihit = 0, n_bypass = 0, n_overflow = 0,
      n_empty_marker = 0, n_clear = 0, n_frames_read = 0;

  // ---------------- pulse schedule and drivers ----------------
  typedef struct { longint rise; longint fall; } pulse_t;
  pulse_t sched [NIN][$];
  longint last_end [NIN];

  for (genvar i = 0; i < NIN; i++) begin : g_drv
    initial begin
      pulse_t p;
      forever begin
        wait (sched[i].size() > 0);
        p = sched[i].pop_front();
        if (p.rise > $time) #(p.rise - $time);
        din[i] = 1'b1;
        #(p.fall - p.rise);
        din[i] = 1'b0;
      end
    end
  end

  function automatic longint jidx(longint t);
    return (t - T0 + T_PH - 1) / T_PH;
  endfunction

  // an edge time in sampling slot m (between instants m and m+1, away from
  // both); it is first seen by instant m+1
  function automatic longint slot_time(longint m);
    return T0 + m * T_PH + 60 + $urandom_range(0, 500);
  endfunction

  // ---------------- reference model ----------------
  typedef struct {
    logic [N_CH-1:0] mask;
    fine_t [N_CH-1:0] fine;
    longint base_j;          // 4*period - j(fiducial)
    int event_num;
  } exp_frame_t;
  exp_frame_t exp_frames [longint];   // keyed by period
  longint fid_j [$];                  // j of every fiducial, ascending
  longint win_s [$], win_e [$];       // trigger windows (ps)
  int     win_evt [$];

  function automatic int window_of(longint t, longint margin);
    foreach (win_s[w])
      if (t >= win_s[w] - margin && t <= win_e[w] + margin) return w;
    return -1;
  endfunction

  function automatic bit inside_window(longint t, longint margin, output int w);
    foreach (win_s[w2])
      if (t >= win_s[w2] + margin && t <= win_e[w2] - margin) begin w = w2; return 1; end
    w = -1;
    return 0;
  endfunction

  function automatic longint fid_ref(longint period);
    longint r;
    r = 0;
    foreach (fid_j[i]) if (fid_j[i] / 4 <= period) r = fid_j[i];
    return r;
  endfunction

  // record a detector hit (rising edge at t) in the reference; returns 1 if stored
  function automatic bit add_hit(int ch, longint t);
    longint j, per; int w;
    j = jidx(t); per = j / 4;
    if (!inside_window(t, 8 * T_CLK, w)) begin n_gated++; return 0; end
    if (!exp_frames.exists(per)) begin
      exp_frames[per].mask = '0;
      exp_frames[per].fine = '0;
      exp_frames[per].base_j = 4 * per - fid_ref(per);
      exp_frames[per].event_num = win_evt[w];
    end
    if (exp_frames[per].mask[ch]) begin failures++; $display("schedule error: two hits ch %0d period %0d", ch, per); end
    exp_frames[per].mask[ch] = 1'b1;
    exp_frames[per].fine[ch] = fine_t'(j % 4);
    if (exp_frames.exists(per - 1) && exp_frames[per - 1].mask[ch]) n_multihit++;
    foreach (fid_j[i]) if (fid_j[i] / 4 == per) n_bypass++;
    n_stored_hits++;
    return 1;
  endfunction

  function automatic void sched_pulse(int ch, longint rise, longint fall);
    pulse_t p;
    p.rise = rise; p.fall = fall;
    sched[ch].push_back(p);
    last_end[ch] = fall;
  endfunction

  // ---------------- VME master ----------------
  task automatic vme_cycle(input logic [15:0] off, input bit write, input logic [31:0] wdata,
                           output logic [31:0] rdata, output bit acked);
    int t;
    vme_addr    = {BOARD, off[15:1]};
    vme_am      = 6'h39;
    vme_write_n = ~write;
    vme_data_i  = wdata;
    #(5000 + $urandom_range(0, 2000));
    vme_as_n = 1'b0;
    #(2000 + $urandom_range(0, 1000));
    vme_ds_n = 2'b00;
    t = 0;
    while (vme_dtack_n && t < 400) begin #500; t++; end
    acked = !vme_dtack_n;
    rdata = vme_data_o;
    #(1000 + $urandom_range(0, 1000));
    vme_ds_n = 2'b11;
    vme_as_n = 1'b1;
    t = 0;
    while (!vme_dtack_n && t < 400) begin #500; t++; end
  endtask

  task automatic vme_read(input logic [15:0] off, output logic [31:0] d);
    bit a;
    vme_cycle(off, 0, '0, d, a);
    if (!a) begin failures++; $display("no DTACK on read %h", off); end
  endtask

  task automatic vme_write(input logic [15:0] off, input logic [31:0] v);
    logic [31:0] d; bit a;
    vme_cycle(off, 1, v, d, a);
    if (!a) begin failures++; $display("no DTACK on write %h", off); end
  endtask

  task automatic read_frame(output logic [127:0] f);
    logic [31:0] w;
    for (int i = 0; i < 4; i++) begin
      vme_read(REG_DATA, w);
      f[127 - 32*i -: 32] = w;
    end
  endtask

  function automatic logic [127:0] pack_exp(exp_frame_t e);
    frame_t f;
    f.event_num   = EVT_W'(e.event_num);
    f.period_base = tdc_time_t'(e.base_j);
    f.hit_mask    = e.mask;
    f.fine        = e.fine;
    return f;
  endfunction

  // compare the frames held by the board with the first `n` expected ones
  task automatic read_and_compare(int n);
    logic [127:0] got, exp;
    int k;
    k = 0;
    foreach (exp_frames[per]) begin
      if (k == n) break;
      read_frame(got);
      exp = pack_exp(exp_frames[per]);
      n_frames_read++;
      checks++;
      if (got !== exp) begin
        failures++;
        if (failures < 12) $display("frame %0d (period %0d): got %h expected %h", k, per, got, exp);
      end
      k++;
    end
  endtask

  // ---------------- test ----------------
  initial begin
    logic [31:0] d;
    longint t_end, t, m;
    int nexp, evt;

    foreach (last_end[i]) last_end[i] = 0;
    repeat (4) @(posedge clk0);
    rst_n = 1'b1;
    vme_write(REG_CTRL, 32'h1);            // enable acquisition
    vme_read(REG_STATUS, d);
    checks++;
    if (d[0] !== 1'b1) begin failures++; $display("buffer not empty after reset"); end
    vme_read(REG_DATA, d);
    checks++;
    if (d === DATA_EMPTY) n_empty_marker++; else begin failures++; $display("empty marker %h", d); end

    // ---- phase 1 schedule, starting 400 periods from now ----
    t = ($time / T_CLK + 400) * T_CLK;
    t_end = t + 20000 * T_CLK;
    // fiducials every 130 periods, 5 ns wide
    for (longint f = t - 200 * T_CLK; f < t_end; f += 130 * T_CLK) begin
      longint r;
      r = slot_time(jidx(f) + $urandom_range(0, 3));
      fid_j.push_back(jidx(r));
      sched_pulse(FID, r, r + 5000);
    end
    // trigger windows: 12 windows of 700 periods every 1600 periods
    evt = 0;
    for (int w = 0; w < 12; w++) begin
      win_s.push_back(t + (longint'(w) * 1600 + 100) * T_CLK + 333);
      win_e.push_back(t + (longint'(w) * 1600 + 800) * T_CLK + 777);
      win_evt.push_back(++evt);
      sched_pulse(TRG, win_s[w], win_e[w]);
    end
    // random pulses on every channel; pulses 1.5..6 ns wide, gaps >= 4 ns
    for (int ch = 0; ch < N_CH; ch++) begin
      m = jidx(t) + $urandom_range(0, 200);
      forever begin
        longint r, f, wdt; int w;
        r = slot_time(m);
        if (r > t_end) break;
        wdt = 3 + $urandom_range(0, 7);
        f = slot_time(m + wdt);
        // stay clear of the trigger window edges
        if (window_of(r, 8 * T_CLK) >= 0 && !inside_window(r, 8 * T_CLK, w)) begin
          m += 40; continue;
        end
        void'(add_hit(ch, r));
        sched_pulse(ch, r, f);
        m += wdt + 7 + $urandom_range(0, 4000);
      end
    end
    // multi-hit burst: channel 7 gets a hit in 20 consecutive periods inside
    // window 3, pulses 1 ns wide (its random pulses there are removed)
    begin
      longint b, r; int w;
      pulse_t keep [$];
      b = jidx(win_s[3]) + 200 * 4;  // sampling slot, 200 periods into window 3
      b = b - (b % 4);
      // drop channel 7's random pulses that overlap the burst, and their hits
      foreach (sched[7][i]) begin
        if (sched[7][i].fall > T0 + (b - 40) * T_PH && sched[7][i].rise < T0 + (b + 120) * T_PH) begin
          longint per;
          per = jidx(sched[7][i].rise) / 4;
          if (exp_frames.exists(per) && exp_frames[per].mask[7]) begin
            exp_frames[per].mask[7] = 1'b0; exp_frames[per].fine[7] = '0; n_stored_hits--;
            if (exp_frames[per].mask == '0) exp_frames.delete(per);
          end
        end else keep.push_back(sched[7][i]);
      end
      sched[7] = keep;
      for (int k = 0; k < 20; k++) begin
        r = slot_time(b + 4 * k + (k % 2));   // seen at bin 1 or 2
        void'(add_hit(7, r));
        keep.push_back('{rise: r, fall: r + 1000});
      end
      keep.sort() with (item.rise);
      sched[7] = keep;
    end
    // bypass: channel 31 hits in the same period as three fiducials inside windows
    begin
      int done; longint fr; int w;
      pulse_t keep [$];
      done = 0;
      foreach (fid_j[i]) begin
        fr = T0 + fid_j[i] * T_PH;
        if (done < 3 && inside_window(fr, 20 * T_CLK, w)) begin
          longint per, r;
          per = fid_j[i] / 4;
          r = slot_time(4 * per + 2);      // seen at the last bin of the fiducial's period
          // remove channel 31 pulses near it
          keep.delete();
          foreach (sched[31][k]) begin
            if (sched[31][k].fall > r - 30 * T_CLK && sched[31][k].rise < r + 30 * T_CLK) begin
              longint p2;
              p2 = jidx(sched[31][k].rise) / 4;
              if (exp_frames.exists(p2) && exp_frames[p2].mask[31]) begin
                exp_frames[p2].mask[31] = 1'b0; exp_frames[p2].fine[31] = '0; n_stored_hits--;
                if (exp_frames[p2].mask == '0) exp_frames.delete(p2);
              end
            end else keep.push_back(sched[31][k]);
          end
          void'(add_hit(31, r));
          keep.push_back('{rise: r, fall: r + 3000});
          keep.sort() with (item.rise);
          sched[31] = keep;
          done++;
        end
      end
    end
    // multi-hit counted from the final reference
    n_multihit = 0;
    foreach (exp_frames[per])
      if (exp_frames.exists(per - 1)) n_multihit += $countones(exp_frames[per].mask & exp_frames[per - 1].mask);
    nexp = exp_frames.num();
    $display("phase 1: %0d hits expected in %0d frames, %0d held back by the gate", n_stored_hits, nexp, n_gated);
    if (nexp >= DEPTH) begin failures++; $display("phase 1 would overflow"); end

    // run the schedule, then read out
    #(t_end + 20 * T_CLK - $time);
    vme_read(REG_STATUS, d);
    checks++;
    if (d[31:16] != 16'(nexp) || d[2] !== 1'b0 || d[3] !== 1'b1) begin
      failures++; $display("status %h, expected %0d frames", d, nexp);
    end
    vme_read(REG_EVENTS, d);
    checks++;
    if (d != 32'(evt)) begin failures++; $display("events %0d expected %0d", d, evt); end
    vme_read(REG_FIDS, d);
    checks++;
    if (d != 32'(fid_j.size())) begin failures++; $display("fiducials %0d expected %0d", d, fid_j.size()); end
    read_and_compare(nexp);
    vme_read(REG_DATA, d);
    checks++;
    if (d === DATA_EMPTY) n_empty_marker++; else begin failures++; $display("no empty marker after readout"); end

    // ---- phase 2: overflow ----
    vme_write(REG_CTRL, 32'h3);            // clear, stay enabled
    n_clear++;
    vme_read(REG_EVENTS, d);
    checks++;
    if (d != 0) begin failures++; $display("events not cleared"); end
    exp_frames.delete();
    win_s.delete(); win_e.delete(); win_evt.delete();
    t = ($time / T_CLK + 100) * T_CLK;
    win_s.push_back(t); win_e.push_back(t + 2400 * T_CLK); win_evt.push_back(1);
    sched_pulse(TRG, t, t + 2400 * T_CLK);
    nexp = 0;
    for (longint p = 0; p < 1100; p++) begin
      longint r;
      r = slot_time(jidx(t) + 4 * (100 + 2 * p) + $urandom_range(0, 3));
      if (add_hit(int'(p % N_CH), r)) nexp++;
      sched_pulse(int'(p % N_CH), r, r + 1500);
    end
    #(t + 2500 * T_CLK - $time);
    vme_read(REG_STATUS, d);
    checks++;
    if (d[31:16] != 16'(DEPTH) || d[1] !== 1'b1 || d[2] !== 1'b1) begin
      failures++; $display("overflow status %h", d);
    end else n_overflow++;
    vme_read(REG_LOST, d);
    checks++;
    if (d != 32'(nexp - DEPTH)) begin failures++; $display("lost %0d expected %0d", d, nexp - DEPTH); end
    read_and_compare(DEPTH);
    vme_read(REG_STATUS, d);
    checks++;
    if (d[0] !== 1'b1) begin failures++; $display("not empty after reading %0d frames", DEPTH); end
    vme_write(REG_CTRL, 32'h2);            // clear and disable
    n_clear++;
    vme_read(REG_STATUS, d);
    checks++;
    if (d[2] !== 1'b0) begin failures++; $display("overflow not cleared"); end

    $display("mechanisms: stored-hits %0d gated %0d multi-hit %0d bypass %0d overflow %0d empty-marker %0d clear %0d frames-read %0d",
             n_stored_hits, n_gated, n_multihit, n_bypass, n_overflow, n_empty_marker, n_clear, n_frames_read);
    if (n_stored_hits == 0) begin failures++; $display("no stored hits"); end
    if (n_gated == 0)       begin failures++; $display("gate never held back a hit"); end
    if (n_multihit < 19)    begin failures++; $display("no multi-hit burst"); end
    if (n_bypass == 0)      begin failures++; $display("no fiducial bypass"); end
    if (n_overflow == 0)    begin failures++; $display("no overflow"); end
    if (n_empty_marker == 0) begin failures++; $display("no empty marker"); end
    if (n_clear == 0)       begin failures++; $display("no clear"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(longint'(1_000_000_000));
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
