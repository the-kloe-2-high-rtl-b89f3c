// tb_vme_slave: checks the VME slave with a bus-master model.
//
// The master runs single A24/D32 cycles with asynchronous timing (strobes
// change at times unrelated to the clock) and waits for DTACK with a time
// limit. The frame buffer is modelled by a queue that the slave pops. The
// test checks the control register and the enable/clear outputs, the
// status word, readout of frames as four words in the documented order
// with the pop after the fourth, the empty marker, the counters, and that
// cycles to another board address or with another address modifier get no
// DTACK.
`timescale 1ps/1ps
module tb_vme_slave;
  import het_pkg::*;
  localparam int CNT_W = 11;
  localparam logic [7:0] BOARD = 8'hA7;

  logic clk = 1'b0, rst_n = 1'b0;
  logic vme_as_n = 1'b1, vme_write_n = 1'b1;
  logic [1:0] vme_ds_n = 2'b11;
  logic [5:0] vme_am = 6'h39;
  logic [23:1] vme_addr = '0;
  logic [31:0] vme_data_i = '0, vme_data_o;
  logic vme_data_oe, vme_dtack_n, ctrl_enable, ctrl_clear, fifo_rd;
  frame_t fifo_data;
  logic fifo_empty, fifo_full, fifo_overflow = 1'b0, fid_seen = 1'b1;
  logic [CNT_W-1:0] fifo_count;
  logic [15:0] fifo_lost = 16'd77;
  logic [EVT_W-1:0] event_count = 16'd1234;
  logic [31:0] fid_count = 32'hCAFE_0001;
  frame_t q [$];
  int checks = 0, failures = 0, n_clear = 0;

  vme_slave dut (.clk, .rst_n, .board_addr(BOARD), .vme_as_n, .vme_ds_n,
    .vme_write_n, .vme_am, .vme_addr, .vme_data_i, .vme_data_o, .vme_data_oe, .vme_dtack_n,
    .ctrl_enable, .ctrl_clear, .fifo_data, .fifo_empty, .fifo_full, .fifo_count,
    .fifo_overflow, .fifo_lost, .fifo_rd, .event_count, .fid_seen, .fid_count);

  always #1250 clk = ~clk;

  // frame buffer model
  assign fifo_empty = (q.size() == 0);
  assign fifo_full  = (q.size() == 8);
  assign fifo_count = CNT_W'(q.size());
  assign fifo_data  = fifo_empty ? '0 : q[0];
  always @(posedge clk) if (rst_n) begin
    if (fifo_rd) begin
      if (q.size() == 0) begin failures++; $display("pop of empty buffer"); end
      else void'(q.pop_front());
    end
    if (ctrl_clear) n_clear++;
  end

  task automatic vme_cycle(input logic [23:0] addr, input logic [5:0] am, input bit write,
                           input logic [31:0] wdata, output logic [31:0] rdata, output bit acked);
    int t;
    vme_addr    = addr[23:1];
    vme_am      = am;
    vme_write_n = ~write;
    vme_data_i  = wdata;
    #(7000 + $urandom_range(0, 3000));
    vme_as_n = 1'b0;
    #(3000 + $urandom_range(0, 1000));
    vme_ds_n = 2'b00;
    t = 0;
    while (vme_dtack_n && t < 400) begin #500; t++; end
    acked = !vme_dtack_n;
    rdata = vme_data_o;
    if (acked && !write && !vme_data_oe) begin failures++; $display("read data not driven"); end
    #(2000 + $urandom_range(0, 1000));
    vme_ds_n = 2'b11;
    vme_as_n = 1'b1;
    t = 0;
    while (!vme_dtack_n && t < 400) begin #500; t++; end
    if (!vme_dtack_n) begin failures++; $display("DTACK stuck"); end
  endtask

  task automatic expect_read(input logic [15:0] off, input logic [31:0] exp, input string what);
    logic [31:0] d; bit a;
    vme_cycle({BOARD, off}, 6'h39, 0, '0, d, a);
    checks++;
    if (!a || d !== exp) begin
      failures++;
      $display("%s: read %h (ack %0b), expected %h", what, d, a, exp);
    end
  endtask

  task automatic write_reg(input logic [15:0] off, input logic [31:0] v);
    logic [31:0] d; bit a;
    vme_cycle({BOARD, off}, 6'h3D, 1, v, d, a);
    checks++;
    if (!a) begin failures++; $display("write %h not acknowledged", off); end
  endtask

  initial begin
    logic [31:0] d; bit a;
    frame_t f [3];
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // control register
    expect_read(REG_CTRL, 32'h0, "ctrl after reset");
    write_reg(REG_CTRL, 32'h1);
    checks++; if (ctrl_enable !== 1'b1) begin failures++; $display("enable not set"); end
    expect_read(REG_CTRL, 32'h1, "ctrl");
    // status with empty buffer, then the empty marker on DATA
    expect_read(REG_STATUS, 32'h0000_0009, "status empty");
    expect_read(REG_DATA, DATA_EMPTY, "data empty");
    // three frames
    for (int i = 0; i < 3; i++) begin
      f[i] = {$urandom, $urandom, $urandom, $urandom};
      q.push_back(f[i]);
    end
    fifo_overflow = 1'b1;
    expect_read(REG_STATUS, 32'h0003_0004 | 32'h8, "status 3 frames");
    for (int i = 0; i < 3; i++) begin
      expect_read(REG_DATA, f[i][127:96], "word 0");
      expect_read(REG_DATA, f[i][95:64],  "word 1");
      expect_read(REG_DATA, f[i][63:32],  "word 2");
      checks++; if (q.size() != 3 - i) begin failures++; $display("popped early"); end
      expect_read(REG_DATA, f[i][31:0],   "word 3");
      checks++; if (q.size() != 2 - i) begin failures++; $display("not popped after word 3"); end
    end
    expect_read(REG_DATA, DATA_EMPTY, "data empty again");
    // counters and unmapped offset
    expect_read(REG_EVENTS, 32'd1234, "events");
    expect_read(REG_LOST, 32'd77, "lost");
    expect_read(REG_FIDS, 32'hCAFE_0001, "fiducials");
    expect_read(16'h0100, 32'h0, "unmapped");
    // other board and other address modifier: no DTACK
    vme_cycle({8'hA6, REG_CTRL}, 6'h39, 0, '0, d, a);
    checks++; if (a) begin failures++; $display("answered other board"); end
    vme_cycle({BOARD, REG_CTRL}, 6'h09, 0, '0, d, a);
    checks++; if (a) begin failures++; $display("answered A32 modifier"); end
    // clear pulse, enable off
    write_reg(REG_CTRL, 32'h2);
    checks++; if (n_clear != 1 || ctrl_enable !== 1'b0) begin failures++; $display("clear %0d enable %0b", n_clear, ctrl_enable); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(5_000_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
