// tb_event_fifo: checks the frame buffer against a queue.
//
// A small DEPTH is used so that the buffer fills. Random pushes and pops
// (pops only when not empty) are made in phases with more writes or more
// reads; a SystemVerilog queue is the reference for the head data, the
// level, full/empty, the sticky overflow flag and the count of dropped
// writes. A clear is given once in the middle.
`timescale 1ps/1ps
module tb_event_fifo;
  localparam int DEPTH = 16, WIDTH = 128, NCYC = 6000;

  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0, wr_en = 1'b0, rd_en = 1'b0;
  logic [WIDTH-1:0] wr_data = '0, rd_data;
  logic empty, full, overflow;
  logic [$clog2(DEPTH+1)-1:0] count;
  logic [15:0] lost;
  logic [WIDTH-1:0] q [$];
  int checks = 0, failures = 0, n_lost = 0, n_full = 0, n_rd = 0;
  bit ovf = 0;

  event_fifo #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.clk, .rst_n, .clear, .wr_en, .wr_data,
    .rd_en, .rd_data, .empty, .full, .count, .overflow, .lost);

  always #1250 clk = ~clk;

  initial begin
    int wp;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int c = 0; c < NCYC; c++) begin
      wp = ((c / 300) % 2 == 0) ? 70 : 30;
      wr_en   = ($urandom_range(0, 99) < wp);
      wr_data = {$urandom, $urandom, $urandom, $urandom};
      rd_en   = !empty && ($urandom_range(0, 99) < 50);
      clear   = (c == NCYC/2);
      // check outputs before the edge
      checks++;
      if (empty !== (q.size() == 0) || full !== (q.size() == DEPTH) || count != q.size()
          || (q.size() > 0 && rd_data !== q[0]) || overflow !== ovf || lost != 16'(n_lost)) begin
        failures++;
        if (failures < 10) $display("cycle %0d: count %0d/%0d empty %0b full %0b lost %0d/%0d",
                                    c, count, q.size(), empty, full, lost, n_lost);
      end
      // reference update
      if (clear) begin
        q.delete(); ovf = 0; n_lost = 0;
      end else begin
        bit popped;
        popped = 0;
        if (rd_en && q.size() > 0) begin void'(q.pop_front()); popped = 1; n_rd++; end
        if (wr_en) begin
          if (q.size() < DEPTH) q.push_back(wr_data);
          else begin ovf = 1; n_lost++; end
        end
        if (q.size() == DEPTH) n_full++;
      end
      @(posedge clk);
      #1;
    end
    $display("reads %0d full-cycles %0d lost %0d", n_rd, n_full, n_lost);
    if (n_full == 0 || n_lost == 0) failures++;
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
