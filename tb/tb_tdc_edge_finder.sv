// tb_tdc_edge_finder: checks the leading-edge finder of one TDC channel.
//
// A random bit string stands for the input level at successive 625 ps
// instants; it is fed four bits per clock as the sampler would give it.
// The reference walks the string bit by bit: an edge is a 0 followed by a
// 1, and the first edge inside each group of four gives the expected hit
// and bin, one clock later. Runs with dense and sparse input.
`timescale 1ps/1ps
module tb_tdc_edge_finder;
  import het_pkg::*;
  localparam int NPER = 3000;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [3:0] samples = '0;
  logic hit;
  fine_t fine;
  bit bits [4*NPER];
  int checks = 0, failures = 0, n_hits = 0;

  tdc_edge_finder dut (.clk, .rst_n, .samples, .hit, .fine);

  always #1250 clk = ~clk;

  initial begin
    for (int j = 0; j < 4*NPER; j++)
      bits[j] = (j < 2*NPER) ? ($urandom_range(0, 1) == 1) : ($urandom_range(0, 7) == 0);
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int n = 0; n < NPER; n++) begin
      samples <= {bits[4*n+3], bits[4*n+2], bits[4*n+1], bits[4*n]};
      @(posedge clk);   // dut registers period n here
      #1;
      begin
        bit exp_hit; int exp_bin; bit prev;
        exp_hit = 0; exp_bin = 0;
        prev = (n == 0) ? 1'b0 : bits[4*n-1];
        for (int k = 0; k < 4; k++) begin
          if (!exp_hit && bits[4*n+k] && !prev) begin exp_hit = 1; exp_bin = k; end
          prev = bits[4*n+k];
        end
        checks++;
        if (hit !== exp_hit || (exp_hit && fine !== fine_t'(exp_bin))) begin
          failures++;
          if (failures < 10) $display("period %0d: hit %0b fine %0d, expected %0b %0d", n, hit, fine, exp_hit, exp_bin);
        end
        if (exp_hit) n_hits++;
      end
    end
    $display("hits %0d", n_hits);
    if (n_hits < 100) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(2500 * (NPER + 100));
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
