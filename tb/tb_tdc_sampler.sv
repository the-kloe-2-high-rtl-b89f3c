// tb_tdc_sampler: checks the four-phase sampler of one TDC channel.
//
// clk0 and clk90 run at 400 MHz, clk90 625 ps behind clk0. The input is
// driven from a random bit string: bit j is put on the line 300 ps after
// sampling instant j, so instant j (j * 625 ps after the first clk0 edge)
// must see exactly bit j. After the clk0 edge that closes period n the
// output must hold bits 4n..4n+3, bit 4n in position 0.
`timescale 1ps/1ps
module tb_tdc_sampler;
  localparam int NBITS = 4000;
  localparam time T_CLK = 2500, T_PH = 625, T0 = 1250;

  logic clk0 = 1'b0, clk90 = 1'b0, din = 1'b0;
  logic [3:0] samples;
  bit   bits [NBITS];
  int   checks = 0, failures = 0;

  tdc_sampler dut (.clk0, .clk90, .din, .samples);

  always #(T_CLK/2) clk0 = ~clk0;
  initial begin #(T_PH); forever #(T_CLK/2) clk90 = ~clk90; end

  initial begin
    foreach (bits[j]) bits[j] = ($urandom_range(0, 2) == 0);
    din = bits[0];
    #(T0 + 300);
    for (int j = 1; j < NBITS; j++) begin
      din = bits[j];
      #(T_PH);
    end
  end

  initial begin
    // first clk0 rising edge at T0; period n starts at T0 + n*T_CLK
    #(T0 + 100);
    for (int n = 0; n < NBITS/4 - 2; n++) begin
      #(T_CLK);          // 100 ps after the edge closing period n
      checks++;
      if (samples !== {bits[4*n+3], bits[4*n+2], bits[4*n+1], bits[4*n]}) begin
        failures++;
        if (failures < 10) $display("period %0d: samples %b expected %b%b%b%b", n, samples,
                                    bits[4*n+3], bits[4*n+2], bits[4*n+1], bits[4*n]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(T_CLK * (NBITS/4 + 100));
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
