// sig_sync: synchroniser for a slow asynchronous control input.
//
// The input passes through STAGES flip-flops clocked by the system clock;
// `sync_out` is the synchronised level and `rise` is high for one clock when
// it goes from low to high. Latency is STAGES clocks to `sync_out` and to
// `rise`. Used for the KLOE trigger input and the VME strobes; the two-flop
// depth is this design's choice.
`timescale 1ps/1ps
module sig_sync #(
  parameter int unsigned STAGES = 2
) (
  input  logic clk,
  input  logic rst_n,
  input  logic async_in,
  output logic sync_out,
  output logic rise
);
  logic [STAGES-1:0] chain;
  logic              last_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      chain  <= '0;
      last_q <= 1'b0;
    end else begin
      chain  <= {chain[STAGES-2:0], async_in};
      last_q <= chain[STAGES-1];
    end
  end

  assign sync_out = chain[STAGES-1];
  assign rise     = chain[STAGES-1] & ~last_q;
endmodule
