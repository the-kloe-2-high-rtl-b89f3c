// event_fifo: buffer of hit frames between the TDC and the VME readout.
//
// A synchronous first-in first-out memory of DEPTH entries of WIDTH bits.
// `rd_data` shows the oldest entry whenever `empty` is low (show-ahead);
// `rd_en` removes it. A write while the buffer is full is dropped: the
// sticky `overflow` flag is set and `lost` counts the dropped frames. Both
// sides may act in the same clock. `clear` empties the buffer and resets
// the flags. Buffering the frames in the FPGA follows the original board;
// the depth and the drop-on-full policy are this design's choice.
`timescale 1ps/1ps
module event_fifo #(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned WIDTH = het_pkg::FRAME_W
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clear,
  input  logic                       wr_en,
  input  logic [WIDTH-1:0]           wr_data,
  input  logic                       rd_en,
  output logic [WIDTH-1:0]           rd_data,
  output logic                       empty,
  output logic                       full,
  output logic [$clog2(DEPTH+1)-1:0] count,
  output logic                       overflow,
  output logic [15:0]                lost
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic             do_wr, do_rd;

  assign empty   = (count == 0);
  assign full    = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign do_rd   = rd_en & ~empty;
  assign do_wr   = wr_en & (~full | do_rd);
  assign rd_data = mem[rd_ptr];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr   <= '0;
      rd_ptr   <= '0;
      count    <= '0;
      overflow <= 1'b0;
      lost     <= '0;
    end else if (clear) begin
      wr_ptr   <= '0;
      rd_ptr   <= '0;
      count    <= '0;
      overflow <= 1'b0;
      lost     <= '0;
    end else begin
      if (do_wr) wr_ptr <= (wr_ptr == AW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      if (do_rd) rd_ptr <= (rd_ptr == AW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      count <= count + ($bits(count))'(do_wr) - ($bits(count))'(do_rd);
      if (wr_en && !do_wr) begin
        overflow <= 1'b1;
        if (lost != '1) lost <= lost + 1'b1;
      end
    end
  end

  // The reader must not pop an empty buffer.
  a_no_pop_empty: assert property (@(posedge clk) disable iff (!rst_n) rd_en |-> !empty)
    else $error("event_fifo: read while empty");
endmodule
