// vme_slave: VME A24/D32 slave interface of the acquisition board.
//
// The board answers in the 64 KiB A24 window whose address bits A23..A16
// equal `board_addr` (the two hex switches), for address modifiers 0x39
// and 0x3D, single 32-bit cycles (both data strobes low). The bus strobes
// are asynchronous and are brought into the system clock with two-flop
// synchronisers; address, data, WRITE and AM are stable while the strobes
// are asserted and are sampled directly. A cycle runs IDLE -> ACCESS (the
// register is read or written, once) -> ACK (DTACK low, data driven for a
// read) until the master releases the data strobes, then back to IDLE. A
// cycle that is not for this board is sat out in SKIP until its strobes
// are released, so that a new address placed on the bus while the
// synchronised strobes still lag cannot start a false access.
// DTACK therefore falls about four clocks (10 ns at 400 MHz) after the
// strobes and rises about three clocks after they are released.
//
// Registers (byte offset):
//   0x00 CTRL    rw  bit0 acquisition enable; writing bit1 = 1 gives a
//                    one-clock clear of the buffer and counters
//   0x04 STATUS  r   bit0 buffer empty, bit1 full, bit2 overflow,
//                    bit3 fiducial seen, bits 31:16 frames in buffer
//   0x08 DATA    r   next 32-bit word of the oldest frame; a frame is four
//                    words: {event, time base}, hit mask, fine times of
//                    channels 31..16, of channels 15..0; the frame leaves
//                    the buffer after its fourth word; 0xFFFFFFFF if empty
//   0x0C EVENTS  r   triggers counted
//   0x10 LOST    r   frames dropped on a full buffer
//   0x14 FIDS    r   fiducials counted
// Other offsets read 0 and ignore writes. Only 32-bit cycles are served, so
// address bit A1 is not decoded, and only data bits 1:0 are written (CTRL);
// the lint notes on the unused bits of vme_addr and vme_data_i stand for
// that reason. That the board is read out over
// VME follows the original board; the address decoding, the register map
// and the word order are this design's choice.
`timescale 1ps/1ps
module vme_slave
  import het_pkg::*;
#(
  parameter int unsigned CNT_W = 11
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [7:0]         board_addr,
  // VME bus, after the transceivers
  input  logic               vme_as_n,
  input  logic [1:0]         vme_ds_n,
  input  logic               vme_write_n,
  input  logic [5:0]         vme_am,
  input  logic [23:1]        vme_addr,
  input  logic [31:0]        vme_data_i,
  output logic [31:0]        vme_data_o,
  output logic               vme_data_oe,
  output logic               vme_dtack_n,
  // control
  output logic               ctrl_enable,
  output logic               ctrl_clear,
  // frame buffer read side and status
  input  frame_t             fifo_data,
  input  logic               fifo_empty,
  input  logic               fifo_full,
  input  logic [CNT_W-1:0]   fifo_count,
  input  logic               fifo_overflow,
  input  logic [15:0]        fifo_lost,
  output logic               fifo_rd,
  // counters
  input  logic [EVT_W-1:0]   event_count,
  input  logic               fid_seen,
  input  logic [31:0]        fid_count
);
  typedef enum logic [1:0] {S_IDLE, S_ACCESS, S_ACK, S_SKIP} state_t;

  state_t     state;
  logic       as_s, ds0_s, ds1_s;
  logic       as_rise_unused, ds0_rise_unused, ds1_rise_unused;
  logic       strobed, selected;
  logic [15:0] offset;
  logic [1:0] word_idx;
  logic [31:0] rd_word;
  logic [31:0] frame_word;

  // Strobes are active low on the bus; synchronise their asserted state.
  sig_sync u_as  (.clk, .rst_n, .async_in(~vme_as_n),    .sync_out(as_s),  .rise(as_rise_unused));
  sig_sync u_ds0 (.clk, .rst_n, .async_in(~vme_ds_n[0]), .sync_out(ds0_s), .rise(ds0_rise_unused));
  sig_sync u_ds1 (.clk, .rst_n, .async_in(~vme_ds_n[1]), .sync_out(ds1_s), .rise(ds1_rise_unused));

  assign offset   = {vme_addr[15:2], 2'b00};
  assign strobed  = as_s && ds0_s && ds1_s;
  assign selected = (vme_addr[23:16] == board_addr)
                 && (vme_am == AM_A24_USER || vme_am == AM_A24_SUP);

  // Word `word_idx` of the oldest frame, most significant word first.
  always_comb begin
    logic [FRAME_W-1:0] flat;
    flat       = fifo_data;
    frame_word = flat[FRAME_W-1-32*word_idx -: 32];
  end

  always_comb begin
    unique case (offset)
      REG_CTRL:   rd_word = {31'b0, ctrl_enable};
      REG_STATUS: rd_word = {16'(fifo_count), 12'b0, fid_seen, fifo_overflow, fifo_full, fifo_empty};
      REG_DATA:   rd_word = fifo_empty ? DATA_EMPTY : frame_word;
      REG_EVENTS: rd_word = 32'(event_count);
      REG_LOST:   rd_word = 32'(fifo_lost);
      REG_FIDS:   rd_word = fid_count;
      default:    rd_word = '0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      vme_data_o  <= '0;
      vme_data_oe <= 1'b0;
      vme_dtack_n <= 1'b1;
      ctrl_enable <= 1'b0;
      ctrl_clear  <= 1'b0;
      fifo_rd     <= 1'b0;
      word_idx    <= '0;
    end else begin
      ctrl_clear <= 1'b0;
      fifo_rd    <= 1'b0;
      if (ctrl_clear) word_idx <= '0;
      unique case (state)
        S_IDLE: if (strobed) state <= selected ? S_ACCESS : S_SKIP;
        // a cycle for another board: wait until it is over
        S_SKIP: if (!as_s && !ds0_s && !ds1_s) state <= S_IDLE;
        S_ACCESS: begin
          if (!vme_write_n) begin
            if (offset == REG_CTRL) begin
              ctrl_enable <= vme_data_i[0];
              ctrl_clear  <= vme_data_i[1];
            end
          end else begin
            vme_data_o  <= rd_word;
            vme_data_oe <= 1'b1;
            if (offset == REG_DATA && !fifo_empty) begin
              word_idx <= word_idx + 1'b1;
              if (word_idx == 2'(FRAME_WORDS - 1)) fifo_rd <= 1'b1;
            end
          end
          vme_dtack_n <= 1'b0;
          state       <= S_ACK;
        end
        S_ACK: if (!ds0_s && !ds1_s) begin
          vme_dtack_n <= 1'b1;
          vme_data_oe <= 1'b0;
          state       <= S_IDLE;
        end
      endcase
    end
  end

  // DTACK is only given inside a cycle; data is only driven on reads.
  a_dtack_in_cycle: assert property (@(posedge clk) disable iff (!rst_n)
    $fell(vme_dtack_n) |-> $past(state == S_ACCESS))
    else $error("vme_slave: DTACK outside a cycle");
  a_oe_with_dtack: assert property (@(posedge clk) disable iff (!rst_n)
    vme_data_oe |-> !vme_dtack_n)
    else $error("vme_slave: data driven outside DTACK");
endmodule
