// code_time_counter: the "precise counter" of one channel.
//
// Code time is the number of C/A code chips received between the start of
// the current sub-frame (the frame sync point) and the receiver TIC. The
// counter counts chip_tick pulses within the current data bit (cleared by
// bit_edge, which coincides with the first chip of a bit; a chip_tick marks
// the start of a chip and so the end of the one before, and a chip_tick in
// the TIC clock counts as completed) and adds the
// whole bits already received in the sub-frame, taken from the bit/word
// counters: code time = (word x 30 + bit) x 20460 + chips in bit. At each
// tic, while the channel is frame-synced, that value is latched into
// code_time and code_time_valid is set; the latch is a registered output,
// valid the clock after tic. Sub-chip code phase is not kept here.
//
// The role of the counter (chips from frame start to TIC, Fig. 1 item 3)
// is the paper's; splitting it into a chip-in-bit counter plus the bit
// counters is this design's choice.
module code_time_counter
  import gps_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            clr,
  input  logic            chip_tick,
  input  logic            bit_edge,
  input  logic            tic,
  input  logic            synced,
  input  nav_pos_t        pos,
  output logic [CT_W-1:0] code_time,
  output tow_t            code_time_tow,   // TOW of the sub-frame code_time refers to
  output logic            code_time_valid
);

  logic [14:0]     chip_in_bit;     // 0..20459
  logic [CT_W-1:0] bits_done_chips;
  logic [8:0]      bit_num;

  assign bit_num         = 9'(pos.word_idx) * 9'(BITS_PER_WORD) + 9'(pos.bit_idx);
  assign bits_done_chips = CT_W'(bit_num) * CT_W'(CHIPS_PER_BIT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      chip_in_bit     <= '0;
      code_time       <= '0;
      code_time_tow   <= '0;
      code_time_valid <= 1'b0;
    end else if (clr) begin
      chip_in_bit     <= '0;
      code_time_valid <= 1'b0;
    end else begin
      if (bit_edge)
        chip_in_bit <= '0;
      else if (chip_tick)
        chip_in_bit <= chip_in_bit + 1'b1;
      if (tic && synced) begin
        // a TIC on a bit edge sees the new bit at chip 0
        code_time       <= bit_edge ? bits_done_chips + CT_W'(CHIPS_PER_BIT)
                                    : bits_done_chips + CT_W'(chip_in_bit) + CT_W'(chip_tick);
        code_time_tow   <= pos.tow;
        code_time_valid <= 1'b1;
      end
    end
  end

endmodule
