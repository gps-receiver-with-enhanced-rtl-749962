// nav_timing_counter: bit, word and TOW counters of one satellite channel.
//
// After bit lock the tracking loop marks the start of every 20 ms data bit
// with bit_edge. These counters hold the position of the bit being received:
// bit index 0..29 within the word, word index 0..9 within the sub-frame, and
// the TOW of the sub-frame (GPS time at its end in 6 s units). Each bit_edge
// advances the position by one bit, carrying into the word and TOW.
// Frame sync loads the position of the bit now being received (load may
// come a few clocks after the bit edge, never a whole bit later); it comes either from the preamble decoder
// (conventional) or from the frame sync estimator (after power-off). synced
// stays high from the load until clr (main power off / channel lost).
// subframe_start pulses, one clock after the edge, when the new bit is bit 0
// of word 0. Outputs are registered except pos_next, the position that the
// next bit edge will bring (used to store the state at that edge).
//
// The 30/10 structure and TOW meaning follow the paper; the interface and
// the load-on-edge convention are this design's choices.
module nav_timing_counter
  import gps_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     clr,
  input  logic     bit_edge,
  input  logic     load,
  input  nav_pos_t load_pos,
  output nav_pos_t pos,
  output nav_pos_t pos_next,   // position of the bit that starts at the next edge
  output logic     synced,
  output logic     subframe_start
);

  nav_pos_t next_pos;
  assign pos_next = next_pos;

  always_comb begin
    next_pos = pos;
    if (pos.bit_idx == bit_idx_t'(BITS_PER_WORD - 1)) begin
      next_pos.bit_idx = '0;
      if (pos.word_idx == word_idx_t'(WORDS_PER_SUBFRAME - 1)) begin
        next_pos.word_idx = '0;
        next_pos.tow      = pos.tow + 1'b1;
      end else begin
        next_pos.word_idx = pos.word_idx + 1'b1;
      end
    end else begin
      next_pos.bit_idx = pos.bit_idx + 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pos            <= '0;
      synced         <= 1'b0;
      subframe_start <= 1'b0;
    end else if (clr) begin
      pos            <= '0;
      synced         <= 1'b0;
      subframe_start <= 1'b0;
    end else begin
      subframe_start <= 1'b0;
      if (load) begin
        pos            <= load_pos;
        synced         <= 1'b1;
        subframe_start <= (load_pos.word_idx == '0) && (load_pos.bit_idx == '0);
      end else if (bit_edge && synced) begin
        pos            <= next_pos;
        subframe_start <= (next_pos.word_idx == '0) && (next_pos.bit_idx == '0);
      end
    end
  end

endmodule
