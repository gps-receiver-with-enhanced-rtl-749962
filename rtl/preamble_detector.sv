// preamble_detector: conventional frame sync from the navigation data bits.
//
// Without a stored state the receiver must find the sub-frame start in the
// data itself. This block shifts in one data bit per bit_edge (bit_val is
// the bit that has just ended), looks for the 8-bit preamble at the start of
// the first word in either polarity (the carrier loop leaves a 180 degree
// ambiguity), then counts bits to the second word and reads its 17-bit TOW
// field (bits 30..46 of the sub-frame). The second word's data bits are sent
// XORed with the last bit of the first word, so the TOW is recovered as the
// received bits XOR the received bit 29; the tracking polarity cancels.
// When bit 46 has been received, load pulses for one clock, the clock after
// the bit edge that starts bit 47, with load_pos = {word 1, bit 17, TOW}
// (so its word and bit fields are constants). The block then waits
// for clr before searching again. Word parity is not checked, so a data
// pattern that imitates the preamble gives a false sync.
//
// That the first word carries the preamble and the second word the TOW is
// the paper's; the preamble value 8'b10001011, the TOW field position and the
// D30 rule come from the GPS interface specification, not from the paper.
module preamble_detector
  import gps_pkg::*;
#(
  parameter logic [7:0] PREAMBLE = 8'b1000_1011
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     clr,
  input  logic     bit_edge,
  input  logic     bit_val,
  output logic     load,
  output nav_pos_t load_pos,
  output logic     preamble_seen
);

  typedef enum logic [1:0] {SEARCH, COLLECT, DONE} pd_state_e;

  localparam int unsigned TOW_FIRST = BITS_PER_WORD;        // 30
  localparam int unsigned TOW_LAST  = BITS_PER_WORD + 16;   // 46

  pd_state_e   state;
  logic [7:0]  shreg;
  logic [8:0]  bit_cnt;   // number of sub-frame bits received so far
  logic        d30;
  tow_t        tow_sr;
  logic [7:0]  shreg_n;

  assign shreg_n = {shreg[6:0], bit_val};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= SEARCH;
      shreg         <= '0;
      bit_cnt       <= '0;
      d30           <= 1'b0;
      tow_sr        <= '0;
      load          <= 1'b0;
      load_pos      <= '0;
      preamble_seen <= 1'b0;
    end else if (clr) begin
      state         <= SEARCH;
      shreg         <= '0;
      bit_cnt       <= '0;
      load          <= 1'b0;
      preamble_seen <= 1'b0;
    end else begin
      load <= 1'b0;
      if (bit_edge) begin
        shreg <= shreg_n;
        unique case (state)
          SEARCH: begin
            if (shreg_n == PREAMBLE || shreg_n == ~PREAMBLE) begin
              state         <= COLLECT;
              bit_cnt       <= 9'd8;
              preamble_seen <= 1'b1;
            end
          end
          COLLECT: begin
            bit_cnt <= bit_cnt + 1'b1;
            if (bit_cnt == 9'(BITS_PER_WORD - 1)) d30 <= bit_val;
            if (bit_cnt >= 9'(TOW_FIRST) && bit_cnt <= 9'(TOW_LAST))
              tow_sr <= {tow_sr[TOW_W-2:0], bit_val ^ d30};
            if (bit_cnt == 9'(TOW_LAST)) begin
              state             <= DONE;
              load              <= 1'b1;
              load_pos.word_idx <= word_idx_t'(1);
              load_pos.bit_idx  <= bit_idx_t'(TOW_LAST + 1 - BITS_PER_WORD);
              load_pos.tow      <= {tow_sr[TOW_W-2:0], bit_val ^ d30};
            end
          end
          default: ;
        endcase
      end
    end
  end

endmodule
