// frame_sync_estimator: instant frame sync after a power-off interval.
//
// Before power-off the channel stored, at a data-bit edge, the position of
// the bit starting there (word index, bit index, TOW), the RTC count and the
// carrier Doppler. After wake-up and code, carrier and bit lock, start is
// pulsed at a bit edge together with the RTC count read there. The estimator
// then works out which bit starts at that edge:
//
//   off time  d  = RTC now - RTC stored, in 1/32 ms (32 kHz RTC)
//   Doppler   d' = d + d x (fd_stored + fd_now) / 2 / f_L1   (DOPPLER_COMP)
//   bits      n  = round(d' / 20 ms)        (nearest bit: 10 ms margin)
//   bit       = (bit_stored + n) mod 30
//   word      = (word_stored + (bit_stored + n) div 30) mod 10
//   TOW       = TOW_stored + INT(d' / 6000 ms)              (TOW_FROM_CARRY = 0)
//             = TOW_stored + (word_stored + words) div 10   (TOW_FROM_CARRY = 1)
//   SyncTIC   = TIC now + (10 - word) x 6
//
// est_valid is low when no state was stored or when d' is not below
// MAX_OFF_MS: with a 10 ppm RTC and a 10 ms bit margin the off time must stay
// under 10^6 ms. The result is registered: done pulses, and the outputs are
// valid, the clock after start. Everything is combinational between the
// start registers and the outputs (wide constant dividers).
//
// The formulas, the 32 kHz RTC, the 10^6 ms limit and the use of the stored
// and current Doppler follow the paper (its worked example: word 6, bit 19,
// TOW 2679, RTC 17362 -> 6731176 gives bit 9, word 6, TOW 2713). The Doppler
// formula is this design's reading of "compensate code Doppler effects",
// which the paper does not write out. The paper's TOW rule ignores where in
// the sub-frame the receiver stopped, which can leave TOW one short; it is
// the default, and TOW_FROM_CARRY = 1 selects the rule consistent with the
// word carry.
module frame_sync_estimator
  import gps_pkg::*;
#(
  parameter int unsigned MAX_OFF_MS     = 1_000_000,
  parameter bit          DOPPLER_COMP   = 1'b1,
  parameter bit          TOW_FROM_CARRY = 1'b0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  saved_state_t saved,
  input  rtc_t         rtc_now,
  input  doppler_t     doppler_now,
  input  tic_t         tic_now,
  output logic         done,
  output logic         est_valid,
  output nav_pos_t     est_pos,
  output tic_t         est_sync_tic,
  output logic signed [39:0] off_time_q5,   // d', 1/32 ms
  output logic signed [15:0] bit_phase_q5   // d' - n x 20 ms, 1/32 ms
);

  localparam longint BIT_Q5      = longint'(MS_PER_BIT) * RTC_COUNTS_PER_MS;       // 640
  localparam longint SUBFRAME_Q5 = longint'(MS_PER_SUBFRAME) * RTC_COUNTS_PER_MS;  // 192000
  localparam longint MAX_OFF_Q5  = longint'(MAX_OFF_MS) * RTC_COUNTS_PER_MS;

  longint diff, corr, adj, n_bits, bit_sum, word_carry, word_sum, tow_inc;
  longint dop_sum;
  nav_pos_t pos_c;
  logic     valid_c;
  tic_t     sync_tic_c;

  always_comb begin
    diff    = longint'(rtc_t'(rtc_now - saved.rtc));
    dop_sum = longint'(saved.doppler) + longint'(doppler_now);
    corr    = DOPPLER_COMP ? (diff * dop_sum) / (2 * L1_HZ) : 64'sd0;
    adj     = diff + corr;
    n_bits  = (adj + BIT_Q5 / 2) / BIT_Q5;
    bit_sum    = longint'(saved.pos.bit_idx) + n_bits;
    word_carry = bit_sum / longint'(BITS_PER_WORD);
    word_sum   = longint'(saved.pos.word_idx) + word_carry;
    tow_inc    = TOW_FROM_CARRY ? word_sum / longint'(WORDS_PER_SUBFRAME) : adj / SUBFRAME_Q5;
    pos_c.bit_idx  = bit_idx_t'(bit_sum % longint'(BITS_PER_WORD));
    pos_c.word_idx = word_idx_t'(word_sum % longint'(WORDS_PER_SUBFRAME));
    pos_c.tow      = saved.pos.tow + tow_t'(tow_inc);
    sync_tic_c     = tic_now + tic_t'((WORDS_PER_SUBFRAME - 32'(pos_c.word_idx)) * TICS_PER_WORD);
    valid_c        = saved.valid && (adj >= 0) && (adj < MAX_OFF_Q5);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done         <= 1'b0;
      est_valid    <= 1'b0;
      est_pos      <= '0;
      est_sync_tic <= '0;
      off_time_q5  <= '0;
      bit_phase_q5 <= '0;
    end else begin
      done <= start;
      if (start) begin
        est_valid    <= valid_c;
        est_pos      <= pos_c;
        est_sync_tic <= sync_tic_c;
        off_time_q5  <= 40'(adj);
        bit_phase_q5 <= 16'(adj - n_bits * BIT_Q5);
      end
    end
  end

endmodule
