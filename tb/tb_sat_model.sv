// tb_sat_model: behavioural model of one tracked satellite signal, as the
// tracking loop would deliver it, for the channel and system testbenches.
//
// Time is the testbench's clock count t. The signal received at t was sent
// at t - delay; CLKS_PER_CHIP clocks make one C/A chip, 20460 chips one data
// bit, 300 bits one sub-frame. Transmit time 0 is the start of a sub-frame
// whose TOW (GPS time at its end, 6 s units) is TOW0 + 1. The model gives
// the chip ticks, bit edges, the data bit that has just ended (preamble
// 10001011, TOW in bits 30..46 XORed with bit 29, alternating filler,
// optionally inverted) and the true position of the bit being received.
module tb_sat_model
  import gps_pkg::*;
#(
  parameter int CLKS_PER_CHIP = 2,
  parameter int TOW0          = 1000
) (
  input  longint   t,
  input  longint   delay,
  input  logic     inv,
  output logic     chip_tick,
  output logic     bit_edge,
  output logic     bit_val,
  output nav_pos_t true_pos
);
  localparam longint CLK_PER_BIT = longint'(CLKS_PER_CHIP) * 20460;

  function automatic bit nav_bit(longint bn);
    longint sf = bn / 300;
    int b = int'(bn % 300);
    int tow = TOW0 + int'(sf) + 1;
    bit d30 = (sf % 2) == 1;
    if (b < 8) return 1'((8'b1000_1011 >> (7 - b)) & 1);
    if (b == 29) return d30;
    if (b >= 30 && b <= 46) return 1'((tow >> (46 - b)) & 1) ^ d30;
    return 1'(b % 2);
  endfunction

  longint rx, bn;
  always_comb begin
    rx        = t - delay;
    bn        = rx / CLK_PER_BIT;
    chip_tick = (rx >= 0) && (rx % CLKS_PER_CHIP == 0);
    bit_edge  = (rx > 0) && (rx % CLK_PER_BIT == 0);
    bit_val   = nav_bit(bn - 1) ^ inv;
    true_pos.bit_idx  = 5'(bn % 30);
    true_pos.word_idx = 4'((bn / 30) % 10);
    true_pos.tow      = 17'(TOW0 + int'(bn / 300) + 1);
  end
endmodule
