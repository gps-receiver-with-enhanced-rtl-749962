// pseudorange_calc: propagation delay and pseudorange of one channel.
//
// At a TIC the receiver knows the GPS time of the TIC (receiver time minus
// RCO) and, from the code time, how far into the current sub-frame the
// signal received at that TIC was. The sub-frame started at the GPS time
// t_s = (TOW - 1) x 6 s, since TOW is the GPS time at its end. Hence
//
//   delay  = GPS time at TIC - t_s - code time        (in chips, 1023/ms)
//   range  = c x delay = delay x 293.0523 m/chip      (Eq. (2))
//
// The range is produced in metres with 8 fractional bits (constant
// 293.0523 x 256 = 75021). A negative millisecond difference is taken as a
// week rollover. start is a one-clock pulse; done and the results follow one
// clock later.
//
// The sequence follows the paper's description of Fig. 1; the chip unit,
// fixed-point constant and rollover rule are this design's choices.
module pseudorange_calc
  import gps_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  ms_t             gps_ms,        // GPS time of week at the TIC
  input  tow_t            tow,           // TOW of the sub-frame code_time refers to
  input  logic [CT_W-1:0] code_time,     // chips since that sub-frame's start
  output logic            done,
  output logic signed [31:0] delay_chips,
  output logic signed [47:0] range_m_q8
);

  localparam longint M_PER_CHIP_Q8 = 75021;

  longint tsi_ms, dms, dchips;

  always_comb begin
    tsi_ms = (longint'(tow) - 1) * longint'(MS_PER_SUBFRAME);
    dms    = longint'(gps_ms) - tsi_ms;
    if (dms < 0) dms = dms + MS_PER_WEEK;
    dchips = dms * longint'(CHIPS_PER_MS) - longint'(code_time);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done        <= 1'b0;
      delay_chips <= '0;
      range_m_q8  <= '0;
    end else begin
      done <= start;
      if (start) begin
        delay_chips <= 32'(dchips);
        range_m_q8  <= 48'(dchips * M_PER_CHIP_Q8);
      end
    end
  end

endmodule
