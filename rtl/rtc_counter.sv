// rtc_counter: always-on real-time-clock counter and its crossing into the
// receiver clock domain.
//
// The counter runs on the 32 kHz RTC clock and keeps counting while the
// receiver's main power is off; the frame sync estimator only ever uses the
// difference of two readings, so the counter simply wraps. The count is
// converted to Gray code in the RTC domain, passed through a SYNC_STAGES-flop
// synchronizer on the receiver clock and converted back to binary, so a
// reading in the receiver domain is always a value the counter really held
// (at most SYNC_STAGES+1 receiver clocks plus one RTC period old).
//
// The 32 kHz rate and the counter's role follow the paper; the 32-bit width,
// Gray-code crossing and reset are this design's choices.
module rtc_counter
  import gps_pkg::*;
#(
  parameter int unsigned SYNC_STAGES = 2
) (
  input  logic rtc_clk,      // 32 kHz
  input  logic rtc_rst_n,    // always-on domain reset (power-on only)
  input  logic clk,          // receiver clock
  input  logic rst_n,
  output rtc_t rtc_count,    // RTC domain value
  output rtc_t rtc_now       // same value, synchronised to clk
);

  rtc_t gray_rtc;
  rtc_t sync_q [SYNC_STAGES];
  rtc_t bin_c;

  always_ff @(posedge rtc_clk or negedge rtc_rst_n) begin
    if (!rtc_rst_n) begin
      rtc_count <= '0;
      gray_rtc  <= '0;
    end else begin
      rtc_count <= rtc_count + 1'b1;
      gray_rtc  <= (rtc_count + 1'b1) ^ ((rtc_count + 1'b1) >> 1);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < SYNC_STAGES; i++) sync_q[i] <= '0;
      rtc_now <= '0;
    end else begin
      sync_q[0] <= gray_rtc;
      for (int i = 1; i < SYNC_STAGES; i++) sync_q[i] <= sync_q[i-1];
      rtc_now <= bin_c;
    end
  end

  // Gray to binary: b[i] = XOR of g[RTC_W-1:i]
  always_comb begin
    bin_c[RTC_W-1] = sync_q[SYNC_STAGES-1][RTC_W-1];
    for (int i = RTC_W - 2; i >= 0; i--)
      bin_c[i] = bin_c[i+1] ^ sync_q[SYNC_STAGES-1][i];
  end

endmodule
