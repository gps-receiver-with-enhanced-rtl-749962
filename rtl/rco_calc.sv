// rco_calc: receiver clock offset (RCO) and receiver-to-GPS time conversion.
//
// The receiver keeps its own time: a zero time ZT (week, millisecond of
// week) set when it started, plus 100 ms per TIC. When a channel is frame
// synced, the TIC value expected at the end of the sub-frame being received
// (SyncTIC) and that sub-frame's TOW describe the same instant in both time
// scales, so on rco_set the offset is computed as
//
//   RCO.week = ZT.week - WeekNumber
//   RCO.ms   = ZT.ms + SyncTIC x 100 - (TOW x 6000 + 75)
//
// where 75 ms is the propagation delay assumed before any position is
// known. From then on, at every tic the GPS time of that TIC is formed as
// receiver time - RCO, i.e. week = ZT.week - RCO.week and ms = ZT.ms +
// tic_count x 100 - RCO.ms, normalised into 0 .. 604 799 999 ms with the week
// adjusted. rco_* are valid the clock after rco_set; gps_* the clock after
// tic (gps_valid then set). All times are in milliseconds.
//
// Eq. (3) of the paper is implemented as written, in integer milliseconds;
// the millisecond unit, widths and week normalisation are this design's.
module rco_calc
  import gps_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clr,
  input  week_t zt_week,
  input  ms_t   zt_ms,
  input  logic  rco_set,
  input  week_t week_number,
  input  tic_t  sync_tic,
  input  tow_t  tow,
  input  logic  tic,
  input  tic_t  tic_count,
  output logic  rco_valid,
  output logic signed [WEEK_W:0] rco_week,
  output ms_t   rco_ms,
  output logic  gps_valid,
  output week_t gps_week,
  output ms_t   gps_ms
);

  ms_t    rco_ms_c, gps_raw, gps_rem;
  longint gps_wk_off;

  always_comb begin
    rco_ms_c = zt_ms + ms_t'(sync_tic) * ms_t'(TIC_MS)
             - (ms_t'(tow) * ms_t'(MS_PER_SUBFRAME) + ms_t'(PROP_DELAY_INIT_MS));
    gps_raw    = zt_ms + ms_t'(tic_count) * ms_t'(TIC_MS) - rco_ms;
    gps_wk_off = longint'(gps_raw) / MS_PER_WEEK;
    gps_rem    = gps_raw - ms_t'(gps_wk_off * MS_PER_WEEK);
    if (gps_rem < 0) begin
      gps_rem    = gps_rem + ms_t'(MS_PER_WEEK);
      gps_wk_off = gps_wk_off - 1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rco_valid <= 1'b0;
      rco_week  <= '0;
      rco_ms    <= '0;
      gps_valid <= 1'b0;
      gps_week  <= '0;
      gps_ms    <= '0;
    end else if (clr) begin
      rco_valid <= 1'b0;
      gps_valid <= 1'b0;
    end else begin
      if (rco_set) begin
        rco_valid <= 1'b1;
        rco_week  <= $signed({1'b0, zt_week}) - $signed({1'b0, week_number});
        rco_ms    <= rco_ms_c;
      end
      if (tic && rco_valid) begin
        gps_valid <= 1'b1;
        gps_week  <= week_t'(longint'($signed({1'b0, zt_week})) - longint'(rco_week) + gps_wk_off);
        gps_ms    <= gps_rem;
      end
    end
  end

endmodule
