// gps_instant_on_top: timing core of an instant-on GPS receiver.
//
// A GPS receiver normally needs the sub-frame preamble and TOW of each
// satellite (1.2 s to 6 s) before it can time its pseudoranges. This core
// stores, before main power goes off, each channel's position in the
// navigation message together with an always-on RTC count; after power comes
// back and the tracking loops report code, carrier and bit lock, the frame
// sync estimator derives the bit, word and TOW from the RTC difference, so
// frame sync and the first position need no preamble.
//
// Contents: the always-on RTC counter (rtc_clk domain, Gray-coded into clk),
// the 1 ms / 100 ms TIC time base, the sequencing controller, the RCO and
// GPS-time unit, and NUM_CH satellite channels, each with bit/word/TOW
// counters, preamble detector, frame sync estimator, retention registers,
// code time counter and pseudorange unit. The correlators, acquisition and
// tracking loops, and the navigation solution software, are outside: their
// signals are ports. The tracking ports of channel i are element i of the
// arrays; they are ignored while pwr_on is low. The RCO uses the channel the
// controller names as reference (rco_ref).
//
// The partitioning follows the paper's receiver (tracking in one device,
// estimator and positioning next to the processor); the port list and the
// clock of 16.368 MHz are this design's choices.
module gps_instant_on_top
  import gps_pkg::*;
#(
  parameter int unsigned NUM_CH         = 8,
  parameter int unsigned CLKS_PER_MS    = 16368,
  parameter int unsigned SLEEP_MS       = 600_000,
  parameter int unsigned EPH_UPDATE_MS  = 30_000,
  parameter int unsigned MAX_OFF_MS     = 1_000_000,
  parameter bit          DOPPLER_COMP   = 1'b1,
  parameter bit          TOW_FROM_CARRY = 1'b0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              rtc_clk,
  input  logic              rtc_rst_n,
  // user / positioning software
  input  logic              user_req,
  input  logic [7:0]        eph_valid_cnt,
  input  week_t             week_number,
  input  week_t             zt_week,
  input  ms_t               zt_ms,
  output logic              nav_req,
  input  logic              nav_done,
  // tracking loops, one element per channel
  input  logic [NUM_CH-1:0] code_lock,
  input  logic [NUM_CH-1:0] carrier_lock,
  input  logic [NUM_CH-1:0] bit_lock,
  input  logic [NUM_CH-1:0] chip_tick,
  input  logic [NUM_CH-1:0] bit_edge,
  input  logic [NUM_CH-1:0] bit_val,
  input  doppler_t          doppler [NUM_CH],
  // power and status
  output logic              pwr_on,
  output logic              est_en,
  output logic              cold_start,
  output logic              wake_by_timer,
  output logic [3:0]        ctrl_state,
  output rtc_t              rtc_now,
  output logic              tic,
  output tic_t              tic_count,
  output logic              rco_valid,
  output logic signed [WEEK_W:0] rco_week,
  output ms_t               rco_ms,
  output logic              gps_valid,
  output week_t             gps_week,
  output ms_t               gps_ms,
  // per-channel results
  output logic [NUM_CH-1:0] ch_synced,
  output logic [NUM_CH-1:0] ch_synced_by_est,
  output logic [NUM_CH-1:0] ch_est_rejected,
  output logic [NUM_CH-1:0] ch_preamble_seen,
  output nav_pos_t          ch_pos [NUM_CH],
  output saved_state_t      ch_saved [NUM_CH],
  output logic signed [15:0] ch_est_bit_phase_q5 [NUM_CH],
  output logic [NUM_CH-1:0] ch_pr_valid,
  output logic signed [31:0] ch_delay_chips [NUM_CH],
  output logic signed [47:0] ch_range_m_q8 [NUM_CH]
);

  rtc_t rtc_count_unused;
  logic ms_tick;
  logic save_req, rco_set;
  logic [$clog2(NUM_CH)-1:0] rco_ref;
  logic [NUM_CH-1:0] ch_save_done;
  tic_t ch_sync_tic [NUM_CH];
  tow_t ch_sync_tow [NUM_CH];

  rtc_counter u_rtc (
    .rtc_clk, .rtc_rst_n, .clk, .rst_n,
    .rtc_count(rtc_count_unused),
    .rtc_now  (rtc_now)
  );

  tic_gen #(.CLKS_PER_MS(CLKS_PER_MS)) u_tic (
    .clk, .rst_n,
    .en       (pwr_on),
    .ms_tick  (ms_tick),
    .tic      (tic),
    .tic_count(tic_count)
  );

  instant_on_ctrl #(
    .NUM_CH(NUM_CH), .SLEEP_MS(SLEEP_MS), .EPH_UPDATE_MS(EPH_UPDATE_MS)
  ) u_ctrl (
    .clk, .rst_n,
    .rtc_now      (rtc_now),
    .ms_tick      (ms_tick),
    .tic          (tic),
    .user_req     (user_req),
    .eph_valid_cnt(eph_valid_cnt),
    .ch_synced    (ch_synced),
    .ch_save_done (ch_save_done),
    .nav_done     (nav_done),
    .pwr_on       (pwr_on),
    .est_en       (est_en),
    .cold_start   (cold_start),
    .save_req     (save_req),
    .rco_set      (rco_set),
    .rco_ref      (rco_ref),
    .nav_req      (nav_req),
    .wake_by_timer(wake_by_timer),
    .state_o      (ctrl_state)
  );

  rco_calc u_rco (
    .clk, .rst_n,
    .clr        (!pwr_on),
    .zt_week    (zt_week),
    .zt_ms      (zt_ms),
    .rco_set    (rco_set),
    .week_number(week_number),
    .sync_tic   (ch_sync_tic[rco_ref]),
    .tow        (ch_sync_tow[rco_ref]),
    .tic        (tic),
    .tic_count  (tic_count),
    .rco_valid  (rco_valid),
    .rco_week   (rco_week),
    .rco_ms     (rco_ms),
    .gps_valid  (gps_valid),
    .gps_week   (gps_week),
    .gps_ms     (gps_ms)
  );

  for (genvar i = 0; i < NUM_CH; i++) begin : g_ch
    tic_t est_sync_tic_unused;
    logic signed [39:0] off_time_unused;
    fse_channel #(
      .MAX_OFF_MS(MAX_OFF_MS), .DOPPLER_COMP(DOPPLER_COMP), .TOW_FROM_CARRY(TOW_FROM_CARRY)
    ) u_ch (
      .clk, .rst_n,
      .pwr_on          (pwr_on),
      .code_lock       (code_lock[i]),
      .carrier_lock    (carrier_lock[i]),
      .bit_lock        (bit_lock[i]),
      .chip_tick       (chip_tick[i]),
      .bit_edge        (bit_edge[i]),
      .bit_val         (bit_val[i]),
      .doppler         (doppler[i]),
      .rtc_now         (rtc_now),
      .tic             (tic),
      .tic_count       (tic_count),
      .gps_valid       (gps_valid),
      .gps_ms          (gps_ms),
      .est_en          (est_en),
      .save_req        (save_req),
      .save_done       (ch_save_done[i]),
      .synced          (ch_synced[i]),
      .synced_by_est   (ch_synced_by_est[i]),
      .est_rejected    (ch_est_rejected[i]),
      .preamble_seen   (ch_preamble_seen[i]),
      .pos             (ch_pos[i]),
      .sync_tic        (ch_sync_tic[i]),
      .sync_tow        (ch_sync_tow[i]),
      .est_sync_tic    (est_sync_tic_unused),
      .est_bit_phase_q5(ch_est_bit_phase_q5[i]),
      .off_time_q5     (off_time_unused),
      .saved           (ch_saved[i]),
      .code_time       (),
      .pr_valid        (ch_pr_valid[i]),
      .delay_chips     (ch_delay_chips[i]),
      .range_m_q8      (ch_range_m_q8[i])
    );
  end

endmodule
