// tb_gps_env: stimulus, models and checks for the whole timing core.
//
// Shared by the reduced-size and the full-size system testbenches. It
// models NUM_CH satellites with distinct delays (tb_sat_model), the 32 kHz
// RTC clock derived from the same time line, the positioning software (it
// answers nav_req after checking the pseudoranges) and the user. Time t
// counts receiver clocks; while main power is off the clock is slowed so
// that each clock moves t on by several RTC half periods, which lets
// minutes of sleep pass quickly.
//
// Scenario:
//   A  user wake with no ephemeris -> cold start, channels lock one after
//      another (the first alone, so the controller loops back once), frame
//      sync by preamble, RCO, navigation; then, in the reduced run, the
//      ephemeris update; state save and power-off;
//   B  wake (user in the reduced run, sleep timer in the full-size run),
//      estimated frame sync on every channel within one bit of bit lock,
//      RCO, navigation, save, power-off;
//   W  (workload run) instead of B and C: satellites with carrier Doppler
//      up to 10 kHz whose delays drift while the receiver is off; three user
//      wakes after 6, 8 and 15 minutes off, each with estimated sync on all
//      channels, a residual bit phase that shows the Doppler compensation,
//      and a fix; the time from wake-up to the fix request is printed;
//   C  (reduced run only) sleep-timer wake after longer than MAX_OFF_MS:
//      every estimate is rejected and the channels fall back to preambles.
// Checked throughout: channel positions against the models at every bit
// edge, pseudorange differences between channels against the modelled
// delays (the common clock bias cancels), GPS week, GPS time within the
// first-fix bound, stored states, and that each mechanism happened.
module tb_gps_env
  import gps_pkg::*;
#(
  parameter int NUM_CH        = 8,
  parameter int CLKS_PER_MS   = 2046,
  parameter bit FULL          = 1'b0,
  parameter bit WORKLOAD      = 1'b0,   // off times of 6, 8 and 15 minutes after the cold start
  parameter int TOW0          = 40000
) (
  output logic              clk,
  output logic              rst_n,
  output logic              rtc_clk,
  output logic              rtc_rst_n,
  output logic              user_req,
  output logic [7:0]        eph_valid_cnt,
  output week_t             week_number,
  output week_t             zt_week,
  output ms_t               zt_ms,
  input  logic              nav_req,
  output logic              nav_done,
  output logic [NUM_CH-1:0] code_lock,
  output logic [NUM_CH-1:0] carrier_lock,
  output logic [NUM_CH-1:0] bit_lock,
  output logic [NUM_CH-1:0] chip_tick,
  output logic [NUM_CH-1:0] bit_edge,
  output logic [NUM_CH-1:0] bit_val,
  output doppler_t          doppler [NUM_CH],
  input  logic              pwr_on,
  input  logic              est_en,
  input  logic              cold_start,
  input  logic              wake_by_timer,
  input  logic [3:0]        ctrl_state,
  input  rtc_t              rtc_now,
  input  logic              tic,
  input  tic_t              tic_count,
  input  logic              rco_valid,
  input  logic signed [WEEK_W:0] rco_week,
  input  ms_t               rco_ms,
  input  logic              gps_valid,
  input  week_t             gps_week,
  input  ms_t               gps_ms,
  input  logic [NUM_CH-1:0] ch_synced,
  input  logic [NUM_CH-1:0] ch_synced_by_est,
  input  logic [NUM_CH-1:0] ch_est_rejected,
  input  logic [NUM_CH-1:0] ch_preamble_seen,
  input  nav_pos_t          ch_pos [NUM_CH],
  input  saved_state_t      ch_saved [NUM_CH],
  input  logic signed [15:0] ch_est_bit_phase_q5 [NUM_CH],
  input  logic [NUM_CH-1:0] ch_pr_valid,
  input  logic signed [31:0] ch_delay_chips [NUM_CH],
  input  logic signed [47:0] ch_range_m_q8 [NUM_CH]
);
  localparam int CPC = CLKS_PER_MS / 1023;
  localparam longint CLK_PER_BIT = longint'(CPC) * 20460;
  localparam int ST_SLEEP = 0, ST_COLD = 2, ST_ACQ = 4, ST_NAV = 7, ST_EPHUPD = 9, ST_SAVE = 10;

  int checks = 0, failures = 0;
  // mechanism counters
  int n_cold = 0, n_preamble_sync = 0, n_est_sync = 0, n_est_reject = 0, n_timer_wake = 0,
      n_user_wake = 0, n_eph_update = 0, n_rco = 0, n_backloop = 0, n_nav = 0, n_save = 0, n_pr = 0,
      n_dop_comp = 0;

  longint t;
  logic   slow = 0;
  bit     armed = 1'b0;   // checks start after reset
  longint delay [NUM_CH];
  nav_pos_t true_pos [NUM_CH];
  nav_pos_t true_pos_q [NUM_CH];

  task automatic check(input bit c, input string s);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s (t=%0d state %0d)", s, t, ctrl_state); end
  endtask

  // ---------------- clocks and time line ----------------
  initial clk = 0;
  always #5 clk = ~clk;
  // rtc_clk follows t (64 half periods per ms). While asleep each clock
  // moves t on by SLOW_HALVES RTC half periods, and rtc_clk toggles that
  // many times inside the clock period.
  localparam int SLOW_HALVES = 8;
  always @(posedge clk) begin
    if (slow) begin
      longint h;
      h = (t * 64) / CLKS_PER_MS;
      t <= ((h + SLOW_HALVES) * CLKS_PER_MS + 63) / 64;
      for (int k = 1; k <= SLOW_HALVES; k++) begin
        #1 rtc_clk = 1'((h + k) & 1);
      end
    end else begin
      t <= t + 1;
    end
  end
  always @(t) if (!slow) rtc_clk = 1'(((t * 64) / CLKS_PER_MS) & 1);

  // Carrier Doppler of satellite i in the workload run, up to the +-10 kHz
  // that GPS signals show; zero otherwise. While the receiver is off the
  // signal delay drifts by -Doppler / f_L1 per unit time (see wake).
  function automatic int dop_hz(int i);
    return (i % 2 == 1 ? -1 : 1) * (3000 + 1000 * i);
  endfunction

  // ---------------- satellites ----------------
  for (genvar i = 0; i < NUM_CH; i++) begin : g_sat
    tb_sat_model #(.CLKS_PER_CHIP(CPC), .TOW0(TOW0)) sat (
      .t(slow ? 64'sd0 : t), .delay(delay[i]), .inv(1'(i % 2)), .chip_tick(chip_tick[i]), .bit_edge(bit_edge[i]),
      .bit_val(bit_val[i]), .true_pos(true_pos[i]));
    always @(posedge clk) true_pos_q[i] <= true_pos[i];
    always @(negedge clk) if (armed && ch_synced[i] && bit_edge[i]) begin
      checks++;
      if (ch_pos[i] != true_pos_q[i]) begin
        failures++;
        $display("FAIL: ch%0d pos w%0d b%0d t%0d true w%0d b%0d t%0d", i, ch_pos[i].word_idx,
                 ch_pos[i].bit_idx, ch_pos[i].tow, true_pos_q[i].word_idx, true_pos_q[i].bit_idx,
                 true_pos_q[i].tow);
      end
    end
    assign doppler[i] = WORKLOAD ? doppler_t'(dop_hz(i)) : '0;
  end

  // ---------------- event counting ----------------
  logic [3:0] st_q;
  logic [NUM_CH-1:0] synced_q;
  always @(posedge clk) if (armed) begin
    st_q     <= ctrl_state;
    synced_q <= ch_synced;
    if (ctrl_state == 4'(ST_EPHUPD) && st_q != 4'(ST_EPHUPD)) n_eph_update++;
    if (ctrl_state == 4'(ST_SAVE) && st_q != 4'(ST_SAVE)) n_save++;
    if (ctrl_state == 4'(ST_COLD) && st_q != 4'(ST_COLD)) n_cold++;
    if (ctrl_state == 4'(ST_ACQ) && st_q == 4'd6) n_backloop++;
    if (ctrl_state == 4'd5 && st_q != 4'd5) n_rco++;
    for (int i = 0; i < NUM_CH; i++)
      if (ch_synced[i] && !synced_q[i]) begin
        if (ch_synced_by_est[i]) n_est_sync++; else n_preamble_sync++;
      end
  end

  // ---------------- positioning software model ----------------
  // checks every set of pseudoranges: differences match the model exactly
  always @(negedge clk) if (armed && &ch_pr_valid) begin
    n_pr++;
    for (int i = 1; i < NUM_CH; i++)
      check(ch_delay_chips[i] - ch_delay_chips[0] == 32'((delay[i] - delay[0]) / CPC),
            $sformatf("pseudorange difference ch%0d", i));
    check(gps_week == week_number, "GPS week");
    begin
      longint true_ms, err;
      true_ms = longint'(TOW0) * 6000 + (t - 1) / CLKS_PER_MS;
      err = longint'(gps_ms) - true_ms;
      check(err > -700 && err < 700, $sformatf("GPS time error %0d ms", err));
    end
  end

  task automatic serve_nav(input int eph_after);
    int k = 0;
    while (!nav_req && k < 40 * CLKS_PER_MS * 100) begin @(negedge clk); k++; end
    check(nav_req, "navigation requested");
    check($countones(ch_synced) >= 4, "four satellites at navigation");
    // wait for a pseudorange set (next TIC)
    k = n_pr;
    while (n_pr == k) @(negedge clk);
    check(rco_valid && gps_valid, "RCO and GPS time valid for the fix");
    n_nav++;
    eph_valid_cnt = 8'(eph_after);
    nav_done = 1; @(negedge clk); nav_done = 0;
  endtask

  task automatic lock_all(input int first_ms, input int others_ms);
    for (int i = 0; i < NUM_CH; i++) begin
      longint when;
      when = t + longint'(i == 0 ? first_ms : others_ms + 3 * i) * CLKS_PER_MS + 7 * i;
      fork
        automatic int ii = i;
        automatic longint w = when;
        begin
          while (t < w) @(negedge clk);
          code_lock[ii] = 1; carrier_lock[ii] = 1; bit_lock[ii] = 1;
        end
      join_none
    end
  endtask

  task automatic go_to_sleep_and_check_saved();
    int k = 0;
    while (ctrl_state != 4'(ST_SLEEP) && k < 100 * CLKS_PER_MS) begin @(negedge clk); k++; end
    check(ctrl_state == 4'(ST_SLEEP) && !pwr_on, "asleep after save");
    for (int i = 0; i < NUM_CH; i++) check(ch_saved[i].valid, $sformatf("ch%0d state stored", i));
    code_lock = '0; carrier_lock = '0; bit_lock = '0;
    slow = 1;
  endtask

  task automatic wake(input bit by_user, input longint max_ms);
    longint t0 = t;
    if (by_user) begin
      while (t - t0 < max_ms * CLKS_PER_MS) @(negedge clk);
      user_req = 1;
      while (!pwr_on) @(negedge clk);
      user_req = 0;
      n_user_wake++;
    end else begin
      while (!pwr_on && t - t0 < (max_ms + 10) * CLKS_PER_MS) @(negedge clk);
      check(pwr_on && wake_by_timer, "sleep timer wake");
      check((t - t0) / CLKS_PER_MS >= max_ms - 1, $sformatf("slept %0d ms", (t - t0) / CLKS_PER_MS));
      n_timer_wake++;
    end
    if (WORKLOAD)
      for (int i = 0; i < NUM_CH; i++)
        delay[i] -= (((t - t0) * longint'(dop_hz(i))) / L1_HZ) / CPC * CPC;
    slow = 0;
  endtask

  task automatic wait_all_synced(input longint limit_ms);
    longint t0 = t;
    while (!(&ch_synced) && t - t0 < limit_ms * CLKS_PER_MS) @(negedge clk);
    check(&ch_synced, "all channels synced");
  endtask

  initial begin
    longint t_lock_end;
    for (int i = 0; i < NUM_CH; i++) delay[i] = longint'(CPC) * (68_500 + 2_377 * i);
    // start with the satellites near the end of a sub-frame
    t = 285 * CLK_PER_BIT + delay[NUM_CH-1];
    rst_n = 0; rtc_rst_n = 0; user_req = 0; nav_done = 0; eph_valid_cnt = 0;
    week_number = 16'd1489; zt_week = 16'd1000; zt_ms = 48'sd12_345_000;
    code_lock = '0; carrier_lock = '0; bit_lock = '0;
    repeat (20) @(negedge clk);
    rst_n = 1; rtc_rst_n = 1;
    repeat (5) @(negedge clk);
    armed = 1'b1;

    // ---- A: cold start ----
    user_req = 1; @(negedge clk); user_req = 0; n_user_wake++;
    repeat (3) @(negedge clk);
    check(cold_start, "cold start without ephemeris");
    lock_all(5, 250);
    repeat (10 * CLKS_PER_MS) @(negedge clk);
    eph_valid_cnt = 8;
    wait_all_synced(4000);
    serve_nav(FULL ? 3 : 8);
    go_to_sleep_and_check_saved();

    // ---- W: the evaluated off times ----
    if (WORKLOAD) begin
      int off_min [3] = '{6, 8, 15};
      foreach (off_min[k]) begin
        longint t_wake;
        int nsync0;
        nsync0 = n_est_sync;
        eph_valid_cnt = 8;
        wake(1'b1, longint'(off_min[k]) * 60_000);
        t_wake = t;
        lock_all(3, 50);
        wait_all_synced(400);
        check(&ch_synced_by_est, $sformatf("%0d min off: all channels synced by the estimator", off_min[k]));
        // with the code Doppler compensated the estimate lands on a bit edge
        for (int i = 0; i < NUM_CH; i++) begin
          check(ch_est_bit_phase_q5[i] >= -4 && ch_est_bit_phase_q5[i] <= 4,
                $sformatf("ch%0d residual bit phase %0d/32 ms", i, ch_est_bit_phase_q5[i]));
          if (ch_est_bit_phase_q5[i] >= -4 && ch_est_bit_phase_q5[i] <= 4) n_dop_comp++;
        end
        while (!nav_req) @(negedge clk);
        check(n_est_sync - nsync0 == NUM_CH, "estimated sync count");
        $display("%0d min off: fix requested %0d ms after wake-up", off_min[k], (t - t_wake) / CLKS_PER_MS);
        check((t - t_wake) / CLKS_PER_MS < 1000, "fix within 1 s of wake-up");
        serve_nav(8);
        go_to_sleep_and_check_saved();
      end
      $display("mechanisms: est_sync %0d doppler_compensated %0d user_wake %0d nav %0d save %0d",
               n_est_sync, n_dop_comp, n_user_wake, n_nav, n_save);
      check(n_dop_comp == 3 * NUM_CH, "Doppler compensation seen on every wake and channel");
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end

    // ---- B: instant-on with the estimator ----
    eph_valid_cnt = 8;
    if (FULL) wake(1'b0, 600_000);
    else      wake(1'b1, 20_000);
    repeat (3) @(negedge clk);
    check(!cold_start, "warm wake");
    lock_all(3, 150);
    wait_all_synced(400);
    t_lock_end = t;
    check(&ch_synced_by_est, "all channels synced by the estimator");
    for (int i = 0; i < NUM_CH; i++)
      check(ch_est_bit_phase_q5[i] > -32 && ch_est_bit_phase_q5[i] < 32,
            $sformatf("ch%0d estimate within 1 ms of a bit edge (%0d/32 ms)", i, ch_est_bit_phase_q5[i]));
    serve_nav(3);
    go_to_sleep_and_check_saved();

    // ---- C: off too long, estimator rejects, preambles again ----
    if (!FULL) begin
      eph_valid_cnt = 8;
      wake(1'b0, 60_000);
      lock_all(2, 4);
      wait_all_synced(4000);
      check(&ch_est_rejected, "estimates rejected after a long sleep");
      check(!(|ch_synced_by_est), "fallback to preamble sync");
      n_est_reject = $countones(ch_est_rejected);
      serve_nav(3);
      go_to_sleep_and_check_saved();
    end

    // ---- mechanisms ----
    $display("mechanisms: cold %0d preamble_sync %0d est_sync %0d est_reject %0d timer_wake %0d user_wake %0d eph_update %0d rco %0d backloop %0d nav %0d save %0d pr_sets %0d",
             n_cold, n_preamble_sync, n_est_sync, n_est_reject, n_timer_wake, n_user_wake,
             n_eph_update, n_rco, n_backloop, n_nav, n_save, n_pr);
    check(n_cold > 0, "cold start happened");
    check(n_preamble_sync > 0, "preamble sync happened");
    check(n_est_sync == NUM_CH, "estimated sync happened on every channel");
    check(n_rco > 0 && n_backloop > 0, "RCO setting and lock-wait loop happened");
    check(n_nav > 0 && n_save > 0 && n_pr > 0, "navigation, save and pseudoranges happened");
    if (FULL) check(n_timer_wake > 0, "timer wake happened");
    else begin
      check(n_timer_wake > 0 && n_user_wake > 1, "both wake causes happened");
      check(n_eph_update > 0, "ephemeris update happened");
      check(n_est_reject == NUM_CH, "estimate rejection happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
