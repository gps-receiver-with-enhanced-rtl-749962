// tb_fse_channel: checks one channel through both frame sync paths.
//
// A modelled satellite (2 clocks per chip, 2046 clocks per ms) feeds the
// channel; the RTC reading is the model time at 32 counts per ms, TICs come
// every 100 ms with the true GPS time. The test
//   1. locks mid-sub-frame and waits for preamble frame sync, checking the
//      bit/word/TOW against the model and the pseudorange against the
//      modelled delay;
//   2. stores the state, powers off for three minutes (model time jumps),
//      powers on with the estimator enabled and locks in the middle of a
//      bit: frame sync must come from the estimator at the first bit edge
//      (plus two clocks) with the true position;
//   3. stores again, stays off for 1.1 x 10^6 ms: the estimate must be
//      rejected and preamble sync must follow.
module tb_fse_channel;
  import gps_pkg::*;
  localparam int CPC = 2;
  localparam longint CPMS = CPC * 1023;
  localparam int TOW0 = 3000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  longint t = 0;
  longint delay = 2 * 75_321;   // 75 321 chips
  logic inv = 1;

  logic pwr_on = 0, code_lock = 0, carrier_lock = 0, bit_lock = 0;
  logic chip_tick, bit_edge, bit_val;
  nav_pos_t true_pos, true_pos_q;
  rtc_t rtc_now;
  logic tic = 0;
  tic_t tic_count = 0;
  logic gps_valid = 0;
  ms_t gps_ms = 0;
  logic est_en = 0, save_req = 0, save_done;
  logic synced, synced_by_est, est_rejected, preamble_seen;
  nav_pos_t pos;
  tic_t sync_tic, est_sync_tic;
  tow_t sync_tow;
  logic signed [15:0] est_bit_phase_q5;
  logic signed [39:0] off_time_q5;
  saved_state_t saved;
  logic [CT_W-1:0] code_time;
  logic pr_valid;
  logic signed [31:0] delay_chips;
  logic signed [47:0] range_m_q8;
  int checks = 0, failures = 0, n_pr = 0;
  bit armed = 1'b0;   // checks start after reset

  tb_sat_model #(.CLKS_PER_CHIP(CPC), .TOW0(TOW0)) sat (.t, .delay, .inv, .chip_tick, .bit_edge, .bit_val, .true_pos);

  assign rtc_now = rtc_t'((t * 32) / CPMS);

  fse_channel dut (
    .clk, .rst_n, .pwr_on, .code_lock, .carrier_lock, .bit_lock, .chip_tick, .bit_edge, .bit_val,
    .doppler(16'sd0), .rtc_now, .tic, .tic_count, .gps_valid, .gps_ms, .est_en, .save_req, .save_done,
    .synced, .synced_by_est, .est_rejected, .preamble_seen, .pos, .sync_tic, .sync_tow, .est_sync_tic,
    .est_bit_phase_q5, .off_time_q5, .saved, .code_time, .pr_valid, .delay_chips, .range_m_q8
  );

  task automatic check(input bit c, input string s);
    checks++; if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask

  // time base and TIC model: t advances once per clock
  // the DUT samples the model one clock after the model changes
  always @(posedge clk) true_pos_q <= true_pos;
  always @(posedge clk) begin
    t <= t + 1;
    tic <= 1'b0;
    if (pwr_on && ((t + 1) % (CPMS * 100) == 0)) begin
      tic       <= 1'b1;
      tic_count <= tic_count + 1;
      gps_ms    <= ms_t'(longint'(TOW0) * 6000 + (t + 1) / CPMS);
      gps_valid <= 1'b1;
    end
  end

  // while synced the position must match the model, and pseudoranges the delay
  always @(negedge clk) if (armed && synced && bit_edge) begin
    checks++;
    if (!(pos == true_pos_q)) begin
      failures++;
      $display("FAIL: pos w%0d b%0d t%0d true w%0d b%0d t%0d", pos.word_idx, pos.bit_idx, pos.tow,
               true_pos_q.word_idx, true_pos_q.bit_idx, true_pos_q.tow);
    end
  end
  always @(negedge clk) if (armed && pr_valid) begin
    n_pr++;
    check(delay_chips == 32'(delay / CPC), $sformatf("delay %0d exp %0d", delay_chips, delay / CPC));
  end

  task automatic lock(input bit on);
    code_lock = on; carrier_lock = on; bit_lock = on;
  endtask

  task automatic wait_bit_phase(input longint phase_clk);
    while (((t - delay) % (CPC * 20460)) != phase_clk) @(negedge clk);
  endtask

  task automatic store_and_off(input longint off_ms);
    save_req = 1;
    while (!save_done) @(negedge clk);
    save_req = 0;
    check(saved.valid, "state stored");
    @(negedge clk);
    lock(0); pwr_on = 0; est_en = 0;
    repeat (5) @(negedge clk);
    t = t + off_ms * CPMS;
    repeat (5) @(negedge clk);
  endtask

  initial begin
    #4_000_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t_lock, t_sync;
    repeat (3) @(negedge clk);
    rst_n = 1;
    armed = 1'b1;
    // 1. conventional: lock at bit 250 of a sub-frame
    pwr_on = 1;
    while (!(true_pos.word_idx == 8 && true_pos.bit_idx == 10)) @(negedge clk);
    lock(1);
    while (!synced) @(negedge clk);
    check(!synced_by_est, "first sync by preamble");
    check(pos == true_pos_q, "position after preamble sync");
    repeat (CPMS * 250) @(negedge clk);
    check(n_pr >= 2, $sformatf("pseudoranges produced: %0d", n_pr));

    // 2. estimated after 3 minutes off
    store_and_off(180_000);
    check(!synced, "sync lost at power off");
    pwr_on = 1; est_en = 1;
    wait_bit_phase(CPC * 7000);
    lock(1);
    t_lock = t;
    while (!synced) @(negedge clk);
    t_sync = t;
    check(synced_by_est, "second sync by estimator");
    check(t_sync - t_lock <= CPC * 20460 - CPC * 7000 + 3, $sformatf("sync %0d clocks after lock", t_sync - t_lock));
    check(pos == true_pos_q, "position after estimate");
    check(est_bit_phase_q5 > -16 && est_bit_phase_q5 < 16, $sformatf("bit phase %0d", est_bit_phase_q5));
    n_pr = 0;
    repeat (CPMS * 250) @(negedge clk);
    check(n_pr >= 2, "pseudoranges after estimate");

    // 3. off for longer than 10^6 ms: estimate rejected, preamble fallback
    store_and_off(1_100_000);
    pwr_on = 1; est_en = 1;
    wait_bit_phase(CPC * 100);
    lock(1);
    while (!synced) @(negedge clk);
    check(est_rejected, "long off time rejected");
    check(!synced_by_est, "fallback to preamble");
    check(pos == true_pos_q, "position after fallback");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
