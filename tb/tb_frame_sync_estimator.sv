// tb_frame_sync_estimator: self-checking test of the frame sync estimator.
//
// Checks the worked example (word 6, bit 19, TOW 2679, RTC 17362 ->
// 6731176 gives bit 9, word 6, TOW 2713, SyncTIC = TIC + 24), then random
// off times built from a physical model: a true number of elapsed bits, a
// timing jitter within +-9 ms, and a Doppler that stretches signal time
// against RTC time; the expected bit, word and TOW come from plain position
// arithmetic. Also checks the rejection of an off time beyond 10^6 ms and of
// a missing stored state, and the one-clock latency.
module tb_frame_sync_estimator;
  import gps_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start;
  saved_state_t saved;
  rtc_t rtc_now;
  doppler_t dop_now;
  tic_t tic_now;
  logic done, est_valid;
  nav_pos_t est_pos;
  tic_t est_sync_tic;
  logic signed [39:0] off_q5;
  logic signed [15:0] ph_q5;

  int checks = 0, failures = 0;

  frame_sync_estimator dut (
    .clk, .rst_n, .start, .saved, .rtc_now, .doppler_now(dop_now), .tic_now,
    .done, .est_valid, .est_pos, .est_sync_tic, .off_time_q5(off_q5), .bit_phase_q5(ph_q5)
  );

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic run(output int lat);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    lat = 1;
    while (!done && lat < 10) begin @(negedge clk); lat++; end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lat;
    start = 0; saved = '0; rtc_now = '0; dop_now = '0; tic_now = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // worked example from the text
    saved.valid = 1; saved.pos.word_idx = 6; saved.pos.bit_idx = 19;
    saved.pos.tow = 2679; saved.rtc = 17362; saved.doppler = 0;
    rtc_now = 6731176; dop_now = 0; tic_now = 1000;
    run(lat);
    check(lat == 1, "latency one clock");
    check(est_valid, "example valid");
    check(est_pos.bit_idx == 9, $sformatf("example bit %0d", est_pos.bit_idx));
    check(est_pos.word_idx == 6, $sformatf("example word %0d", est_pos.word_idx));
    check(est_pos.tow == 2713, $sformatf("example TOW %0d", est_pos.tow));
    check(est_sync_tic == 1024, $sformatf("example SyncTIC %0d", est_sync_tic));
    check(off_q5 == 6713814, "example off time");
    check(ph_q5 == 214, $sformatf("example bit phase %0d", ph_q5));  // 6.6875 ms

    // random physical cases
    for (int k = 0; k < 300; k++) begin
      int w0, b0, t0, nbits, jit_q5, fd0, fd1, p0, abs_bits;
      real sig_ms, rtc_q5_r, fd_avg;
      longint diff;
      int exp_bit, exp_word, exp_tow;
      w0 = $urandom_range(0, 9); b0 = $urandom_range(0, 29);
      t0 = $urandom_range(1, 100000);
      nbits = $urandom_range(1, 49000);          // up to 980 s
      jit_q5 = $urandom_range(0, 576) - 288;     // +-9 ms
      fd0 = $urandom_range(0, 20000) - 10000;
      fd1 = fd0 + $urandom_range(0, 400) - 200;
      fd_avg = (fd0 + fd1) / 2.0;
      sig_ms = nbits * 20.0 + jit_q5 / 32.0;
      rtc_q5_r = sig_ms * 32.0 / (1.0 + fd_avg / 1575.42e6);
      diff = longint'(rtc_q5_r);
      saved.valid = 1; saved.pos.word_idx = 4'(w0); saved.pos.bit_idx = 5'(b0);
      saved.pos.tow = 17'(t0); saved.rtc = $urandom; saved.doppler = 16'(fd0);
      rtc_now = saved.rtc + 32'(diff); dop_now = 16'(fd1); tic_now = $urandom_range(0, 1 << 20);
      p0 = w0 * 30 + b0;
      abs_bits = p0 + nbits;
      exp_bit  = abs_bits % 30;
      exp_word = (abs_bits / 30) % 10;
      exp_tow  = t0 + int'(longint'(sig_ms * 32.0 + 0.5) / 192000);  // paper rule on signal time
      run(lat);
      check(est_valid, "random valid");
      check(est_pos.bit_idx == 5'(exp_bit) && est_pos.word_idx == 4'(exp_word),
            $sformatf("random %0d: pos w%0d b%0d exp w%0d b%0d", k, est_pos.word_idx, est_pos.bit_idx, exp_word, exp_bit));
      // the paper's TOW rule; allow the one-count ambiguity when signal time is within 1 ms of a 6 s step
      if ((longint'(sig_ms) % 6000) > 2 && (longint'(sig_ms) % 6000) < 5998)
        check(est_pos.tow == 17'(exp_tow), $sformatf("random %0d: TOW %0d exp %0d", k, est_pos.tow, exp_tow));
      check(est_sync_tic == tic_now + tic_t'((10 - exp_word) * 6), "random SyncTIC");
    end

    // off time beyond 10^6 ms
    saved.valid = 1; saved.rtc = 100; saved.doppler = 0; dop_now = 0;
    rtc_now = 100 + 32'(1_000_001 * 32);
    run(lat);
    check(!est_valid, "reject off time over 1e6 ms");
    rtc_now = 100 + 32'(999_000 * 32);
    run(lat);
    check(est_valid, "accept off time under 1e6 ms");
    // no stored state
    saved.valid = 0;
    run(lat);
    check(!est_valid, "reject missing state");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
