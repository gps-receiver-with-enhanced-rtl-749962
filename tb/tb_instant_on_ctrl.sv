// tb_instant_on_ctrl: walks the controller through its flow.
//
// With SLEEP_MS = 3 and EPH_UPDATE_MS = 5 the test drives: user wake with
// too few ephemerides (cold start), the lock wait with one then four synced
// channels (RCO set at the clock after each TIC, from the lowest synced
// channel, and the back-loop while fewer than four are synced), the
// navigation handshake, the ephemeris update of exactly 5 ms, the state save
// handshake and power-off; then a wake by the RTC sleep timer with enough
// ephemerides (estimator enabled), and the exit to save when the ephemeris
// count has dropped after the navigation solution.
module tb_instant_on_ctrl;
  import gps_pkg::*;
  localparam int N = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  rtc_t rtc_now = 0;
  logic ms_tick = 0, tic = 0, user_req = 0, nav_done = 0;
  logic [7:0] eph_valid_cnt = 0;
  logic [N-1:0] ch_synced = 0, ch_save_done = 0;
  logic pwr_on, est_en, cold_start, save_req, rco_set, nav_req, wake_by_timer;
  logic [2:0] rco_ref;
  logic [3:0] state_o;
  int checks = 0, failures = 0, cyc = 0, n_rco = 0;

  instant_on_ctrl #(.NUM_CH(N), .SLEEP_MS(3), .EPH_UPDATE_MS(5)) dut (
    .clk, .rst_n, .rtc_now, .ms_tick, .tic, .user_req, .eph_valid_cnt, .ch_synced, .ch_save_done,
    .nav_done, .pwr_on, .est_en, .cold_start, .save_req, .rco_set, .rco_ref, .nav_req,
    .wake_by_timer, .state_o
  );

  task automatic check(input bit c, input string s);
    checks++; if (!c) begin failures++; $display("FAIL: %s (state %0d)", s, state_o); end
  endtask

  // 10 clocks per ms, TIC every 100 ms; RTC +32 per ms
  always @(posedge clk) begin
    cyc <= cyc + 1;
    ms_tick <= ((cyc + 1) % 10 == 0);
    tic     <= ((cyc + 1) % 1000 == 0);
    if ((cyc + 1) % 10 == 0) rtc_now <= rtc_now + 32;
  end
  // a TIC must be followed, one clock later, by any rco_set
  logic tic_q;
  always @(posedge clk) tic_q <= tic;
  always @(negedge clk) if (rst_n && rco_set) begin n_rco++; check(tic_q, "rco_set one clock after a TIC"); end

  task automatic wait_for(input string what, input int st, input int limit);
    int k = 0;
    while (state_o != 4'(st) && k < limit) begin @(negedge clk); k++; end
    check(state_o == 4'(st), what);
  endtask

  initial begin
    #50_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ms_on;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!pwr_on && state_o == 0, "asleep after reset");
    // user wake, no ephemeris -> cold start
    user_req = 1; @(negedge clk); user_req = 0;
    check(pwr_on && !wake_by_timer, "powered on by user");
    wait_for("cold start", 2, 5);
    check(cold_start && !est_en, "cold start mode");
    repeat (20) @(negedge clk);
    check(state_o == 2, "cold start holds without ephemeris");
    eph_valid_cnt = 6;
    wait_for("lock wait", 4, 5);
    repeat (50) @(negedge clk);
    ch_synced = 8'b0000_0100;
    wait_for("RCO", 5, 5);
    wait_for("back to lock wait with one satellite", 4, 3000);
    check(rco_ref == 2, "RCO reference is the synced channel");
    ch_synced = 8'b0110_0110;
    wait_for("RCO again", 5, 5);
    wait_for("navigation", 7, 3000);
    check(rco_ref == 1, "RCO reference is the lowest synced channel");
    @(negedge clk);
    check(nav_req, "nav_req");
    repeat (7) @(negedge clk);
    nav_done = 1; @(negedge clk); nav_done = 0;
    wait_for("ephemeris update", 9, 5);
    ms_on = 0;
    while (state_o == 9) begin @(negedge clk); if (ms_tick) ms_on++; end
    check(ms_on == 5, $sformatf("ephemeris update lasted %0d ms", ms_on));
    @(negedge clk);
    check(state_o == 10 && save_req, "saving");
    repeat (5) @(negedge clk);
    check(state_o == 10 && pwr_on, "save waits for all channels");
    ch_save_done = '1;
    @(negedge clk); @(negedge clk);
    check(state_o == 0 && !pwr_on, "powered off after save");
    ch_save_done = '0; ch_synced = '0;
    // timer wake after 3 ms of RTC
    begin
      int k = 0;
      while (!pwr_on && k < 100) begin @(negedge clk); k++; end
      check(k >= 20 && k <= 32, $sformatf("timer wake after %0d clocks", k));
    end
    check(wake_by_timer, "wake by timer");
    wait_for("data load then lock wait", 4, 5);
    check(est_en && !cold_start, "estimator enabled");
    ch_synced = 8'b1111_0000;
    wait_for("navigation", 7, 3000);
    eph_valid_cnt = 2;
    nav_done = 1; @(negedge clk); @(negedge clk); nav_done = 0;
    wait_for("save without ephemeris update", 10, 5);
    check(n_rco == 3, $sformatf("rco_set pulses %0d", n_rco));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
