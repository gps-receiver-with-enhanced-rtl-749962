// tb_workload_off_times: the evaluated power-off intervals.
//
// Eight satellites (the number tracked before switch-off in the published
// tests), switched off for 6, 8 and 15 minutes in turn and woken by the
// user. The satellites carry carrier Doppler of 3 to 10 kHz, and their
// signal delays drift accordingly while the receiver is off. After each
// interval every channel must reach frame sync through the estimator with
// a residual bit phase that only the Doppler compensation achieves, the
// first fix must be requested within one second of wake-up,
// and positions and pseudoranges must agree with the satellite models. The
// sleep period is lengthened to 20 minutes so that the sleep timer does not
// end the 15 minute interval early and the ephemeris collection after the
// cold start is shortened to 50 ms; the receiver clock is 2.046 MHz to keep
// the simulation short. Scenario and checks are in tb_gps_env.
module tb_workload_off_times;
  import gps_pkg::*;
  localparam int NUM_CH = 8;
  localparam int CLKS_PER_MS = 2046;

  logic clk, rst_n, rtc_clk, rtc_rst_n, user_req, nav_req, nav_done;
  logic [7:0] eph_valid_cnt;
  week_t week_number, zt_week, gps_week;
  ms_t zt_ms, rco_ms, gps_ms;
  logic [NUM_CH-1:0] code_lock, carrier_lock, bit_lock, chip_tick, bit_edge, bit_val;
  doppler_t doppler [NUM_CH];
  logic pwr_on, est_en, cold_start, wake_by_timer, tic, rco_valid, gps_valid;
  logic [3:0] ctrl_state;
  rtc_t rtc_now;
  tic_t tic_count;
  logic signed [WEEK_W:0] rco_week;
  logic [NUM_CH-1:0] ch_synced, ch_synced_by_est, ch_est_rejected, ch_preamble_seen, ch_pr_valid;
  nav_pos_t ch_pos [NUM_CH];
  saved_state_t ch_saved [NUM_CH];
  logic signed [15:0] ch_est_bit_phase_q5 [NUM_CH];
  logic signed [31:0] ch_delay_chips [NUM_CH];
  logic signed [47:0] ch_range_m_q8 [NUM_CH];

  gps_instant_on_top #(
    .NUM_CH(NUM_CH), .CLKS_PER_MS(CLKS_PER_MS), .SLEEP_MS(1_200_000), .EPH_UPDATE_MS(50)
  ) u_dut (.*);

  tb_gps_env #(.NUM_CH(NUM_CH), .CLKS_PER_MS(CLKS_PER_MS), .WORKLOAD(1'b1)) env (.*);

  initial begin
    #20_000_000_000;
    $display("TB_RESULT checks=%0d failures=%0d", env.checks, env.failures + 1);
    $finish;
  end
endmodule
