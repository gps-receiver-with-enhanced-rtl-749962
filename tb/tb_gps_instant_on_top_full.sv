// tb_gps_instant_on_top_full: end-to-end test of the timing core at reduced size.
//
// Four channels, a 2.046 MHz clock (2 clocks per chip), a 1 minute sleep
// period, a 50 ms ephemeris update and a 30 s off-time limit, so that every
// mechanism (cold start, preamble sync, estimated sync, rejection of a stale
// state, both wake causes, ephemeris update, RCO and the lock-wait loop,
// navigation, state save) runs in one short simulation. The scenario and
// checks are in tb_gps_env.
module tb_gps_instant_on_top_full;
  import gps_pkg::*;
  localparam int NUM_CH = 8;
  localparam int CLKS_PER_MS = 16368;

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

  gps_instant_on_top u_dut (.*);

  tb_gps_env #(.NUM_CH(NUM_CH), .CLKS_PER_MS(CLKS_PER_MS), .FULL(1'b1)) env (.*);

  initial begin
    #20_000_000_000;
    $display("TB_RESULT checks=%0d failures=%0d", env.checks, env.failures + 1);
    $finish;
  end
endmodule
