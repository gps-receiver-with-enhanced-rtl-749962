// instant_on_ctrl: power and sequencing controller of the instant-on receiver.
//
// The receiver spends most of its time with main power off. It wakes on a
// user request or after a sleep period counted on the RTC, checks that
// enough valid ephemerides are held, lets the channels lock and frame-sync
// (by estimation from the stored state, or by preamble in a cold start),
// sets the receiver clock offset, waits for enough synced satellites, asks
// the position software for a solution, optionally stays on to update the
// ephemerides, and then stores every channel's state and powers down again.
//
//   SLEEP     main power off; leave on user_req or after SLEEP_MS of RTC
//   VALIDATE  eph_valid_cnt >= MIN_EPH ? LOAD : COLD
//   COLD      estimator disabled; wait until eph_valid_cnt >= MIN_EPH, then ACQ
//   LOAD      one clock: the stored states are handed to the channels
//   ACQ       wait until more channels are synced than at the last check
//   RCO       rco_set in the clock after the next TIC, from the lowest synced channel
//   SATCHK    synced >= MIN_SATS ? NAV : ACQ
//   NAV       nav_req high until nav_done
//   EPHCHK    eph_valid_cnt >= MIN_EPH ? EPHUPD : SAVE
//   EPHUPD    stay on EPH_UPDATE_MS milliseconds, then SAVE
//   SAVE      save_req to all channels until all report save_done, then SLEEP
//
// The order of the steps, the 10 minute sleep, the check of at least four
// valid ephemerides and four satellites and the ephemeris update of over
// 30 s are taken from the paper's flow chart. The flow chart marks only the
// "No" exits of its ephemeris checks; the other exits, what a cold start
// does, when the state is stored and all handshakes are this design's
// choices. pwr_on comes out registered; est_en is high from LOAD until the
// next SLEEP.
module instant_on_ctrl
  import gps_pkg::*;
#(
  parameter int unsigned NUM_CH        = 8,
  parameter int unsigned SLEEP_MS      = 600_000,
  parameter int unsigned EPH_UPDATE_MS = 30_000,
  parameter int unsigned MIN_EPH       = 4,
  parameter int unsigned MIN_SATS      = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  rtc_t              rtc_now,
  input  logic              ms_tick,
  input  logic              tic,
  input  logic              user_req,
  input  logic [7:0]        eph_valid_cnt,
  input  logic [NUM_CH-1:0] ch_synced,
  input  logic [NUM_CH-1:0] ch_save_done,
  input  logic              nav_done,
  output logic              pwr_on,
  output logic              est_en,
  output logic              cold_start,
  output logic              save_req,
  output logic              rco_set,
  output logic [$clog2(NUM_CH)-1:0] rco_ref,
  output logic              nav_req,
  output logic              wake_by_timer,
  output logic [3:0]        state_o
);

  typedef enum logic [3:0] {
    SLEEP, VALIDATE, COLD, LOAD, ACQ, RCO, SATCHK, NAV, EPHCHK, EPHUPD, SAVE
  } ctrl_state_e;

  localparam rtc_t SLEEP_COUNTS = rtc_t'(longint'(SLEEP_MS) * RTC_COUNTS_PER_MS);

  ctrl_state_e state;
  rtc_t        sleep_start;
  logic [$clog2(NUM_CH+1)-1:0] n_synced, last_synced;
  logic [$clog2(EPH_UPDATE_MS+1)-1:0] upd_ms;
  logic [$clog2(NUM_CH)-1:0] first_synced;

  always_comb begin
    n_synced     = '0;
    first_synced = '0;
    for (int i = NUM_CH - 1; i >= 0; i--) begin
      n_synced = n_synced + ch_synced[i];
      if (ch_synced[i]) first_synced = $clog2(NUM_CH)'(i);
    end
  end

  assign state_o = state;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= SLEEP;
      sleep_start   <= '0;
      last_synced   <= '0;
      upd_ms        <= '0;
      pwr_on        <= 1'b0;
      est_en        <= 1'b0;
      cold_start    <= 1'b0;
      save_req      <= 1'b0;
      rco_set       <= 1'b0;
      rco_ref       <= '0;
      nav_req       <= 1'b0;
      wake_by_timer <= 1'b0;
    end else begin
      rco_set <= 1'b0;
      unique case (state)
        SLEEP: begin
          pwr_on <= 1'b0;
          est_en <= 1'b0;
          if (user_req || rtc_t'(rtc_now - sleep_start) >= SLEEP_COUNTS) begin
            wake_by_timer <= !user_req;
            pwr_on        <= 1'b1;
            last_synced   <= '0;
            state         <= VALIDATE;
          end
        end
        VALIDATE: begin
          if (eph_valid_cnt >= 8'(MIN_EPH)) begin
            cold_start <= 1'b0;
            state      <= LOAD;
          end else begin
            cold_start <= 1'b1;
            state      <= COLD;
          end
        end
        COLD:     if (eph_valid_cnt >= 8'(MIN_EPH)) state <= ACQ;
        LOAD: begin
          est_en <= 1'b1;
          state  <= ACQ;
        end
        ACQ:      if (n_synced > last_synced) state <= RCO;
        RCO: begin
          if (tic && n_synced != 0) begin
            rco_set     <= 1'b1;
            rco_ref     <= first_synced;
            last_synced <= n_synced;
            state       <= SATCHK;
          end
        end
        SATCHK:   state <= (last_synced >= ($clog2(NUM_CH+1))'(MIN_SATS)) ? NAV : ACQ;
        NAV: begin
          nav_req <= 1'b1;
          if (nav_req && nav_done) begin
            nav_req <= 1'b0;
            state   <= EPHCHK;
          end
        end
        EPHCHK: begin
          upd_ms <= '0;
          state  <= (eph_valid_cnt >= 8'(MIN_EPH)) ? EPHUPD : SAVE;
        end
        EPHUPD: begin
          if (ms_tick) begin
            if (upd_ms == ($clog2(EPH_UPDATE_MS+1))'(EPH_UPDATE_MS - 1)) state <= SAVE;
            upd_ms <= upd_ms + 1'b1;
          end
        end
        SAVE: begin
          save_req <= 1'b1;
          if (save_req && &ch_save_done) begin
            save_req    <= 1'b0;
            pwr_on      <= 1'b0;
            est_en      <= 1'b0;
            cold_start  <= 1'b0;
            sleep_start <= rtc_now;
            state       <= SLEEP;
          end
        end
        default: state <= SLEEP;
      endcase
    end
  end

endmodule
