// fse_channel: timing of one tracked satellite, with instant frame sync.
//
// The channel turns the tracking loop's chip ticks, bit edges and data bits
// into the quantities the position solution needs: the position in the
// navigation message (bit, word, TOW), the code time at each TIC and the
// pseudorange. Frame sync is reached in one of two ways:
//   * estimated: with est_en high (main power came back with a stored
//     state), the first bit edge after code, carrier and bit lock starts the
//     frame sync estimator with the RTC count read at that edge; if the
//     estimate is valid the counters are loaded from it two clocks later;
//   * conventional: otherwise (or if the estimate is rejected) the preamble
//     detector loads the counters once it has read the TOW, 0.94 s after a
//     preamble.
// On save_req the channel stores, at its next bit edge, the position of the
// bit starting there, the RTC count and the Doppler into retention
// registers that keep their value while main power is off (they are reset
// only by rst_n). A channel that is not synced stores an invalid state.
// save_done is high once the request has been served.
// Main power off (pwr_on low) or loss of bit lock clears everything except
// the retention registers. At every TIC the channel registers SyncTIC =
// tic_count + (10 - word) x 6 and the TOW, for the RCO; one clock after a
// TIC with a valid GPS time it starts the pseudorange computation.
//
// The two frame sync paths, what is stored and SyncTIC follow the paper;
// the handshakes and the bit-edge timing are this design's choices.
module fse_channel
  import gps_pkg::*;
#(
  parameter int unsigned MAX_OFF_MS     = 1_000_000,
  parameter bit          DOPPLER_COMP   = 1'b1,
  parameter bit          TOW_FROM_CARRY = 1'b0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         pwr_on,
  // tracking loop (FPGA 1)
  input  logic         code_lock,
  input  logic         carrier_lock,
  input  logic         bit_lock,
  input  logic         chip_tick,
  input  logic         bit_edge,
  input  logic         bit_val,
  input  doppler_t     doppler,
  // time bases
  input  rtc_t         rtc_now,
  input  logic         tic,
  input  tic_t         tic_count,
  input  logic         gps_valid,
  input  ms_t          gps_ms,
  // controller
  input  logic         est_en,
  input  logic         save_req,
  output logic         save_done,
  // status and results
  output logic         synced,
  output logic         synced_by_est,
  output logic         est_rejected,
  output logic         preamble_seen,
  output nav_pos_t     pos,
  output tic_t         sync_tic,
  output tow_t         sync_tow,
  output tic_t         est_sync_tic,
  output logic signed [15:0] est_bit_phase_q5,
  output logic signed [39:0] off_time_q5,
  output saved_state_t saved,
  output logic [CT_W-1:0] code_time,
  output logic         pr_valid,
  output logic signed [31:0] delay_chips,
  output logic signed [47:0] range_m_q8
);

  logic clr;
  logic locked;
  assign locked = code_lock && carrier_lock && bit_lock;
  assign clr    = !pwr_on || !locked;

  // ---------------- estimator path ----------------
  logic     est_tried, est_start, est_done, est_ok;
  nav_pos_t est_pos;

  assign est_start = est_en && locked && bit_edge && !synced && !est_tried && saved.valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          est_tried <= 1'b0;
    else if (!pwr_on)    est_tried <= 1'b0;
    else if (est_start)  est_tried <= 1'b1;
  end

  frame_sync_estimator #(
    .MAX_OFF_MS(MAX_OFF_MS), .DOPPLER_COMP(DOPPLER_COMP), .TOW_FROM_CARRY(TOW_FROM_CARRY)
  ) u_est (
    .clk, .rst_n,
    .start       (est_start),
    .saved       (saved),
    .rtc_now     (rtc_now),
    .doppler_now (doppler),
    .tic_now     (tic_count),
    .done        (est_done),
    .est_valid   (est_ok),
    .est_pos     (est_pos),
    .est_sync_tic(est_sync_tic),
    .off_time_q5 (off_time_q5),
    .bit_phase_q5(est_bit_phase_q5)
  );

  // ---------------- conventional path ----------------
  logic     pd_load;
  nav_pos_t pd_pos;

  preamble_detector u_pd (
    .clk, .rst_n,
    .clr          (clr || synced),
    .bit_edge     (bit_edge && locked),
    .bit_val      (bit_val),
    .load         (pd_load),
    .load_pos     (pd_pos),
    .preamble_seen(preamble_seen)
  );

  // ---------------- bit / word / TOW counters ----------------
  logic     nav_load;
  nav_pos_t nav_load_pos;
  logic     subframe_start;
  nav_pos_t pos_next;
  logic     est_load;
  nav_pos_t est_pos_q;

  // The estimate refers to the bit that started at est_start; if a bit edge
  // falls in between (it cannot, 20 ms apart) the load would be stale.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      est_load     <= 1'b0;
      est_pos_q    <= '0;
      est_rejected <= 1'b0;
    end else if (!pwr_on) begin
      est_load     <= 1'b0;
      est_rejected <= 1'b0;
    end else begin
      est_load  <= est_done && est_ok && !synced;
      est_pos_q <= est_pos;
      if (est_done && !est_ok) est_rejected <= 1'b1;
    end
  end

  assign nav_load     = est_load || (pd_load && !synced);
  assign nav_load_pos = est_load ? est_pos_q : pd_pos;

  nav_timing_counter u_nav (
    .clk, .rst_n,
    .clr           (clr),
    .bit_edge      (bit_edge && locked),
    .load          (nav_load),
    .load_pos      (nav_load_pos),
    .pos           (pos),
    .pos_next      (pos_next),
    .synced        (synced),
    .subframe_start(subframe_start)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        synced_by_est <= 1'b0;
    else if (clr)      synced_by_est <= 1'b0;
    else if (nav_load) synced_by_est <= est_load;
  end

  // ---------------- SyncTIC for the RCO ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync_tic <= '0;
      sync_tow <= '0;
    end else if (tic && synced) begin
      sync_tic <= tic_count + tic_t'((WORDS_PER_SUBFRAME - 32'(pos.word_idx)) * TICS_PER_WORD);
      sync_tow <= pos.tow;
    end
  end

  // ---------------- state retention (always-on) ----------------
  logic save_pend;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      saved     <= '0;
      save_pend <= 1'b0;
      save_done <= 1'b0;
    end else begin
      if (!save_req) begin
        save_pend <= 1'b0;
        save_done <= 1'b0;
      end else if (!save_done && !save_pend) begin
        if (synced && locked) save_pend <= 1'b1;
        else begin
          saved.valid <= 1'b0;
          save_done   <= 1'b1;
        end
      end else if (save_pend && !(synced && locked)) begin
        save_pend   <= 1'b0;
        saved.valid <= 1'b0;
        save_done   <= 1'b1;
      end else if (save_pend && bit_edge) begin
        save_pend   <= 1'b0;
        save_done   <= 1'b1;
        saved.valid <= 1'b1;
        saved.pos   <= pos_next;
        saved.rtc   <= rtc_now;
        saved.doppler <= doppler;
      end
    end
  end

  // ---------------- code time and pseudorange ----------------
  tow_t ct_tow;
  logic ct_valid;
  logic tic_q;

  code_time_counter u_ct (
    .clk, .rst_n,
    .clr            (clr),
    .chip_tick      (chip_tick),
    .bit_edge       (bit_edge),
    .tic            (tic),
    .synced         (synced),
    .pos            (pos),
    .code_time      (code_time),
    .code_time_tow  (ct_tow),
    .code_time_valid(ct_valid)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) tic_q <= 1'b0;
    else        tic_q <= tic && synced;
  end

  pseudorange_calc u_pr (
    .clk, .rst_n,
    .start      (tic_q && ct_valid && gps_valid),
    .gps_ms     (gps_ms),
    .tow        (ct_tow),
    .code_time  (code_time),
    .done       (pr_valid),
    .delay_chips(delay_chips),
    .range_m_q8 (range_m_q8)
  );

endmodule
