// tic_gen: receiver time base.
//
// Divides the receiver clock into a 1 ms tick and a TIC every MS_PER_TIC
// milliseconds, and counts TICs. The TIC count is the receiver time:
// receiver time = zero time + tic_count x 100 ms. All outputs are registered;
// ms_tick and tic are one-clock pulses, tic coincides with the ms_tick that
// completes the TIC period, and tic_count has already advanced in the cycle
// tic is high. When en is low (main power off) the divider holds at zero.
//
// The 100 ms TIC follows the paper. The receiver clock is not given there;
// CLKS_PER_MS = 16368 (16.368 MHz, 16 clocks per C/A code chip) is this
// design's choice.
module tic_gen
  import gps_pkg::*;
#(
  parameter int unsigned CLKS_PER_MS = 16368,
  parameter int unsigned MS_PER_TIC  = TIC_MS
) (
  input  logic clk,
  input  logic rst_n,
  input  logic en,
  output logic ms_tick,
  output logic tic,
  output tic_t tic_count
);

  logic [$clog2(CLKS_PER_MS)-1:0] clk_cnt;
  logic [$clog2(MS_PER_TIC)-1:0]  ms_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clk_cnt   <= '0;
      ms_cnt    <= '0;
      ms_tick   <= 1'b0;
      tic       <= 1'b0;
      tic_count <= '0;
    end else if (!en) begin
      clk_cnt <= '0;
      ms_cnt  <= '0;
      ms_tick <= 1'b0;
      tic     <= 1'b0;
    end else begin
      ms_tick <= 1'b0;
      tic     <= 1'b0;
      if (clk_cnt == CLKS_PER_MS - 1) begin
        clk_cnt <= '0;
        ms_tick <= 1'b1;
        if (ms_cnt == MS_PER_TIC - 1) begin
          ms_cnt    <= '0;
          tic       <= 1'b1;
          tic_count <= tic_count + 1'b1;
        end else begin
          ms_cnt <= ms_cnt + 1'b1;
        end
      end else begin
        clk_cnt <= clk_cnt + 1'b1;
      end
    end
  end

endmodule
