// tb_code_time_counter: checks the chip count from sub-frame start to TIC.
//
// Drives chip ticks every 2 clocks, a bit edge every 20460 chips with the
// bit/word/TOW position advanced by the test, and TICs at random moments.
// The latched code time must equal (word x 30 + bit) x 20460 plus the chips
// since the bit edge, counted independently here, with the TOW of that bit.
module tb_code_time_counter;
  import gps_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0, chip_tick = 0, bit_edge = 0, tic = 0, synced = 0;
  nav_pos_t pos;
  logic [CT_W-1:0] code_time;
  tow_t code_time_tow;
  logic code_time_valid;
  int checks = 0, failures = 0, n_tic = 0;
  always #5 clk = ~clk;

  code_time_counter dut (.clk, .rst_n, .clr, .chip_tick, .bit_edge, .tic, .synced, .pos,
                         .code_time, .code_time_tow, .code_time_valid);

  task automatic check(input bit c, input string s);
    checks++; if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask

  initial begin
    #100_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int chips_in_bit = 0, next_tic, expv;
    int absb;
    pos = '{word_idx: 4'(9), bit_idx: 5'(27), tow: 17'(500)};
    absb = 9 * 30 + 27;
    repeat (3) @(negedge clk);
    rst_n = 1;
    synced = 1;
    next_tic = $urandom_range(100, 5000);
    for (int cyc = 0; cyc < 8 * 2 * 20460; cyc++) begin
      bit edge_now, chip_now;
      chip_now = (cyc % 2 == 0);
      edge_now = (cyc % (2 * 20460) == 0) && cyc > 0;
      chip_tick = chip_now;
      bit_edge  = edge_now;
      tic       = (cyc == next_tic);
      if (tic) expv = edge_now ? ((absb % 300) + 1) * 20460 : (absb % 300) * 20460 + chips_in_bit + int'(chip_now);
      @(negedge clk);
      chip_tick = 0; bit_edge = 0;
      if (edge_now) begin
        chips_in_bit = 0;
        absb++;
        pos = '{word_idx: 4'((absb / 30) % 10), bit_idx: 5'(absb % 30), tow: 17'(500 + (absb - 270) / 300)};
      end else if (chip_now) chips_in_bit++;
      if (tic) begin
        tic = 0;
        n_tic++;
        check(code_time_valid, "valid after tic");
        check(code_time == CT_W'(expv), $sformatf("code time %0d exp %0d", code_time, expv));
        next_tic = cyc + $urandom_range(1000, 9000);
        if (n_tic == 3) next_tic = 4 * 2 * 20460;   // a TIC on a bit edge
      end
    end
    check(n_tic > 10, "tics applied");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
