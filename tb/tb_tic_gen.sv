// tb_tic_gen: checks the 1 ms tick, the 100 ms TIC and the TIC count.
//
// With 10 clocks per ms, ms_tick must come every 10 clocks, tic every 1000
// clocks together with an ms_tick, tic_count must step by one at each tic,
// and nothing may happen while en is low.
module tb_tic_gen;
  import gps_pkg::*;
  logic clk = 0, rst_n = 0, en = 0;
  logic ms_tick, tic;
  tic_t tic_count;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  tic_gen #(.CLKS_PER_MS(10)) dut (.clk, .rst_n, .en, .ms_tick, .tic, .tic_count);

  task automatic check(input bit c, input string s);
    checks++; if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask

  initial begin
    #10_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc = 0, last_ms = -1, last_tic = -1, n_tic = 0;
    tic_t last_cnt;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (50) begin @(negedge clk); check(!ms_tick && !tic, "quiet while disabled"); end
    en = 1;
    last_cnt = tic_count;
    for (cyc = 0; cyc < 5500; cyc++) begin
      @(negedge clk);
      if (ms_tick) begin
        if (last_ms >= 0) check(cyc - last_ms == 10, $sformatf("ms period %0d", cyc - last_ms));
        last_ms = cyc;
      end
      if (tic) begin
        check(ms_tick, "tic with ms_tick");
        if (last_tic >= 0) check(cyc - last_tic == 1000, $sformatf("tic period %0d", cyc - last_tic));
        else check(cyc == 999, $sformatf("first tic at %0d", cyc));
        check(tic_count == last_cnt + 1, "tic_count steps");
        last_cnt = tic_count;
        last_tic = cyc;
        n_tic++;
      end
    end
    check(n_tic == 5, $sformatf("tics seen %0d", n_tic));
    en = 0;
    repeat (2000) begin @(negedge clk); check(!tic, "no tic when disabled"); end
    check(tic_count == last_cnt, "count held");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
