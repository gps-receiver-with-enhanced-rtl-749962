// tb_rco_calc: checks the receiver clock offset and GPS time at the TIC.
//
// For random zero times, week numbers, SyncTIC and TOW values, sets the RCO
// and then checks the GPS time at later TICs against
// ZT + TIC x 100 ms - RCO, worked out here with 64-bit integers, including
// week rollover. The case SyncTIC = TIC must give TOW x 6000 + 75 ms.
module tb_rco_calc;
  import gps_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0, rco_set = 0, tic = 0;
  week_t zt_week, week_number, gps_week;
  ms_t zt_ms, rco_ms, gps_ms;
  tic_t sync_tic, tic_count;
  tow_t tow;
  logic rco_valid, gps_valid;
  logic signed [WEEK_W:0] rco_week;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  rco_calc dut (.clk, .rst_n, .clr, .zt_week, .zt_ms, .rco_set, .week_number, .sync_tic, .tow,
                .tic, .tic_count, .rco_valid, .rco_week, .rco_ms, .gps_valid, .gps_week, .gps_ms);

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
    tic = 0; rco_set = 0; zt_week = 0; zt_ms = 0; week_number = 0; sync_tic = 0; tow = 0; tic_count = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 200; k++) begin
      longint ztm, rco, rx, g, gw;
      int wk, ztw, st, tw;
      ztw = $urandom_range(0, 3000); wk = $urandom_range(1000, 2400);
      ztm = longint'($urandom_range(0, 604799)) * 1000;
      st  = $urandom_range(0, 1 << 24); tw = $urandom_range(1, 100799);
      zt_week = 16'(ztw); zt_ms = ms_t'(ztm); week_number = 16'(wk);
      sync_tic = tic_t'(st); tow = tow_t'(tw);
      rco_set = 1; @(negedge clk); rco_set = 0;
      rco = ztm + longint'(st) * 100 - (longint'(tw) * 6000 + 75);
      check(rco_valid && rco_ms == ms_t'(rco), "RCO ms");
      check(rco_week == 17'(ztw - wk), "RCO week");
      for (int j = 0; j < 3; j++) begin
        int tc;
        tc = (j == 0) ? st : st + $urandom_range(0, 200000);
        tic_count = tic_t'(tc);
        tic = 1; @(negedge clk); tic = 0;
        g  = longint'(tw) * 6000 + 75 + (longint'(tc) - st) * 100;
        gw = wk;
        while (g >= MS_PER_WEEK) begin g -= MS_PER_WEEK; gw++; end
        while (g < 0) begin g += MS_PER_WEEK; gw--; end
        check(gps_valid && gps_ms == ms_t'(g) && gps_week == 16'(gw),
              $sformatf("GPS time %0d/%0d exp %0d/%0d", gps_week, gps_ms, gw, g));
      end
    end
    clr = 1; @(negedge clk); clr = 0;
    check(!rco_valid && !gps_valid, "clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
