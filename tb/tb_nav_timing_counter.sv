// tb_nav_timing_counter: checks bit/word/TOW counting, loading and clear.
//
// Loads random positions, applies random numbers of bit edges and compares
// with a position computed as an absolute bit count; checks subframe_start
// at every new sub-frame, pos_next, and that clr drops sync.
module tb_nav_timing_counter;
  import gps_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0, bit_edge = 0, load = 0;
  nav_pos_t load_pos, pos, pos_next;
  logic synced, subframe_start;
  int checks = 0, failures = 0, n_sf = 0;
  always #5 clk = ~clk;

  nav_timing_counter dut (.clk, .rst_n, .clr, .bit_edge, .load, .load_pos, .pos, .pos_next,
                          .synced, .subframe_start);

  task automatic check(input bit c, input string s);
    checks++; if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask

  initial begin
    #20_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 40; k++) begin
      int w0, b0, t0, n, abs0, absn;
      w0 = $urandom_range(0, 9); b0 = $urandom_range(0, 29); t0 = $urandom_range(0, 100000);
      load_pos = '{word_idx: 4'(w0), bit_idx: 5'(b0), tow: 17'(t0)};
      load = 1; @(negedge clk); load = 0;
      check(synced && pos == load_pos, "load");
      abs0 = w0 * 30 + b0;
      n = $urandom_range(1, 700);
      for (int e = 1; e <= n; e++) begin
        nav_pos_t exp_next;
        absn = abs0 + e;
        exp_next = '{word_idx: 4'((absn / 30) % 10), bit_idx: 5'(absn % 30), tow: 17'(t0 + absn / 300)};
        check(pos_next == exp_next, "pos_next");
        bit_edge = 1; @(negedge clk); bit_edge = 0;
        check(pos == exp_next, $sformatf("pos after %0d edges: w%0d b%0d t%0d", e, pos.word_idx, pos.bit_idx, pos.tow));
        check(subframe_start == (absn % 300 == 0), "subframe_start");
        if (subframe_start) n_sf++;
        repeat ($urandom_range(0, 2)) @(negedge clk);
      end
      if (k % 10 == 9) begin
        clr = 1; @(negedge clk); clr = 0;
        check(!synced, "clr drops sync");
        bit_edge = 1; @(negedge clk); bit_edge = 0;
        check(pos == '0, "no counting unsynced");
      end
    end
    check(n_sf > 10, "sub-frame wraps seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
