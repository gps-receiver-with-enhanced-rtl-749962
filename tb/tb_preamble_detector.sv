// tb_preamble_detector: checks conventional frame sync from a bit stream.
//
// Streams navigation bits that start part-way through a sub-frame: preamble
// 10001011 at bits 0..7, TOW of the sub-frame in bits 30..46 sent XORed with
// bit 29, alternating filler elsewhere, the whole stream optionally
// inverted. The detector must load exactly once, right after bit 46 of the
// next sub-frame, with word 1, bit 17 and that sub-frame's TOW.
module tb_preamble_detector;
  import gps_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0, bit_edge = 0, bit_val = 0;
  logic load, preamble_seen;
  nav_pos_t load_pos;
  int checks = 0, failures = 0;
  int exp_tow = 0;
  always #5 clk = ~clk;

  preamble_detector dut (.clk, .rst_n, .clr, .bit_edge, .bit_val, .load, .load_pos, .preamble_seen);

  task automatic check(input bit c, input string s);
    checks++; if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask

  function automatic bit nav_bit(int sf, int b, int tow0, bit d30_seed);
    int tow = tow0 + sf;
    bit d30 = ((sf + int'(d30_seed)) % 2) == 1;
    if (b < 8) return 1'((8'b1000_1011 >> (7 - b)) & 1);
    if (b == 29) return d30;
    if (b >= 30 && b <= 46) return 1'((tow >> (46 - b)) & 1) ^ d30;
    return 1'(b % 2);
  endfunction

  initial begin
    #200_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 30; k++) begin
      int tow0, start_b, n_load, load_at, abs_b;
      bit inv, seed;
      tow0 = $urandom_range(1, 100000); start_b = $urandom_range(48, 299);
      inv = 1'($urandom); seed = 1'($urandom);
      exp_tow = tow0 + 1;
      clr = 1; @(negedge clk); clr = 0;
      n_load = 0; load_at = -1;
      // bits of sub-frame 0 from start_b, then all of sub-frame 1 (TOW tow0+1)
      for (abs_b = start_b; abs_b < 600; abs_b++) begin
        bit_val = nav_bit(abs_b / 300, abs_b % 300, tow0, seed) ^ inv;
        @(negedge clk);
        bit_edge = 1; @(negedge clk); bit_edge = 0;
        // one clock after the edge: load is visible
        if (load) begin n_load++; load_at = abs_b; end
        @(negedge clk);
        if (load) begin n_load++; load_at = abs_b; end
      end
      check(n_load == 1, $sformatf("case %0d: %0d loads", k, n_load));
      check(load_at == 300 + 46, $sformatf("case %0d: load after bit %0d", k, load_at));
      check(preamble_seen, "preamble seen");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // load_pos checked whenever load pulses
  always @(posedge clk) if (rst_n && load) begin
    checks++;
    if (!(load_pos.word_idx == 1 && load_pos.bit_idx == 17 && load_pos.tow == 17'(exp_tow))) begin
      failures++;
      $display("FAIL: load_pos w%0d b%0d TOW %0d exp %0d", load_pos.word_idx, load_pos.bit_idx, load_pos.tow, exp_tow);
    end
  end
endmodule
