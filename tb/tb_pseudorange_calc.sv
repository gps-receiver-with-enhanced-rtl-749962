// tb_pseudorange_calc: checks propagation delay and pseudorange.
//
// Builds cases from a true delay: a signal sent at GPS time T - delay is
// received at the TIC (GPS time T). The sub-frame it belongs to and the chip
// count into that sub-frame follow from the transmit time; the unit must
// return the delay in chips and c x delay in metres (8 fractional bits,
// within 0.01 %), with a one-clock latency.
module tb_pseudorange_calc;
  import gps_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, done;
  ms_t gps_ms;
  tow_t tow;
  logic [CT_W-1:0] code_time;
  logic signed [31:0] delay_chips;
  logic signed [47:0] range_m_q8;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  pseudorange_calc dut (.clk, .rst_n, .start, .gps_ms, .tow, .code_time, .done, .delay_chips, .range_m_q8);

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
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 300; k++) begin
      longint t_ms, d_chips, tx_chips, sf;
      real rng, got;
      t_ms    = longint'($urandom_range(6000, 604799)) * 1000 + $urandom_range(0, 999);
      d_chips = $urandom_range(60000, 95000);              // 59 ms .. 93 ms
      tx_chips = t_ms * 1023 - d_chips;
      sf = tx_chips / (6000 * 1023);
      gps_ms = ms_t'(t_ms); tow = tow_t'(sf + 1); code_time = CT_W'(tx_chips - sf * 6000 * 1023);
      start = 1; @(negedge clk); start = 0;
      check(done, "latency one clock");
      check(delay_chips == 32'(d_chips), $sformatf("delay %0d exp %0d", delay_chips, d_chips));
      rng = real'(d_chips) * 299792458.0 / 1.023e6;
      got = real'(range_m_q8) / 256.0;
      check(got > rng * 0.9999 && got < rng * 1.0001, $sformatf("range %f exp %f", got, rng));
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
