// tb_rtc_counter: checks the RTC counter and its Gray-code crossing.
//
// Runs the RTC clock at an unrelated rate to the receiver clock and checks
// on every receiver clock that the synchronised reading never moves by more
// than one count, never runs ahead of the RTC-domain count, and after the
// RTC stops equals the number of RTC edges given.
module tb_rtc_counter;
  import gps_pkg::*;
  logic clk = 0, rst_n = 0, rtc_clk = 0, rtc_rst_n = 0;
  rtc_t rtc_count, rtc_now, prev;
  int checks = 0, failures = 0, edges = 0;
  bit run_rtc = 1;

  always #5 clk = ~clk;
  always #157 if (run_rtc) rtc_clk = ~rtc_clk;
  always @(posedge rtc_clk) if (rtc_rst_n) edges++;

  rtc_counter dut (.rtc_clk, .rtc_rst_n, .clk, .rst_n, .rtc_count, .rtc_now);

  initial begin
    #50_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100) @(negedge clk);   // covers several RTC edges with reset low
    rst_n = 1; rtc_rst_n = 1;
    prev = 0;
    repeat (40000) begin
      @(negedge clk);
      checks++;
      if (!(rtc_now == prev || rtc_now == prev + 1) || rtc_now > rtc_count) begin
        failures++;
        $display("FAIL: rtc_now %0d prev %0d count %0d", rtc_now, prev, rtc_count);
      end
      prev = rtc_now;
    end
    run_rtc = 0;
    repeat (10) @(negedge clk);
    checks++;
    if (rtc_now != rtc_t'(edges) || rtc_count != rtc_t'(edges)) begin
      failures++;
      $display("FAIL: final %0d/%0d edges %0d", rtc_now, rtc_count, edges);
    end
    checks++;
    if (edges < 1000) begin failures++; $display("FAIL: too few RTC edges"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
