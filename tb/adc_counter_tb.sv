// adc_counter_tb: runs conversions at 8, 10 and 12 bits and checks the count
// sequence 0 .. 2^N-1, the single last/done pulses, the ramp window of
// exactly 2^N cycles (25 ns each: 6.4, 25.6 and 102.4 us) and that a start
// during a conversion is ignored.
module adc_counter_tb;
  timeunit 1ns; timeprecision 1ps;
  import parisroc_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  adc_res_e res = RES_12;
  logic [11:0] count;
  logic running, last, done;
  int checks = 0, failures = 0;

  adc_counter dut (.clk, .rst_n, .start_i(start), .res_i(res), .count_o(count),
    .running_o(running), .last_o(last), .done_o(done));

  always #12.5 clk = ~clk;

  task automatic ok(string what, bit c);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    #2000000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic adc_res_e r [4] = '{RES_8, RES_10, RES_12, RES_10};
    repeat (2) @(posedge clk);
    rst_n = 1;
    foreach (r[k]) begin
      int n, cycles, nlast;
      realtime t0;
      res = r[k];
      n = adc_bits(res);
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      t0 = $realtime;
      cycles = 0; nlast = 0;
      while (running) begin
        ok($sformatf("count %0d at cycle %0d", count, cycles), count == 12'(cycles));
        ok("last only at the end", last == (cycles == (1 << n) - 1));
        if (last) nlast++;
        if (cycles == 100) start = 1;    // ignored
        if (cycles == 101) start = 0;
        @(negedge clk);
        cycles++;
      end
      ok($sformatf("%0d-bit window %0d cycles", n, cycles), cycles == (1 << n));
      ok("conversion time", $realtime - t0 == 25.0 * (1 << n));
      ok("one last", nlast == 1);
      ok("done after the window", done == 1);
      @(negedge clk);
      ok("done one cycle", done == 0 && !running);
      repeat (3) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
