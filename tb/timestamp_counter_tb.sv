// timestamp_counter_tb: compares the 24-bit counter with a reference count
// under a one-in-four clock enable, random run/stop and clear, and checks the
// wrap-around on a 4-bit instance.
module timestamp_counter_tb;
  timeunit 1ns; timeprecision 1ps;
  logic clk = 0, rst_n = 0, ce = 0, run = 0, clr = 0;
  logic [23:0] ts;
  logic [3:0]  ts4;
  logic [23:0] ref_ts = '0;
  logic [3:0]  ref4 = '0;
  int checks = 0, failures = 0;

  timestamp_counter dut (.clk, .rst_n, .ce_i(ce), .run_i(run), .clear_i(clr), .ts_o(ts));
  timestamp_counter #(.TS_W(4)) dut4 (.clk, .rst_n, .ce_i(ce), .run_i(1'b1), .clear_i(1'b0), .ts_o(ts4));

  always #12.5 clk = ~clk;

  initial begin
    #1000000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic int cyc = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 20000; n++) begin
      @(negedge clk);
      ce  = (cyc % 4 == 3);
      cyc++;
      if (n % 500 == 0) run = 1'($urandom_range(1)) | (n < 4000);
      clr = (n == 9000);
      @(posedge clk);
      if (clr) ref_ts = '0; else if (ce && run) ref_ts = ref_ts + 1;
      if (ce) ref4 = ref4 + 1;
      #1;
      checks++;
      if (ts !== ref_ts || ts4 !== ref4) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d ts=%0d exp=%0d ts4=%0d exp=%0d", n, ts, ref_ts, ts4, ref4);
      end
    end
    // 10 MHz rate: 1000 steps take 4000 clock cycles when running
    checks++;
    if (ts4 !== 4'(20000 / 4)) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
