// top_manager_tb: plays the roles of the FIFO manager, the ADC and the readout
// around top_manager with random response times, and checks the sequence of
// phases and pulses: clear on start, conversion only when a cell is pending,
// readout after the conversion, release after the readout, no new
// conversion before the release has taken effect, and stop on disable.
module top_manager_tb;
  timeunit 1ns; timeprecision 1ps;
  import parisroc_pkg::*;
  logic clk = 0, rst_n = 0, en = 0, pend = 0, adone = 0, rdone = 0;
  logic run, clr, cs, rs, rel;
  tm_state_e st;
  int checks = 0, failures = 0;
  int n_conv = 0, n_ro = 0, n_rel = 0, n_clr = 0;

  top_manager dut (.clk, .rst_n, .acq_enable_i(en), .pending_i(pend), .adc_done_i(adone),
    .ro_done_i(rdone), .ts_run_o(run), .ts_clear_o(clr), .conv_start_o(cs), .ro_start_o(rs),
    .release_o(rel), .state_o(st));

  always #12.5 clk = ~clk;

  task automatic ok(string what, bit c);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // expected-phase monitor
  typedef enum {E_IDLE, E_ACQ, E_CONV, E_READ} ph_e;
  ph_e ph = E_IDLE;
  always @(negedge clk) if (rst_n) begin
    if (ph == E_IDLE && st == TM_ACQ) ph = E_ACQ;
    if (ph == E_ACQ && st == TM_IDLE) ph = E_IDLE;
    ok("run level", run == (ph != E_IDLE));
    if (clr) begin n_clr++; ok("clear after start", ph == E_ACQ); end
    if (cs)  begin n_conv++; ok("conv from acq with pending", ph == E_ACQ); ph = E_CONV; end
    if (rs)  begin n_ro++;   ok("readout after conversion", ph == E_CONV); ph = E_READ; end
    if (rel) begin n_rel++;  ok("release after readout", ph == E_READ); ph = E_ACQ; end
  end

  initial begin
    #5000000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);
    ok("idle after reset", st == TM_IDLE && !run);
    for (int k = 0; k < 40; k++) begin
      en = 1;
      repeat ($urandom_range(20)) @(negedge clk);
      // a cell becomes pending
      pend = 1;
      // conversion must start within two cycles
      repeat (3) @(negedge clk);
      ok("converting", st == TM_CONV);
      repeat ($urandom_range(50, 5)) @(negedge clk);
      adone = 1; @(negedge clk); adone = 0;
      ok("reading", st == TM_READ);
      repeat ($urandom_range(50, 5)) @(negedge clk);
      if (k % 5 == 0) en = 0;   // disable request during readout
      rdone = 1; @(negedge clk); rdone = 0;
      // the release is out this cycle; pending still high (not yet updated)
      ok("release pulse", rel == 1);
      @(negedge clk);
      ok("no conversion on stale pending", !cs);
      pend = 0;
      @(negedge clk);
      if (k % 5 == 0) begin
        ok("stopped after disable", st == TM_IDLE);
        @(negedge clk);
      end else begin
        ok("back in acquisition", st == TM_ACQ);
      end
    end
    ok("conversions", n_conv == 40);
    ok("readouts", n_ro == 40);
    ok("releases", n_rel == 40);
    ok("clears", n_clr == 9);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
