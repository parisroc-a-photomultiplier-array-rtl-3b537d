// readout_tb: random hit masks and random channel data; the serial stream is
// captured on each 10 MHz tick while dvalid is high, cut into 52-bit words and
// compared with the expected words of the hit channels in channel order. The
// readout time must be 52 ticks per hit channel (83.2 us for 16 channels,
// below the 100 us maximum).
module readout_tb;
  timeunit 1ns; timeprecision 1ps;
  import parisroc_pkg::*;
  localparam int NCH = 16;
  logic clk = 0, rst_n = 0, ce = 0, start = 0;
  logic [NCH-1:0] mask = '0;
  logic [23:0] ts [NCH];
  logic [11:0] qd [NCH];
  logic [11:0] fd [NCH];
  logic dout, dvalid, busy, done;
  int checks = 0, failures = 0;

  readout dut (.clk, .rst_n, .ce_i(ce), .start_i(start), .hit_mask_i(mask), .ts_i(ts),
    .charge_i(qd), .fine_i(fd), .dout_o(dout), .dvalid_o(dvalid), .busy_o(busy), .done_o(done));

  always #12.5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) begin cyc <= cyc + 1; ce <= ((cyc + 1) % 4 == 3); end

  task automatic ok(string what, bit c);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    #20000000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 25; k++) begin
      frame_t exp_q [$];
      exp_q.delete();
      mask = (k == 0) ? '1 : (k == 1) ? 16'h0001 : (k == 2) ? 16'h8000 : NCH'($urandom);
      if (mask == '0) mask = 16'h0100;
      for (int i = 0; i < NCH; i++) begin
        ts[i] = 24'($urandom); qd[i] = 12'($urandom); fd[i] = 12'($urandom);
        if (mask[i]) exp_q.push_back('{ch: 4'(i), ts: ts[i], charge: qd[i], fine: fd[i]});
      end
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      // wait for the end; the stream is captured by the monitor below
      do @(posedge clk); while (!done);
      ok($sformatf("words k=%0d", k), mon_words.size() == exp_q.size());
      foreach (exp_q[j]) begin
        if (j < mon_words.size()) ok($sformatf("word %0d k=%0d got %h exp %h", j, k, mon_words[j], exp_q[j]),
                                     mon_words[j] == exp_q[j]);
      end
      ok($sformatf("ticks %0d for %0d words", mon_ticks, exp_q.size()), mon_ticks == 52 * exp_q.size());
      if (k == 0) ok("16 channels within 100 us", mon_ticks * 100.0 <= 100000.0);
      mon_words.delete(); mon_ticks = 0;
      repeat (10) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // stream monitor: a bit is taken on every clock where dvalid is high and the
  // previous cycle was a tick (the output register changes only on ticks)
  logic [FRAME_W-1:0] mon_sr;
  int mon_n = 0, mon_ticks = 0;
  frame_t mon_words [$];
  logic ce_d = 0;
  always @(posedge clk) begin
    ce_d <= ce;
    if (ce_d && dvalid) begin
      mon_ticks++;
      mon_sr = {mon_sr[FRAME_W-2:0], dout};
      mon_n++;
      if (mon_n == FRAME_W) begin
        mon_words.push_back(frame_t'(mon_sr));
        mon_n = 0;
      end
    end
  end
endmodule
