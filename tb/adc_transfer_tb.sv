// adc_transfer_tb: transfer function of the charge and fine-time ADCs of all
// 16 channels through the whole digital chain, at 8, 10 and 12 bits, and the
// repeatability of a DC level.
//
// A DC level is applied to every channel's slow shaper (a different fraction
// of full scale per channel) and to its fine-time input; an external hold
// freezes one cell of every channel, the chip converts them and reads out 16
// words. The levels are swept over the full scale and beyond, in 1/64 steps,
// and the codes must be the ideal Wilkinson codes of the analog model (first
// ramp step reaching the level, saturating at 2^N-1) for every channel, and
// monotonic in the level. A fixed level is then converted 20 times and must
// give the same code every time (the model has no noise).
// Analog model as in parisroc_tb: the ramp rises 2^(12-N) full-scale units
// (4096 = full scale) per 40 MHz cycle.
module adc_transfer_tb;
  timeunit 1ns; timeprecision 1ps;
  import parisroc_pkg::*;

  logic clk = 0, rst_n = 0, acq_en = 0, ext_hold = 0;
  adc_res_e res = RES_10;
  logic [NCH-1:0] cq, ct, trig, lost;
  logic ortrig, start_ramp, tick, dout, dvalid;
  logic [DEPTH-1:0] hold [NCH];
  logic [0:0] rdc [NCH];
  tm_state_e st;

  parisroc dut (.clk, .rst_n, .acq_enable_i(acq_en), .adc_res_i(res), .discri_sel_i(1'b0),
    .hold_delay_i(4'd0), .ext_hold_i(ext_hold), .discri_a_i('0), .discri_b_i('0),
    .adc_cmp_q_i(cq), .adc_cmp_t_i(ct), .trig_o(trig), .or_trig_o(ortrig), .hold_o(hold),
    .rd_cell_o(rdc), .start_ramp_o(start_ramp), .ck10_tick_o(tick), .lost_o(lost),
    .state_o(st), .dout_o(dout), .dvalid_o(dvalid));

  always #12.5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic ok(string what, bit c);
    checks++;
    if (!c) begin failures++; if (failures < 30) $display("FAIL %s", what); end
  endtask

  // analog model: DC levels, held cells and the ADC ramp
  int level_q [NCH], level_t [NCH];
  int cell_q [NCH][DEPTH], cell_t [NCH][DEPTH];
  logic [DEPTH-1:0] hold_d [NCH];
  int ramp = 0;
  always @(posedge clk) ramp <= start_ramp ? ramp + 1 : 0;
  always_comb
    for (int i = 0; i < NCH; i++) begin
      cq[i] = start_ramp && ((ramp << (12 - adc_bits(res))) >= cell_q[i][rdc[i]]);
      ct[i] = start_ramp && ((ramp << (12 - adc_bits(res))) >= cell_t[i][rdc[i]]);
    end
  always @(negedge clk)
    for (int i = 0; i < NCH; i++) begin
      for (int c = 0; c < DEPTH; c++)
        if (hold[i][c] && !hold_d[i][c]) begin
          cell_q[i][c] = level_q[i];
          cell_t[i][c] = level_t[i];
        end
      hold_d[i] = hold[i];
    end

  // word receiver
  logic tick_d = 0;
  logic [FRAME_W-1:0] sr;
  int nbit = 0;
  frame_t words [$];
  always @(posedge clk) begin
    tick_d <= tick;
    if (tick_d && dvalid) begin
      sr = {sr[FRAME_W-2:0], dout};
      if (++nbit == FRAME_W) begin nbit = 0; words.push_back(frame_t'(sr)); end
    end
  end

  function automatic int code_of(int v, int nb);
    int c;
    c = (v + (1 << (12 - nb)) - 1) >> (12 - nb);
    return (c > (1 << nb) - 1) ? (1 << nb) - 1 : c;
  endfunction

  // one measurement: hold all channels, wait for the 16 words
  task automatic measure();
    words.delete();
    @(negedge clk) ext_hold = 1;
    @(negedge clk) ext_hold = 0;
    while (words.size() < NCH || st != TM_ACQ || dut.pending) @(negedge clk);
    repeat (4) @(negedge clk);
  endtask

  initial begin
    #200ms; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_points = 0;
    for (int i = 0; i < NCH; i++) begin
      hold_d[i] = '0;
      for (int c = 0; c < DEPTH; c++) begin cell_q[i][c] = 0; cell_t[i][c] = 0; end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk) acq_en = 1;
    for (int r = 0; r < 3; r++) begin
      int nb;
      int prev_q [NCH];
      res = adc_res_e'(r);
      nb = adc_bits(res);
      for (int i = 0; i < NCH; i++) prev_q[i] = -1;
      for (int step = 0; step <= 66; step++) begin
        for (int i = 0; i < NCH; i++) begin
          level_q[i] = step * 64 + i * 4;        // 0 .. beyond full scale
          level_t[i] = (step * 61 + i * 97) % 4096;
        end
        measure();
        n_points++;
        ok($sformatf("%0d words", words.size()), words.size() == NCH);
        foreach (words[j]) begin
          int ch;
          ch = int'(words[j].ch);
          ok($sformatf("order %0d", ch), ch == j);
          ok($sformatf("%0d-bit charge ch%0d level %0d got %0d exp %0d", nb, ch, level_q[ch], words[j].charge, code_of(level_q[ch], nb)),
             int'(words[j].charge) == code_of(level_q[ch], nb));
          ok($sformatf("%0d-bit fine ch%0d", nb, ch), int'(words[j].fine) == code_of(level_t[ch], nb));
          ok("monotonic", int'(words[j].charge) >= prev_q[ch]);
          prev_q[ch] = int'(words[j].charge);
        end
      end
    end
    // DC repeatability at 10 bits, mid scale
    res = RES_10;
    for (int i = 0; i < NCH; i++) begin level_q[i] = 2048 + 8 * i; level_t[i] = 1000; end
    for (int k = 0; k < 20; k++) begin
      measure();
      foreach (words[j]) ok("DC repeat", int'(words[j].charge) == code_of(level_q[j], 10));
    end
    $display("transfer points: %0d (%0d channels each)", n_points, NCH);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
