// parisroc_tb: end-to-end test of the digital part at its default sizes (16
// channels, two cells, 24-bit timestamp, 12-bit ADC).
//
// The analog channels are replaced by a behavioural model in this testbench:
//   * an injected pulse fires the channel's discriminator for 10 ns and sets
//     its slow-shaper level to a charge value (a 12-bit full-scale number) for
//     600 ns, long enough to be held after the programmed delay;
//   * when a memory cell's hold switch opens, the cell keeps the slow-shaper
//     level and the value of the 100 ns fine-time ramp (restarted on every
//     10 MHz tick, 4096 units per 100 ns);
//   * during a conversion a ramp counts one step per 40 MHz cycle, 2^(12-N)
//     full-scale units per step at N bits, and each ADC discriminator is high
//     once the ramp has reached the value of the cell selected for reading.
// A scoreboard keeps, per channel, the queue of held cells; every received
// 52-bit word is checked against the oldest one: channel, charge and fine-time
// codes exactly, timestamp to +/-1 step of the time since acquisition start.
// The test also measures the conversion time (2^N cycles) and the readout time
// of a 16-channel event (at most 100 us) and counts each mechanism: both
// discriminators, OR trigger, external hold, two cells held, lost trigger,
// 8/10/12-bit conversion, ADC overflow, selective and full readout, holds
// taken during a conversion, and a stop and restart of acquisition.
module parisroc_tb;
  timeunit 1ns; timeprecision 1ps;
  import parisroc_pkg::*;

  logic clk = 0, rst_n = 0;
  logic acq_en = 0, sel = 0, ext_hold = 0;
  adc_res_e res = RES_12;
  logic [3:0] dly = 4'd2;
  logic [NCH-1:0] da = '0, db = '0, cq, ct;
  logic [NCH-1:0] trig, lost;
  logic ortrig, start_ramp, tick, dout, dvalid;
  logic [DEPTH-1:0] hold [NCH];
  logic [0:0] rdc [NCH];
  tm_state_e st;

  parisroc dut (.clk, .rst_n, .acq_enable_i(acq_en), .adc_res_i(res), .discri_sel_i(sel),
    .hold_delay_i(dly), .ext_hold_i(ext_hold), .discri_a_i(da), .discri_b_i(db),
    .adc_cmp_q_i(cq), .adc_cmp_t_i(ct), .trig_o(trig), .or_trig_o(ortrig), .hold_o(hold),
    .rd_cell_o(rdc), .start_ramp_o(start_ramp), .ck10_tick_o(tick), .lost_o(lost),
    .state_o(st), .dout_o(dout), .dvalid_o(dvalid));

  always #12.5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic ok(string what, bit c);
    checks++;
    if (!c) begin failures++; if (failures < 30) $display("FAIL %s (t=%0t)", what, $realtime); end
  endtask

  // ---------------- behavioural analog model ----------------
  int      level [NCH];             // slow shaper level, 0..4095
  int      cell_q [NCH][DEPTH];
  int      cell_t [NCH][DEPTH];
  realtime tdc_t0 = 0;
  int      ramp = 0;
  logic [DEPTH-1:0] hold_d [NCH];

  always @(posedge clk) if (tick) tdc_t0 <= $realtime;
  always @(posedge clk) ramp <= start_ramp ? ramp + 1 : 0;

  always_comb begin
    for (int i = 0; i < NCH; i++) begin
      cq[i] = start_ramp && ((ramp << (12 - adc_bits(res))) >= cell_q[i][rdc[i]]);
      ct[i] = start_ramp && ((ramp << (12 - adc_bits(res))) >= cell_t[i][rdc[i]]);
    end
  end

  // scoreboard of held cells
  typedef struct { int q; int t; realtime th; } held_t;
  held_t   exp_q [NCH][$];
  realtime t_acq = 0;
  int n_trig_ch [NCH];
  int n_or = 0, n_sel_a = 0, n_sel_b = 0, n_ext = 0, n_two = 0, n_lost = 0;
  int n_res [3] = '{0, 0, 0};
  int n_over = 0, n_full_ro = 0, n_sel_ro = 0, n_hold_in_conv = 0, n_restart = 0;
  int n_words = 0, n_holds = 0;

  always @(negedge clk) if (rst_n) begin
    for (int i = 0; i < NCH; i++) begin
      for (int c = 0; c < DEPTH; c++) begin
        if (hold[i][c] && !hold_d[i][c]) begin
          held_t h;
          cell_q[i][c] = level[i];
          cell_t[i][c] = int'(($realtime - tdc_t0) * 4096.0 / 100.0) % 4096;
          h.q = cell_q[i][c]; h.t = cell_t[i][c]; h.th = $realtime;
          exp_q[i].push_back(h);
          n_holds++;
          if (st == TM_CONV) n_hold_in_conv++;
        end
      end
      if (&hold[i] && !(&hold_d[i])) n_two++;
      hold_d[i] = hold[i];
    end
    n_lost += $countones(lost);
  end

  // trigger outputs may last less than half a clock period: count their edges
  for (genvar i = 0; i < NCH; i++) begin : g_trig_count
    always @(posedge trig[i]) n_trig_ch[i]++;
  end
  always @(posedge ortrig) n_or++;

  // ---------------- serial word receiver ----------------
  logic tick_d = 0;
  logic [FRAME_W-1:0] sr;
  int nbit = 0, words_this_ro = 0, last_ch = -1;
  realtime t_first_bit = 0;
  always @(posedge clk) begin
    tick_d <= tick;
    if (tick_d && dvalid) begin
      if (nbit == 0 && words_this_ro == 0) t_first_bit = $realtime;
      sr = {sr[FRAME_W-2:0], dout};
      nbit++;
      if (nbit == FRAME_W) begin
        frame_t w;
        nbit = 0;
        w = frame_t'(sr);
        check_word(w);
        words_this_ro++;
      end
    end
  end

  function automatic int code_of(int v, int nb);
    int sh, c, mx;
    sh = 12 - nb;
    mx = (1 << nb) - 1;
    c = (v + (1 << sh) - 1) >> sh;    // first ramp step reaching v
    return (c > mx) ? mx : c;
  endfunction

  task automatic check_word(frame_t w);
    held_t h;
    int nb;
    realtime dt;
    n_words++;
    ok($sformatf("channel order %0d after %0d", w.ch, last_ch), int'(w.ch) > last_ch);
    last_ch = int'(w.ch);
    if (exp_q[w.ch].size() == 0) begin
      ok($sformatf("word for channel %0d without a held cell", w.ch), 0);
      return;
    end
    h = exp_q[w.ch].pop_front();
    nb = adc_bits(res);
    if (((4095 + (1 << (12 - nb)) - 1) >> (12 - nb)) > (1 << nb) - 1 && h.q > ((1 << nb) - 1) << (12 - nb)) n_over++;
    ok($sformatf("charge ch%0d got %0d exp %0d", w.ch, w.charge, code_of(h.q, nb)), int'(w.charge) == code_of(h.q, nb));
    ok($sformatf("fine ch%0d got %0d exp %0d", w.ch, w.fine, code_of(h.t, nb)), int'(w.fine) == code_of(h.t, nb));
    dt = (h.th - t_acq) / 100.0;
    ok($sformatf("timestamp ch%0d got %0d exp ~%0f", w.ch, w.ts, dt),
       real'(w.ts) >= dt - 1.5 && real'(w.ts) <= dt + 1.5);
  endtask

  // conversion time and the end of each readout
  realtime t_ramp = 0;
  always @(posedge clk) begin
    if (start_ramp && ramp == 0) t_ramp = $realtime;
    if (!start_ramp && ramp != 0) begin
      ok($sformatf("conversion %0d cycles at %0d bits", ramp, adc_bits(res)), ramp == (1 << adc_bits(res)));
      n_res[res]++;
    end
  end

  always @(posedge clk) if (dut.u_ro.done_o) begin
    // readout time: words are back to back, 52 periods of 100 ns each
    if (words_this_ro == NCH) begin
      n_full_ro++;
      ok($sformatf("16-channel readout %0f ns", $realtime - t_first_bit), $realtime - t_first_bit <= 100000.0);
    end else if (words_this_ro > 0) n_sel_ro++;
    words_this_ro = 0;
    last_ch = -1;
  end

  // ---------------- stimulus ----------------
  task automatic inject(int ch, int q);
    fork
      begin
        level[ch] = q;
        if (sel) db[ch] = 1; else da[ch] = 1;
        if (sel) n_sel_b++; else n_sel_a++;
        #10;
        da[ch] = 0; db[ch] = 0;
        #590;
        level[ch] = 0;
      end
    join_none
  endtask

  task automatic wait_idle_fifo();
    // wait until every held cell has been read out
    int guard = 0;
    while (guard < 200000) begin
      int n = 0;
      for (int i = 0; i < NCH; i++) n += exp_q[i].size();
      if (n == 0 && st == TM_ACQ) break;
      @(negedge clk);
      guard++;
    end
  endtask

  initial begin
    #50ms; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < NCH; i++) begin
      level[i] = 0; n_trig_ch[i] = 0; hold_d[i] = '0;
      for (int c = 0; c < DEPTH; c++) begin cell_q[i][c] = 0; cell_t[i][c] = 0; end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 2; pass++) begin
      @(negedge clk) acq_en = 1;
      t_acq = $realtime + 25.0;    // counter is cleared one cycle after start
      if (pass == 1) n_restart++;
      foreach (n_res[r]) begin
        res = adc_res_e'(r);
        // single hits on random channels, both discriminators, random delay
        for (int k = 0; k < 6; k++) begin
          sel = k[0];
          dly = 4'($urandom_range(15));
          #($urandom_range(3000, 700));
          inject($urandom_range(NCH - 1), $urandom_range(4095));
        end
        // a burst on one channel: three hits before the first is converted,
        // so both cells are held and the third hit is lost
        begin
          int ch = $urandom_range(NCH - 1);
          dly = 4'd2;
          #800 inject(ch, 1000);
          #800 inject(ch, 2000);
          #800 inject(ch, 3000);
        end
        wait_idle_fifo();
        // every channel at once (16-word readout)
        #1000;
        for (int i = 0; i < NCH; i++) inject(i, 4095 - 200 * i);
        wait_idle_fifo();
        // external hold on all channels
        #1000;
        @(negedge clk) ext_hold = 1;
        @(negedge clk) ext_hold = 0;
        n_ext++;
        wait_idle_fifo();
      end
      // stop, then start again
      @(negedge clk) acq_en = 0;
      repeat (20) @(negedge clk);
      ok("stopped", st == TM_IDLE);
    end
    repeat (100) @(negedge clk);
    begin
      int nleft = 0;
      for (int i = 0; i < NCH; i++) begin
        nleft += exp_q[i].size();
        ok($sformatf("channel %0d triggered", i), n_trig_ch[i] > 0);
      end
      ok("all held cells read out", nleft == 0);
    end
    ok($sformatf("words %0d = holds %0d", n_words, n_holds), n_words == n_holds);
    ok("OR trigger seen", n_or > 0);
    ok("discriminator 1 used", n_sel_a > 0);
    ok("discriminator 2 used", n_sel_b > 0);
    ok("external hold used", n_ext > 0);
    ok("two cells held", n_two > 0);
    ok("lost trigger", n_lost > 0);
    ok("8-bit conversion", n_res[0] > 0);
    ok("10-bit conversion", n_res[1] > 0);
    ok("12-bit conversion", n_res[2] > 0);
    ok("ADC overflow", n_over > 0);
    ok("full readout", n_full_ro > 0);
    ok("selective readout", n_sel_ro > 0);
    ok("hold during conversion", n_hold_in_conv > 0);
    ok("restart", n_restart > 0);
    $display("mechanisms: or=%0d selA=%0d selB=%0d ext=%0d two=%0d lost=%0d res8=%0d res10=%0d res12=%0d over=%0d full_ro=%0d sel_ro=%0d hold_in_conv=%0d restart=%0d words=%0d",
             n_or, n_sel_a, n_sel_b, n_ext, n_two, n_lost, n_res[0], n_res[1], n_res[2], n_over,
             n_full_ro, n_sel_ro, n_hold_in_conv, n_restart, n_words);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
