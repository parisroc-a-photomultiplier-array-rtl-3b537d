// sca_fifo_manager_tb: drives random hold requests, conversion snapshots and
// releases, and compares every output of sca_fifo_manager with a reference
// model that keeps, for each channel, the queue of held cells.
module sca_fifo_manager_tb;
  timeunit 1ns; timeprecision 1ps;
  localparam int NCH = 16, DEPTH = 2;
  logic clk = 0, rst_n = 0;
  logic [NCH-1:0] hreq = '0, wr, mask, full, lost;
  logic conv = 0, rel = 0, pend;
  logic [DEPTH-1:0] hold [NCH];
  logic [0:0] wcell [NCH];
  logic [0:0] rcell [NCH];
  int checks = 0, failures = 0;
  int n_full = 0, n_lost = 0, n_two = 0;

  // reference model
  int q_wp [NCH], q_rp [NCH], q_n [NCH];
  bit m_hold [NCH][DEPTH];
  logic [NCH-1:0] m_mask = '0, m_lost = '0;

  sca_fifo_manager #(.NCH(NCH), .DEPTH(DEPTH)) dut (.clk, .rst_n, .hold_req_i(hreq),
    .conv_start_i(conv), .release_i(rel), .hold_o(hold), .wr_o(wr), .wr_cell_o(wcell),
    .rd_cell_o(rcell), .conv_mask_o(mask), .pending_o(pend), .full_o(full), .lost_o(lost));

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
    for (int i = 0; i < NCH; i++) begin
      q_wp[i] = 0; q_rp[i] = 0; q_n[i] = 0;
      for (int c = 0; c < DEPTH; c++) m_hold[i][c] = 0;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      logic [NCH-1:0] nonempty;
      @(negedge clk);
      // compare outputs with the model before the edge
      for (int i = 0; i < NCH; i++) begin
        bit any_mismatch;
        any_mismatch = 0;
        for (int c = 0; c < DEPTH; c++) if (hold[i][c] !== m_hold[i][c]) any_mismatch = 1;
        ok($sformatf("hold ch%0d n%0d", i, n), !any_mismatch);
        ok($sformatf("rd_cell ch%0d", i), rcell[i] == q_rp[i]);
        ok($sformatf("wr_cell ch%0d", i), wcell[i] == q_wp[i]);
        ok($sformatf("full ch%0d", i), full[i] == (q_n[i] == DEPTH));
        if (q_n[i] == DEPTH) n_full++;
      end
      ok("mask", mask == m_mask);
      ok("lost", lost == m_lost);
      nonempty = '0;
      for (int i = 0; i < NCH; i++) nonempty[i] = (q_n[i] != 0);
      ok("pending", pend == |nonempty);
      // random stimulus
      hreq = '0;
      for (int i = 0; i < NCH; i++) hreq[i] = ($urandom_range(9) == 0);
      conv = (m_mask == '0) && ($urandom_range(5) == 0);
      rel  = (m_mask != '0) && ($urandom_range(7) == 0);
      #1;
      ok("wr", wr == (hreq & ~full));
      // model update at the edge
      @(posedge clk);
      m_lost = '0;
      for (int i = 0; i < NCH; i++) begin
        bit inc, dec;
        inc = hreq[i] && q_n[i] < DEPTH;
        dec = rel && m_mask[i];
        if (hreq[i] && !inc) begin m_lost[i] = 1; n_lost++; end
        if (inc) begin m_hold[i][q_wp[i]] = 1; q_wp[i] = (q_wp[i] + 1) % DEPTH; end
        if (dec) begin m_hold[i][q_rp[i]] = 0; q_rp[i] = (q_rp[i] + 1) % DEPTH; end
        q_n[i] += int'(inc) - int'(dec);
      end
      if (conv) m_mask = nonempty;
      if (rel) m_mask = '0;
      for (int i = 0; i < NCH; i++) if (q_n[i] == 2) n_two++;
    end
    ok("scenario: channel full seen", n_full > 0);
    ok("scenario: lost trigger seen", n_lost > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
