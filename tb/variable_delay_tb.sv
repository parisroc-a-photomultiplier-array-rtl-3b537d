// variable_delay_tb: measures, for random channels and delay settings, the
// number of clock edges from the first edge that samples a trigger to the hold
// request (expected delay + 2), checks that the request lasts one cycle, that
// a retrigger during the count is ignored, and that channels are independent.
module variable_delay_tb;
  timeunit 1ns; timeprecision 1ps;
  localparam int NCH = 16, DLY_W = 4;
  logic clk = 0, rst_n = 0;
  logic [NCH-1:0] trig = '0, hreq;
  logic [DLY_W-1:0] dly = '0;
  int checks = 0, failures = 0;
  int edge_no = 0;
  int first_edge [NCH];
  int hold_edge  [NCH];
  int nhold      [NCH];

  variable_delay #(.NCH(NCH), .DLY_W(DLY_W)) dut (.clk, .rst_n, .trig_i(trig),
    .delay_i(dly), .hold_req_o(hreq));

  always #12.5 clk = ~clk;

  // record, for each channel, the edge after which a hold request is seen
  always @(posedge clk) begin
    edge_no <= edge_no + 1;
    for (int i = 0; i < NCH; i++)
      if (hreq[i]) begin
        nhold[i]++;
        hold_edge[i] = edge_no;
      end
  end

  task automatic ok(string what, bit c);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #400000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < NCH; i++) nhold[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 60; n++) begin
      int ch, d, prev_n;
      ch = $urandom_range(NCH - 1);
      d  = $urandom_range(15);
      dly = DLY_W'(d);
      prev_n = nhold[ch];
      @(negedge clk);
      trig[ch] = 1;
      first_edge[ch] = edge_no;  // the next edge samples it
      @(negedge clk);
      trig[ch] = 0;
      if (n % 3 == 0 && d > 2) begin
        // retrigger while counting: must be ignored
        @(negedge clk); trig[ch] = 1;
        @(negedge clk); trig[ch] = 0;
      end
      repeat (d + 6) @(negedge clk);
      ok($sformatf("one hold on ch %0d", ch), nhold[ch] == prev_n + 1);
      // hold_req is sampled at the edge after it rose: edge index of the rise
      // is first_edge + d + 2, seen by the sampler one edge later
      ok($sformatf("latency ch %0d d %0d got %0d", ch, d, hold_edge[ch] - first_edge[ch]),
         hold_edge[ch] - first_edge[ch] == d + 3);
      ok("pulse is one cycle", hreq == '0);
    end
    // two channels at once with a common delay
    dly = 4'd5;
    @(negedge clk); trig = 16'h8001; @(negedge clk); trig = '0;
    for (int i = 0; i < NCH; i++) first_edge[i] = edge_no - 1;
    repeat (12) @(negedge clk);
    ok("ch0 latency", hold_edge[0] - first_edge[0] == 8);
    ok("ch15 latency", hold_edge[15] - first_edge[15] == 8);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
