// trigger_logic_tb: checks selection, latching and the OR output of
// trigger_logic. Short discriminator pulses are placed between clock edges;
// the latched trigger must rise at once, stay high until the next rising edge
// and fall there. A pulse that spans an edge must keep the trigger high.
module trigger_logic_tb;
  timeunit 1ns; timeprecision 1ps;
  localparam int NCH = 16;
  logic clk = 0, rst_n = 0;
  logic [NCH-1:0] da = '0, db = '0, trig;
  logic sel = 0, ortrig;
  int checks = 0, failures = 0;

  trigger_logic #(.NCH(NCH)) dut (.clk, .rst_n, .discri_a_i(da), .discri_b_i(db),
    .discri_sel_i(sel), .trig_o(trig), .or_trig_o(ortrig));

  always #12.5 clk = ~clk;

  task automatic check(string what, logic [NCH-1:0] exp_t);
    checks++;
    if (trig !== exp_t || ortrig !== (|exp_t)) begin
      failures++;
      $display("FAIL %s: trig=%h exp=%h or=%b", what, trig, exp_t, ortrig);
    end
  endtask

  initial begin
    #100000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    check("idle", '0);
    for (int n = 0; n < 40; n++) begin
      int ch;
      logic s;
      ch = $urandom_range(NCH - 1);
      s  = 1'($urandom_range(1));
      sel = s;
      @(posedge clk); #3;
      // pulse on the selected discriminator, 5 ns wide, inside the cycle
      if (s) db[ch] = 1; else da[ch] = 1;
      #1 check("rise selected", NCH'(1) << ch);
      #4 begin da = '0; db = '0; end
      #1 check("held after pulse", NCH'(1) << ch);
      @(posedge clk); #1;
      check("cleared at edge", '0);
      // pulse on the other discriminator must not trigger
      if (s) da[ch] = 1; else db[ch] = 1;
      #1 check("unselected ignored", '0);
      #4 begin da = '0; db = '0; end
      // pulse that spans a clock edge
      @(posedge clk); #20;
      if (s) db[ch] = 1; else da[ch] = 1;
      @(posedge clk); #1;
      check("spanning edge", NCH'(1) << ch);
      #3 begin da = '0; db = '0; end
      @(posedge clk); #1;
      check("cleared after span", '0);
    end
    // several channels at once
    sel = 0;
    @(posedge clk); #3 da = 16'hA5A5;
    #1 check("multi", 16'hA5A5);
    #3 da = '0;
    @(posedge clk); #1 check("multi cleared", '0);
    // reset clears a held trigger
    #3 da = 16'h0001;
    #1 da = '0;
    #1 check("held before reset", 16'h0001);
    rst_n = 0; #1 check("reset", '0);
    rst_n = 1;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
