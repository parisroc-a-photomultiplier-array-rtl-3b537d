// timestamp_registers_tb: random writes of random timestamps into the 16 x 2
// cell registers, checked through random read selections against a model
// array.
module timestamp_registers_tb;
  timeunit 1ns; timeprecision 1ps;
  localparam int NCH = 16, DEPTH = 2, TS_W = 24;
  logic clk = 0;
  logic [NCH-1:0]  wr = '0;
  logic [0:0]      wcell [NCH];
  logic [0:0]      rcell [NCH];
  logic [TS_W-1:0] ts = '0;
  logic [TS_W-1:0] tsr [NCH];
  logic [TS_W-1:0] model [NCH][DEPTH];
  int checks = 0, failures = 0;

  timestamp_registers #(.NCH(NCH), .DEPTH(DEPTH), .TS_W(TS_W)) dut (.clk, .wr_i(wr),
    .wr_cell_i(wcell), .ts_i(ts), .rd_cell_i(rcell), .ts_rd_o(tsr));

  always #12.5 clk = ~clk;

  initial begin
    #1000000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill every register first
    for (int c = 0; c < DEPTH; c++) begin
      @(negedge clk);
      ts = TS_W'($urandom);
      wr = '1;
      for (int i = 0; i < NCH; i++) begin wcell[i] = 1'(c); model[i][c] = ts; end
    end
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      ts = TS_W'($urandom);
      for (int i = 0; i < NCH; i++) begin
        wr[i]    = ($urandom_range(3) == 0);
        wcell[i] = 1'($urandom_range(1));
        rcell[i] = 1'($urandom_range(1));
      end
      #1;
      for (int i = 0; i < NCH; i++) begin
        checks++;
        if (tsr[i] !== model[i][rcell[i]]) begin
          failures++;
          if (failures < 10) $display("FAIL ch%0d cell%0d got %h exp %h", i, rcell[i], tsr[i], model[i][rcell[i]]);
        end
      end
      @(posedge clk);
      for (int i = 0; i < NCH; i++) if (wr[i]) model[i][wcell[i]] = ts;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
