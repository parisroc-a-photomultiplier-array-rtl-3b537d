// adc_registers_tb: emulates Wilkinson conversions. A reference counter
// sweeps 0 .. 2^N-1; each of the 32 discriminators goes high (and stays high)
// once the count exceeds a random "held voltage" code, as a comparator against
// a rising ramp would. The stored codes must equal the first count at which
// each discriminator was high, and discriminators that never fire must give
// the full-scale code.
module adc_registers_tb;
  timeunit 1ns; timeprecision 1ps;
  localparam int NCH = 16, ADC_W = 12;
  logic clk = 0, rst_n = 0, clr = 0, running = 0, last = 0;
  logic [ADC_W-1:0] count = '0;
  logic [NCH-1:0] cq = '0, ct = '0;
  logic [ADC_W-1:0] q [NCH];
  logic [ADC_W-1:0] t [NCH];
  int vq [NCH], vt [NCH];
  int checks = 0, failures = 0, n_over = 0;

  adc_registers #(.NCH(NCH), .ADC_W(ADC_W)) dut (.clk, .rst_n, .clear_i(clr),
    .running_i(running), .last_i(last), .count_i(count), .cmp_q_i(cq), .cmp_t_i(ct),
    .charge_o(q), .fine_o(t));

  always #12.5 clk = ~clk;

  initial begin
    #5000000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 12; k++) begin
      int n, maxc;
      n = (k % 3 == 0) ? 8 : (k % 3 == 1) ? 10 : 12;
      maxc = (1 << n) - 1;
      for (int i = 0; i < NCH; i++) begin
        // about one in eight codes is above full scale (overflow)
        vq[i] = $urandom_range(maxc + maxc / 8);
        vt[i] = $urandom_range(maxc + maxc / 8);
      end
      @(negedge clk) clr = 1;
      @(negedge clk) clr = 0;
      running = 1;
      for (int c = 0; c <= maxc; c++) begin
        count = ADC_W'(c);
        last  = (c == maxc);
        for (int i = 0; i < NCH; i++) begin
          cq[i] = (c >= vq[i]);
          ct[i] = (c >= vt[i]);
        end
        @(negedge clk);
      end
      running = 0; last = 0; cq = '0; ct = '0;
      @(negedge clk);
      for (int i = 0; i < NCH; i++) begin
        int eq, et;
        eq = (vq[i] > maxc) ? maxc : vq[i];
        et = (vt[i] > maxc) ? maxc : vt[i];
        if (vq[i] > maxc) n_over++;
        checks += 2;
        if (q[i] != ADC_W'(eq)) begin failures++; $display("FAIL q ch%0d got %0d exp %0d", i, q[i], eq); end
        if (t[i] != ADC_W'(et)) begin failures++; $display("FAIL t ch%0d got %0d exp %0d", i, t[i], et); end
      end
    end
    checks++;
    if (n_over == 0) begin failures++; $display("FAIL no overflow case"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
