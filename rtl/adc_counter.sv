// adc_counter: common counter of the Wilkinson ADC.
//
// A Wilkinson ADC converts a held voltage into time: a common voltage ramp
// starts together with a counter, and the counter value at which the ramp
// crosses the held voltage is the code. In this chip one ramp and one counter
// serve all 32 ADC discriminators (charge and fine time of 16 channels). This
// block is that counter: start_i starts the ramp (running_o, the "start ramp"
// signal) and counts 0 .. 2^N-1 on the 40 MHz clock for an N = 8, 10 or 12 bit
// conversion, so a conversion lasts 2^N cycles (6.4, 25.6 or 102.4 us).
//
// The 12-bit counter, the three resolutions and the 40 MHz conversion clock
// are the chip's; the binary count and the handshake are this design's.
//
// Timing: start_i at edge k; count_o = 0 and running_o = 1 from edge k+1;
// count_o = 2^N-1 with last_o = 1 in the cycle after edge k + 2^N; done_o
// pulses in the cycle after that, when running_o has fallen.
module adc_counter #(
  parameter int ADC_W = parisroc_pkg::ADC_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start_i,
  input  parisroc_pkg::adc_res_e  res_i,
  output logic [ADC_W-1:0]        count_o,
  output logic                    running_o,
  output logic                    last_o,
  output logic                    done_o
);

  logic [ADC_W-1:0] max_code;
  int unsigned      nbits;

  always_comb begin
    nbits = parisroc_pkg::adc_bits(res_i);
    if (nbits > ADC_W) nbits = ADC_W;
    max_code = ADC_W'((64'd1 << nbits) - 64'd1);
  end

  assign last_o = running_o && (count_o == max_code);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count_o   <= '0;
      running_o <= 1'b0;
      done_o    <= 1'b0;
    end else begin
      done_o <= 1'b0;
      if (start_i && !running_o) begin
        count_o   <= '0;
        running_o <= 1'b1;
      end else if (running_o) begin
        if (last_o) begin
          running_o <= 1'b0;
          done_o    <= 1'b1;
        end else begin
          count_o <= count_o + 1'b1;
        end
      end
    end
  end

endmodule
