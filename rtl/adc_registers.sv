// adc_registers: code registers of the 32 Wilkinson ADC discriminators.
//
// Each channel has two ADC discriminators, one comparing the common ADC ramp
// with the held charge and one with the held fine-time sample. A register per
// discriminator (2 x NCH registers of ADC_W bits, 32 x 12 in the chip) stores
// the common counter value in the first cycle of the conversion in which its
// discriminator is high. A discriminator that has not fired by the last count
// stores the last count, i.e. the full-scale code 2^N-1 (overflow).
//
// The register count and width are the chip's; the first-high capture, the
// full-scale overflow code and the assumption that the discriminator outputs
// are synchronous to the 40 MHz clock are this design's.
//
// Timing: clear_i (one cycle, before the conversion) zeroes the registers and
// re-arms them; codes are final one cycle after last_i.
module adc_registers #(
  parameter int NCH   = parisroc_pkg::NCH,
  parameter int ADC_W = parisroc_pkg::ADC_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear_i,
  input  logic             running_i,
  input  logic             last_i,
  input  logic [ADC_W-1:0] count_i,
  input  logic [NCH-1:0]   cmp_q_i,
  input  logic [NCH-1:0]   cmp_t_i,
  output logic [ADC_W-1:0] charge_o [NCH],
  output logic [ADC_W-1:0] fine_o   [NCH]
);

  logic [NCH-1:0] got_q, got_t;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      got_q <= '0;
      got_t <= '0;
      for (int i = 0; i < NCH; i++) begin
        charge_o[i] <= '0;
        fine_o[i]   <= '0;
      end
    end else if (clear_i) begin
      got_q <= '0;
      got_t <= '0;
      for (int i = 0; i < NCH; i++) begin
        charge_o[i] <= '0;
        fine_o[i]   <= '0;
      end
    end else if (running_i) begin
      for (int i = 0; i < NCH; i++) begin
        if (!got_q[i] && (cmp_q_i[i] || last_i)) begin
          got_q[i]    <= 1'b1;
          charge_o[i] <= count_i;
        end
        if (!got_t[i] && (cmp_t_i[i] || last_i)) begin
          got_t[i]  <= 1'b1;
          fine_o[i] <= count_i;
        end
      end
    end
  end

endmodule
