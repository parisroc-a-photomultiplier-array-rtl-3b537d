// variable_delay: trigger-to-hold delay of each channel.
//
// The hold switch of a channel's analog memory must open when the slow shaper
// reaches its maximum, which is later than the fast trigger. This block samples
// each latched trigger on the 40 MHz clock, and on its rising edge loads a
// down-counter with delay_i; when the counter expires it emits a one-cycle hold
// request. While a channel is counting, further triggers on it are ignored.
//
// In the chip this delay is an analog cell; here it is a digital counter with
// 25 ns steps, which is this design's choice, as are the 4-bit width (0 to 375
// ns, enough for the 50/100/200 ns shaping times) and the single-flop sampling.
//
// Timing: a trigger sampled high at clock edge k (first high sample) gives
// hold_req_o high for the one cycle that follows edge k + delay_i + 2.
module variable_delay #(
  parameter int NCH   = parisroc_pkg::NCH,
  parameter int DLY_W = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [NCH-1:0]   trig_i,
  input  logic [DLY_W-1:0] delay_i,
  output logic [NCH-1:0]   hold_req_o
);

  logic [NCH-1:0]   trig_q;
  logic [NCH-1:0]   trig_q2;
  logic [NCH-1:0]   active;
  logic [DLY_W-1:0] cnt [NCH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      trig_q     <= '0;
      trig_q2    <= '0;
      active     <= '0;
      hold_req_o <= '0;
      for (int i = 0; i < NCH; i++) cnt[i] <= '0;
    end else begin
      trig_q  <= trig_i;
      trig_q2 <= trig_q;
      for (int i = 0; i < NCH; i++) begin
        hold_req_o[i] <= 1'b0;
        if (active[i]) begin
          if (cnt[i] == '0) begin
            active[i]     <= 1'b0;
            hold_req_o[i] <= 1'b1;
          end else begin
            cnt[i] <= cnt[i] - 1'b1;
          end
        end else if (trig_q[i] && !trig_q2[i]) begin
          active[i] <= 1'b1;
          cnt[i]    <= delay_i;
        end
      end
    end
  end

endmodule
