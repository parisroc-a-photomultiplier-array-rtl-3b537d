// trigger_logic: per-channel trigger selection, latching and the OR trigger.
//
// Each channel has two discriminators on its fast shaper; a common select bit
// chooses which of the two drives the channel's trigger output, so the chip has
// 16 trigger outputs. Each trigger is latched: a flip-flop with an asynchronous
// set from the selected discriminator rises as soon as the discriminator fires
// and keeps its state until the end of the 40 MHz clock cycle (it is cleared at
// the next rising edge unless the discriminator is still high). The OR of the 16
// latched triggers is the 17th output.
//
// Follows the chip: discriminator multiplexing, latch until end of cycle, OR
// output. Own choices: the select is one bit common to all channels, and the
// OR is taken from the latched triggers.
//
// Reset clears the latch asynchronously (a discriminator that is firing
// during reset still sets it).
//
// Timing: trig_o rises combinationally with the discriminator (through the
// asynchronous set) and falls at the first clock edge after the discriminator
// has returned low. or_trig_o follows trig_o combinationally.
module trigger_logic #(
  parameter int NCH = parisroc_pkg::NCH
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [NCH-1:0] discri_a_i,
  input  logic [NCH-1:0] discri_b_i,
  input  logic           discri_sel_i,
  output logic [NCH-1:0] trig_o,
  output logic           or_trig_o
);

  logic [NCH-1:0] discri;
  assign discri = discri_sel_i ? discri_b_i : discri_a_i;

  for (genvar i = 0; i < NCH; i++) begin : g_latch
    // one asynchronous load, active while the discriminator fires or
    // reset is applied; it loads the discriminator state (1, or 0 in reset)
    logic d, aload, q;
    assign d     = discri[i];
    assign aload = d | ~rst_n;
    always_ff @(posedge clk or posedge aload) begin
      if (aload) q <= d;
      else       q <= 1'b0;
    end
    assign trig_o[i] = q;
  end

  assign or_trig_o = |trig_o;

endmodule
