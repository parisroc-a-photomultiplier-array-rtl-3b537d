// readout: selective serial readout of the converted channels.
//
// After a conversion, one 52-bit word is sent for each channel that took part
// in it (hit_mask_i) and for no other channel, in increasing channel order. The
// word is {channel[3:0], timestamp[23:0], charge[11:0], fine time[11:0]} (see
// parisroc_pkg::frame_t) and is shifted out most significant bit first, one bit
// per 10 MHz period (ce_i), on dout_o with dvalid_o high. Words follow each
// other without gaps, so 16 hit channels take 16 x 52 = 832 periods, 83.2 us,
// inside the chip's 100 us maximum readout time.
//
// The word content and the selective readout are the chip's; the field order
// on the wire, bit order, single data line with a valid strobe, channel order
// and the zero-extension of 8/10-bit codes are this design's.
//
// Timing: start_i (one cycle) latches hit_mask_i; the first bit appears at the
// next ce_i tick. Data inputs are read when a word is loaded, so they must stay
// stable until done_o. done_o pulses one tick after the last bit.
module readout #(
  parameter int NCH   = parisroc_pkg::NCH,
  parameter int TS_W  = parisroc_pkg::TS_W,
  parameter int ADC_W = parisroc_pkg::ADC_W,
  parameter int CH_W  = parisroc_pkg::CH_W,
  localparam int FRAME_W = CH_W + TS_W + 2 * ADC_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             ce_i,
  input  logic             start_i,
  input  logic [NCH-1:0]   hit_mask_i,
  input  logic [TS_W-1:0]  ts_i     [NCH],
  input  logic [ADC_W-1:0] charge_i [NCH],
  input  logic [ADC_W-1:0] fine_i   [NCH],
  output logic             dout_o,
  output logic             dvalid_o,
  output logic             busy_o,
  output logic             done_o
);

  logic [NCH-1:0]     to_send;    // channels still to send
  logic [FRAME_W-1:0] sr;         // shift register
  logic [$clog2(FRAME_W)-1:0] bits_left;
  logic               found;
  logic [CH_W-1:0]    next_ch;
  logic [FRAME_W-1:0] next_word;

  // lowest channel still to send
  always_comb begin
    found   = 1'b0;
    next_ch = '0;
    for (int i = NCH - 1; i >= 0; i--) begin
      if (to_send[i]) begin
        found   = 1'b1;
        next_ch = CH_W'(i);
      end
    end
    next_word = {next_ch, ts_i[next_ch], charge_i[next_ch], fine_i[next_ch]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      to_send      <= '0;
      sr        <= '0;
      bits_left <= '0;
      dout_o    <= 1'b0;
      dvalid_o  <= 1'b0;
      busy_o    <= 1'b0;
      done_o    <= 1'b0;
    end else begin
      done_o <= 1'b0;
      if (start_i && !busy_o) begin
        to_send      <= hit_mask_i;
        busy_o    <= 1'b1;
        bits_left <= '0;
      end else if (busy_o && ce_i) begin
        if (bits_left != '0) begin
          dout_o    <= sr[FRAME_W-1];
          sr        <= sr << 1;
          bits_left <= bits_left - 1'b1;
        end else if (found) begin
          dout_o        <= next_word[FRAME_W-1];
          dvalid_o      <= 1'b1;
          sr            <= next_word << 1;
          bits_left     <= $bits(bits_left)'(FRAME_W - 1);
          to_send[next_ch] <= 1'b0;
        end else begin
          dout_o   <= 1'b0;
          dvalid_o <= 1'b0;
          busy_o   <= 1'b0;
          done_o   <= 1'b1;
        end
      end
    end
  end

endmodule
