// sca_fifo_manager: FIFO management of the two-cell analog memories.
//
// Every channel stores its charge and fine time in an analog memory of DEPTH
// cells (the switched capacitor array). A cell either tracks its input or holds
// a sample. This block runs each channel's cells as a FIFO:
//   * a hold request freezes the cell at the write pointer and advances it; if
//     every cell of the channel already holds a sample, the request is lost and
//     lost_o pulses;
//   * conv_start_i takes a snapshot: every channel that holds at least one cell
//     joins the conversion (conv_mask_o) with its oldest cell (rd_cell_o, the
//     "internal read" switch that connects the cell to the ADC discriminators);
//   * release_i, at the end of the readout, frees the converted cells and
//     advances the read pointers, so the cells track again.
// Channels keep taking samples in their free cells during a conversion and a
// readout, which keeps acquisition running without dead time while a cell is free.
//
// The FIFO behaviour is the chip's; the snapshot/release handshake, the loss
// policy on a full channel and the round-robin cell order are this design's.
//
// Timing: all outputs are registered except wr_o/wr_cell_o (combinational from
// hold_req_i, for the timestamp capture in the same cycle) and pending_o.
module sca_fifo_manager #(
  parameter int NCH   = parisroc_pkg::NCH,
  parameter int DEPTH = parisroc_pkg::DEPTH,
  localparam int CW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [NCH-1:0]       hold_req_i,
  input  logic                 conv_start_i,
  input  logic                 release_i,
  output logic [DEPTH-1:0]     hold_o      [NCH],
  output logic [NCH-1:0]       wr_o,
  output logic [CW-1:0]        wr_cell_o   [NCH],
  output logic [CW-1:0]        rd_cell_o   [NCH],
  output logic [NCH-1:0]       conv_mask_o,
  output logic                 pending_o,
  output logic [NCH-1:0]       full_o,
  output logic [NCH-1:0]       lost_o
);

  logic [CW-1:0]      wp [NCH];
  logic [CW:0]        cnt [NCH];
  logic [NCH-1:0]     nonempty;
  logic [NCH-1:0]     inc, dec;

  function automatic logic [CW-1:0] next_ptr(logic [CW-1:0] p);
    return (p == CW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_comb begin
    for (int i = 0; i < NCH; i++) begin
      nonempty[i]  = (cnt[i] != '0);
      full_o[i]    = (cnt[i] == (CW+1)'(DEPTH));
      wr_o[i]      = hold_req_i[i] && !full_o[i];
      wr_cell_o[i] = wp[i];
      inc[i]       = wr_o[i];
      dec[i]       = release_i && conv_mask_o[i];
    end
    pending_o = |nonempty;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      conv_mask_o <= '0;
      lost_o      <= '0;
      for (int i = 0; i < NCH; i++) begin
        wp[i]        <= '0;
        rd_cell_o[i] <= '0;
        cnt[i]       <= '0;
        hold_o[i]    <= '0;
      end
    end else begin
      if (conv_start_i) conv_mask_o <= nonempty;
      for (int i = 0; i < NCH; i++) begin
        lost_o[i] <= hold_req_i[i] && full_o[i];
        if (inc[i]) begin
          hold_o[i][wp[i]] <= 1'b1;
          wp[i]            <= next_ptr(wp[i]);
        end
        if (dec[i]) begin
          hold_o[i][rd_cell_o[i]] <= 1'b0;
          rd_cell_o[i]            <= next_ptr(rd_cell_o[i]);
        end
        cnt[i] <= cnt[i] + (CW+1)'(inc[i]) - (CW+1)'(dec[i]);
      end
      if (release_i) conv_mask_o <= '0;
    end
  end

  // A released cell must have been held, and a cell is never written twice.
  for (genvar i = 0; i < NCH; i++) begin : g_chk
    a_release_held: assert property (@(posedge clk) disable iff (!rst_n)
      (release_i && conv_mask_o[i]) |-> hold_o[i][rd_cell_o[i]]);
    a_write_free: assert property (@(posedge clk) disable iff (!rst_n)
      wr_o[i] |-> !hold_o[i][wp[i]]);
  end

endmodule
