// timestamp_registers: coarse timestamp of every analog memory cell.
//
// NCH x DEPTH registers of TS_W bits (32 x 24 bits in the chip). When a cell of
// a channel is frozen by a hold, the current timestamp is written into the
// register of that cell, so the coarse time belongs to the same instant as the
// held charge and fine-time samples. The read side presents, for every
// channel, the register of the cell selected by rd_cell_i (the cell being
// converted). The register count is the chip's; capturing at hold time is this
// design's reading of it.
//
// Timing: one write per channel per cycle, visible on ts_rd_o after the edge;
// the read is combinational. Registers are not reset: a register is only read
// after its cell has been held, which wrote it.
module timestamp_registers #(
  parameter int NCH   = parisroc_pkg::NCH,
  parameter int DEPTH = parisroc_pkg::DEPTH,
  parameter int TS_W  = parisroc_pkg::TS_W,
  localparam int CW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic            clk,
  input  logic [NCH-1:0]  wr_i,
  input  logic [CW-1:0]   wr_cell_i [NCH],
  input  logic [TS_W-1:0] ts_i,
  input  logic [CW-1:0]   rd_cell_i [NCH],
  output logic [TS_W-1:0] ts_rd_o   [NCH]
);

  logic [TS_W-1:0] regs [NCH][DEPTH];

  always_ff @(posedge clk) begin
    for (int i = 0; i < NCH; i++)
      if (wr_i[i]) regs[i][wr_cell_i[i]] <= ts_i;
  end

  always_comb begin
    for (int i = 0; i < NCH; i++) ts_rd_o[i] = regs[i][rd_cell_i[i]];
  end

endmodule
