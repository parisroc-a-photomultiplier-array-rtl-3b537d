// timestamp_counter: 24-bit coarse time counter of the chip.
//
// Counts the 10 MHz clock (100 ns per step) while the top manager lets it run.
// The 10 MHz clock is represented by ce_i, a one-in-four enable of the 40 MHz
// clock, so the whole digital part is one clock domain; that, the binary
// encoding, the wrap-around at 2^24 and the synchronous clear are choices of
// this design. The 24-bit width and the 10 MHz rate are the chip's.
//
// Timing: ts_o increments at the clock edge where ce_i and run_i are both high;
// clear_i has priority and sets ts_o to zero at the next edge.
module timestamp_counter #(
  parameter int TS_W = parisroc_pkg::TS_W
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            ce_i,
  input  logic            run_i,
  input  logic            clear_i,
  output logic [TS_W-1:0] ts_o
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)             ts_o <= '0;
    else if (clear_i)       ts_o <= '0;
    else if (ce_i && run_i) ts_o <= ts_o + 1'b1;
  end

endmodule
