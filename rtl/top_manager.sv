// top_manager: phase sequencer of the digital part.
//
// The digital part cycles through three phases: acquisition (cells are held on
// triggers and stamped), conversion (the Wilkinson ADC digitises the oldest
// held cell of every hit channel) and readout (the words are serialised). This
// controller starts and stops the counters that these phases use:
//   IDLE -> ACQ   when acq_enable_i rises; the timestamp is cleared and starts.
//   ACQ  -> CONV  as soon as a cell is held (pending_i): conv_start_o pulses,
//                 which snapshots the hit channels and starts the ADC counter.
//   CONV -> READ  on adc_done_i: ro_start_o pulses.
//   READ -> ACQ   on ro_done_i: release_o pulses and frees the converted cells.
//   ACQ  -> IDLE  when acq_enable_i is low; the timestamp stops.
// Triggers are accepted in every phase except IDLE (the cells are managed by
// sca_fifo_manager), so the chip is dead only for a channel whose cells are
// all held.
//
// The three phases are the chip's; the transitions, and finishing a readout
// before honouring a disable request, are this design's.
//
// Timing: all outputs are registered one-cycle pulses except ts_run_o and
// state_o, which are levels.
module top_manager (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   acq_enable_i,
  input  logic                   pending_i,
  input  logic                   adc_done_i,
  input  logic                   ro_done_i,
  output logic                   ts_run_o,
  output logic                   ts_clear_o,
  output logic                   conv_start_o,
  output logic                   ro_start_o,
  output logic                   release_o,
  output parisroc_pkg::tm_state_e state_o
);
  import parisroc_pkg::*;

  tm_state_e state;
  assign state_o  = state;
  assign ts_run_o = (state != TM_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= TM_IDLE;
      ts_clear_o   <= 1'b0;
      conv_start_o <= 1'b0;
      ro_start_o   <= 1'b0;
      release_o    <= 1'b0;
    end else begin
      ts_clear_o   <= 1'b0;
      conv_start_o <= 1'b0;
      ro_start_o   <= 1'b0;
      release_o    <= 1'b0;
      case (state)
        TM_IDLE: if (acq_enable_i) begin
          state      <= TM_ACQ;
          ts_clear_o <= 1'b1;
        end
        TM_ACQ: if (!acq_enable_i) begin
          state <= TM_IDLE;
        end else if (pending_i && !release_o) begin
          state        <= TM_CONV;
          conv_start_o <= 1'b1;
        end
        TM_CONV: if (adc_done_i) begin
          state      <= TM_READ;
          ro_start_o <= 1'b1;
        end
        TM_READ: if (ro_done_i) begin
          state     <= TM_ACQ;
          release_o <= 1'b1;
        end
        default: state <= TM_IDLE;
      endcase
    end
  end

  a_one_pulse: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({ts_clear_o, conv_start_o, ro_start_o, release_o}));

endmodule
