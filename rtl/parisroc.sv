// parisroc: digital part and trigger logic of a 16-channel photomultiplier
// readout chip.
//
// Each of the 16 channels triggers on its own (no external trigger is needed):
// a discriminator on the fast shaper fires, trigger_logic latches it and ORs
// the 16 triggers, and variable_delay turns the trigger into a hold request
// timed for the peak of the slow shaper. The hold request (or an external hold
// pulse, applied to all channels) freezes one cell of the channel's two-cell
// analog memory; sca_fifo_manager runs those cells as a FIFO and
// timestamp_registers stamps the cell with the 24-bit, 10 MHz coarse time.
// top_manager then converts the oldest cell of every hit channel at once with
// the shared Wilkinson ADC (adc_counter drives the common ramp, adc_registers
// catch the code of each of the 32 discriminators) and readout sends one
// 52-bit word per hit channel on a serial line.
//
// The analog parts (preamplifier, shapers, discriminators, DACs, memory
// capacitors, ramps and ADC comparators) are outside this module: their logic
// signals are ports. hold_o and rd_cell_o drive the memory switches,
// start_ramp_o starts the ADC ramp, ck10_tick_o marks the 10 MHz period on
// which the 100 ns fine-time ramp restarts.
//
// One clock domain: clk is the 40 MHz clock and the 10 MHz clock is a
// one-in-four enable derived from it (this design's choice). Settings that the
// chip loads by slow control (resolution, discriminator select, hold delay)
// are plain inputs here.
module parisroc #(
  parameter int NCH   = parisroc_pkg::NCH,
  parameter int DEPTH = parisroc_pkg::DEPTH,
  parameter int TS_W  = parisroc_pkg::TS_W,
  parameter int ADC_W = parisroc_pkg::ADC_W,
  parameter int DLY_W = 4,
  localparam int CW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // configuration
  input  logic                   acq_enable_i,
  input  parisroc_pkg::adc_res_e adc_res_i,
  input  logic                   discri_sel_i,
  input  logic [DLY_W-1:0]       hold_delay_i,
  input  logic                   ext_hold_i,
  // from the analog channels
  input  logic [NCH-1:0]         discri_a_i,
  input  logic [NCH-1:0]         discri_b_i,
  input  logic [NCH-1:0]         adc_cmp_q_i,
  input  logic [NCH-1:0]         adc_cmp_t_i,
  // to the outside and the analog channels
  output logic [NCH-1:0]         trig_o,
  output logic                   or_trig_o,
  output logic [DEPTH-1:0]       hold_o    [NCH],
  output logic [CW-1:0]          rd_cell_o [NCH],
  output logic                   start_ramp_o,
  output logic                   ck10_tick_o,
  output logic [NCH-1:0]         lost_o,
  output parisroc_pkg::tm_state_e state_o,
  output logic                   dout_o,
  output logic                   dvalid_o
);

  // 10 MHz enable
  logic [1:0] div;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) div <= '0;
    else        div <= div + 1'b1;
  end
  assign ck10_tick_o = (div == 2'd3);

  // trigger path
  logic [NCH-1:0] delayed, hold_req;
  logic           ts_run, ts_clear, conv_start, ro_start, release_cells;

  trigger_logic #(.NCH(NCH)) u_trig (
    .clk, .rst_n, .discri_a_i, .discri_b_i, .discri_sel_i,
    .trig_o, .or_trig_o
  );

  variable_delay #(.NCH(NCH), .DLY_W(DLY_W)) u_delay (
    .clk, .rst_n, .trig_i(trig_o), .delay_i(hold_delay_i), .hold_req_o(delayed)
  );

  assign hold_req = (delayed | {NCH{ext_hold_i}}) & {NCH{ts_run}};

  // analog memory management and timestamps
  logic [NCH-1:0]  wr, conv_mask;
  logic [CW-1:0]   wr_cell [NCH];
  logic            pending;
  logic [TS_W-1:0] ts;
  logic [TS_W-1:0] ts_rd [NCH];

  sca_fifo_manager #(.NCH(NCH), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n, .hold_req_i(hold_req), .conv_start_i(conv_start),
    .release_i(release_cells), .hold_o, .wr_o(wr), .wr_cell_o(wr_cell),
    .rd_cell_o, .conv_mask_o(conv_mask), .pending_o(pending), .full_o(),
    .lost_o
  );

  timestamp_counter #(.TS_W(TS_W)) u_ts (
    .clk, .rst_n, .ce_i(ck10_tick_o), .run_i(ts_run), .clear_i(ts_clear), .ts_o(ts)
  );

  timestamp_registers #(.NCH(NCH), .DEPTH(DEPTH), .TS_W(TS_W)) u_tsregs (
    .clk, .wr_i(wr), .wr_cell_i(wr_cell), .ts_i(ts), .rd_cell_i(rd_cell_o),
    .ts_rd_o(ts_rd)
  );

  // conversion
  logic [ADC_W-1:0] count;
  logic             adc_last, adc_done;
  logic [ADC_W-1:0] charge [NCH];
  logic [ADC_W-1:0] fine   [NCH];

  adc_counter #(.ADC_W(ADC_W)) u_adc_cnt (
    .clk, .rst_n, .start_i(conv_start), .res_i(adc_res_i), .count_o(count),
    .running_o(start_ramp_o), .last_o(adc_last), .done_o(adc_done)
  );

  adc_registers #(.NCH(NCH), .ADC_W(ADC_W)) u_adc_regs (
    .clk, .rst_n, .clear_i(conv_start), .running_i(start_ramp_o),
    .last_i(adc_last), .count_i(count),
    .cmp_q_i(adc_cmp_q_i & conv_mask), .cmp_t_i(adc_cmp_t_i & conv_mask),
    .charge_o(charge), .fine_o(fine)
  );

  // readout
  logic ro_done;

  readout #(.NCH(NCH), .TS_W(TS_W), .ADC_W(ADC_W)) u_ro (
    .clk, .rst_n, .ce_i(ck10_tick_o), .start_i(ro_start), .hit_mask_i(conv_mask),
    .ts_i(ts_rd), .charge_i(charge), .fine_i(fine),
    .dout_o, .dvalid_o, .busy_o(), .done_o(ro_done)
  );

  top_manager u_tm (
    .clk, .rst_n, .acq_enable_i, .pending_i(pending), .adc_done_i(adc_done),
    .ro_done_i(ro_done), .ts_run_o(ts_run), .ts_clear_o(ts_clear),
    .conv_start_o(conv_start), .ro_start_o(ro_start), .release_o(release_cells),
    .state_o
  );

endmodule
