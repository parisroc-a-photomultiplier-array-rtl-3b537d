// parisroc_pkg: constants and types shared by the PARISROC digital part.
//
// The sizes are those of the chip: 16 channels, a two-cell analog memory per
// channel, a 24-bit coarse timestamp at 10 MHz, a 12-bit Wilkinson ADC that can
// be run at 8, 10 or 12 bits, and a 52-bit readout word (4-bit channel number,
// 24-bit timestamp, 12-bit charge, 12-bit fine time). The field order inside the
// word and the encoding of the resolution setting are choices of this design.
package parisroc_pkg;

  localparam int NCH     = 16;  // channels
  localparam int DEPTH   = 2;   // analog memory cells per channel
  localparam int TS_W    = 24;  // coarse timestamp width
  localparam int ADC_W   = 12;  // ADC counter and code width
  localparam int CH_W    = 4;   // channel number field
  localparam int FRAME_W = CH_W + TS_W + 2 * ADC_W;  // 52-bit readout word

  // ADC resolution setting
  typedef enum logic [1:0] {
    RES_8  = 2'd0,
    RES_10 = 2'd1,
    RES_12 = 2'd2
  } adc_res_e;

  // Phases of the top manager
  typedef enum logic [1:0] {
    TM_IDLE = 2'd0,
    TM_ACQ  = 2'd1,
    TM_CONV = 2'd2,
    TM_READ = 2'd3
  } tm_state_e;

  // One readout word, sent most significant bit first
  typedef struct packed {
    logic [CH_W-1:0]  ch;
    logic [TS_W-1:0]  ts;
    logic [ADC_W-1:0] charge;
    logic [ADC_W-1:0] fine;
  } frame_t;

  // Number of ADC bits for a resolution setting (reserved code 3 means 12)
  function automatic int unsigned adc_bits(adc_res_e res);
    case (res)
      RES_8:   return 8;
      RES_10:  return 10;
      default: return 12;
    endcase
  endfunction

endpackage
