// Shared constants and record types of the Back-n time-of-flight logic.
//
// Both the TCM (trigger and clock module) and the FDM (field digitizer
// module) run on a 125 MHz system clock and measure fine time with a
// carry-chain TDC. The TCM emits one record per T0 pulse: T0 ID, the UTC
// time latched at the capture edge and the TDC code for t1. The FDM emits a
// header word (T0 ID, TDC code for t3, clock count t4) followed by the valid
// ADC sample words of the event. The 125 MHz clock, the 12-bit 1 GSPS ADC and
// the bin counts are the paper's numbers; field widths and the word layout
// are this design's own choice.
`timescale 1ps/1ps
package tof_pkg;
  localparam int unsigned CLK_PERIOD_PS   = 8000; // 125 MHz system clock
  localparam int unsigned ADC_BITS        = 12;   // ADC resolution
  localparam int unsigned SAMPLES_PER_CLK = 8;    // 1 GSPS / 125 MHz
  localparam int unsigned DATA_W          = ADC_BITS * SAMPLES_PER_CLK;
  localparam int unsigned CODE_W          = 8;    // holds 0..174 bins
  localparam int unsigned ID_W            = 32;   // T0 ID
  localparam int unsigned T4_W            = 32;   // t4 in clock periods
  localparam int unsigned UTC_W           = 64;   // White Rabbit UTC time

  // TCM record: one per T0 pulse.
  typedef struct packed {
    logic [ID_W-1:0]   t0_id;
    logic [UTC_W-1:0]  utc;
    logic [CODE_W-1:0] t1_code;
  } tcm_rec_t;

  // FDM event header.
  typedef struct packed {
    logic [ID_W-1:0]   t0_id;
    logic [CODE_W-1:0] t3_code;
    logic [T4_W-1:0]   t4;
  } fdm_hdr_t;


  // FDM output word: a header or eight samples.
  typedef struct packed {
    logic              is_hdr;
    logic [DATA_W-1:0] payload;
  } fdm_word_t;
endpackage
