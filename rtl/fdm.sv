// Field Digitizer Module (FDM) timing and packing logic.
//
// The FDM clock comes from the same source as the TCM clock, but its phase
// is different at every power-up, so the synchronized T0 from the DSTARB
// line is again measured with a carry-chain TDC of the same architecture:
// t3 is the interval from that T0 to the FDM clock edge that takes it in.
// The t4 counter then counts clock periods to the first valid ADC sample
// word, and the packer sends a header {T0 ID, t3 code, t4} followed by the
// valid sample words. The TDC defaults, 174 bins of 46 ps, are the FDM
// figures of the paper; the ADC words (eight 12-bit samples per 125 MHz
// clock) and their valid flag, set by the trigger, come in as ports.
`timescale 1ps/1ps
module fdm
  import tof_pkg::*;
#(
  parameter int unsigned TAPS   = 174,
  parameter int unsigned TAP_PS = 46
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              t0_sync,    // DSTARB line from the TCM
  input  logic [DATA_W-1:0] adc_data,
  input  logic              adc_valid,
  output fdm_word_t         out,
  output logic              out_valid
);
  localparam int unsigned CW = $clog2(TAPS+1);

  logic            set, code_valid, t4_valid;
  logic [CW-1:0]   code;
  logic [T4_W-1:0] t4;

  tdc #(.TAPS(TAPS), .TAP_PS(TAP_PS)) u_tdc (
    .clk(clk), .rst_n(rst_n), .t0(t0_sync),
    .set(set), .code(code), .code_valid(code_valid)
  );

  t4_counter #(.CNT_W(T4_W)) u_t4 (
    .clk(clk), .rst_n(rst_n), .set(set), .data_valid(adc_valid),
    .t4(t4), .t4_valid(t4_valid)
  );

  fdm_packer u_pack (
    .clk(clk), .rst_n(rst_n), .set(set),
    .code(CODE_W'(code)), .code_valid(code_valid),
    .t4(t4), .t4_valid(t4_valid),
    .data(adc_data), .data_valid(adc_valid),
    .out(out), .out_valid(out_valid)
  );
endmodule
