// Carry-chain time-to-digital converter.
//
// Measures the interval from an asynchronous T0 rising edge to the next
// rising edge of the system clock, in bins of about one carry delay. T0
// clocks the input flip-flop, whose output runs down the carry chain; the
// clock samples the chain; the first sampled tap (set) clears the input
// flip-flop and marks the capture edge; the converter counts the ones. The
// same block serves the TCM (t1: T0 to TCM clock) and the FDM (t3:
// synchronized T0 to FDM clock) with different chain parameters, as in the
// paper.
//
// Timing: set is high for one clock after the capture edge k; code and
// code_valid follow one clock later. Interval = code * TAP_PS, to within
// one bin.
`timescale 1ps/1ps
module tdc #(
  parameter int unsigned TAPS   = 127,
  parameter int unsigned TAP_PS = 63
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      t0,
  output logic                      set,
  output logic [$clog2(TAPS+1)-1:0] code,
  output logic                      code_valid
);
  logic            t0_in;
  logic [TAPS-1:0] taps;

  t0_capture u_capture (.t0(t0), .clr(set), .rst_n(rst_n), .t0_in(t0_in));

  carry_chain #(.TAPS(TAPS), .TAP_PS(TAP_PS)) u_chain (.hit(t0_in), .taps(taps));

  tdc_encoder #(.TAPS(TAPS)) u_enc (
    .clk(clk), .rst_n(rst_n), .taps(taps),
    .set(set), .code(code), .code_valid(code_valid)
  );
endmodule
