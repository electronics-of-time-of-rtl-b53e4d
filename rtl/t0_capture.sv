// Input flip-flop of the carry-chain TDC.
//
// The buffered T0 signal clocks a flip-flop whose D input is tied to '1', so
// its output T0_in rises at the T0 edge, whatever the clock is doing, and
// launches a step into the carry chain. The TDC's set signal (the sampled
// first tap) clears it asynchronously, so the chain is empty again one clock
// after the capture and ready for the next T0. This structure is the one the
// paper draws; the active-high clear and the extra active-low reset are this
// design's choices.
//
// The clear acts on its rising edge, as synthesis tools expect, so a
// simulation that starts with random values should drop rst_n after set
// has been cleared (the testbenches pulse reset twice); in the FPGA the
// flip-flop powers up cleared.
//
// Timing: t0_in rises at posedge t0 and falls as soon as clr or !rst_n.
`timescale 1ps/1ps
module t0_capture (
  input  logic t0,     // asynchronous T0 after the input buffer
  input  logic clr,    // set signal, clears T0_in
  input  logic rst_n,  // reset, active low
  output logic t0_in   // step into the carry chain
);
  logic clear;
  assign clear = clr | ~rst_n;   // one asynchronous clear, as in the FPGA flip-flop

  always_ff @(posedge t0 or posedge clear) begin
    if (clear) t0_in <= 1'b0;
    else       t0_in <= 1'b1;
  end
endmodule
