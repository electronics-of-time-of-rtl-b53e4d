// Behavioural model of the FPGA carry chain used as a tapped delay line.
//
// This is a behavioural model, not synthesizable logic: in the FPGA each tap
// is one carry element whose delay is set by the silicon. Here every tap
// repeats the previous one after TAP_PS picoseconds, so tap i follows the hit
// by (i+1)*TAP_PS. The defaults, 127 taps of 63 ps, match the bin count and
// the average bin width measured on the TCM (174 taps of 46 ps on the FDM);
// both cover one 8 ns clock period. The real chain has uneven bins (larger
// ones where the chain crosses a slice boundary), which are corrected offline
// bin by bin; this model keeps them equal.
`timescale 1ps/1ps
module carry_chain #(
  parameter int unsigned TAPS   = 127,  // number of delay elements
  parameter int unsigned TAP_PS = 63    // delay of one element, ps
) (
  input  logic            hit,   // T0_in
  output logic [TAPS-1:0] taps   // taps[0] is the first delay unit
);
  assign #(TAP_PS) taps[0] = hit;
  for (genvar i = 1; i < TAPS; i++) begin : g_tap
    assign #(TAP_PS) taps[i] = taps[i-1];
  end
endmodule
