// End-to-end testbench of backn_tof at its default size: six T0 pulses,
// detector signals up to 50 us after each, one or two per channel. See
// tof_system_check for what is checked.
`timescale 1ps/1ps
module backn_tof_tb;
  tof_system_check #(.NEV(6), .LONG_PS(0), .MAX_TOF_PS(50_000_000)) u_check ();
endmodule
