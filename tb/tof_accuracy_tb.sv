// Accuracy-test workload at the default size: a T0 and detector signals
// 10 ms apart on all 17 channels, as in the bench test of the TOF system,
// after one short event. The rebuilt TOF must match the true interval within
// half a bin of each TDC. See tof_system_check for what is checked.
`timescale 1ps/1ps
module tof_accuracy_tb;
  tof_system_check #(.NEV(2), .LONG_PS(64'd10_000_000_000), .MAX_TOF_PS(5_000_000)) u_check ();
endmodule
