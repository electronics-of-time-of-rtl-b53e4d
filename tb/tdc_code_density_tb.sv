// Code-density test of both TDCs, as used to measure their bins: the TCM
// chain (127 bins, 63 ps) and the FDM chain (174 bins, 46 ps), each hit by
// 200 random pulses per bin. See tdc_density_run.
`timescale 1ps/1ps
module tdc_code_density_tb;
  logic d1, d2;
  int c1, c2, f1, f2;

  tdc_density_run #(.TAPS(127), .TAP_PS(63), .HITS_PER_BIN(200)) u_tcm (.done(d1), .checks(c1), .failures(f1));
  tdc_density_run #(.TAPS(174), .TAP_PS(46), .HITS_PER_BIN(200)) u_fdm (.done(d2), .checks(c2), .failures(f2));

  initial begin
    #10;
    wait (d1 === 1'b1 && d2 === 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", c1 + c2, f1 + f2);
    $finish;
  end

  initial begin
    #(64'd2_000_000_000);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c1 + c2, f1 + f2 + 1);
    $finish;
  end
endmodule
