// Testbench of t0_capture: the input flip-flop of the TDC must rise on a T0
// edge, ignore the T0 level and falling edge, and clear on clr and on reset.
`timescale 1ps/1ps
module t0_capture_tb;
  int checks = 0, failures = 0;
  logic t0 = 0, clr = 0, rst_n = 1, t0_in;

  t0_capture dut (.t0(t0), .clr(clr), .rst_n(rst_n), .t0_in(t0_in));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %0t: %s", $time, msg); end
  endtask

  initial begin
    #1 rst_n = 0; #1 rst_n = 1; #1 rst_n = 0;
    #100 check(t0_in == 0, "reset holds T0_in low");
    t0 = 1; #10 check(t0_in == 0, "edge during reset ignored");
    t0 = 0; rst_n = 1; #100 check(t0_in == 0, "idle after reset");
    for (int n = 0; n < 20; n++) begin
      t0 = 1; #5 check(t0_in == 1, "T0 edge sets T0_in");
      #($urandom_range(100, 3000)) check(t0_in == 1, "T0_in holds while T0 high");
      if (n % 2 == 0) begin t0 = 0; #50 check(t0_in == 1, "T0 falling edge keeps T0_in"); end
      clr = 1; #5 check(t0_in == 0, "clr clears T0_in");
      #100 clr = 0; #5 check(t0_in == 0, "T0_in stays low after clr");
      t0 = 0; #200 check(t0_in == 0, "no edge, no hit");
      t0 = 1; clr = 1; #5 check(t0_in == 0, "clr dominates a T0 edge");
      clr = 0; #5 check(t0_in == 0, "edge masked by clr is not remembered");
      t0 = 0; #100;
    end
    t0 = 1; #5 rst_n = 0; #5 check(t0_in == 0, "reset clears T0_in");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
