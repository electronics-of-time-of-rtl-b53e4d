// Testbench of the complete carry-chain TDC. T0 edges are placed at random
// picosecond offsets from the clock; the model below predicts the capture
// edge (the first edge at which T0 has passed the first delay unit) and the
// code (number of whole bins from T0 to that edge, at most TAPS). It checks
// code, the one-clock set pulse and the strobe latency, and that the chain
// is cleared for the next T0. Parameters are overridable for the FDM chain.
`timescale 1ps/1ps
module tdc_tb;
  import tof_pkg::*;
  localparam int unsigned TAPS = 127, TAP_PS = 63;
  localparam int unsigned CW = $clog2(TAPS + 1);
  localparam int unsigned P = CLK_PERIOD_PS;
  int checks = 0, failures = 0;
  int n_sat = 0;
  logic clk = 0, rst_n = 1, t0 = 0;
  // Two falling edges of rst_n: the first clears the sampling flip-flops and
  // with them set, the second then gives the capture flip-flop a clear edge
  // whatever its power-up state.
  initial begin #1 rst_n = 0; #1 rst_n = 1; #1 rst_n = 0; end
  logic set, code_valid;
  logic [CW-1:0] code;
  time last_edge;

  tdc #(.TAPS(TAPS), .TAP_PS(TAP_PS)) dut (.clk(clk), .rst_n(rst_n), .t0(t0),
                                           .set(set), .code(code), .code_valid(code_valid));

  always #(P / 2) clk = ~clk;
  always @(posedge clk) last_edge = $time;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %0t: %s", $time, msg); end
  endtask

  initial begin
    int unsigned r, exp_code;
    time t_hit, e_cap;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    for (int t = 0; t < 400; t++) begin
      @(posedge clk);
      // offset of T0 after this edge; avoid exact bin boundaries
      do r = (t % 40 == 0) ? $urandom_range(P - TAP_PS + 1, P - 1) : $urandom_range(1, P - 1);
      while (((P - r) % TAP_PS) == 0);
      #(r) t0 = 1; t_hit = $time;
      e_cap = last_edge + P;
      if (e_cap - t_hit < TAP_PS) e_cap += P;       // first tap not reached yet
      exp_code = int'((e_cap - t_hit) / TAP_PS);
      if (exp_code > TAPS) exp_code = TAPS;
      if (exp_code == TAPS) n_sat++;
      wait (set == 1);
      check($time == e_cap, $sformatf("set at %0t, expected edge %0t", $time, e_cap));
      @(posedge clk); #1;
      check(code_valid == 1, "code strobe one clock after set");
      check(code == CW'(exp_code), $sformatf("code %0d expected %0d", code, exp_code));
      check(set == 0, "set is a one-clock pulse");
      @(posedge clk); #1;
      check(code_valid == 0, "strobe lasts one clock");
      repeat ($urandom_range(0, 2)) @(posedge clk);
      t0 = 0;
      @(posedge clk); #1;
      check(set == 0 && code_valid == 0, "quiet between pulses");
    end
    check(n_sat > 0, "saturated code seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
