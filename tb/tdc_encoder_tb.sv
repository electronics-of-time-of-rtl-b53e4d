// Testbench of tdc_encoder: drives thermometer codes (some with bubbles)
// onto the tap inputs and checks set, the ones count and the strobe timing.
`timescale 1ps/1ps
module tdc_encoder_tb;
  import tof_pkg::*;
  localparam int unsigned TAPS = 127;
  localparam int unsigned CW = $clog2(TAPS + 1);
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  // Two falling edges of rst_n: the first clears the sampling flip-flops and
  // with them set, the second then gives the capture flip-flop a clear edge
  // whatever its power-up state.
  initial begin #1 rst_n = 0; #1 rst_n = 1; #1 rst_n = 0; end
  logic [TAPS-1:0] taps = '0;
  logic set, code_valid;
  logic [CW-1:0] code;

  tdc_encoder #(.TAPS(TAPS)) dut (.clk(clk), .rst_n(rst_n), .taps(taps),
                                  .set(set), .code(code), .code_valid(code_valid));

  always #(CLK_PERIOD_PS / 2) clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %0t: %s", $time, msg); end
  endtask

  initial begin
    logic [TAPS-1:0] pat;
    int n, exp_ones, hold;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      n = $urandom_range(1, TAPS);
      pat = '0;
      for (int i = 0; i < TAPS; i++) pat[i] = (i < n);
      if (t % 3 == 1 && n > 3) pat[$urandom_range(1, n - 2)] = 1'b0;   // bubble
      exp_ones = $countones(pat);
      hold = (t % 5 == 0) ? 2 : 1;          // tap 0 high for two clocks
      taps = pat;
      @(posedge clk); #1;                          // edge k
      check(set == 1, "set follows tap 0");
      check(code_valid == 0, "no strobe at the sample edge");
      @(negedge clk); if (hold == 1) taps = '0;
      @(posedge clk); #1;                          // edge k+1
      check(code_valid == 1, "strobe one clock after set");
      check(code == CW'(exp_ones), $sformatf("code %0d expected %0d", code, exp_ones));
      check(set == (hold == 2), "set follows tap 0 again");
      if (hold == 2) begin
        @(negedge clk); taps = '0;
        @(posedge clk); #1;                        // edge k+2
        check(code_valid == 0, "single strobe while set stays high");
        check(code == CW'(exp_ones), "code held");
        check(set == 0, "set low once chain is empty");
      end
      @(posedge clk); #1;
      check(code_valid == 0, "strobe lasts one clock");
      repeat ($urandom_range(0, 3)) @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
