// Code-density measurement on one carry-chain TDC, used by
// tdc_code_density_tb. Hits arrive at uniformly random times against the
// clock, so the number of hits that land in a code is proportional to that
// bin's width: width(c) = count(c) / total * clock period. The run checks
// that every code 1..TAPS is reached, code 0 never, that each bin is within
// 30 % of the average and that the average equals period / TAPS.
`timescale 1ps/1ps
module tdc_density_run #(
  parameter int unsigned TAPS         = 127,
  parameter int unsigned TAP_PS       = 63,
  parameter int unsigned HITS_PER_BIN = 200
) (
  output logic done,
  output int   checks,
  output int   failures
);
  import tof_pkg::*;
  localparam int unsigned P = CLK_PERIOD_PS;
  localparam int unsigned CW = $clog2(TAPS + 1);
  logic clk = 0, rst_n = 1, t0 = 0;
  logic set, code_valid;
  logic [CW-1:0] code;
  int unsigned hist [TAPS + 1];

  tdc #(.TAPS(TAPS), .TAP_PS(TAP_PS)) dut (.clk(clk), .rst_n(rst_n), .t0(t0),
                                           .set(set), .code(code), .code_valid(code_valid));

  always #(P / 2) clk = ~clk;
  initial begin #1 rst_n = 0; #1 rst_n = 1; #1 rst_n = 0; end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %0t: %s", $time, msg); end
  endtask

  initial begin
    int unsigned total;
    real w, wmax, wmin;
    done = 0; checks = 0; failures = 0;
    foreach (hist[c]) hist[c] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    total = HITS_PER_BIN * TAPS;
    for (int unsigned n = 0; n < total; n++) begin
      @(posedge clk);
      #($urandom_range(1, P)) t0 = 1;
      @(posedge clk iff code_valid);
      hist[code]++;
      t0 = 0;
    end
    check(hist[0] == 0, "code 0 never occurs");
    wmax = 0.0; wmin = 1.0e9;
    for (int c = 1; c <= int'(TAPS); c++) begin
      w = real'(hist[c]) / real'(total) * real'(P);
      if (w > wmax) wmax = w;
      if (w < wmin) wmin = w;
      check(hist[c] > 0, $sformatf("code %0d reached", c));
      check(w > 0.7 * P / TAPS && w < 1.3 * P / TAPS, $sformatf("bin %0d width %0.1f ps", c, w));
    end
    $display("TDC %0d taps of %0d ps: %0d bins used, average %0.1f ps, widest %0.1f ps, narrowest %0.1f ps",
             TAPS, TAP_PS, TAPS, real'(P) / TAPS, wmax, wmin);
    check(P / TAPS == TAP_PS || (P + TAPS - 1) / TAPS == TAP_PS, "average bin equals the carry delay");
    done = 1;
  end
endmodule
