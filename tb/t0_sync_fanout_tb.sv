// Testbench of t0_sync_fanout: after each one-clock set pulse (edge k) the
// enabled DSTARB lines must rise right after edge k+T2_CYCLES and stay high
// PULSE_CYCLES clocks; disabled lines stay low; a new set restarts.
`timescale 1ps/1ps
module t0_sync_fanout_tb;
  import tof_pkg::*;
  localparam int unsigned N = 17, T2 = 4, PW = 2;
  int checks = 0, failures = 0, n_restart = 0;
  logic clk = 0, rst_n = 1, set = 0;
  // Two falling edges of rst_n: the first clears the sampling flip-flops and
  // with them set, the second then gives the capture flip-flop a clear edge
  // whatever its power-up state.
  initial begin #1 rst_n = 0; #1 rst_n = 1; #1 rst_n = 0; end
  logic [N-1:0] en, dstarb;

  t0_sync_fanout #(.N_DSTAR(N), .T2_CYCLES(T2), .PULSE_CYCLES(PW)) dut (
    .clk(clk), .rst_n(rst_n), .set(set), .dstar_en(en), .dstarb(dstarb));

  always #(CLK_PERIOD_PS / 2) clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %0t: %s", $time, msg); end
  endtask

  initial begin
    en = '1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      en = (t % 3 == 0) ? '1 : N'($urandom);
      @(posedge clk); set <= 1;             // set rises after this edge: edge k
      @(posedge clk); set <= 0;             // edge k+1
      #1;
      for (int j = 1; j <= T2 + PW + 2; j++) begin
        // now just after edge k+j
        check(dstarb == ((j >= T2 && j < T2 + PW) ? en : '0),
              $sformatf("after edge k+%0d dstarb=%h", j, dstarb));
        @(posedge clk); #1;
      end
      repeat (T2 + PW + 2) @(posedge clk);
      check(dstarb == '0, "lines low when idle");
    end
    // restart: second set two clocks after the first
    for (int t = 0; t < 10; t++) begin
      en = '1;
      @(posedge clk); set <= 1;             // edge k
      @(posedge clk); set <= 0;             // k+1
      @(posedge clk); set <= 1;             // k+2: new capture edge
      @(posedge clk); set <= 0;
      n_restart++;
      #1;
      for (int j = 1; j <= T2 + PW + 2; j++) begin
        check(dstarb == ((j >= T2 && j < T2 + PW) ? en : '0),
              $sformatf("restart: after edge k'+%0d dstarb=%h", j, dstarb));
        @(posedge clk); #1;
      end
    end
    check(n_restart > 0, "restart exercised");
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
