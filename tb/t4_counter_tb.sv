// Testbench of t4_counter: after a set pulse at edge k, each run of valid
// words whose first word is registered at edge m must give t4 = m - k. Runs
// before the first T0, or already running when set rises, get no stamp; a
// new T0 restarts the count. Also covers the same-edge case (m = k+1).
`timescale 1ps/1ps
module t4_counter_tb;
  import tof_pkg::*;
  int checks = 0, failures = 0;
  int n_early = 0, n_same = 0, n_multi = 0;
  logic clk = 0, rst_n = 1, set = 0, dv = 0;
  // Two falling edges of rst_n: the first clears the sampling flip-flops and
  // with them set, the second then gives the capture flip-flop a clear edge
  // whatever its power-up state.
  initial begin #1 rst_n = 0; #1 rst_n = 1; #1 rst_n = 0; end
  logic [31:0] t4;
  logic t4_valid;
  int n_strobe = 0;
  int edge_no = 0;
  int stamps [$];

  t4_counter #(.CNT_W(32)) dut (.clk(clk), .rst_n(rst_n), .set(set), .data_valid(dv),
                                .t4(t4), .t4_valid(t4_valid));

  always #(CLK_PERIOD_PS / 2) clk = ~clk;
  always @(posedge clk) begin
    edge_no++;
    if (rst_n && t4_valid) begin n_strobe++; stamps.push_back(int'(t4)); end
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %0t: %s", $time, msg); end
  endtask

  // drive a run of len valid words whose first word is registered at the next edge
  task automatic run(input int len);
    dv <= 1;
    repeat (len) @(posedge clk);
    dv <= 0;
  endtask

  initial begin
    int k, d, d2, len;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); run(5);                        // before any T0: no stamp
    @(posedge clk); #1;
    check(n_strobe == 0, "no stamp before the first T0");
    for (int t = 0; t < 100; t++) begin
      stamps.delete();
      d = (t % 10 == 0) ? 1 : $urandom_range(2, (t % 7 == 0) ? 5000 : 60);
      d2 = d + $urandom_range(8, 40);
      if (t % 5 == 2) begin                        // run still going when set rises
        n_early++;
        dv <= 1;                                   // stamped against the previous T0
        repeat (3) @(posedge clk);
        stamps.delete();
      end
      @(posedge clk); set <= 1; k = edge_no;       // edge k
      if (t % 5 == 2) begin
        @(posedge clk); set <= 0;                  // k+1
        @(posedge clk); dv <= 0;                   // k+2: ongoing run ends
        repeat (d) @(posedge clk);
        d = d + 3;                                 // first new run at k+d
        d2 = d2 + 3;
        dv <= 1;
      end else if (d == 1) begin
        n_same++;
        dv <= 1;                                   // registered at k+1 with set
      end else begin
        @(posedge clk); set <= 0;
        repeat (d - 2) @(posedge clk);
        dv <= 1;                                   // registered at edge k+d
      end
      @(posedge clk); #1;                          // just after edge k+d
      set <= 0;
      check(t4_valid == 1, "t4 strobe at the first word of a run");
      check(t4 == 32'(d), $sformatf("t4=%0d expected %0d", t4, d));
      len = $urandom_range(1, 5);
      repeat (len - 1) @(posedge clk);
      dv <= 0;
      // second signal of the same T0
      while (edge_no < k + d2 - 1) @(posedge clk);
      n_multi++;
      run($urandom_range(1, 4));
      repeat (3) @(posedge clk); #1;
      check(stamps.size() == 2, $sformatf("two stamps for two signals, got %0d", stamps.size()));
      if (stamps.size() == 2) check(stamps[1] == d2, $sformatf("second t4=%0d expected %0d", stamps[1], d2));
      repeat ($urandom_range(0, 5)) @(posedge clk);
    end
    check(n_early > 0 && n_same > 0 && n_multi > 0, "early run, same-edge and second-signal cases exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
