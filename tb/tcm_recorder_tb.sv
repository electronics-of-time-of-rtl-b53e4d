// Testbench of tcm_recorder: emulates the TDC outputs (set pulse, code one
// clock later) and a running UTC counter, and checks that each record holds
// the next T0 ID, the UTC value present when set rose and the code.
`timescale 1ps/1ps
module tcm_recorder_tb;
  import tof_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1, set = 0, code_valid = 0;
  // Two falling edges of rst_n: the first clears the sampling flip-flops and
  // with them set, the second then gives the capture flip-flop a clear edge
  // whatever its power-up state.
  initial begin #1 rst_n = 0; #1 rst_n = 1; #1 rst_n = 0; end
  logic [UTC_W-1:0] utc = '0;
  logic [CODE_W-1:0] code = '0;
  tcm_rec_t rec;
  logic rec_valid;
  int n_rec = 0;

  tcm_recorder dut (.clk(clk), .rst_n(rst_n), .set(set), .utc(utc), .code(code),
                    .code_valid(code_valid), .rec(rec), .rec_valid(rec_valid));

  always #(CLK_PERIOD_PS / 2) clk = ~clk;
  always @(posedge clk) utc <= utc + 64'd8;   // ns counter

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %0t: %s", $time, msg); end
  endtask

  always @(posedge clk) if (rst_n && rec_valid) n_rec++;

  initial begin
    logic [UTC_W-1:0] utc_exp;
    logic [CODE_W-1:0] c;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 100; t++) begin
      c = CODE_W'($urandom_range(1, 127));
      @(posedge clk); set <= 1;                     // edge k
      @(posedge clk); set <= 0; code <= c; code_valid <= 1;   // edge k+1
      utc_exp = utc;                                // value sampled at k+1
      @(posedge clk); code_valid <= 0; code <= CODE_W'($urandom);  // edge k+2
      #1;
      check(rec_valid == 1, "record strobe after edge k+2");
      check(rec.t0_id == ID_W'(t), $sformatf("T0 ID %0d expected %0d", rec.t0_id, t));
      check(rec.utc == utc_exp, $sformatf("UTC %0d expected %0d", rec.utc, utc_exp));
      check(rec.t1_code == c, "t1 code");
      @(posedge clk); #1;
      check(rec_valid == 0, "one record per T0");
      repeat ($urandom_range(0, 20)) @(posedge clk);
    end
    check(n_rec == 100, "record count");
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
