// Testbench of the TCM at its default size (127 bins of 63 ps, 17 DSTARB
// lines). T0 edges are placed at random picosecond offsets; the model
// predicts the capture edge and the t1 code. Checks: record time, T0 ID,
// UTC latched at the capture edge, t1 code, and that every enabled DSTARB
// line rises exactly t2 = 4 clocks after the capture edge for 2 clocks.
`timescale 1ps/1ps
module tcm_tb;
  import tof_pkg::*;
  localparam int unsigned TAPS = 127, TAP_PS = 63, N = 17, T2 = 4, PW = 2;
  localparam int unsigned P = CLK_PERIOD_PS;
  int checks = 0, failures = 0, n_sat = 0;
  logic clk = 0, rst_n = 1, t0 = 0;
  // Two falling edges of rst_n: the first clears the sampling flip-flops and
  // with them set, the second then gives the capture flip-flop a clear edge
  // whatever its power-up state.
  initial begin #1 rst_n = 0; #1 rst_n = 1; #1 rst_n = 0; end
  logic [UTC_W-1:0] utc = '0;
  logic [N-1:0] en, dstarb;
  tcm_rec_t rec;
  logic rec_valid;
  time last_edge, rise_t, fall_t;

  tcm dut (.clk(clk), .rst_n(rst_n), .t0(t0), .utc(utc), .dstar_en(en),
           .dstarb(dstarb), .rec(rec), .rec_valid(rec_valid));

  always #(P / 2) clk = ~clk;
  always @(posedge clk) begin last_edge = $time; utc <= UTC_W'($time / 1000); end
  always @(posedge (|dstarb)) rise_t = $time;
  always @(negedge (|dstarb)) fall_t = $time;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %0t: %s", $time, msg); end
  endtask

  initial begin
    int unsigned r, exp_code;
    time t_hit, e_cap;
    en = '1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    for (int t = 0; t < 100; t++) begin
      en = (t % 4 == 3) ? N'($urandom) | N'(1) : '1;
      @(posedge clk);
      do r = (t % 20 == 0) ? $urandom_range(P - TAP_PS + 1, P - 1) : $urandom_range(1, P - 1);
      while (((P - r) % TAP_PS) == 0);
      #(r) t0 = 1; t_hit = $time;
      e_cap = last_edge + P;
      if (e_cap - t_hit < TAP_PS) e_cap += P;
      exp_code = int'((e_cap - t_hit) / TAP_PS);
      if (exp_code >= TAPS) begin exp_code = TAPS; n_sat++; end
      wait (rec_valid == 1);
      check($time == e_cap + 2 * P, $sformatf("record at %0t expected %0t", $time, e_cap + 2 * P));
      check(rec.t0_id == ID_W'(t), "T0 ID");
      check(rec.t1_code == CODE_W'(exp_code), $sformatf("t1 code %0d expected %0d", rec.t1_code, exp_code));
      check(rec.utc == UTC_W'(e_cap / 1000), $sformatf("UTC %0d expected %0d", rec.utc, e_cap / 1000));
      repeat (T2 + PW + 1) @(posedge clk);
      check(rise_t == e_cap + T2 * P, $sformatf("DSTARB rise %0t expected %0t", rise_t, e_cap + T2 * P));
      check(fall_t == e_cap + (T2 + PW) * P, "DSTARB pulse width");
      t0 = 0;
      repeat ($urandom_range(1, 4)) @(posedge clk);
    end
    check(n_sat > 0, "saturated t1 code exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // enabled lines carry the pulse, disabled ones stay low
  always @(negedge clk) if (rst_n && |dstarb) begin
    checks++;
    if (dstarb != en) begin failures++; $display("FAIL %0t: DSTARB lines %h enable %h", $time, dstarb, en); end
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
