// Testbench of the FDM at its default size (174 bins of 46 ps). The
// synchronized T0 arrives at a random picosecond offset from the FDM clock;
// one or two runs of valid ADC words follow. Checks each header (T0 ID, t3
// code against the model, t4 = clock periods from the capture edge to the
// first word of the run) and the sample words that follow it.
`timescale 1ps/1ps
module fdm_tb;
  import tof_pkg::*;
  localparam int unsigned TAPS = 174, TAP_PS = 46;
  localparam int unsigned P = CLK_PERIOD_PS;
  int checks = 0, failures = 0, n_two = 0;
  logic clk = 0, rst_n = 1, t0s = 0, av = 0;
  // Two falling edges of rst_n: the first clears the sampling flip-flops and
  // with them set, the second then gives the capture flip-flop a clear edge
  // whatever its power-up state.
  initial begin #1 rst_n = 0; #1 rst_n = 1; #1 rst_n = 0; end
  logic [DATA_W-1:0] ad = '0;
  fdm_word_t out;
  logic out_valid;
  fdm_word_t got [$];
  time last_edge;

  fdm dut (.clk(clk), .rst_n(rst_n), .t0_sync(t0s), .adc_data(ad), .adc_valid(av),
           .out(out), .out_valid(out_valid));

  always #(P / 2) clk = ~clk;
  always @(posedge clk) begin last_edge = $time; if (out_valid) got.push_back(out); end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %0t: %s", $time, msg); end
  endtask

  initial begin
    int unsigned r, exp_code, nrun, d [2], len [2], w;
    time t_hit, e_cap, cur;
    fdm_hdr_t h;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk) begin av <= 1; ad <= '1; end    // words before any T0
    @(posedge clk) av <= 0;
    repeat (6) @(posedge clk);
    check(got.size() == 0, "no output before the first T0");
    for (int t = 0; t < 60; t++) begin
      got.delete();
      nrun = (t % 3 == 0) ? 2 : 1;
      @(posedge clk);
      do r = $urandom_range(1, P - 1); while (((P - r) % TAP_PS) == 0);
      #(r) t0s = 1; t_hit = $time;
      e_cap = last_edge + P;
      if (e_cap - t_hit < TAP_PS) e_cap += P;
      exp_code = int'((e_cap - t_hit) / TAP_PS);
      if (exp_code > TAPS) exp_code = TAPS;
      #(e_cap - $time + 1);                       // just after the capture edge
      cur = e_cap;
      d[0] = $urandom_range(3, 300);
      d[1] = d[0] + $urandom_range(20, 100);
      for (int j = 0; j < int'(nrun); j++) begin
        len[j] = $urandom_range(1, 8);
        // first word driven after edge k+d-1, registered at edge k+d
        while (cur < e_cap + time'(d[j] - 1) * P) begin @(posedge clk); cur += P; end
        for (int i = 0; i < int'(len[j]); i++) begin
          av <= 1; ad <= DATA_W'({8'(t), 8'(j), 16'(i)});
          @(posedge clk); cur += P;
          if (i == 1) t0s = 0;
        end
        av <= 0; ad <= '0;
        t0s = 0;
        @(posedge clk); cur += P;
      end
      if (nrun == 2) n_two++;
      repeat (6) @(posedge clk); #1;
      w = 0;
      for (int j = 0; j < int'(nrun); j++) begin
        check(got.size() > w, "header present");
        if (got.size() > w) begin
          h = fdm_hdr_t'(got[w].payload[$bits(fdm_hdr_t)-1:0]);
          check(got[w].is_hdr == 1, "header flag");
          check(h.t0_id == ID_W'(t), $sformatf("T0 ID %0d expected %0d", h.t0_id, t));
          check(h.t3_code == CODE_W'(exp_code), $sformatf("t3 code %0d expected %0d", h.t3_code, exp_code));
          check(h.t4 == T4_W'(d[j]), $sformatf("t4 %0d expected %0d", h.t4, d[j]));
        end
        w++;
        for (int i = 0; i < int'(len[j]); i++) begin
          check(got.size() > w && got[w].is_hdr == 0 &&
                got[w].payload == DATA_W'({8'(t), 8'(j), 16'(i)}), $sformatf("event %0d run %0d word %0d", t, j, i));
          w++;
        end
      end
      check(got.size() == w, $sformatf("word count %0d expected %0d", got.size(), w));
    end
    check(n_two > 0, "two signals per T0 exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
