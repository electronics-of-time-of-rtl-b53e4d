// Testbench of fdm_packer: emulates the FDM TDC (set, code) and t4 counter
// strobes, feeds numbered sample words, and checks the output stream: one
// header {T0 ID, t3 code, t4} per event, then exactly the run of valid words
// that started at the first valid word, in order; stray valid words are not
// forwarded.
`timescale 1ps/1ps
module fdm_packer_tb;
  import tof_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1, set = 0, code_valid = 0, t4_valid = 0, dv = 0;
  // Two falling edges of rst_n: the first clears the sampling flip-flops and
  // with them set, the second then gives the capture flip-flop a clear edge
  // whatever its power-up state.
  initial begin #1 rst_n = 0; #1 rst_n = 1; #1 rst_n = 0; end
  logic [CODE_W-1:0] code = '0;
  logic [T4_W-1:0] t4 = '0;
  logic [DATA_W-1:0] data = '0;
  fdm_word_t out;
  logic out_valid;
  fdm_word_t got [$];
  int n_stray = 0;

  fdm_packer dut (.clk(clk), .rst_n(rst_n), .set(set), .code(code), .code_valid(code_valid),
                  .t4(t4), .t4_valid(t4_valid), .data(data), .data_valid(dv),
                  .out(out), .out_valid(out_valid));

  always #(CLK_PERIOD_PS / 2) clk = ~clk;
  always @(posedge clk) if (out_valid) got.push_back(out);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %0t: %s", $time, msg); end
  endtask

  initial begin
    int gap, len;
    logic [CODE_W-1:0] c;
    fdm_hdr_t h;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 80; t++) begin
      gap = (t % 4 == 0) ? 1 : $urandom_range(2, 20);
      len = $urandom_range(1, 12);
      c = CODE_W'($urandom_range(1, 174));
      got.delete();
      if (t % 6 == 3) begin                        // stray valid word
        n_stray++;
        @(posedge clk) begin dv <= 1; data <= '1; end
        @(posedge clk) dv <= 0;
        repeat (4) @(posedge clk);
        got.delete();
      end
      @(posedge clk) set <= 1;                                 // edge k
      @(posedge clk) begin set <= 0; code <= c; code_valid <= 1; end   // k+1
      if (gap > 1) begin
        @(posedge clk) code_valid <= 0;
        repeat (gap - 2) @(posedge clk);
      end
      // first valid word, registered at edge m = k+gap
      for (int i = 0; i < len; i++) begin
        dv <= 1; data <= DATA_W'({t[15:0], 16'(i)});
        if (i == 0) begin t4_valid <= 0; end
        @(posedge clk);
        code_valid <= 0;
        if (i == 0) begin t4 <= T4_W'(gap); t4_valid <= 1; end   // counter strobe after m
        else t4_valid <= 0;
      end
      dv <= 0; data <= '1;
      @(posedge clk) t4_valid <= 0;
      repeat (4) @(posedge clk);
      dv <= 1;                                     // trailing valid word after the run
      @(posedge clk) dv <= 0;
      repeat (4) @(posedge clk);
      #1;
      check(got.size() == len + 1, $sformatf("event %0d: %0d words, expected %0d", t, got.size(), len + 1));
      if (got.size() > 0) begin
        h = fdm_hdr_t'(got[0].payload[HDR_W_T-1:0]);
        check(got[0].is_hdr == 1, "header first");
        check(h.t0_id == ID_W'(t), $sformatf("T0 ID %0d expected %0d", h.t0_id, t));
        check(h.t3_code == c, "t3 code in header");
        check(h.t4 == T4_W'(gap), "t4 in header");
      end
      for (int i = 1; i < got.size() && i <= len; i++) begin
        check(got[i].is_hdr == 0 && got[i].payload == DATA_W'({t[15:0], 16'(i - 1)}),
              $sformatf("event %0d word %0d", t, i - 1));
      end
    end
    check(n_stray > 0, "stray words exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int HDR_W_T = $bits(fdm_hdr_t);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
