// Testbench of carry_chain: every tap must follow the hit, rising and
// falling, exactly (i+1)*TAP_PS after it.
`timescale 1ps/1ps
module carry_chain_tb;
  localparam int unsigned TAPS = 127, TAP_PS = 63;
  int checks = 0, failures = 0;
  logic hit = 0;
  logic [TAPS-1:0] taps;
  time rise_t [TAPS];
  time fall_t [TAPS];
  time t_hit, t_low;

  carry_chain #(.TAPS(TAPS), .TAP_PS(TAP_PS)) dut (.hit(hit), .taps(taps));

  for (genvar i = 0; i < TAPS; i++) begin : g_mon
    always @(posedge taps[i]) rise_t[i] = $time;
    always @(negedge taps[i]) fall_t[i] = $time;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %0t: %s", $time, msg); end
  endtask

  initial begin
    #20000;
    check(taps == '0, "chain empty at rest");
    for (int n = 0; n < 4; n++) begin
      hit = 1; t_hit = $time;
      #(TAPS * TAP_PS + 500 + n * 1000);
      check(&taps, "all taps high after the chain delay");
      hit = 0; t_low = $time;
      #(TAPS * TAP_PS + 500);
      check(taps == '0, "all taps low again");
      for (int i = 0; i < TAPS; i++) begin
        check(rise_t[i] == t_hit + time'((i + 1) * TAP_PS), $sformatf("tap %0d rise time", i));
        check(fall_t[i] == t_low + time'((i + 1) * TAP_PS), $sformatf("tap %0d fall time", i));
      end
    end
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
