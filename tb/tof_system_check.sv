// Shared end-to-end check of the whole TOF measurement (one TCM, 17 FDMs at
// the default size), used by backn_tof_tb and tof_accuracy_tb. Each FDM clock
// has its own random phase against the TCM clock. For every T0 the channels
// see one or two detector signals; the first valid ADC word of each signal
// is registered at a known FDM clock edge. The check collects the TCM
// records and the FDM headers, matches them by T0 ID as the controller
// would, rebuilds
//   TOF = t1 + t2 + t3 + t4   (t1 = (code+1/2)*63 ps, t2 = 4*8 ns,
//                              t3 = (code+1/2)*46 ps, t4 = count*8 ns)
// and compares it with the true interval from T0 to that edge, within half
// a bin of each TDC. A second signal on the same T0 gives TOF' = TOF2 - TOF1
// (the flash-gamma start). With LONG_PS > 0 the last T0's signals come
// LONG_PS later (the 10 ms range of the accuracy test). It counts each
// mechanism and fails if one never happened.
`timescale 1ps/1ps
module tof_system_check #(
  parameter int          NEV        = 6,            // number of T0 pulses
  parameter longint      LONG_PS    = 0,            // if > 0: TOF of the last T0's signals
  parameter int unsigned MAX_TOF_PS = 50_000_000    // random TOF range of the others
) ();
  import tof_pkg::*;
  localparam int N = 17;
  localparam int unsigned P = CLK_PERIOD_PS;
  localparam int unsigned T2 = 4, TAP1 = 63, TAP3 = 46, TAPS1 = 127;
  localparam real TOL_PS = (TAP1 + TAP3) / 2.0 + 1.0;

  int checks = 0, failures = 0;
  logic tcm_clk = 0, rst_n = 1, t0 = 0;
  // Two falling edges of rst_n: the first clears the sampling flip-flops and
  // with them set, the second then gives the capture flip-flop a clear edge
  // whatever its power-up state.
  initial begin #1 rst_n = 0; #1 rst_n = 1; #1 rst_n = 0; end
  logic [N-1:0] fdm_clk = '0;
  logic [UTC_W-1:0] utc = '0;
  logic [N-1:0][DATA_W-1:0] adc_data = '0;
  logic [N-1:0] adc_valid = '0;
  logic [N-1:0] dstarb, fdm_out_valid;
  tcm_rec_t tcm_rec;
  logic tcm_rec_valid;
  fdm_word_t [N-1:0] fdm_out;

  // mechanism counters
  int n_rec = 0, n_sat = 0, n_fanout = 0, n_hdr = 0, n_words = 0, n_tof_ok = 0;
  int n_gamma = 0, n_stray = 0, n_long = 0;

  backn_tof dut (
    .tcm_clk(tcm_clk), .fdm_clk(fdm_clk), .rst_n(rst_n), .t0(t0), .utc(utc),
    .adc_data(adc_data), .adc_valid(adc_valid), .dstarb(dstarb),
    .tcm_rec(tcm_rec), .tcm_rec_valid(tcm_rec_valid),
    .fdm_out(fdm_out), .fdm_out_valid(fdm_out_valid));

  // clocks: same period, FDM phases unknown
  int unsigned phase [N];
  always #(P / 2) tcm_clk = ~tcm_clk;
  for (genvar i = 0; i < N; i++) begin : g_clk
    initial begin
      #(phase[i] + 1);
      forever #(P / 2) fdm_clk[i] = ~fdm_clk[i];
    end
  end
  always @(posedge tcm_clk) utc <= UTC_W'($time / 1000);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %0t: %s", $time, msg); end
  endtask

  // ---- collected results ----
  tcm_rec_t recs [int];
  fdm_hdr_t hdrs [N][$];
  int       words [N];
  time      t0_time [NEV];
  time      sig_time [N][$];                       // true time of each signal's first word
  int       sig_ev [N][$];

  always @(posedge tcm_clk) if (rst_n && tcm_rec_valid) begin
    recs[int'(tcm_rec.t0_id)] = tcm_rec;
    n_rec++;
    if (tcm_rec.t1_code == CODE_W'(TAPS1)) n_sat++;
  end
  for (genvar i = 0; i < N; i++) begin : g_mon
    always @(posedge fdm_clk[i]) if (rst_n && fdm_out_valid[i]) begin
      if (fdm_out[i].is_hdr) hdrs[i].push_back(fdm_hdr_t'(fdm_out[i].payload[$bits(fdm_hdr_t)-1:0]));
      else words[i]++;
    end
  end
  always @(posedge tcm_clk) if (rst_n && &dstarb) n_fanout++;

  // one signal on channel ch: the first word is registered at the first
  // FDM edge more than one period after t_sig
  task automatic signal(input int ch, input int ev, input time t_sig, input int len);
    time e;
    #(t_sig - $time);
    @(posedge fdm_clk[ch]);
    e = $time + P;
    adc_valid[ch] <= 1'b1;
    for (int i = 0; i < len; i++) begin
      adc_data[ch] <= DATA_W'({8'(ev), 8'(ch), 16'(i)});
      @(posedge fdm_clk[ch]);
    end
    adc_valid[ch] <= 1'b0;
    sig_time[ch].push_back(e);
    sig_ev[ch].push_back(ev);
  endtask

  // per-channel drivers, started by the main sequence
  time sched1 [N], sched2 [N];
  bit  two_sig [N];
  int  cur_ev;
  int  n_done = 0;
  event go;
  for (genvar i = 0; i < N; i++) begin : g_drv
    always @(go) begin
      signal(i, cur_ev, sched1[i], 1 + (i % 5));
      if (two_sig[i]) signal(i, cur_ev, sched2[i], 2);
      n_done++;
    end
  end

  function automatic real tof_ps(input tcm_rec_t r, input fdm_hdr_t h);
    return (real'(r.t1_code) + 0.5) * TAP1 + real'(T2 * P) +
           (real'(h.t3_code) + 0.5) * TAP3 + real'(h.t4) * P;
  endfunction

  initial begin
    time t_ev, t_rel;
    int unsigned r;
    for (int i = 0; i < N; i++) phase[i] = $urandom_range(1, P - 2);
    repeat (4) @(posedge tcm_clk);
    rst_n = 1;
    // stray data before the first T0 on channel 0 must not appear
    signal(0, 255, $time + 100, 3);
    void'(sig_time[0].pop_back());
    void'(sig_ev[0].pop_back());
    n_stray++;
    repeat (10) @(posedge tcm_clk);
    check(hdrs[0].size() == 0 && words[0] == 0, "stray words before T0 dropped");
    words[0] = 0;

    for (int ev = 0; ev < NEV; ev++) begin
      @(posedge tcm_clk);
      r = (ev == 1) ? $urandom_range(P - TAP1 + 1, P - 1) : $urandom_range(1, P - 1);
      #(r) t0 = 1;
      t_ev = $time;
      t0_time[ev] = t_ev;
      // detector signals
      cur_ev = ev;
      for (int ch = 0; ch < N; ch++) begin
        sched1[ch] = t_ev + ((LONG_PS > 0 && ev == NEV - 1) ? 64'(LONG_PS) : 64'(1_000_000 + $urandom_range(0, MAX_TOF_PS)));
        two_sig[ch] = (ch % 4 == 1) && !(LONG_PS > 0 && ev == NEV - 1);
        sched2[ch] = sched1[ch] + 64'(100_000 + $urandom_range(0, 5_000_000));
        if (two_sig[ch]) n_gamma++;
      end
      n_done = 0;
      -> go;
      #(1000 * P) t0 = 0;
      wait (n_done == N);
      repeat (20) @(posedge tcm_clk);
      if (LONG_PS > 0 && ev == NEV - 1) n_long++;
    end
    repeat (50) @(posedge tcm_clk);

    // ---- rebuild the time stamps as the controller does ----
    check(n_rec == NEV, $sformatf("%0d TCM records, expected %0d", n_rec, NEV));
    for (int ch = 0; ch < N; ch++) begin
      check(hdrs[ch].size() == sig_time[ch].size(),
            $sformatf("channel %0d: %0d headers for %0d signals", ch, hdrs[ch].size(), sig_time[ch].size()));
      for (int s = 0; s < hdrs[ch].size() && s < sig_time[ch].size(); s++) begin
        automatic fdm_hdr_t h = hdrs[ch][s];
        automatic int ev = sig_ev[ch][s];
        automatic real est, truth;
        n_hdr++;
        check(int'(h.t0_id) == ev, $sformatf("ch %0d signal %0d: T0 ID %0d expected %0d", ch, s, h.t0_id, ev));
        if (recs.exists(int'(h.t0_id))) begin
          est = tof_ps(recs[int'(h.t0_id)], h);
          truth = real'(sig_time[ch][s] - t0_time[ev]);
          check((est - truth) <= TOL_PS && (truth - est) <= TOL_PS,
                $sformatf("ch %0d ev %0d: TOF %0.1f ps, true %0.1f ps", ch, ev, est, truth));
          if ((est - truth) <= TOL_PS && (truth - est) <= TOL_PS) n_tof_ok++;
          if (LONG_PS > 0 && ev == NEV - 1 && ch == 0)
            $display("long event: TOF %0.3f ns (true %0.3f ns)", est / 1000.0, truth / 1000.0);
          // flash-gamma start: difference of two stamps of the same T0
          if (s > 0 && sig_ev[ch][s - 1] == ev) begin
            automatic real d_est = est - tof_ps(recs[int'(h.t0_id)], hdrs[ch][s - 1]);
            automatic real d_true = real'(sig_time[ch][s] - sig_time[ch][s - 1]);
            check((d_est - d_true) <= 1.0 && (d_true - d_est) <= 1.0, "TOF' = TOF2 - TOF1");
          end
        end else check(0, "TCM record for T0 ID");
      end
    end
    foreach (recs[id]) check(recs[id].utc >= UTC_W'(t0_time[id] / 1000) &&
                             recs[id].utc <= UTC_W'(t0_time[id] / 1000 + 16), "UTC latched at capture");

    $display("mechanisms: records=%0d saturated_t1=%0d fanout_pulses=%0d headers=%0d tof_ok=%0d gamma_pairs=%0d stray=%0d long=%0d",
             n_rec, n_sat, n_fanout, n_hdr, n_tof_ok, n_gamma, n_stray, n_long);
    check(n_rec > 0, "TCM capture happened");
    check(n_sat > 0, "saturated t1 code happened");
    check(n_fanout > 0, "DSTARB fan-out happened");
    check(n_hdr > 0, "FDM headers happened");
    check(n_gamma > 0, "two signals per T0 happened");
    check(n_stray > 0, "stray data before T0 happened");
    if (LONG_PS > 0) check(n_long > 0, "long-range event happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(64'(NEV) * (64'(MAX_TOF_PS) + 64'd20_000_000) + 64'(LONG_PS) + 64'd10_000_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
