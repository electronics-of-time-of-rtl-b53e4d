// T0 synchronizer and DSTARB fan-out of the TCM.
//
// The TCM takes the asynchronous T0 in at a TCM clock edge: that edge is the
// one at which the TDC's set signal rises (edge k). T2_CYCLES clock periods
// later (the paper's t2, "a few clock periods") the block drives a
// synchronized T0 pulse, PULSE_CYCLES periods wide, on every enabled line of
// the differential star bus DSTARB, one line per peripheral slot, up to 17.
// Because t2 is a whole number of clock periods fixed here, it is a known
// constant when the time stamp is rebuilt. The values of T2_CYCLES and
// PULSE_CYCLES and the per-line enable are this design's choices. A new set
// before the pulse has ended restarts the sequence.
//
// Timing: dstarb rises right after edge k+T2_CYCLES and falls right after
// edge k+T2_CYCLES+PULSE_CYCLES.
`timescale 1ps/1ps
module t0_sync_fanout #(
  parameter int unsigned N_DSTAR      = 17,
  parameter int unsigned T2_CYCLES    = 4,
  parameter int unsigned PULSE_CYCLES = 2
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               set,       // TDC set signal
  input  logic [N_DSTAR-1:0] dstar_en,  // lines in use
  output logic [N_DSTAR-1:0] dstarb     // synchronized T0, one per slot
);
  localparam int unsigned LAST = T2_CYCLES + PULSE_CYCLES;
  localparam int unsigned CW   = $clog2(LAST + 1);

  logic          set_d, busy, busy_n, pulse_n;
  logic [CW-1:0] cnt, cnt_n;   // clock edges since edge k

  always_comb begin
    busy_n = busy;
    cnt_n  = cnt;
    if (set & ~set_d) begin
      busy_n = 1'b1;
      cnt_n  = CW'(1);
    end else if (busy) begin
      cnt_n  = cnt + CW'(1);
      if (cnt_n >= CW'(LAST)) busy_n = 1'b0;
    end
    pulse_n = busy_n && (cnt_n >= CW'(T2_CYCLES)) && (cnt_n < CW'(LAST));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      set_d  <= 1'b0;
      busy   <= 1'b0;
      cnt    <= '0;
      dstarb <= '0;
    end else begin
      set_d  <= set;
      busy   <= busy_n;
      cnt    <= cnt_n;
      dstarb <= pulse_n ? dstar_en : '0;
    end
  end

  initial begin
    assert (T2_CYCLES >= 1) else $error("T2_CYCLES must be at least 1");
    assert (PULSE_CYCLES >= 1) else $error("PULSE_CYCLES must be at least 1");
  end
endmodule
