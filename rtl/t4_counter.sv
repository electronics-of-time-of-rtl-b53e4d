// t4 counter of the FDM.
//
// Counts FDM clock periods from the edge that captured the synchronized T0
// (the rising edge of the FDM TDC's set signal, edge k). Every time a run of
// valid ADC sample words starts after it (its first word registered at edge
// m), the block reports t4 = m - k for that signal, so every signal of the
// channel gets its own time stamp against the same T0: the first signal of a
// flash-gamma start and the later detector signal alike. Together with t1,
// t2 and t3 this rebuilds the time of the first sample relative to T0.
// Counting clock periods to the first sample follows the paper. The width,
// the saturation at all ones, and ignoring runs that began before the T0 are
// this design's choices. A 32-bit count spans 34 s at 125 MHz, far beyond the
// 40 ms between T0 pulses at 25 Hz.
//
// Timing: t4 and the one-cycle t4_valid appear right after edge m.
`timescale 1ps/1ps
module t4_counter #(
  parameter int unsigned CNT_W = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             set,
  input  logic             data_valid,
  output logic [CNT_W-1:0] t4,
  output logic             t4_valid
);
  logic             set_d, dv_d, armed, start;
  logic [CNT_W-1:0] cnt;     // after edge j: j - k
  logic [CNT_W-1:0] cnt_n;   // value for the current edge

  assign start = data_valid & ~dv_d;   // first word of a run at this edge
  assign cnt_n = (&cnt) ? cnt : cnt + 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      set_d    <= 1'b0;
      dv_d     <= 1'b0;
      armed    <= 1'b0;
      cnt      <= '0;
      t4       <= '0;
      t4_valid <= 1'b0;
    end else begin
      set_d    <= set;
      dv_d     <= data_valid;
      t4_valid <= 1'b0;
      if (set & ~set_d) begin
        armed <= 1'b1;
        cnt   <= CNT_W'(1);
        if (start) begin
          t4       <= CNT_W'(1);
          t4_valid <= 1'b1;
        end
      end else if (armed) begin
        cnt <= cnt_n;
        if (start) begin
          t4       <= cnt_n;
          t4_valid <= 1'b1;
        end
      end
    end
  end
endmodule
