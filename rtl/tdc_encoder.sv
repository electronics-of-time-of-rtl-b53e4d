// Sampling register and code converter of the carry-chain TDC.
//
// On every rising clock edge a row of flip-flops samples all taps of the
// carry chain. While a T0 step is travelling through the chain the sample is
// a thermometer code: the taps it has already passed read '1'. The flip-flop
// on the first tap is the set signal: it goes high at the first clock edge
// after T0 and clears the input flip-flop. One clock after set rises the
// converter outputs the number of ones in that sample, which is the interval
// from T0 to the clock edge in bins. Counting ones rather than looking for the
// 1-to-0 transition is this design's choice; it tolerates bubbles.
//
// The set flip-flop is also the asynchronous clear of the input flip-flop,
// which is why lint reports it as flopped both synchronously and
// asynchronously: that feedback is the TDC structure itself.
//
// Timing: set follows the edge that samples tap 0 high (edge k); code and
// the one-cycle code_valid strobe appear after edge k+1.
`timescale 1ps/1ps
module tdc_encoder #(
  parameter int unsigned TAPS = 127
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [TAPS-1:0]             taps,
  output logic                        set,
  output logic [$clog2(TAPS+1)-1:0]   code,
  output logic                        code_valid
);
  localparam int unsigned CW = $clog2(TAPS+1);

  logic [TAPS-1:0] smp;
  logic            set_d;
  logic [CW-1:0]   ones;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) smp <= '0;
    else        smp <= taps;
  end

  assign set = smp[0];

  always_comb begin
    ones = '0;
    for (int i = 0; i < TAPS; i++) ones = ones + CW'(smp[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      set_d      <= 1'b0;
      code       <= '0;
      code_valid <= 1'b0;
    end else begin
      set_d      <= set;
      code_valid <= set & ~set_d;
      if (set & ~set_d) code <= ones;
    end
  end
endmodule
