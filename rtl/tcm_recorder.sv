// T0 ID counter, UTC latch and record builder of the TCM.
//
// At the rising edge of set (the first TCM clock edge after T0) the block
// latches the UTC time supplied by the White Rabbit interface and gives the
// T0 pulse the next T0 ID, counting from 0 after reset. When the TDC code
// for t1 arrives one clock later it emits one record {T0 ID, UTC, t1 code}
// with a one-cycle valid strobe; the controller later matches it with the
// FDM headers by T0 ID. Latching UTC on set follows the paper; how the T0 ID
// is formed and the record layout are this design's choices.
//
// Timing: set rises after edge k, UTC and ID latched at edge k+1, code_valid
// arrives after k+1 and rec/rec_valid appear after edge k+2.
`timescale 1ps/1ps
module tcm_recorder
  import tof_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              set,
  input  logic [UTC_W-1:0]  utc,
  input  logic [CODE_W-1:0] code,
  input  logic              code_valid,
  output tcm_rec_t          rec,
  output logic              rec_valid
);
  logic            set_d;
  logic [ID_W-1:0] id_cnt, id_lat;
  logic [UTC_W-1:0] utc_lat;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      set_d     <= 1'b0;
      id_cnt    <= '0;
      id_lat    <= '0;
      utc_lat   <= '0;
      rec       <= '0;
      rec_valid <= 1'b0;
    end else begin
      set_d     <= set;
      rec_valid <= code_valid;
      if (set & ~set_d) begin
        utc_lat <= utc;
        id_lat  <= id_cnt;
        id_cnt  <= id_cnt + 1'b1;
      end
      if (code_valid) begin
        rec.t0_id   <= id_lat;
        rec.utc     <= utc_lat;
        rec.t1_code <= code;
      end
    end
  end
endmodule
