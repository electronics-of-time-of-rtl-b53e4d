// Event packer of the FDM.
//
// Gives every synchronized T0 the next T0 ID (from 0 after reset, the same
// rule as the TCM) and keeps the t3 code of its TDC. Each time the t4
// counter stamps the start of a run of valid sample words, the packer emits
// a header word {T0 ID, t3 code, t4} and then that run of consecutive valid
// words, one per clock, delayed by two clocks so the header always goes
// first; the run ends at the first invalid word. Valid words that the t4
// counter did not stamp (before the first T0) are dropped. The output is a
// one-word-per-clock stream towards the DMA engine, which must accept every
// word. Packing results with the sampled data follows the paper; the word
// layout and the run rule are this design's choices.
//
// Timing: the first valid word is registered at edge m; header after edge
// m+1; that word after edge m+2, the next words one per clock.
`timescale 1ps/1ps
module fdm_packer
  import tof_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              set,
  input  logic [CODE_W-1:0] code,
  input  logic              code_valid,
  input  logic [T4_W-1:0]   t4,
  input  logic              t4_valid,
  input  logic [DATA_W-1:0] data,
  input  logic              data_valid,
  output fdm_word_t         out,
  output logic              out_valid
);
  logic              set_d, win, fwd;
  logic [ID_W-1:0]   id_cnt, id_lat;
  logic [CODE_W-1:0] code_lat;
  logic [DATA_W-1:0] dq, pend;
  logic              dv, pend_v;
  fdm_hdr_t          hdr;

  assign fwd = (t4_valid | win) & dv;
  always_comb begin
    hdr.t0_id   = id_lat;
    hdr.t3_code = code_valid ? code : code_lat;
    hdr.t4      = t4;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      set_d     <= 1'b0;
      id_cnt    <= '0;
      id_lat    <= '0;
      code_lat  <= '0;
      dq        <= '0;
      dv        <= 1'b0;
      pend      <= '0;
      pend_v    <= 1'b0;
      win       <= 1'b0;
      out       <= '0;
      out_valid <= 1'b0;
    end else begin
      set_d  <= set;
      if (set & ~set_d) begin
        id_lat <= id_cnt;
        id_cnt <= id_cnt + 1'b1;
      end
      if (code_valid) code_lat <= code;
      dq     <= data;
      dv     <= data_valid;
      win    <= fwd;
      pend   <= dq;
      pend_v <= fwd;
      if (t4_valid) begin
        out       <= '{is_hdr: 1'b1, payload: DATA_W'(hdr)};
        out_valid <= 1'b1;
      end else begin
        out       <= '{is_hdr: 1'b0, payload: pend};
        out_valid <= pend_v;
      end
    end
  end
endmodule
