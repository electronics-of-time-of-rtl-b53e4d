// Time-of-flight measurement logic of the Back-n readout electronics.
//
// One TCM takes in the asynchronous T0 and drives the synchronized T0 on the
// DSTARB star lines of the PXIe backplane; FDM i listens on line i. Each
// module uploads its own results: the TCM a record {T0 ID, UTC, t1} per T0,
// each FDM a header {T0 ID, t3, t4} and the sample words of its event. The
// controller matches them by T0 ID and forms
//   TOF = t1 + t2 + t3 + t4 + d,
// with t1 = t1_code * 63 ps, t2 = T2_CYCLES * 8 ns, t3 = t3_code * 46 ps,
// t4 = t4 * 8 ns and d the calibrated fixed delays. N_FDM defaults to 17,
// the number of DSTARB lines; the backplane lines are plain wires here.
// Each FDM has its own clock input: the clocks share a source but not a
// phase.
`timescale 1ps/1ps
module backn_tof
  import tof_pkg::*;
#(
  parameter int unsigned N_FDM = 17
) (
  input  logic                          tcm_clk,
  input  logic [N_FDM-1:0]              fdm_clk,
  input  logic                          rst_n,
  input  logic                          t0,
  input  logic [UTC_W-1:0]              utc,
  input  logic [N_FDM-1:0][DATA_W-1:0]  adc_data,
  input  logic [N_FDM-1:0]              adc_valid,
  output logic [N_FDM-1:0]              dstarb,
  output tcm_rec_t                      tcm_rec,
  output logic                          tcm_rec_valid,
  output fdm_word_t [N_FDM-1:0]         fdm_out,
  output logic [N_FDM-1:0]              fdm_out_valid
);
  tcm #(.N_DSTAR(N_FDM)) u_tcm (
    .clk(tcm_clk), .rst_n(rst_n), .t0(t0), .utc(utc),
    .dstar_en({N_FDM{1'b1}}), .dstarb(dstarb),
    .rec(tcm_rec), .rec_valid(tcm_rec_valid)
  );

  for (genvar i = 0; i < N_FDM; i++) begin : g_fdm
    fdm u_fdm (
      .clk(fdm_clk[i]), .rst_n(rst_n), .t0_sync(dstarb[i]),
      .adc_data(adc_data[i]), .adc_valid(adc_valid[i]),
      .out(fdm_out[i]), .out_valid(fdm_out_valid[i])
    );
  end

  initial assert (N_FDM >= 1 && N_FDM <= 17) else $error("N_FDM must be 1..17");
endmodule
