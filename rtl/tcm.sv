// Trigger and Clock Module (TCM) timing logic.
//
// T0 from the accelerator is asynchronous to the TCM clock. The TDC measures
// t1, the interval from T0 to the TCM clock edge that takes it in, and its
// set signal marks that edge. From set the block latches the UTC time,
// numbers the pulse (T0 ID) and, T2_CYCLES clocks later (t2), drives the
// synchronized T0 on up to 17 DSTARB lines to the FDMs. One record
// {T0 ID, UTC, t1 code} per T0 leaves towards the DMA upload. The TDC
// defaults, 127 bins of 63 ps, are the TCM figures of the paper.
//
// Timing: capture edge k; record after edge k+2; dstarb high after edge
// k+T2_CYCLES for PULSE_CYCLES clocks.
`timescale 1ps/1ps
module tcm
  import tof_pkg::*;
#(
  parameter int unsigned TAPS         = 127,
  parameter int unsigned TAP_PS       = 63,
  parameter int unsigned N_DSTAR      = 17,
  parameter int unsigned T2_CYCLES    = 4,
  parameter int unsigned PULSE_CYCLES = 2
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               t0,
  input  logic [UTC_W-1:0]   utc,
  input  logic [N_DSTAR-1:0] dstar_en,
  output logic [N_DSTAR-1:0] dstarb,
  output tcm_rec_t           rec,
  output logic               rec_valid
);
  localparam int unsigned CW = $clog2(TAPS+1);

  logic          set, code_valid;
  logic [CW-1:0] code;

  tdc #(.TAPS(TAPS), .TAP_PS(TAP_PS)) u_tdc (
    .clk(clk), .rst_n(rst_n), .t0(t0),
    .set(set), .code(code), .code_valid(code_valid)
  );

  t0_sync_fanout #(.N_DSTAR(N_DSTAR), .T2_CYCLES(T2_CYCLES), .PULSE_CYCLES(PULSE_CYCLES)) u_sync (
    .clk(clk), .rst_n(rst_n), .set(set), .dstar_en(dstar_en), .dstarb(dstarb)
  );

  tcm_recorder u_rec (
    .clk(clk), .rst_n(rst_n), .set(set), .utc(utc),
    .code(CODE_W'(code)), .code_valid(code_valid),
    .rec(rec), .rec_valid(rec_valid)
  );
endmodule
