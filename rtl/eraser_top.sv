// eraser_top: ERASER adaptive leakage-suppression controller.
//
// Sits in the control processor between the readout logic and the qubits.
// After every syndrome-extraction round it speculates which data qubits have
// leaked (eraser_lsb), pairs them with free neighbouring parity qubits using
// the SWAP Lookup Table (eraser_swap_lut, eraser_dli), and has the QEC
// Schedule Generator (eraser_qsg) insert leakage reduction circuits for
// exactly those pairs in the next round. The wiring follows the paper's
// block diagram: syndrome -> LSB (LTT, Previous LTT, PUTT) -> DLI with SWAP
// lookup and backup mux -> QSG, and the QSG reports the parity qubits it
// used back to the PUTT.
//
// Interface:
//   run, mlr_en       start rounds; select ERASER+M (multi-level readout)
//   clear             forget history (start of a new experiment)
//   meas_valid        one-cycle strobe with the readout of the round just
//                     measured: syndrome (d*d-1 parity checks), parity_leak
//                     and data_leak (qubits read as |L>, used with mlr_en)
//   lut_*             write port of the SWAP Lookup Table
//   layer_*, par_*, data_op, round_done   the schedule stream (eraser_qsg)
//   stall             the round waits at its first SWAP layer for a plan
//   commit            the QSG takes the plan of the current round
//   waiting_meas      the QSG waits for the |L> readout (ERASER+M)
//   ltt, prev_ltt, putt, plan_backup   the speculation tables and the
//                     DLI's backup choices, for observation
//
// Timing: the syndrome is registered into the LTT on the meas_valid edge;
// the DLI is combinational, so the next plan is ready one cycle after the
// syndrome arrives. The QSG takes it when it reaches the first SWAP layer of
// the next round (after the 4th stabilizer CNOT). With the readout
// arriving in time, ERASER adds no cycles to a round.
//
// The decoder, the readout logic (discriminators) and the qubits themselves
// are outside this block; their signals are the ports above.
//
// rst_n is an asynchronous active-low reset for all registers and is also
// the disable condition of the assertions; a lint tool may note that the
// same net is used both ways, which is intended.
module eraser_top
  import eraser_pkg::*;
#(
  parameter int unsigned D         = 11,
  parameter int unsigned MIN_FLIPS = 2,
  localparam int unsigned ND = D * D,
  localparam int unsigned NP = D * D - 1,
  localparam int unsigned DW = $clog2(ND),
  localparam int unsigned PW = $clog2(NP)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clear,
  input  logic                  run,
  input  logic                  mlr_en,
  input  logic                  meas_valid,
  input  logic [NP-1:0]         syndrome,
  input  logic [NP-1:0]         parity_leak,
  input  logic [ND-1:0]         data_leak,
  input  logic                  lut_we,
  input  logic [DW-1:0]         lut_addr,
  input  logic [PW-1:0]         lut_primary,
  input  logic [PW-1:0]         lut_backup,
  output logic                  layer_valid,
  input  logic                  layer_ready,
  output logic [3:0]            layer_idx,
  output qop_e [NP-1:0]         par_op,
  output logic [NP-1:0][DW-1:0] par_partner,
  output qop_e [ND-1:0]         data_op,
  output logic                  round_done,
  output logic                  stall,
  output logic                  commit,
  output logic                  waiting_meas,
  output logic [ND-1:0]         ltt,
  output logic [ND-1:0]         prev_ltt,
  output logic [NP-1:0]         putt,
  output logic [ND-1:0]         plan_backup
);

  logic                  plan_valid;
  logic [ND-1:0][PW-1:0] primary, backup;
  logic [ND-1:0]         lrc_en;
  logic [ND-1:0][PW-1:0] lrc_par;
  logic [NP-1:0]         par_used;
  logic [ND-1:0]         commit_data;
  logic [NP-1:0]         commit_par;

  eraser_lsb #(.D(D), .MIN_FLIPS(MIN_FLIPS)) u_lsb (
    .clk, .rst_n, .clear, .mlr_en,
    .synd_valid  (meas_valid),
    .syndrome,
    .parity_leak,
    .commit,
    .commit_data,
    .commit_par,
    .ltt,
    .prev_ltt,
    .putt,
    .plan_valid
  );

  eraser_swap_lut #(.D(D)) u_lut (
    .clk, .rst_n,
    .we         (lut_we),
    .addr       (lut_addr),
    .wr_primary (lut_primary),
    .wr_backup  (lut_backup),
    .primary,
    .backup
  );

  eraser_dli #(.D(D)) u_dli (
    .ltt,
    .putt,
    .primary,
    .backup,
    .lrc_en,
    .lrc_par,
    .use_backup  (plan_backup),
    .par_used
  );

  eraser_qsg #(.D(D)) u_qsg (
    .clk, .rst_n, .run, .mlr_en,
    .plan_valid,
    .plan_en     (lrc_en),
    .plan_par    (lrc_par),
    .commit,
    .commit_data,
    .commit_par,
    .stall,
    .meas_valid,
    .data_leak,
    .layer_valid,
    .layer_ready,
    .layer_idx,
    .par_op,
    .par_partner,
    .data_op,
    .round_done,
    .waiting_meas
  );

  // The parity qubits the QSG reports are exactly those the DLI allocated.
  a_putt_feedback: assert property (@(posedge clk) disable iff (!rst_n)
    commit |-> commit_par == par_used);

endmodule
