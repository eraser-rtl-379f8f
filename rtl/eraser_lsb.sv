// eraser_lsb: Leakage Speculation Block.
//
// Decides, once per syndrome-extraction round, which data qubits may have
// leaked, so that the next round can give them a leakage reduction circuit
// (LRC: swap the data qubit with a neighbouring parity qubit, measure and
// reset it, swap back). It holds three tables, as in the paper:
//   LTT       Leakage Tracking Table, one bit per data qubit: speculated
//             leaked from the current syndrome, LRC wanted next round.
//   prev_ltt  Previous LTT: data qubits that had an LRC in the round that
//             produced the current syndrome.
//   putt      Parity qubit Usage Tracking Table: parity qubits that took
//             part in an LRC in that round; they are measured and reset in
//             the next round and must not be used for an LRC there.
//
// Rule (paper): a data qubit is marked leaked when it had no LRC in the
// previous round and at least half of its two, three or four parity
// neighbours flipped. The paper's figure and its false-negative analysis say
// "at least two flips"; MIN_FLIPS (default 2) adds that bound, so a corner
// qubit with two neighbours needs both. MIN_FLIPS=1 gives the pure
// half-rule. ERASER+M (mlr_en=1, multi-level readout): every data qubit next
// to a parity qubit read out as |L> is marked as well, whatever its history.
//
// A "flip" is taken here to be a change of a parity check against the round
// before (a detection event); the block keeps the previous syndrome for this.
// The first syndrome after reset or clear only loads that register. This,
// the MIN_FLIPS bound and the handshake below are this design's choices.
//
// Interface and timing: synd_valid (one cycle) delivers the syndrome and
// the |L> flags of the round just measured; the LTT is loaded at that clock
// edge and plan_valid rises. commit (one cycle, from the schedule generator
// when it takes the plan) loads prev_ltt and putt with the LRCs of the round
// being issued and drops plan_valid. The speculation logic is combinational
// between the syndrome input and the LTT registers. rst_n resets all
// registers asynchronously and also disables the assertions during reset;
// lint may note that double use.
module eraser_lsb
  import eraser_pkg::*;
#(
  parameter int unsigned D         = 11,
  parameter int unsigned MIN_FLIPS = 2,
  localparam int unsigned ND = D * D,
  localparam int unsigned NP = D * D - 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,         // new experiment: forget all history
  input  logic          mlr_en,        // ERASER+M mode
  input  logic          synd_valid,
  input  logic [NP-1:0] syndrome,      // parity checks of the round just measured
  input  logic [NP-1:0] parity_leak,   // parity qubit read out as |L> (ERASER+M)
  input  logic          commit,
  input  logic [ND-1:0] commit_data,   // data qubits given an LRC in the round being issued
  input  logic [NP-1:0] commit_par,    // parity qubits used by those LRCs
  output logic [ND-1:0] ltt,
  output logic [ND-1:0] prev_ltt,
  output logic [NP-1:0] putt,
  output logic          plan_valid
);

  logic [NP-1:0] prev_syn;
  logic          prev_syn_valid;
  logic [NP-1:0] flips;
  logic [ND-1:0] spec_syn, spec_mlr, ltt_next;

  assign flips = prev_syn_valid ? (syndrome ^ prev_syn) : '0;

  // Per data qubit: count flipped neighbours and compare with the threshold.
  for (genvar q = 0; q < ND; q++) begin : g_spec
    localparam int N0 = data_nbr(D, q, 0);
    localparam int N1 = data_nbr(D, q, 1);
    localparam int N2 = data_nbr(D, q, 2);
    localparam int N3 = data_nbr(D, q, 3);
    localparam int NN = data_nbr_count(D, q);
    localparam logic [3:0] HAS = {N3 >= 0, N2 >= 0, N1 >= 0, N0 >= 0};
    localparam int unsigned I0 = (N0 >= 0) ? N0 : 0;
    localparam int unsigned I1 = (N1 >= 0) ? N1 : 0;
    localparam int unsigned I2 = (N2 >= 0) ? N2 : 0;
    localparam int unsigned I3 = (N3 >= 0) ? N3 : 0;

    logic [3:0] nf, nl;
    logic [2:0] cnt;
    assign nf  = HAS & {flips[I3], flips[I2], flips[I1], flips[I0]};
    assign nl  = HAS & {parity_leak[I3], parity_leak[I2], parity_leak[I1], parity_leak[I0]};
    assign cnt = 3'(nf[0]) + 3'(nf[1]) + 3'(nf[2]) + 3'(nf[3]);
    assign spec_syn[q] = !prev_ltt[q] && (4'(cnt) * 4'd2 >= 4'(NN))
                         && (32'(cnt) >= MIN_FLIPS);
    assign spec_mlr[q] = mlr_en && (|nl);
  end

  assign ltt_next = spec_syn | spec_mlr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prev_syn       <= '0;
      prev_syn_valid <= 1'b0;
      ltt            <= '0;
      prev_ltt       <= '0;
      putt           <= '0;
      plan_valid     <= 1'b1;   // the first round has an empty plan
    end else if (clear) begin
      prev_syn       <= '0;
      prev_syn_valid <= 1'b0;
      ltt            <= '0;
      prev_ltt       <= '0;
      putt           <= '0;
      plan_valid     <= 1'b1;
    end else begin
      if (synd_valid) begin
        ltt            <= ltt_next;
        prev_syn       <= syndrome;
        prev_syn_valid <= 1'b1;
        plan_valid     <= 1'b1;
      end
      if (commit) begin
        prev_ltt   <= commit_data;
        putt       <= commit_par;
        plan_valid <= 1'b0;
      end
    end
  end

  // A plan is taken only once per syndrome, and a syndrome never arrives in
  // the cycle a plan is taken.
  a_commit_needs_plan: assert property (@(posedge clk) disable iff (!rst_n)
    commit |-> plan_valid);
  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n)
    !(commit && synd_valid));

endmodule
