// eraser_dli: Dynamic LRC Insertion.
//
// Turns the set of speculatively leaked data qubits (the LTT) into LRC
// pairs for the next round. Each LRC needs a unique parity qubit next to
// its data qubit; parity qubits marked in the PUTT (used by an LRC in the
// previous round) are excluded. As in the paper, each leaked data qubit
// looks up its primary partner in the SWAP Lookup Table; if that parity
// qubit is already used it takes its backup ("Use Backup?" in the paper's
// block diagram); if both are used it gets no LRC this round. A taken
// parity qubit is marked used for the data qubits that follow.
//
// The data qubits are served in index order, a priority chain; the paper
// does not say in which order conflicts are resolved, so this order is this
// design's choice, as is dropping (not carrying over) an LTT entry that
// finds no free partner: the speculation is redone from the next syndrome.
//
// Interface and timing: purely combinational. lrc_en/lrc_par give, per data
// qubit, whether it gets an LRC and with which parity qubit; use_backup
// says the backup was taken; par_used marks the parity qubits taken this
// round (what the schedule generator reports back to the PUTT).
module eraser_dli #(
  parameter int unsigned D = 11,
  localparam int unsigned ND = D * D,
  localparam int unsigned NP = D * D - 1,
  localparam int unsigned PW = $clog2(NP)
) (
  input  logic [ND-1:0]         ltt,
  input  logic [NP-1:0]         putt,
  input  logic [ND-1:0][PW-1:0] primary,
  input  logic [ND-1:0][PW-1:0] backup,
  output logic [ND-1:0]         lrc_en,
  output logic [ND-1:0][PW-1:0] lrc_par,
  output logic [ND-1:0]         use_backup,
  output logic [NP-1:0]         par_used
);

  logic [NP-1:0] used;

  always_comb begin
    used       = putt;
    lrc_en     = '0;
    lrc_par    = '0;
    use_backup = '0;
    for (int q = 0; q < ND; q++) begin
      if (ltt[q]) begin
        if (32'(primary[q]) < NP && !used[primary[q]]) begin
          lrc_en[q]        = 1'b1;
          lrc_par[q]       = primary[q];
          used[primary[q]] = 1'b1;
        end else if (32'(backup[q]) < NP && !used[backup[q]]) begin
          lrc_en[q]       = 1'b1;
          lrc_par[q]      = backup[q];
          use_backup[q]   = 1'b1;
          used[backup[q]] = 1'b1;
        end
      end
    end
    par_used = used & ~putt;
  end

endmodule
