// eraser_swap_lut: SWAP Lookup Table.
//
// Holds, for every data qubit, a primary and a backup parity qubit to swap
// with during an LRC. The paper calls these partners "pre-determined" and
// keeps one backup per data qubit; how they are chosen and how the table is
// filled is not given. Here the table is a register array that reset loads
// with a default assignment computed from the lattice (eraser_pkg:
// default_primary / default_backup: distinct primaries for all data qubits
// but one, backup = the first other neighbour). A write port lets the
// control processor replace an entry, for example to avoid a faulty
// qubit. The loadable table is this design's choice.
//
// Interface and timing: all entries are read in parallel (primary, backup)
// for the Dynamic LRC Insertion logic. A write (we, addr, wr_primary,
// wr_backup) takes effect at the next clock edge. Writes to addresses
// outside 0..D*D-1 are ignored. Entries are not checked for adjacency.
module eraser_swap_lut
  import eraser_pkg::*;
#(
  parameter int unsigned D = 11,
  localparam int unsigned ND = D * D,
  localparam int unsigned NP = D * D - 1,
  localparam int unsigned DW = $clog2(ND),
  localparam int unsigned PW = $clog2(NP)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  we,
  input  logic [DW-1:0]         addr,
  input  logic [PW-1:0]         wr_primary,
  input  logic [PW-1:0]         wr_backup,
  output logic [ND-1:0][PW-1:0] primary,
  output logic [ND-1:0][PW-1:0] backup
);

  for (genvar q = 0; q < ND; q++) begin : g_entry
    localparam int unsigned P0 = default_primary(D, q);
    localparam int unsigned B0 = default_backup(D, q);
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        primary[q] <= PW'(P0);
        backup[q]  <= PW'(B0);
      end else if (we && 32'(addr) == q) begin
        primary[q] <= wr_primary;
        backup[q]  <= wr_backup;
      end
    end
  end

endmodule
