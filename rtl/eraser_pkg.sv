// eraser_pkg: types, constants and lattice geometry shared by the ERASER
// leakage-suppression controller.
//
// Lattice. A distance-d rotated surface code has d*d data qubits and d*d-1
// parity qubits. Data qubit (r,c), 0 <= r,c < d, has index r*d+c. Parity
// qubits sit on the corners of a (d+1)x(d+1) grid of plaquette positions
// (i,j), 0 <= i,j <= d; plaquette (i,j) touches the data qubits
// (i-1,j-1) TL, (i-1,j) TR, (i,j-1) BL and (i,j) BR that exist. All
// (d-1)^2 interior plaquettes are used; on the top/bottom edges only those
// with (i+j) even, on the left/right edges only those with (i+j) odd, which
// gives (d-1)/2 weight-2 plaquettes per edge and d*d-1 in total. Plaquettes
// with (i+j) even measure X stabilizers, the others Z stabilizers. Parity
// qubits are numbered in row-major order of the plaquettes that are used.
// The paper fixes only the counts (d^2 data, d^2-1 parity qubits) and that
// each data qubit has two, three or four parity neighbours; the coordinates,
// numbering and X/Z colouring here are this design's own choice.
//
// The functions are evaluated while the design is elaborated: every table
// they describe becomes a constant in the netlist.
package eraser_pkg;

  // Operation issued to one qubit in one layer of a syndrome-extraction round.
  // OP_CX_PC: CNOT with the parity qubit as control and its partner data
  // qubit as target. OP_CX_DC: the data qubit controls, the parity qubit is
  // the target. OP_MR: measure and reset. OP_R: reset only.
  typedef enum logic [2:0] {
    OP_IDLE  = 3'd0,
    OP_H     = 3'd1,
    OP_CX_PC = 3'd2,
    OP_CX_DC = 3'd3,
    OP_MR    = 3'd4,
    OP_R     = 3'd5
  } qop_e;

  // Layers of one round. Layers L_S1A..L_S1C (first SWAP, three CNOTs) and
  // L_S2A..L_S2B (second SWAP, two CNOTs, the data qubit being in |0>) are
  // issued only in rounds that contain at least one LRC.
  localparam int unsigned L_H0  = 0;
  localparam int unsigned L_CX0 = 1;   // L_CX0..L_CX0+3: the four stabilizer CNOTs
  localparam int unsigned L_H1  = 5;
  localparam int unsigned L_S1A = 6;
  localparam int unsigned L_S1B = 7;
  localparam int unsigned L_S1C = 8;
  localparam int unsigned L_MR  = 9;
  localparam int unsigned L_S2A = 10;
  localparam int unsigned L_S2B = 11;

  // Corner numbering of a plaquette.
  localparam int unsigned C_TL = 0, C_TR = 1, C_BL = 2, C_BR = 3;

  function automatic bit plaq_valid(int d, int i, int j);
    if (i < 0 || j < 0 || i > d || j > d) return 1'b0;
    if (i >= 1 && i <= d-1 && j >= 1 && j <= d-1) return 1'b1;
    if ((i == 0 || i == d) && j >= 1 && j <= d-1) return ((i + j) % 2) == 0;
    if ((j == 0 || j == d) && i >= 1 && i <= d-1) return ((i + j) % 2) == 1;
    return 1'b0;
  endfunction

  function automatic bit plaq_is_x(int i, int j);
    return ((i + j) % 2) == 0;
  endfunction

  // Index of plaquette (i,j) among the used ones, -1 if it is not used.
  function automatic int plaq_index(int d, int i, int j);
    int n;
    if (!plaq_valid(d, i, j)) return -1;
    n = 0;
    for (int ii = 0; ii <= d; ii++)
      for (int jj = 0; jj <= d; jj++)
        if (plaq_valid(d, ii, jj)) begin
          if (ii == i && jj == j) return n;
          n++;
        end
    return -1;
  endfunction

  // Grid position i*(d+1)+j of parity qubit p.
  function automatic int parity_pos(int d, int p);
    int n;
    n = 0;
    for (int ii = 0; ii <= d; ii++)
      for (int jj = 0; jj <= d; jj++)
        if (plaq_valid(d, ii, jj)) begin
          if (n == p) return ii * (d + 1) + jj;
          n++;
        end
    return -1;
  endfunction

  function automatic bit parity_is_x(int d, int p);
    int pos;
    pos = parity_pos(d, p);
    return plaq_is_x(pos / (d + 1), pos % (d + 1));
  endfunction

  // Data qubit at corner k of parity qubit p, -1 if that corner is empty.
  function automatic int parity_corner(int d, int p, int k);
    int pos, r, c;
    pos = parity_pos(d, p);
    r = pos / (d + 1) - 1 + k / 2;
    c = pos % (d + 1) - 1 + k % 2;
    if (r < 0 || c < 0 || r >= d || c >= d) return -1;
    return r * d + c;
  endfunction

  // Corner of parity qubit p that takes part in stabilizer CNOT layer l
  // (0..3). X checks go TL,TR,BL,BR and Z checks TL,BL,TR,BR, so no data
  // qubit is touched twice in one layer.
  function automatic int cx_corner(bit is_x, int l);
    case (l)
      0:       return int'(C_TL);
      1:       return is_x ? int'(C_TR) : int'(C_BL);
      2:       return is_x ? int'(C_BL) : int'(C_TR);
      default: return int'(C_BR);
    endcase
  endfunction

  // Parity neighbour k (0..3) of data qubit q: the plaquettes of which q is
  // the BR, BL, TR and TL corner. -1 if that plaquette is not used.
  function automatic int data_nbr(int d, int q, int k);
    int r, c;
    r = q / d;
    c = q % d;
    return plaq_index(d, r + k / 2, c + k % 2);
  endfunction

  function automatic int data_nbr_count(int d, int q);
    int n;
    n = 0;
    for (int k = 0; k < 4; k++)
      if (data_nbr(d, q, k) >= 0) n++;
    return n;
  endfunction

  // Default primary SWAP partner. Data qubits in odd columns take a
  // plaquette of the row above them, those in even columns one of the row
  // below, alternating the column offset with the row parity so that all
  // data qubits except (d-1,d-1) get distinct primaries (the Always-LRCs
  // pairing, which can hold only d*d-1 data qubits). (d-1,d-1) shares its
  // primary with another data qubit.
  function automatic int default_primary(int d, int q);
    int r, c, pr, pj;
    r = q / d;
    c = q % d;
    if (c % 2 == 1) begin
      pr = r;
      pj = (r % 2 == 0) ? c + 1 : c;
    end else begin
      pr = r + 1;
      if (pr == d)           pj = c + 1;
      else if (pr % 2 == 0)  pj = c + 1;
      else                   pj = c;
    end
    if (!plaq_valid(d, pr, pj)) begin
      pr = r + 1;            // the one data qubit left over: (d-1,d-1)
      pj = c + 1;
      if (!plaq_valid(d, pr, pj)) begin
        pr = r;
        pj = c;
      end
    end
    return plaq_index(d, pr, pj);
  endfunction

  // Default backup SWAP partner: the first parity neighbour, in the order
  // of data_nbr, that is not the primary.
  function automatic int default_backup(int d, int q);
    int prim, nb;
    prim = default_primary(d, q);
    for (int k = 0; k < 4; k++) begin
      nb = data_nbr(d, q, k);
      if (nb >= 0 && nb != prim) return nb;
    end
    return prim;
  endfunction

endpackage
