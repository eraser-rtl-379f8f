// tb_lattice_pkg: reference model of the rotated surface-code lattice for
// the testbenches, written independently of eraser_pkg.
//
// A plaquette position (i,j), 0 <= i,j <= d, is kept when all four of its
// corner data qubits exist, or when it has exactly two corners and sits on
// the top/bottom edge with i+j even or on the left/right edge with i+j odd.
// Kept plaquettes are numbered in row-major order. Data qubit (r,c) has
// index r*d+c. The class also holds the reference speculation rule used to
// check the RTL.
package tb_lattice_pkg;

  class lattice;
    int d, nd, np;
    int pi[$], pj[$];
    int pos2par[int];

    function new(int dd);
      d  = dd;
      nd = d * d;
      for (int i = 0; i <= d; i++)
        for (int j = 0; j <= d; j++) begin
          int corners = 0;
          bit keep;
          for (int a = i - 1; a <= i; a++)
            for (int b = j - 1; b <= j; b++)
              if (a >= 0 && b >= 0 && a < d && b < d) corners++;
          if (corners == 4) keep = 1;
          else if (corners == 2 && (i == 0 || i == d)) keep = ((i + j) % 2 == 0);
          else if (corners == 2) keep = ((i + j) % 2 == 1);
          else keep = 0;
          if (keep) begin
            pos2par[i * 1000 + j] = pi.size();
            pi.push_back(i);
            pj.push_back(j);
          end
        end
      np = pi.size();
    endfunction

    function int par_at(int i, int j);
      if (pos2par.exists(i * 1000 + j)) return pos2par[i * 1000 + j];
      return -1;
    endfunction

    function bit is_x(int p);
      return ((pi[p] + pj[p]) % 2) == 0;
    endfunction

    // Data qubits touched by parity qubit p.
    function void par_data(int p, ref int lst[$]);
      lst.delete();
      for (int a = pi[p] - 1; a <= pi[p]; a++)
        for (int b = pj[p] - 1; b <= pj[p]; b++)
          if (a >= 0 && b >= 0 && a < d && b < d) lst.push_back(a * d + b);
    endfunction

    // Parity qubits around data qubit q.
    function void data_par(int q, ref int lst[$]);
      int r = q / d, c = q % d;
      lst.delete();
      for (int a = r; a <= r + 1; a++)
        for (int b = c; b <= c + 1; b++)
          if (par_at(a, b) >= 0) lst.push_back(par_at(a, b));
    endfunction

    function bit adjacent(int q, int p);
      int lst[$];
      data_par(q, lst);
      foreach (lst[k]) if (lst[k] == p) return 1;
      return 0;
    endfunction

    // Reference speculation: returns 1 if data qubit q is to be marked.
    function bit speculate(int q, bit flips[], bit had_lrc, bit pleak[], bit mlr, int min_flips);
      int lst[$];
      int cnt = 0;
      bit any_l = 0;
      data_par(q, lst);
      foreach (lst[k]) begin
        if (flips[lst[k]]) cnt++;
        if (pleak[lst[k]]) any_l = 1;
      end
      if (mlr && any_l) return 1;
      return !had_lrc && (2 * cnt >= lst.size()) && (cnt >= min_flips);
    endfunction
  endclass

endpackage
