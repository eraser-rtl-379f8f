// tb_eraser_dli: checks Dynamic LRC Insertion against a reference greedy
// allocation. The SWAP table is random (any two different parity
// neighbours per data qubit, from tb_lattice_pkg), as are the LTT and the
// PUTT. Besides exact agreement with the reference it checks the rules the
// paper states: no parity qubit of the PUTT is used, no parity qubit serves
// two data qubits, and every pair is adjacent. A directed case reproduces
// two leaked data qubits with the same primary: the second takes its backup.
module tb_eraser_dli;
  import tb_lattice_pkg::*;

  localparam int unsigned D  = 5;
  localparam int unsigned ND = D * D;
  localparam int unsigned NP = D * D - 1;
  localparam int unsigned PW = $clog2(NP);

  logic [ND-1:0]         ltt;
  logic [NP-1:0]         putt;
  logic [ND-1:0][PW-1:0] primary, backup;
  logic [ND-1:0]         lrc_en, use_backup;
  logic [ND-1:0][PW-1:0] lrc_par;
  logic [NP-1:0]         par_used;
  int checks = 0, failures = 0;
  int n_backup = 0, n_blocked = 0;

  eraser_dli #(.D(D)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare(lattice lat);
    bit used[];
    bit seen[];
    used = new[NP];
    seen = new[NP];
    for (int p = 0; p < int'(NP); p++) used[p] = putt[p];
    #1;
    for (int q = 0; q < int'(ND); q++) begin
      bit en = 0, bk = 0;
      int par = 0;
      if (ltt[q]) begin
        if (!used[primary[q]]) begin
          en = 1; par = int'(primary[q]); used[par] = 1;
        end else if (!used[backup[q]]) begin
          en = 1; bk = 1; par = int'(backup[q]); used[par] = 1;
        end else n_blocked++;
      end
      if (bk) n_backup++;
      check(lrc_en[q] == en, $sformatf("lrc_en[%0d]", q));
      check(use_backup[q] == bk, $sformatf("use_backup[%0d]", q));
      if (en) begin
        check(int'(lrc_par[q]) == par, $sformatf("lrc_par[%0d]", q));
        check(!putt[lrc_par[q]], "PUTT parity qubit not used");
        check(!seen[lrc_par[q]], "parity qubit used once");
        check(lat.adjacent(q, int'(lrc_par[q])), "pair adjacent");
        seen[lrc_par[q]] = 1;
      end
    end
    for (int p = 0; p < int'(NP); p++)
      check(par_used[p] == (used[p] && !putt[p]), $sformatf("par_used[%0d]", p));
  endtask

  initial begin
    lattice lat;
    int lst[$];
    lat = new(D);
    for (int n = 0; n < 400; n++) begin
      for (int q = 0; q < int'(ND); q++) begin
        int a, b;
        lat.data_par(q, lst);
        a = $urandom_range(lst.size() - 1);
        b = (a + 1 + $urandom_range(lst.size() - 2)) % lst.size();
        primary[q] = PW'(lst[a]);
        backup[q]  = PW'(lst[b]);
        ltt[q]     = ($urandom_range(99) < 15 + n % 40);
      end
      for (int p = 0; p < int'(NP); p++) putt[p] = ($urandom_range(99) < 10);
      compare(lat);
    end
    // Directed: data qubits 0 and 1 share primary P; data 1 gets its backup.
    lat.data_par(0, lst);
    ltt = '0; putt = '0;
    for (int q = 0; q < int'(ND); q++) begin
      lat.data_par(q, lst);
      primary[q] = PW'(lst[0]);
      backup[q]  = PW'(lst[lst.size() - 1]);
    end
    begin
      int shared = int'(primary[0]);
      for (int q = 1; q < int'(ND); q++)
        if (lat.adjacent(q, shared) && primary[q] != backup[q]) begin
          primary[q] = PW'(shared);
          ltt[0] = 1; ltt[q] = 1;
          #1;
          check(lrc_en[0] && int'(lrc_par[0]) == shared && !use_backup[0], "first keeps primary");
          check(lrc_en[q] && use_backup[q] && lrc_par[q] == backup[q], "second takes backup");
          break;
        end
    end
    check(n_backup > 0 && n_blocked > 0, "backup and blocked cases exercised");
    $display("backups=%0d blocked=%0d", n_backup, n_blocked);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
