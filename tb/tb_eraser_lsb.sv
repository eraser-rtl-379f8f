// tb_eraser_lsb: checks the Leakage Speculation Block against the reference
// rule in tb_lattice_pkg over random rounds. Each round a random plan is
// committed (random data and parity masks, as the schedule generator would
// report them), then a syndrome arrives; the LTT must equal the reference
// speculation computed from the syndrome change, the committed data mask
// (no speculation on a qubit that just had an LRC) and, in ERASER+M rounds,
// the |L> flags of the parity qubits. Also checked: prev_ltt and putt follow
// the commit, plan_valid rises with a syndrome and falls with a commit, the
// first syndrome after clear produces no flips, and a data qubit with
// exactly one flipped neighbour, or two of four, is handled as the rule says.
module tb_eraser_lsb;
  import tb_lattice_pkg::*;

  localparam int unsigned D  = 5;
  localparam int unsigned ND = D * D;
  localparam int unsigned NP = D * D - 1;

  logic clk = 0, rst_n = 0, clear = 0, mlr_en = 0, synd_valid = 0, commit = 0;
  logic [NP-1:0] syndrome = '0, parity_leak = '0, commit_par = '0;
  logic [ND-1:0] commit_data = '0;
  logic [ND-1:0] ltt, prev_ltt;
  logic [NP-1:0] putt;
  logic plan_valid;
  int checks = 0, failures = 0;
  int n_marked = 0, n_gated = 0, n_mlr = 0;

  eraser_lsb #(.D(D)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    lattice lat;
    bit flips[], pl[];
    logic [NP-1:0] prev_s;
    bit have_prev;
    lat = new(D);
    flips = new[NP];
    pl = new[NP];
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(plan_valid && ltt == '0 && putt == '0 && prev_ltt == '0, "reset state");
    have_prev = 0;
    prev_s = '0;
    for (int n = 0; n < 600; n++) begin
      logic [ND-1:0] cd;
      logic [NP-1:0] cp, s;
      // commit a plan
      for (int q = 0; q < int'(ND); q++) cd[q] = ($urandom_range(99) < 20);
      for (int p = 0; p < int'(NP); p++) cp[p] = ($urandom_range(99) < 20);
      commit = 1; commit_data = cd; commit_par = cp;
      @(negedge clk);
      commit = 0;
      check(!plan_valid, "plan_valid falls on commit");
      check(prev_ltt == cd && putt == cp, "prev_ltt/putt loaded on commit");
      // syndrome of the round
      s = prev_s;
      for (int p = 0; p < int'(NP); p++) if ($urandom_range(99) < 30 - n % 25) s[p] = ~s[p];
      mlr_en = (n % 3 == 0);
      for (int p = 0; p < int'(NP); p++) begin
        parity_leak[p] = ($urandom_range(99) < 5);
        pl[p] = parity_leak[p];
        flips[p] = have_prev && (s[p] != prev_s[p]);
      end
      syndrome = s;
      synd_valid = 1;
      @(negedge clk);
      synd_valid = 0;
      check(plan_valid, "plan_valid rises with the syndrome");
      for (int q = 0; q < int'(ND); q++) begin
        bit e, e_nogate;
        e = lat.speculate(q, flips, cd[q], pl, mlr_en, 2);
        e_nogate = lat.speculate(q, flips, 1'b0, pl, 1'b0, 2);
        if (e) n_marked++;
        if (cd[q] && e_nogate && !e) n_gated++;
        if (mlr_en && e && !e_nogate) n_mlr++;
        check(ltt[q] == e, $sformatf("round %0d ltt[%0d] = %0b", n, q, ltt[q]));
      end
      have_prev = 1;
      prev_s = s;
      if (n == 300) begin
        clear = 1;
        @(negedge clk);
        clear = 0;
        check(ltt == '0 && putt == '0 && prev_ltt == '0 && plan_valid, "clear");
        have_prev = 0;
      end
    end

    // Directed: centre data qubit (2,2) of d=5 has four neighbours.
    begin
      int lst[$];
      automatic int q = 2 * D + 2;
      automatic logic [NP-1:0] s;
      mlr_en = 0;
      commit = 1; commit_data = '0; commit_par = '0;
      @(negedge clk);
      commit = 0;
      lat.data_par(q, lst);
      s = prev_s;
      s[lst[0]] = ~s[lst[0]];
      syndrome = s; synd_valid = 1;
      @(negedge clk);
      synd_valid = 0;
      check(!ltt[q], "one flip of four: not leaked");
      commit = 1;
      @(negedge clk);
      commit = 0;
      s[lst[1]] = ~s[lst[1]];
      s[lst[2]] = ~s[lst[2]];
      syndrome = s; synd_valid = 1;
      @(negedge clk);
      synd_valid = 0;
      check(ltt[q], "two flips of four: leaked");
    end
    check(n_marked > 0 && n_gated > 0 && n_mlr > 0, "marking, LRC gating and |L> marking exercised");
    $display("marked=%0d gated=%0d mlr=%0d", n_marked, n_gated, n_mlr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
