// tb_eraser_top: end-to-end test of the ERASER controller at its default
// size (d = 11, no parameter overrides).
//
// The testbench stands in for the qubits and the readout. It keeps a set of
// leaked data qubits: new leakage appears at random each round; a leaked
// data qubit flips each of its parity checks with probability 1/2 (the
// paper's model of a leaked qubit disturbing a check), other checks flip
// rarely (measurement noise); an LRC on a leaked data qubit removes the
// leakage. With ERASER+M on, parity qubits next to a leaked data qubit are
// sometimes read as |L>, and LRC'd data qubits that are leaked are read as
// |L>. The readout of a round reaches the controller after a random delay;
// some delays are long enough to make the next round wait for its plan.
//
// Checked against references computed here: the LTT after every syndrome
// (tb_lattice_pkg speculation rule), the Previous LTT and PUTT after every
// commit, and the issued LRCs: every pair adjacent, parity qubits distinct
// and not in the PUTT of the previous round, data qubits marked in the LTT,
// the data-qubit measurements of the round equal to the LRC set, a reset in
// place of the second SWAP exactly for data qubits read as |L>. Mechanisms
// counted (each must occur): stall, backup partner, round without LRC
// (SWAP layers skipped), round with LRC, ERASER+M marking and squash, a
// leaked qubit found and cleaned, clear, SWAP-table rewrite.
module tb_eraser_top;
  import tb_lattice_pkg::*;
  import eraser_pkg::*;

  localparam int unsigned D  = 11;
  localparam int unsigned ND = D * D;
  localparam int unsigned NP = D * D - 1;
  localparam int unsigned DW = $clog2(ND);
  localparam int unsigned PW = $clog2(NP);
  localparam int ROUNDS = 400;

  logic clk = 0, rst_n = 0, clear = 0, run = 0, mlr_en = 0, meas_valid = 0;
  logic [NP-1:0] syndrome = '0, parity_leak = '0;
  logic [ND-1:0] data_leak = '0;
  logic lut_we = 0;
  logic [DW-1:0] lut_addr = '0;
  logic [PW-1:0] lut_primary = '0, lut_backup = '0;
  logic layer_valid, layer_ready = 1, round_done, stall, commit, waiting_meas;
  logic [3:0] layer_idx;
  qop_e [NP-1:0] par_op;
  logic [NP-1:0][DW-1:0] par_partner;
  qop_e [ND-1:0] data_op;
  logic [ND-1:0] ltt, prev_ltt, plan_backup;
  logic [NP-1:0] putt;

  eraser_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_stall = 0, n_backup = 0, n_plain = 0, n_lrc_rounds = 0, n_mlr_mark = 0;
  int n_squash = 0, n_cleaned = 0, n_clear = 0, n_lut = 0, n_lrcs = 0, n_leaks = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  lattice lat;
  bit leak[];               // data qubits currently leaked (environment)

  initial begin
    logic [NP-1:0] prev_s, s_pend, pl_pend, putt_at_commit;
    logic [ND-1:0] dl_pend, ltt_at_commit, round_lrc;
    bit  have_prev, pend, took, mlr_round;
    int  delay, rounds, lut_q, lut_a, lut_b;
    bit  lut_set, chk_ltt, mlr_at_meas;
    int  lst[$];
    bit  flips[], pl[];

    lat = new(D);
    leak  = new[ND];
    flips = new[NP];
    pl    = new[NP];
    have_prev = 0; pend = 0; took = 0; chk_ltt = 0; mlr_at_meas = 0; rounds = 0; lut_set = 0;
    prev_s = '0; round_lrc = '0; putt_at_commit = '0; ltt_at_commit = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // Rewrite one SWAP-table entry: data qubit (5,5) gets two chosen neighbours.
    lut_q = 5 * D + 5;
    lat.data_par(lut_q, lst);
    lut_a = lst[3];
    lut_b = lst[2];
    lut_we = 1; lut_addr = DW'(lut_q); lut_primary = PW'(lut_a); lut_backup = PW'(lut_b);
    @(negedge clk);
    lut_we = 0;
    lut_set = 1;
    n_lut++;

    run = 1;
    for (int cyc = 0; cyc < 150000 && rounds < ROUNDS; cyc++) begin
      @(negedge clk);
      meas_valid = 0;
      layer_ready = ($urandom_range(99) < 90);
      // deliver a pending readout
      if (pend) begin
        if (delay == 0) begin
          meas_valid  = 1;
          syndrome    = s_pend;
          parity_leak = pl_pend;
          data_leak   = dl_pend;
          pend = 0;
        end else delay--;
      end
      #1;
      if (stall) n_stall++;
      if (commit) begin
        putt_at_commit = putt;
        ltt_at_commit  = ltt;
        n_backup += $countones(plan_backup);
        took = 1;
      end
      if (meas_valid) begin
        // reference speculation for this syndrome
        for (int p = 0; p < int'(NP); p++) begin
          flips[p] = have_prev && (syndrome[p] != prev_s[p]);
          pl[p] = parity_leak[p];
        end
        chk_ltt = 1;
        mlr_at_meas = mlr_en;
      end
      if (layer_valid && layer_ready) begin
        automatic int l = int'(layer_idx);
        if (l == 6) begin
          // first SWAP layer: the LRC pairs
          automatic bit pused[];
          automatic int npairs = 0;
          pused = new[NP];
          for (int p = 0; p < int'(NP); p++)
            if (par_op[p] == OP_CX_PC) begin
              automatic int q = int'(par_partner[p]);
              npairs++;
              check(lat.adjacent(q, p), "LRC pair adjacent");
              check(!putt_at_commit[p], "LRC parity qubit not used in the previous round");
              check(ltt_at_commit[q], "LRC only for a data qubit in the LTT");
              check(!pused[p], "parity qubit used once");
              pused[p] = 1;
              if (lut_set && q == lut_q) check(p == lut_a || p == lut_b, "rewritten SWAP entry used");
            end
          check(npairs == $countones(round_lrc), "one pair per LRC data qubit");
        end
        if (l == 9) begin
          automatic logic [NP-1:0] s;
          // round measured: build the readout the qubits would give
          for (int q = 0; q < int'(ND); q++) begin
            check((data_op[q] == OP_MR) == round_lrc[q], "data measured exactly for LRCs");
            if (!leak[q] && $urandom_range(999) < 6) begin
              leak[q] = 1;
              n_leaks++;
            end
          end
          s = prev_s;
          pl_pend = '0;
          for (int p = 0; p < int'(NP); p++) if ($urandom_range(999) < 3) s[p] = ~s[p];
          for (int q = 0; q < int'(ND); q++)
            if (leak[q]) begin
              lat.data_par(q, lst);
              foreach (lst[k]) begin
                if ($urandom_range(1) == 1) s[lst[k]] = ~s[lst[k]];
                if (mlr_round && $urandom_range(3) == 0) pl_pend[lst[k]] = 1;
              end
            end
          dl_pend = '0;
          for (int q = 0; q < int'(ND); q++)
            if (round_lrc[q]) begin
              if (leak[q]) begin
                n_cleaned++;
                if (mlr_round) dl_pend[q] = 1;
              end
              leak[q] = 0;
            end
          s_pend = s;
          pend = 1;
          delay = ($urandom_range(99) < 12) ? $urandom_range(14, 20) : $urandom_range(0, 2);
        end
        if (l == 10) begin
          for (int p = 0; p < int'(NP); p++)
            if (par_op[p] == OP_R) begin
              n_squash++;
              check(dl_pend[par_partner[p]], "reset instead of SWAP only for |L> data qubit");
            end else if (par_op[p] == OP_CX_PC) begin
              check(!(mlr_round && dl_pend[par_partner[p]]), "|L> data qubit: second SWAP squashed");
            end
        end
      end
      if (round_done) begin
        rounds++;
        if ($countones(round_lrc) > 0) n_lrc_rounds++; else n_plain++;
        // mode switches at round boundaries
        mlr_en = (rounds >= 100 && rounds < 200) || rounds >= 300;
        if (rounds == 250) begin
          // stop, let the readout drain, clear the history, restart
          run = 0;
          while (pend) begin
            @(negedge clk);
            if (delay == 0) begin
              meas_valid = 1; syndrome = s_pend; parity_leak = pl_pend; data_leak = dl_pend; pend = 0;
            end else delay--;
            @(negedge clk);
            meas_valid = 0;
          end
          clear = 1;
          @(negedge clk);
          clear = 0;
          check(ltt == '0 && prev_ltt == '0 && putt == '0, "clear empties the tables");
          have_prev = 0;
          prev_s = '0;
          n_clear++;
          run = 1;
        end
      end
      if (chk_ltt) begin
        @(posedge clk); #1;
        for (int q = 0; q < int'(ND); q++) begin
          automatic bit e = lat.speculate(q, flips, round_lrc[q], pl, mlr_at_meas, 2);
          automatic bit e_syn = lat.speculate(q, flips, round_lrc[q], pl, 1'b0, 2);
          check(ltt[q] == e, $sformatf("ltt[%0d]", q));
          if (mlr_at_meas && e && !e_syn) n_mlr_mark++;
        end
        have_prev = 1;
        prev_s = syndrome;
        chk_ltt = 0;
      end
      if (took) begin
        @(posedge clk); #1;
        round_lrc = prev_ltt;
        mlr_round = mlr_en;
        check((round_lrc & ~ltt_at_commit) == '0, "Previous LTT holds only LTT entries");
        check(putt != '0 || round_lrc == '0, "PUTT marks the LRC parity qubits");
        check($countones(putt) == $countones(round_lrc), "PUTT size equals number of LRCs");
        n_lrcs += $countones(round_lrc);
        took = 0;
      end
    end
    check(rounds == ROUNDS, "all rounds completed");
    check(n_stall > 0, "stall happened");
    check(n_backup > 0, "backup partner used");
    check(n_plain > 0, "round without LRC");
    check(n_lrc_rounds > 0, "round with LRC");
    check(n_mlr_mark > 0, "ERASER+M |L> marking");
    check(n_squash > 0, "ERASER+M squash");
    check(n_cleaned > 0, "leaked qubit cleaned by an LRC");
    check(n_clear > 0 && n_lut > 0, "clear and SWAP-table rewrite");
    $display("rounds=%0d lrc_rounds=%0d plain=%0d lrcs=%0d (%0d.%02d per round) leaks=%0d cleaned=%0d",
             rounds, n_lrc_rounds, n_plain, n_lrcs, n_lrcs / rounds, (100 * n_lrcs / rounds) % 100,
             n_leaks, n_cleaned);
    $display("stall_cycles=%0d backups=%0d mlr_marks=%0d squashed=%0d clears=%0d",
             n_stall, n_backup, n_mlr_mark, n_squash, n_clear);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
