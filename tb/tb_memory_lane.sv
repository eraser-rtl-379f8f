// tb_memory_lane: one surface-code memory experiment driven through an
// eraser_top of distance D, used by tb_eraser_memory.
//
// The lane runs ROUNDS syndrome-extraction rounds with plain ERASER, clears
// the controller and runs ROUNDS more with ERASER+M (multi-level readout).
// It stands in for the qubits with a simple leakage environment: each round
// every unleaked data qubit leaks with probability LEAK_PPM per million, a
// leaked data qubit flips each of its parity checks with probability 1/2,
// every check also flips with probability NOISE_PPM per million, and an LRC
// on a leaked data qubit removes the leakage (read as |L> in ERASER+M
// rounds). With ERASER+M a parity qubit next to a leaked data qubit is read
// as |L> with probability 1/4. The readout of a round is returned two cycles
// after its measure layer; layer_ready is always high. Running on after
// ROUNDS only to deliver the last readout, the lane stops starting rounds.
//
// Checked every round: the LTT against the reference rule of
// tb_lattice_pkg; every LRC pair adjacent, parity qubits distinct and not
// used in the round before, data qubits marked in the LTT; data qubits
// measured exactly for the LRCs; the ERASER+M reset in place of the second
// SWAP exactly for data qubits read as |L>.
//
// Interface: start (level) begins the run; done rises when it has finished;
// checks, failures, lrcs, leaks and cleaned are the counters of the run.
module tb_memory_lane #(
  parameter int unsigned D         = 3,
  parameter int          ROUNDS    = 30,
  parameter int          LEAK_PPM  = 4000,
  parameter int          NOISE_PPM = 2000
) (
  input  logic clk,
  input  logic start,
  output logic done,
  output int   checks,
  output int   failures,
  output int   lrcs,
  output int   leaks,
  output int   cleaned,
  output int   squashes
);
  import tb_lattice_pkg::*;
  import eraser_pkg::*;

  localparam int unsigned ND = D * D;
  localparam int unsigned NP = D * D - 1;
  localparam int unsigned DW = $clog2(ND);
  localparam int unsigned PW = $clog2(NP);

  logic rst_n = 0, clear = 0, run = 0, mlr_en = 0, meas_valid = 0;
  logic [NP-1:0] syndrome = '0, parity_leak = '0;
  logic [ND-1:0] data_leak = '0;
  logic lut_we = 0;
  logic [DW-1:0] lut_addr = '0;
  logic [PW-1:0] lut_primary = '0, lut_backup = '0;
  logic layer_valid, layer_ready, round_done, stall, commit, waiting_meas;
  logic [3:0] layer_idx;
  qop_e [NP-1:0] par_op;
  logic [NP-1:0][DW-1:0] par_partner;
  qop_e [ND-1:0] data_op;
  logic [ND-1:0] ltt, prev_ltt, plan_backup;
  logic [NP-1:0] putt;

  assign layer_ready = 1'b1;

  eraser_top #(.D(D)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL d=%0d: %s", D, what);
    end
  endtask

  initial begin
    lattice lat;
    bit leak[], flips[], pl[];
    logic [NP-1:0] prev_s, s, putt_c, s_pend, pl_pend;
    logic [ND-1:0] round_lrc, ltt_c, dl;
    bit have_prev, mlr_round, took, pend, chk;
    int rounds, delay, lst[$];

    done = 0; checks = 0; failures = 0; lrcs = 0; leaks = 0; cleaned = 0; squashes = 0;
    lat = new(int'(D));
    leak = new[ND];
    flips = new[NP];
    pl = new[NP];
    mlr_round = 0; took = 0; pend = 0; chk = 0; delay = 0;
    s_pend = '0; pl_pend = '0; dl = '0;
    wait (start);
    @(negedge clk);
    rst_n = 1;
    for (int phase = 0; phase < 2; phase++) begin
      mlr_en = (phase == 1);
      have_prev = 0;
      prev_s = '0;
      round_lrc = '0;
      putt_c = '0;
      ltt_c = '0;
      dl = '0;
      foreach (leak[q]) leak[q] = 0;
      run = 1;
      rounds = 0;
      while (rounds < ROUNDS || pend) begin
        @(negedge clk);
        meas_valid = 0;
        if (pend) begin
          if (delay == 0) begin
            meas_valid = 1;
            syndrome = s_pend;
            parity_leak = pl_pend;
            data_leak = dl;
            for (int p = 0; p < int'(NP); p++) begin
              flips[p] = have_prev && (s_pend[p] != prev_s[p]);
              pl[p] = pl_pend[p];
            end
            pend = 0;
            chk = 1;
          end else delay--;
        end
        #1;
        if (commit) begin
          putt_c = putt;
          ltt_c = ltt;
          took = 1;
        end
        if (layer_valid && int'(layer_idx) == 6) begin
          automatic bit used[] = new[NP];
          automatic int npairs = 0;
          for (int p = 0; p < int'(NP); p++)
            if (par_op[p] == OP_CX_PC) begin
              automatic int q = int'(par_partner[p]);
              npairs++;
              check(lat.adjacent(q, p), "pair adjacent");
              check(!putt_c[p], "parity qubit free of the previous round");
              check(ltt_c[q], "LRC only for a marked data qubit");
              check(!used[p], "parity qubit used once");
              used[p] = 1;
            end
          check(npairs == $countones(round_lrc), "one pair per LRC");
        end
        if (layer_valid && int'(layer_idx) == 9) begin
          for (int q = 0; q < int'(ND); q++)
            check((data_op[q] == OP_MR) == round_lrc[q], "data measured exactly for LRCs");
          // what the qubits would report for this round
          for (int q = 0; q < int'(ND); q++)
            if (!leak[q] && $urandom_range(999999) < LEAK_PPM) begin
              leak[q] = 1;
              leaks++;
            end
          s = prev_s;
          pl_pend = '0;
          for (int p = 0; p < int'(NP); p++) if ($urandom_range(999999) < NOISE_PPM) s[p] = ~s[p];
          for (int q = 0; q < int'(ND); q++)
            if (leak[q]) begin
              lat.data_par(q, lst);
              foreach (lst[k]) begin
                if ($urandom_range(1) == 1) s[lst[k]] = ~s[lst[k]];
                if (mlr_round && $urandom_range(3) == 0) pl_pend[lst[k]] = 1;
              end
            end
          dl = '0;
          for (int q = 0; q < int'(ND); q++)
            if (round_lrc[q]) begin
              if (leak[q]) begin
                cleaned++;
                if (mlr_round) dl[q] = 1;
              end
              leak[q] = 0;
            end
          s_pend = s;
          pend = 1;
          delay = 1;
        end
        if (layer_valid && int'(layer_idx) == 10) begin
          for (int p = 0; p < int'(NP); p++)
            if (par_op[p] == OP_R) begin
              squashes++;
              check(mlr_round && dl[par_partner[p]], "reset only for a data qubit read as |L>");
            end else if (par_op[p] == OP_CX_PC)
              check(!(mlr_round && dl[par_partner[p]]), "second SWAP squashed for |L>");
        end
        if (round_done) begin
          rounds++;
          if (rounds >= ROUNDS) run = 0;
        end
        if (chk) begin
          @(posedge clk);
          #1;
          for (int q = 0; q < int'(ND); q++)
            check(ltt[q] == lat.speculate(q, flips, round_lrc[q], pl, mlr_round, 2),
                  $sformatf("ltt[%0d]=%0b phase %0d round %0d lrc %0b mlr %0b", q, ltt[q], phase, rounds, round_lrc[q], mlr_round));
          have_prev = 1;
          prev_s = syndrome;
          chk = 0;
        end
        if (took) begin
          @(posedge clk);
          #1;
          round_lrc = prev_ltt;
          mlr_round = mlr_en;
          lrcs += $countones(round_lrc);
          took = 0;
        end
      end
      @(negedge clk);
      meas_valid = 0;
      run = 0;
      repeat (30) @(negedge clk);
      clear = 1;
      @(negedge clk);
      clear = 0;
    end
    done = 1;
  end
endmodule
