// tb_eraser_qsg: checks the QEC Schedule Generator at d=3.
//
// The testbench plays the rest of the controller: it offers random LRC plans
// (random data qubits, each with a distinct adjacent parity qubit), delays
// some of them to force stalls, throttles layer_ready, toggles ERASER+M and
// answers the measurement wait with random |L> flags. Every accepted layer
// is compared with a reference schedule built from tb_lattice_pkg: H on X
// checks, the four stabilizer CNOT layers in TL,TR,BL,BR (X) or TL,BL,TR,BR
// (Z) order with no data qubit used twice in a layer, the SWAP and
// measurement layers of the LRC pairs, and squashed second SWAPs. In a first
// phase with no back-pressure the round length is checked: 8 cycles without
// LRC (7 layers + the plan cycle), 13 with LRCs.
module tb_eraser_qsg;
  import tb_lattice_pkg::*;
  import eraser_pkg::*;

  localparam int unsigned D  = 3;
  localparam int unsigned ND = D * D;
  localparam int unsigned NP = D * D - 1;
  localparam int unsigned DW = $clog2(ND);
  localparam int unsigned PW = $clog2(NP);

  logic clk = 0, rst_n = 0, run = 0, mlr_en = 0;
  logic plan_valid = 0;
  logic [ND-1:0] plan_en = '0;
  logic [ND-1:0][PW-1:0] plan_par = '0;
  logic commit, stall, layer_valid, round_done, waiting_meas;
  logic [ND-1:0] commit_data;
  logic [NP-1:0] commit_par;
  logic meas_valid = 0;
  logic [ND-1:0] data_leak = '0;
  logic layer_ready = 0;
  logic [3:0] layer_idx;
  qop_e [NP-1:0] par_op;
  logic [NP-1:0][DW-1:0] par_partner;
  qop_e [ND-1:0] data_op;

  int checks = 0, failures = 0;
  int n_stall = 0, n_lrc_rounds = 0, n_plain_rounds = 0, n_squash = 0, n_wait = 0, n_hold = 0;

  eraser_qsg #(.D(D)) dut (.*);

  always #5 clk = ~clk;

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
  int  cur_partner[];     // parity -> data of the committed plan, -1 if none
  bit  cur_lrc_data[];
  bit  cur_squash[];

  task automatic new_plan(int density);
    bit used[];
    int lst[$];
    used = new[NP];
    plan_en = '0;
    plan_par = '0;
    for (int q = 0; q < int'(ND); q++)
      if ($urandom_range(99) < density) begin
        lat.data_par(q, lst);
        lst.shuffle();
        foreach (lst[k])
          if (!used[lst[k]]) begin
            used[lst[k]] = 1;
            plan_en[q] = 1;
            plan_par[q] = PW'(lst[k]);
            break;
          end
      end
  endtask

  // Check the layer being accepted in this cycle.
  task automatic check_layer();
    int l = int'(layer_idx);
    bit touched[];
    touched = new[ND];
    for (int p = 0; p < int'(NP); p++) begin
      qop_e eop = OP_IDLE;
      int epart = -1;
      bit x = lat.is_x(p);
      if (l == 0 || l == 5) eop = x ? OP_H : OP_IDLE;
      else if (l >= 1 && l <= 4) begin
        int k = l - 1;
        int ck, r, c;
        ck = x ? k : (k == 1 ? 2 : (k == 2 ? 1 : k));
        r = lat.pi[p] - 1 + ck / 2;
        c = lat.pj[p] - 1 + ck % 2;
        if (r >= 0 && c >= 0 && r < int'(D) && c < int'(D)) begin
          eop = x ? OP_CX_PC : OP_CX_DC;
          epart = r * D + c;
        end
      end else if (cur_partner[p] >= 0) begin
        epart = cur_partner[p];
        case (l)
          6, 8: eop = OP_CX_PC;
          7:    eop = OP_CX_DC;
          9:    begin eop = OP_IDLE; epart = -1; end
          10:   eop = cur_squash[p] ? OP_R : OP_CX_PC;
          11:   begin eop = cur_squash[p] ? OP_IDLE : OP_CX_DC; if (cur_squash[p]) epart = -1; end
          default: ;
        endcase
      end else if (l == 9) eop = OP_MR;
      check(par_op[p] == eop, $sformatf("layer %0d parity %0d op %0d expected %0d", l, p, par_op[p], eop));
      if (epart >= 0) begin
        check(int'(par_partner[p]) == epart, $sformatf("layer %0d parity %0d partner", l, p));
        if (eop inside {OP_CX_PC, OP_CX_DC}) begin
          check(!touched[epart], $sformatf("layer %0d data %0d used once", l, epart));
          touched[epart] = 1;
        end
      end
    end
    for (int q = 0; q < int'(ND); q++)
      check(data_op[q] == ((l == 9 && cur_lrc_data[q]) ? OP_MR : OP_IDLE), "data op");
  endtask

  initial begin
    int phase;
    int round_start, seq_expect;
    int plan_delay;
    int meas_delay;
    bit pending_plan;
    bit round_has_lrc;
    bit stalled_this_round;
    bit took_plan;
    lat = new(D);
    cur_partner = new[NP];
    cur_lrc_data = new[ND];
    cur_squash = new[NP];
    foreach (cur_partner[p]) cur_partner[p] = -1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    new_plan(0);
    plan_valid = 1;
    run = 1;
    pending_plan = 0;
    took_plan = 0;
    plan_delay = 0;
    meas_delay = -1;
    round_start = -1;
    seq_expect = 0;
    stalled_this_round = 0;
    for (int cyc = 0; cyc < 6000; cyc++) begin
      phase = (cyc < 1500) ? 0 : 1;
      @(negedge clk);
      // drive
      layer_ready = (phase == 0) ? 1'b1 : ($urandom_range(99) < 75);
      if (took_plan) begin
        // the plan was taken at the last clock edge
        plan_valid = 0;
        pending_plan = 1;
        plan_delay = (phase == 0) ? 0 : ($urandom_range(99) < 30 ? $urandom_range(3, 12) : 0);
        if (phase == 1) mlr_en = ($urandom_range(1) == 1);
        took_plan = 0;
      end else if (pending_plan) begin
        if (plan_delay == 0) begin
          new_plan(30);
          plan_valid = 1;
          pending_plan = 0;
        end else plan_delay--;
      end
      meas_valid = 0;
      if (waiting_meas) begin
        if (meas_delay < 0) meas_delay = $urandom_range(4);
        else if (meas_delay == 0) begin
          meas_valid = 1;
          for (int q = 0; q < int'(ND); q++) data_leak[q] = ($urandom_range(1) == 1);
          for (int p = 0; p < int'(NP); p++)
            cur_squash[p] = (cur_partner[p] >= 0) && data_leak[cur_partner[p]];
          meas_delay = -1;
          n_wait++;
        end else meas_delay--;
      end
      #1;
      // observe
      if (round_start < 0 && layer_valid && layer_idx == 0) begin
        round_start = cyc;
        stalled_this_round = 0;
      end
      if (layer_valid && !layer_ready) n_hold++;
      if (stall) begin
        n_stall++;
        stalled_this_round = 1;
        check(!layer_valid, "no layer offered during a stall");
      end
      if (commit) begin
        check(commit_data == plan_en, "commit_data is the plan");
        for (int p = 0; p < int'(NP); p++) begin
          cur_partner[p] = -1;
          cur_squash[p] = 0;
        end
        for (int q = 0; q < int'(ND); q++) begin
          cur_lrc_data[q] = plan_en[q];
          if (plan_en[q]) cur_partner[plan_par[q]] = q;
        end
        for (int p = 0; p < int'(NP); p++)
          check(commit_par[p] == (cur_partner[p] >= 0), "commit_par marks the used parity qubits");
        round_has_lrc = |plan_en;
        took_plan = 1;
      end
      if (layer_valid && layer_ready) begin
        check(int'(layer_idx) == seq_expect, $sformatf("layer order: got %0d expected %0d", layer_idx, seq_expect));
        check_layer();
        foreach (cur_squash[p]) if (int'(layer_idx) == 10 && cur_squash[p]) n_squash++;
        // next expected layer
        case (int'(layer_idx))
          5: seq_expect = round_has_lrc ? 6 : 9;
          8: seq_expect = 9;
          9: seq_expect = round_has_lrc ? 10 : 0;
          11: seq_expect = 0;
          default: seq_expect = int'(layer_idx) + 1;
        endcase
        // layer 5 precedes the plan: the next layer depends on the plan to come
        if (int'(layer_idx) == 5) seq_expect = -1;
      end
      if (seq_expect == -1 && commit) seq_expect = round_has_lrc ? 6 : 9;
      if (round_done) begin
        if (round_has_lrc) n_lrc_rounds++; else n_plain_rounds++;
        if (phase == 0 && !stalled_this_round && !mlr_en)
          check(cyc - round_start + 1 == (round_has_lrc ? 13 : 8),
                $sformatf("round length %0d (lrc=%0b)", cyc - round_start + 1, round_has_lrc));
        round_start = -1;
      end
    end
    check(n_stall > 0 && n_squash > 0 && n_wait > 0 && n_lrc_rounds > 0 && n_plain_rounds > 0 && n_hold > 0,
          "stall, squash, |L> wait, LRC and plain rounds, back-pressure exercised");
    $display("stalls=%0d squashed=%0d waits=%0d lrc_rounds=%0d plain_rounds=%0d holds=%0d",
             n_stall, n_squash, n_wait, n_lrc_rounds, n_plain_rounds, n_hold);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
