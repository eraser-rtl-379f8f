// eraser_qsg: QEC Schedule Generator.
//
// Issues one syndrome-extraction round after another as a stream of layers.
// A layer gives, for every parity qubit, the operation it performs and the
// data qubit it pairs with (par_op, par_partner) and, for every data qubit,
// whether it is measured and reset (data_op). Two-qubit gates are always
// between a parity qubit and its partner, so data-qubit CNOTs are implied.
//
// A round is (see eraser_pkg for the layer numbers):
//   L_H0        H on X-check parity qubits
//   L_CX0..+3   the four stabilizer CNOTs (X: parity controls, Z: data controls)
//   L_H1        H on X-check parity qubits
//   L_S1A..C    first SWAP of every LRC pair: CX(P->D), CX(D->P), CX(P->D)
//   L_MR        measure+reset: parity qubits without LRC, and the data
//               qubits of LRC pairs in place of their parity qubits
//   L_S2A..B    second SWAP: CX(P->D), CX(D->P) (the data qubit is |0>)
// Rounds without any LRC skip the SWAP layers, so they consist of the plain
// stabilizer circuit. This follows the paper's description and its circuit
// figure (4 CNOTs, then 3+2 extra CNOTs for an LRC, 9 in all); the H layers,
// the CNOT order within a check and the grouping into layers are this
// design's choices.
//
// The LRC plan for a round is needed only at the first SWAP layer, after the
// fourth stabilizer CNOT (the paper's real-time window). The generator takes
// it there (commit) if plan_valid is high, and reports the data and parity
// qubits it uses (commit_data, commit_par) so the LSB can update its
// Previous LTT and PUTT. If the plan is not ready the generator holds the
// round there (stall) until it is.
//
// ERASER+M (mlr_en at commit): in a round with LRCs the generator waits
// after the measure layer for meas_valid and the multi-level readout of the
// data qubits (data_leak). For a pair whose data qubit read |L>, the second
// SWAP is dropped and the parity qubit is reset instead (OP_R in L_S2A).
//
// Handshake: a layer is offered with layer_valid and held stable until
// layer_ready; round_done pulses with the acceptance of a round's last
// layer. run starts rounds and, while high, keeps starting the next one.
// commit_data is plan_en itself (valid in the commit cycle): the plan is
// taken whole, so the data qubits given an LRC are exactly those planned.
// rst_n resets all registers asynchronously and also disables the
// assertion below during reset; lint may note that double use.
module eraser_qsg
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
  input  logic                  run,
  input  logic                  mlr_en,
  // plan from the Dynamic LRC Insertion block
  input  logic                  plan_valid,
  input  logic [ND-1:0]         plan_en,
  input  logic [ND-1:0][PW-1:0] plan_par,
  output logic                  commit,
  output logic [ND-1:0]         commit_data,
  output logic [NP-1:0]         commit_par,
  output logic                  stall,
  // multi-level readout of the round (ERASER+M)
  input  logic                  meas_valid,
  input  logic [ND-1:0]         data_leak,
  // layer stream to the qubit control hardware
  output logic                  layer_valid,
  input  logic                  layer_ready,
  output logic [3:0]            layer_idx,
  output qop_e [NP-1:0]         par_op,
  output logic [NP-1:0][DW-1:0] par_partner,
  output qop_e [ND-1:0]         data_op,
  output logic                  round_done,
  output logic                  waiting_meas
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_WAIT_MEAS} state_e;

  state_e                state;
  logic [3:0]            layer;
  logic                  have_plan, any_lrc, mlr_r;
  logic [NP-1:0]         par_lrc, squash;
  logic [NP-1:0][DW-1:0] lrc_partner;
  logic [ND-1:0]         data_lrc;

  // Parity-side view of the offered plan.
  logic [NP-1:0]         plan_par_lrc;
  logic [NP-1:0][DW-1:0] plan_partner;
  always_comb begin
    plan_par_lrc = '0;
    plan_partner = '0;
    for (int q = 0; q < ND; q++)
      if (plan_en[q] && 32'(plan_par[q]) < NP) begin
        plan_par_lrc[plan_par[q]] = 1'b1;
        plan_partner[plan_par[q]] = DW'(q);
      end
  end

  logic need_plan, fire, last;
  assign need_plan   = (state == S_RUN) && (layer == 4'(L_S1A)) && !have_plan;
  assign layer_valid = (state == S_RUN) && !need_plan;
  assign commit      = need_plan && plan_valid;
  assign stall       = need_plan && !plan_valid;
  assign commit_data = plan_en;
  assign commit_par  = plan_par_lrc;
  assign fire        = layer_valid && layer_ready;
  assign last        = fire && ((layer == 4'(L_S2B)) || (layer == 4'(L_MR) && !any_lrc));
  assign round_done  = last;
  assign layer_idx   = layer;
  assign waiting_meas = (state == S_WAIT_MEAS);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      layer       <= '0;
      have_plan   <= 1'b0;
      any_lrc     <= 1'b0;
      mlr_r       <= 1'b0;
      par_lrc     <= '0;
      squash      <= '0;
      lrc_partner <= '0;
      data_lrc    <= '0;
    end else begin
      case (state)
        S_IDLE: if (run) begin
          state     <= S_RUN;
          layer     <= 4'(L_H0);
          have_plan <= 1'b0;
          squash    <= '0;
        end
        S_RUN: begin
          if (commit) begin
            have_plan   <= 1'b1;
            any_lrc     <= |plan_en;
            mlr_r       <= mlr_en;
            par_lrc     <= plan_par_lrc;
            lrc_partner <= plan_partner;
            data_lrc    <= plan_en;
            if (!(|plan_en)) layer <= 4'(L_MR);
          end
          if (fire) begin
            if (last) begin
              if (run) begin
                layer     <= 4'(L_H0);
                have_plan <= 1'b0;
                squash    <= '0;
              end else begin
                state <= S_IDLE;
              end
            end else if (layer == 4'(L_S1C)) begin
              layer <= 4'(L_MR);
            end else if (layer == 4'(L_MR)) begin
              if (mlr_r) state <= S_WAIT_MEAS;
              else       layer <= 4'(L_S2A);
            end else begin
              layer <= layer + 4'd1;
            end
          end
        end
        S_WAIT_MEAS: if (meas_valid) begin
          for (int p = 0; p < NP; p++)
            squash[p] <= par_lrc[p] && data_leak[lrc_partner[p]];
          layer <= 4'(L_S2A);
          state <= S_RUN;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Operations of the current layer.
  for (genvar p = 0; p < NP; p++) begin : g_par
    localparam bit IS_X = parity_is_x(D, p);
    localparam int Q0 = parity_corner(D, p, cx_corner(IS_X, 0));
    localparam int Q1 = parity_corner(D, p, cx_corner(IS_X, 1));
    localparam int Q2 = parity_corner(D, p, cx_corner(IS_X, 2));
    localparam int Q3 = parity_corner(D, p, cx_corner(IS_X, 3));
    localparam qop_e CXOP = IS_X ? OP_CX_PC : OP_CX_DC;

    always_comb begin
      par_op[p]      = OP_IDLE;
      par_partner[p] = '0;
      unique case (32'(layer))
        L_H0, L_H1: par_op[p] = IS_X ? OP_H : OP_IDLE;
        L_CX0:     if (Q0 >= 0) begin par_op[p] = CXOP; par_partner[p] = DW'(Q0); end
        L_CX0 + 1: if (Q1 >= 0) begin par_op[p] = CXOP; par_partner[p] = DW'(Q1); end
        L_CX0 + 2: if (Q2 >= 0) begin par_op[p] = CXOP; par_partner[p] = DW'(Q2); end
        L_CX0 + 3: if (Q3 >= 0) begin par_op[p] = CXOP; par_partner[p] = DW'(Q3); end
        L_S1A, L_S1C: if (par_lrc[p]) begin
          par_op[p] = OP_CX_PC; par_partner[p] = lrc_partner[p];
        end
        L_S1B: if (par_lrc[p]) begin
          par_op[p] = OP_CX_DC; par_partner[p] = lrc_partner[p];
        end
        L_MR: par_op[p] = par_lrc[p] ? OP_IDLE : OP_MR;
        L_S2A: if (par_lrc[p]) begin
          par_op[p]      = squash[p] ? OP_R : OP_CX_PC;
          par_partner[p] = lrc_partner[p];
        end
        L_S2B: if (par_lrc[p] && !squash[p]) begin
          par_op[p] = OP_CX_DC; par_partner[p] = lrc_partner[p];
        end
        default: ;
      endcase
    end
  end

  for (genvar q = 0; q < ND; q++) begin : g_data
    assign data_op[q] = (32'(layer) == L_MR && data_lrc[q]) ? OP_MR : OP_IDLE;
  end

  a_layer_stable: assert property (@(posedge clk) disable iff (!rst_n)
    layer_valid && !layer_ready |=> layer_valid && $stable(layer));

endmodule
