// aac_selector: activity-aware choice of the number of clusters (AAC) for the
// clustering coreset (decision D3).
//
// How it works: the node predicts the current activity from the last inference it
// completed locally (temporal continuity of human activity). Each completed local
// inference is reported with inf_valid/inf_act and kept in a register. When the node
// considers a clustering coreset, the selector tries the cluster counts 12, 10, 8 and 6 in
// that order and picks the first one that the predicted energy covers (cost[i] <=
// pred_energy) and whose accuracy loss for the predicted activity, read from a lookup
// table, is within max_loss. The default of 12 clusters needs no table entry. A smaller
// count is used only if an activity has been predicted. If no count qualifies, k = 0 and
// the node falls back to importance sampling.
//
// Interface: k and k_cost are combinational functions of pred_energy and of the stored
// state. The table is written through cfg_we/cfg_sel/cfg_act/cfg_kopt/cfg_data, one
// entry per clock:
//   cfg_sel = 0: loss[cfg_act][cfg_kopt] (8 bits, accuracy loss in units of 0.1 %)
//   cfg_sel = 1: cost[cfg_kopt]          (energy of a k-cluster coreset in nJ)
//   cfg_sel = 2: max_loss                (largest accuracy loss accepted)
// Reset values: the cost of 12 clusters is the paper's 17.04 uJ for D3, and the smaller
// counts cost k/12 of it. Every loss entry is 0xFF (never accepted) and max_loss is
// 20 (2.0 %).
// From the paper: the 12-cluster default, dropping to fewer clusters when energy is
// short, the prediction from the previous local inference, and a lookup table of accuracy
// versus cluster count per activity. Its Fig. 10 shows the counts 15, 12, 10, 8 and 6;
// 15 is left out because the paper finds no gain above 12. The table encoding, the cost
// scaling and the reset contents are this design's own choices.
module aac_selector
  import seeker_pkg::*;
#(
  parameter int unsigned P_N_ACT = N_ACT
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // completed local inferences (activity prediction)
  input  logic                        inf_valid,
  input  logic [$clog2(P_N_ACT)-1:0]  inf_act,
  // table configuration
  input  logic                        cfg_we,
  input  logic [1:0]                  cfg_sel,
  input  logic [$clog2(P_N_ACT)-1:0]  cfg_act,
  input  logic [KOPT_W-1:0]           cfg_kopt,
  input  logic [E_W-1:0]              cfg_data,
  // selection
  input  logic [E_W-1:0]              pred_energy,
  output logic [K_W-1:0]              k,
  output logic [E_W-1:0]              k_cost,
  output logic                        act_known,
  output logic [$clog2(P_N_ACT)-1:0]  act_pred
);
  logic [7:0]     loss [P_N_ACT][N_KOPT];
  logic [E_W-1:0] cost [N_KOPT];
  logic [7:0]     max_loss;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act_known <= 1'b0;
      act_pred  <= '0;
      for (int a = 0; a < P_N_ACT; a++)
        for (int i = 0; i < N_KOPT; i++) loss[a][i] <= 8'hFF;
      for (int i = 0; i < N_KOPT; i++)
        cost[i] <= E_W'((E_D3 * kopt_k(KOPT_W'(i))) / K_MAX);
      max_loss <= 8'd20;
    end else begin
      if (inf_valid) begin
        act_known <= 1'b1;
        act_pred  <= inf_act;
      end
      if (cfg_we) begin
        unique case (cfg_sel)
          2'd0:    loss[cfg_act][cfg_kopt] <= cfg_data[7:0];
          2'd1:    cost[cfg_kopt]          <= cfg_data;
          2'd2:    max_loss                <= cfg_data[7:0];
          default: ;
        endcase
      end
    end
  end

  always_comb begin
    k      = '0;
    k_cost = '0;
    for (int i = N_KOPT - 1; i >= 0; i--) begin
      if (cost[i] <= pred_energy &&
          (i == 0 || (act_known && loss[act_pred][i] <= max_loss))) begin
        k      = kopt_k(KOPT_W'(i));
        k_cost = cost[i];
      end
    end
  end

endmodule
