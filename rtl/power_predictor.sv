// power_predictor: moving-average power predictor of the node. It estimates the energy
// the node can spend on the current window as the energy now in storage plus the expected
// harvest income over the next P_HORIZON harvest periods:
//     pred_energy = stored_energy + P_HORIZON * mean(last P_LEN harvest samples).
//
// Interface: each harvest period the harvester side presents h_valid with h_energy, the
// energy (nJ) harvested in that period. stored_energy is the energy (nJ) currently in
// the storage capacitor, as read by the node's supply monitor. pred_energy is registered
// and saturates at the top of its range.
// Timing: the moving sum is updated one cycle after h_valid, and pred_energy one cycle
// after any change of its inputs. Until P_LEN samples have been seen, the missing samples
// count as zero.
// The paper specifies a simple moving-average power predictor, taken from earlier work.
// The window length (8), the horizon (4 periods) and the energy units are this
// design's own choices, since the paper does not give them.
module power_predictor
  import seeker_pkg::*;
#(
  parameter int unsigned P_LEN     = 8,   // moving-average length, power of two
  parameter int unsigned P_HORIZON = 4,   // harvest periods a task is expected to span
  parameter int unsigned P_H_W     = 16   // width of one harvest sample (nJ per period)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              h_valid,
  input  logic [P_H_W-1:0]  h_energy,
  input  logic [E_W-1:0]    stored_energy,
  output logic [E_W-1:0]    pred_energy,
  output logic [P_H_W-1:0]  avg_income
);
  localparam int unsigned LW = $clog2(P_LEN);
  localparam int unsigned SW = P_H_W + LW;

  logic [P_H_W-1:0] hist [P_LEN];
  logic [LW-1:0]    ptr;
  logic [SW-1:0]    sum;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < P_LEN; i++) hist[i] <= '0;
      ptr <= '0;
      sum <= '0;
    end else if (h_valid) begin
      hist[ptr] <= h_energy;
      sum       <= sum - SW'(hist[ptr]) + SW'(h_energy);
      ptr       <= ptr + 1'b1;
    end
  end

  assign avg_income = P_H_W'(sum >> LW);

  logic [E_W:0] est;
  always_comb begin
    est = (E_W+1)'(stored_energy) + (E_W+1)'(avg_income) * (E_W+1)'(P_HORIZON);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pred_energy <= '0;
    else        pred_energy <= est[E_W] ? '1 : est[E_W-1:0];
  end

  initial assert ((1 << LW) == P_LEN) else $error("P_LEN must be a power of two");

endmodule
