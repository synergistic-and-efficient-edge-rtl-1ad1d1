// correlation_engine: the memoisation test of the node (decision D0). It computes the
// Pearson correlation coefficient between the current window and each stored
// ground-truth trace in turn and reports the first activity whose coefficient reaches
// the threshold (0.95 by default).
//
// How it works: for one trace, one multiply-accumulate step per clock streams all
// WIN x N_CH cells (window cell x and trace cell y at the same index) and accumulates
// Sx, Sy, Sxx, Syy and Sxy. A check cycle then evaluates, without division or square root,
//     r >= TH  <=>  num > 0  and  num^2 * 2^32 >= TH_Q16^2 * Dx * Dy,
// with num = n*Sxy - Sx*Sy, Dx = n*Sxx - Sx^2, Dy = n*Syy - Sy^2 and n = WIN*N_CH. A
// constant window or trace (Dx or Dy = 0) never matches.
//
// Interface: a start pulse begins a search over activities 0..N_ACT-1. The engine drives
// the read addresses (rd_idx, rd_ch to the window buffer and, with rd_act, to the trace
// store) and expects both read data in the same cycle. done pulses once, with match and
// match_act valid in that cycle.
// Timing: WIN*N_CH + 1 cycles per trace (181 by default). The search stops at the first
// match, so a full search without a match takes N_ACT*181 = 2172 cycles.
// From the paper: correlation with stored per-activity traces, threshold 0.95, and
// skipping the inference on a match. The streaming schedule, the first-match order, the
// fixed-point arithmetic and the pooling of all three channels into one coefficient are
// this design's own choices.
module correlation_engine
  import seeker_pkg::*;
#(
  parameter int unsigned P_N_ACT  = N_ACT,
  parameter int unsigned P_WIN    = WIN,
  parameter int unsigned P_N_CH   = N_CH,
  parameter int unsigned P_DATA_W = DATA_W,
  parameter int unsigned P_TH_Q16 = CORR_TH_Q16
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  output logic                          busy,
  output logic [$clog2(P_N_ACT)-1:0]    rd_act,
  output logic [$clog2(P_WIN)-1:0]      rd_idx,
  output logic [$clog2(P_N_CH)-1:0]     rd_ch,
  input  logic signed [P_DATA_W-1:0]    win_data,
  input  logic signed [P_DATA_W-1:0]    gt_data,
  output logic                          done,
  output logic                          match,
  output logic [$clog2(P_N_ACT)-1:0]    match_act
);
  localparam int unsigned NS  = P_WIN * P_N_CH;
  localparam int unsigned NW  = $clog2(NS + 1);
  localparam int unsigned SW  = P_DATA_W + NW + 1;        // Sx, Sy
  localparam int unsigned QW  = 2 * P_DATA_W + NW + 1;    // Sxx, Syy, Sxy
  localparam int unsigned MW  = QW + NW + 2;              // num, Dx, Dy
  localparam int unsigned BW  = 2 * MW + 34;              // final comparison
  localparam int unsigned AW  = $clog2(P_N_ACT);
  localparam logic signed [MW-1:0] NSS = MW'(NS);

  typedef enum logic [1:0] {S_IDLE, S_ACC, S_CHECK} state_e;
  state_e state;

  logic signed [SW-1:0] sx, sy;
  logic signed [QW-1:0] sxx, syy, sxy;
  logic [$clog2(P_WIN)-1:0]  idx;
  logic [$clog2(P_N_CH)-1:0] ch;
  logic [AW-1:0]             act;

  assign rd_act = act;
  assign rd_idx = idx;
  assign rd_ch  = ch;
  assign busy   = (state != S_IDLE);

  // ---- threshold test on the accumulated sums --------------------------------------------
  logic signed [MW-1:0] num, dx, dy;
  logic [BW-1:0] lhs, rhs;
  logic          hit;
  always_comb begin
    num = MW'(sxy) * NSS - MW'(sx) * MW'(sy);
    dx  = MW'(sxx) * NSS - MW'(sx) * MW'(sx);
    dy  = MW'(syy) * NSS - MW'(sy) * MW'(sy);
    lhs = (BW'(unsigned'(num)) * BW'(unsigned'(num))) << 32;
    rhs = BW'(P_TH_Q16) * BW'(P_TH_Q16) * BW'(unsigned'(dx)) * BW'(unsigned'(dy));
    hit = (num > 0) && (dx > 0) && (dy > 0) && (lhs >= rhs);
  end

  logic signed [2*P_DATA_W-1:0] pxy, pxx, pyy;
  assign pxy = win_data * gt_data;
  assign pxx = win_data * win_data;
  assign pyy = gt_data * gt_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      {sx, sy, sxx, syy, sxy} <= '0;
      idx       <= '0;
      ch        <= '0;
      act       <= '0;
      done      <= 1'b0;
      match     <= 1'b0;
      match_act <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_ACC;
          act   <= '0;
          idx   <= '0;
          ch    <= '0;
          {sx, sy, sxx, syy, sxy} <= '0;
        end
        S_ACC: begin
          sx  <= sx  + SW'(win_data);
          sy  <= sy  + SW'(gt_data);
          sxx <= sxx + QW'(pxx);
          syy <= syy + QW'(pyy);
          sxy <= sxy + QW'(pxy);
          if (ch == ($clog2(P_N_CH))'(P_N_CH - 1)) begin
            ch <= '0;
            if (idx == ($clog2(P_WIN))'(P_WIN - 1)) begin
              idx   <= '0;
              state <= S_CHECK;
            end else begin
              idx <= idx + 1'b1;
            end
          end else begin
            ch <= ch + 1'b1;
          end
        end
        S_CHECK: begin
          {sx, sy, sxx, syy, sxy} <= '0;
          if (hit || act == AW'(P_N_ACT - 1)) begin
            state     <= S_IDLE;
            done      <= 1'b1;
            match     <= hit;
            match_act <= act;
          end else begin
            act   <= act + 1'b1;
            state <= S_ACC;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
