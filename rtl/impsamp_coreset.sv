// impsamp_coreset: importance-sampling coreset engine (decision D4). From the WIN
// samples of one channel of the current window it picks at most P_NPTS points (20 by
// default). Points are picked with a probability that grows with their importance,
// and never next to an already picked point, so that the chosen points spread over the
// window.
//
// How it works:
//  1. Load: the window is read from the data buffer, one sample per clock, quantised to
//     8 bits (seeker_pkg::quant8) and stored; the engine keeps the points, as the paper
//     says this engine needs. Their sum is accumulated on the way.
//  2. Score: the importance of point i is s_i = |v_i - mean|, its distance from the
//     window mean, and a second scan finds the largest importance s_max.
//  3. Select: up to P_ITERS passes over the points (7 by default). Pass p (from 0) uses
//     the level T_p = 2^(E - p), where E = floor(log2(s_max)). Once E - p would drop
//     below 0, and in the last pass, T = 0, which accepts every free point. A point
//     that is not yet picked and has no picked neighbour (i-1, i+1) is picked if
//         s_i + (rnd & (T_p - 1)) >= T_p,
//     with rnd from a 16-bit LFSR. So a point with s_i >= T_p is always picked and a
//     weaker one with probability s_i / T_p. The first pass takes no random bits (rnd = 0),
//     so it picks only the strongest points (s_i >= T_0, at least half of s_max). Weak
//     points picked by chance early in the window can then never use up the budget before
//     a strong point later in the window. Selection stops as soon as P_NPTS points are
//     picked.
//  4. Emit: the picked points are written, in time order, to points[0..n_sel-1] as
//     (t, v) pairs of 2 bytes (40 bytes for 20 points).
// Interface: start begins; the engine drives rd_idx and expects rd_data (a sample of the
// chosen channel) in the same cycle. done pulses once, and points/n_sel are then valid
// until the next start. passes tells how many selection passes were used.
// Timing: WIN (load) + WIN (max) + at most P_ITERS*WIN (select) + WIN (emit) cycles,
// at most 600 cycles for the defaults.
// From the paper: the 20-point coreset, selection by importance with a probability,
// points kept far enough apart, simple add/subtract arithmetic, up to 7 iterations, and
// storing the points. The importance measure, the threshold schedule, the spacing rule
// and the LFSR are this design's own choices.
module impsamp_coreset
  import seeker_pkg::*;
#(
  parameter int unsigned P_WIN    = WIN,
  parameter int unsigned P_NPTS   = IS_POINTS,
  parameter int unsigned P_ITERS  = IS_ITERS,
  parameter int unsigned P_DATA_W = DATA_W,
  parameter logic [15:0] P_SEED   = 16'hACE1
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           start,
  output logic                           busy,
  output logic [$clog2(P_WIN)-1:0]       rd_idx,
  input  logic signed [P_DATA_W-1:0]     rd_data,
  output logic                           done,
  output point_t                         points [P_NPTS],
  output logic [$clog2(P_NPTS+1)-1:0]    n_sel,
  output logic [$clog2(P_ITERS+1)-1:0]   passes
);
  localparam int unsigned IW = $clog2(P_WIN);
  localparam int unsigned NW = $clog2(P_NPTS + 1);
  localparam int unsigned PW = $clog2(P_ITERS + 1);
  localparam int unsigned SW = 8 + IW + 2;

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_MEAN, S_MAX, S_SEL, S_EMIT, S_DONE} state_e;
  state_e state;

  logic signed [7:0]    v   [P_WIN];
  logic [P_WIN-1:0]     sel;
  logic [IW-1:0]        idx;
  logic signed [SW-1:0] sum;
  logic signed [7:0]    mean;
  logic [8:0]           smax;
  logic [3:0]           lvl;      // E - p
  logic                 lvl_zero; // last pass: T = 0
  logic [PW-1:0]        pass;
  logic [NW-1:0]        cnt;
  logic [15:0]          lfsr;

  assign rd_idx = idx;
  assign busy   = (state != S_IDLE) && (state != S_DONE);

  // importance of the point under the scan pointer
  logic [8:0] score;
  always_comb begin
    logic signed [9:0] d;
    d     = 10'(v[idx]) - 10'(mean);
    score = d[9] ? 9'(-d) : 9'(d);
  end

  // floor(log2(x)) of the largest score (0 for x <= 1)
  function automatic logic [3:0] flog2(input logic [8:0] x);
    logic [3:0] r;
    r = '0;
    for (int b = 0; b < 9; b++) if (x[b]) r = 4'(b);
    return r;
  endfunction

  // acceptance test for the current point
  logic [9:0]  T;
  logic        left_free, right_free, accept;
  always_comb begin
    T          = lvl_zero ? 10'd0 : (10'd1 << lvl);
    left_free  = (idx == 0)               ? 1'b1 : !sel[idx - 1'b1];
    right_free = (idx == IW'(P_WIN - 1))  ? 1'b1 : !sel[idx + 1'b1];
    accept     = !sel[idx] && left_free && right_free &&
                 (10'(score) + (10'(lfsr) & ((T - 10'd1) & {10{!lvl_zero && pass != PW'(1)}})) >= T);
  end

  // mean of the loaded window, rounded toward zero
  logic signed [SW-1:0] mean_full;
  assign mean_full = sum / signed'(SW'(P_WIN));   // |mean| <= 128: low 8 bits are used

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      sel      <= '0;
      idx      <= '0;
      sum      <= '0;
      mean     <= '0;
      smax     <= '0;
      lvl      <= '0;
      lvl_zero <= 1'b0;
      pass     <= '0;
      cnt      <= '0;
      n_sel    <= '0;
      passes   <= '0;
      done     <= 1'b0;
      lfsr     <= P_SEED;
      for (int i = 0; i < P_WIN; i++)  v[i] <= '0;
      for (int i = 0; i < P_NPTS; i++) points[i] <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE, S_DONE: if (start) begin
          state <= S_LOAD;
          idx   <= '0;
          sum   <= '0;
          sel   <= '0;
          cnt   <= '0;
          smax  <= '0;
          pass  <= '0;
        end
        S_LOAD: begin
          v[idx] <= quant8(rd_data);
          sum    <= sum + SW'(quant8(rd_data));
          if (idx == IW'(P_WIN - 1)) begin
            idx   <= '0;
            state <= S_MEAN;
          end else idx <= idx + 1'b1;
        end
        S_MEAN: begin
          mean  <= mean_full[7:0];
          state <= S_MAX;
        end
        S_MAX: begin
          if (score > smax) smax <= score;
          if (idx == IW'(P_WIN - 1)) begin
            idx      <= '0;
            state    <= S_SEL;
            lvl      <= flog2((score > smax) ? score : smax);
            lvl_zero <= (P_ITERS == 1);
            pass     <= PW'(1);
          end else idx <= idx + 1'b1;
        end
        S_SEL: begin
          lfsr <= {1'b0, lfsr[15:1]} ^ (lfsr[0] ? 16'hB400 : 16'h0000);
          if (accept) begin
            sel[idx] <= 1'b1;
            cnt      <= cnt + 1'b1;
          end
          if ((accept && cnt == NW'(P_NPTS - 1)) || idx == IW'(P_WIN - 1)) begin
            idx <= '0;
            if ((accept && cnt == NW'(P_NPTS - 1)) || pass == PW'(P_ITERS)) begin
              passes <= pass;
              state  <= S_EMIT;
              cnt    <= '0;
            end else begin
              pass     <= pass + 1'b1;
              lvl_zero <= (pass + 1'b1 == PW'(P_ITERS)) || (lvl == 0);
              lvl      <= (lvl == 0) ? 4'd0 : lvl - 1'b1;
            end
          end else idx <= idx + 1'b1;
        end
        S_EMIT: begin
          if (sel[idx]) begin
            points[cnt].t <= 8'(idx);
            points[cnt].v <= v[idx];
            cnt           <= cnt + 1'b1;
          end
          if (idx == IW'(P_WIN - 1)) begin
            n_sel <= cnt + NW'(sel[idx]);
            done  <= 1'b1;
            state <= S_DONE;
          end else idx <= idx + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
