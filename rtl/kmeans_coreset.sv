// kmeans_coreset: clustering-based, recoverable coreset engine (decision D3). It
// clusters the WIN points of one channel of the current window into k clusters (k <=
// K_MAX = 12) with k-means. Each cluster is reported by its centre, its radius and the
// number of points it holds. The host can then rebuild a window by spreading that many
// points uniformly inside each circle.
//
// Points and distances: a point is (t, v), with t the sample's index in the window (0..59)
// and v the sample quantised to 8 bits (seeker_pkg::quant8). Distances are squared
// Euclidean. The radius is the ceiling of the square root of the largest squared distance
// from the centre to a member, saturated to 8 bits. A cluster is 28 bits (centre 2 bytes,
// radius 1 byte, count 4 bits), so 12 clusters make a 42-byte coreset.
//
// How it works: the engine does not store the points. In each pass it re-reads the window
// from the data buffer, one point per clock. All k distance units work in parallel
// and assign the point to its nearest centre (ties to the lower index). Per cluster the
// engine keeps only the running sums of t and v, the point count and the largest
// squared distance. An update phase then visits one cluster per clock and moves its centre
// to the rounded mean of its members. The engine stops when no centre moves, or after
// P_ITERS updates. In the latter case it makes one more pass that only measures the radii
// and counts for the final centres.
// The initial centres sit at evenly spaced times t_j = (2j+1)*WIN/(2k), with the sample
// value found there.
//
// Interface: start (with k valid) begins; the engine drives rd_idx (the channel is
// selected outside, at the buffer's read port) and expects rd_data from the window buffer in the same cycle. done
// pulses once, and clusters[0..k-1] are then valid and stay valid until the next start.
// Timing: k cycles of set-up, then per pass WIN cycles plus k update cycles. With k = 12,
// that is at most 12 + 5*(60+12) = 372 cycles.
// From the paper: k-means coresets made of centre, radius and a 4-bit point count; the
// parallel processing of all clusters; at most 4 iterations; and storing sums, radii and
// counts instead of the points. Counts of 16 or more are saturated to 15 (the paper never
// saw more than 16 points in a cluster). The point format, the distance measure, the
// initialisation, the convergence test and the final measuring pass are this design's
// own choices.
module kmeans_coreset
  import seeker_pkg::*;
#(
  parameter int unsigned P_K_MAX  = K_MAX,
  parameter int unsigned P_WIN    = WIN,
  parameter int unsigned P_ITERS  = KM_ITERS,
  parameter int unsigned P_DATA_W = DATA_W
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           start,
  input  logic [$clog2(P_K_MAX+1)-1:0]   k,
  output logic                           busy,
  output logic [$clog2(P_WIN)-1:0]       rd_idx,
  input  logic signed [P_DATA_W-1:0]     rd_data,
  output logic                           done,
  output cluster_t                       clusters [P_K_MAX],
  output logic [$clog2(P_ITERS+2)-1:0]   passes
);
  localparam int unsigned KW  = $clog2(P_K_MAX + 1);
  localparam int unsigned JW  = $clog2(P_K_MAX);
  localparam int unsigned IW  = $clog2(P_WIN);
  localparam int unsigned CW  = $clog2(P_WIN + 1);      // member count
  localparam int unsigned STW = IW + CW;                // sum of t
  localparam int unsigned SVW = 8 + CW + 1;             // sum of v (signed)
  localparam int unsigned DW  = 18;                     // squared distance

  typedef enum logic [2:0] {S_IDLE, S_INIT, S_PASS, S_UPD, S_DONE} state_e;
  state_e state;

  logic [KW-1:0]  kk;
  logic [JW-1:0]  j;          // cluster index in INIT / UPD
  logic [IW-1:0]  idx;        // point index in PASS
  logic [$clog2(P_ITERS+2)-1:0] it;
  logic           measure;    // final measuring pass (no update after it)
  logic           moved;

  logic [7:0]                ct [P_K_MAX];
  logic signed [7:0]         cv [P_K_MAX];
  logic [STW-1:0]            st [P_K_MAX];
  logic signed [SVW-1:0]     sv [P_K_MAX];
  logic [CW-1:0]             cnt[P_K_MAX];
  logic [DW-1:0]             dmax[P_K_MAX];

  // ---- read address --------------------------------------------------------------------
  logic [IW-1:0] init_t;
  always_comb init_t = IW'(((2 * int'(j) + 1) * P_WIN) / (2 * ((kk == 0) ? 1 : int'(kk))));
  assign rd_idx = (state == S_INIT) ? init_t : idx;

  logic signed [7:0] pv;
  assign pv = quant8(rd_data);

  // ---- parallel distance units and nearest-centre choice --------------------------------
  logic [DW-1:0] d2 [P_K_MAX];
  logic [JW-1:0] best;
  logic [DW-1:0] best_d;
  always_comb begin
    for (int c = 0; c < P_K_MAX; c++) begin
      logic signed [9:0] dt, dv;
      dt = 10'(signed'({4'b0000, idx})) - 10'(signed'({2'b00, ct[c]}));
      dv = 10'(pv) - 10'(cv[c]);
      d2[c] = DW'(dt * dt) + DW'(dv * dv);
    end
    best   = '0;
    best_d = d2[0];
    for (int c = 1; c < P_K_MAX; c++) begin
      if (KW'(c) < kk && d2[c] < best_d) begin
        best   = JW'(c);
        best_d = d2[c];
      end
    end
  end

  // ---- update datapath for cluster j -----------------------------------------------------
  function automatic logic [8:0] isqrt_ceil(input logic [DW-1:0] x);
    logic [DW-1:0] r, bit_, rem;
    rem  = x;
    r    = '0;
    bit_ = DW'(1) << (DW - 2);
    for (int i = 0; i < DW / 2; i++) begin
      if (rem >= r + bit_) begin
        rem = rem - (r + bit_);
        r   = (r >> 1) + bit_;
      end else begin
        r = r >> 1;
      end
      bit_ = bit_ >> 2;
    end
    if (r * r < x) r = r + 1'b1;
    return r[8:0];
  endfunction

  logic [7:0]        new_t;
  logic signed [7:0] new_v;
  logic [8:0]        rad;
  always_comb begin
    logic [STW-1:0]    half;
    logic [SVW-1:0]    mag;
    mag   = '0;
    half  = STW'(cnt[j] >> 1);
    new_t = ct[j];
    new_v = cv[j];
    if (cnt[j] != 0) begin
      new_t = 8'((st[j] + half) / STW'(cnt[j]));
      if (sv[j] < 0) begin
        mag   = SVW'(-sv[j]);
        new_v = -8'((mag + SVW'(half)) / SVW'(cnt[j]));
      end else begin
        mag   = SVW'(sv[j]);
        new_v = 8'((mag + SVW'(half)) / SVW'(cnt[j]));
      end
    end
    rad = isqrt_ceil(dmax[j]);
  end

  assign busy = (state != S_IDLE) && (state != S_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      kk      <= '0;
      j       <= '0;
      idx     <= '0;
      it      <= '0;
      measure <= 1'b0;
      moved   <= 1'b0;
      done    <= 1'b0;
      passes  <= '0;
      for (int c = 0; c < P_K_MAX; c++) begin
        ct[c] <= '0; cv[c] <= '0; st[c] <= '0; sv[c] <= '0; cnt[c] <= '0; dmax[c] <= '0;
        clusters[c] <= '0;
      end
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE, S_DONE: if (start) begin
          kk      <= (k == 0) ? KW'(1) : (k > KW'(P_K_MAX) ? KW'(P_K_MAX) : k);
          j       <= '0;
          it      <= '0;
          passes  <= '0;
          measure <= 1'b0;
          state   <= S_INIT;
        end
        S_INIT: begin
          ct[j] <= 8'(init_t);
          cv[j] <= pv;
          if (KW'(j) == kk - 1'b1) begin
            state <= S_PASS;
            idx   <= '0;
            for (int c = 0; c < P_K_MAX; c++) begin
              st[c] <= '0; sv[c] <= '0; cnt[c] <= '0; dmax[c] <= '0;
            end
          end else begin
            j <= j + 1'b1;
          end
        end
        S_PASS: begin
          st[best]  <= st[best] + STW'(idx);
          sv[best]  <= sv[best] + SVW'(pv);
          cnt[best] <= cnt[best] + 1'b1;
          if (best_d > dmax[best]) dmax[best] <= best_d;
          if (idx == IW'(P_WIN - 1)) begin
            state  <= S_UPD;
            j      <= '0;
            moved  <= 1'b0;
            passes <= passes + 1'b1;
          end else begin
            idx <= idx + 1'b1;
          end
        end
        S_UPD: begin
          // report this cluster as measured in the pass just made
          clusters[j].c.t <= ct[j];
          clusters[j].c.v <= cv[j];
          clusters[j].r   <= (rad > 9'd255) ? 8'd255 : rad[7:0];
          clusters[j].n   <= (cnt[j] > CW'((1 << CNT_W) - 1)) ? CNT_W'((1 << CNT_W) - 1)
                                                              : CNT_W'(cnt[j]);
          if (!measure) begin
            ct[j] <= new_t;
            cv[j] <= new_v;
          end
          if (!measure && (new_t != ct[j] || new_v != cv[j])) moved <= 1'b1;
          if (KW'(j) == kk - 1'b1) begin
            // last cluster of this update: decide on another pass
            if (measure || !(moved || new_t != ct[j] || new_v != cv[j])) begin
              state <= S_DONE;
              done  <= 1'b1;
            end else begin
              if (it == ($clog2(P_ITERS+2))'(P_ITERS - 1)) measure <= 1'b1;
              it    <= it + 1'b1;
              state <= S_PASS;
              idx   <= '0;
              for (int c = 0; c < P_K_MAX; c++) begin
                st[c] <= '0; sv[c] <= '0; cnt[c] <= '0; dmax[c] <= '0;
              end
            end
          end else begin
            j <= j + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
