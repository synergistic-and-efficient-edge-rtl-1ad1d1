// tb_bearing_coreset: the two coreset engines at the sizes a bearing-fault workload needs.
//
// Vibration data from a bearing is sampled far faster than body motion, and keeping its
// features takes about 15 to 20 clusters and more importance samples than HAR does. The
// engines take these sizes as parameters. Here they run with a 240-sample window, up to
// 20 clusters and 40 importance samples. The data are synthetic vibration windows: a shaft
// harmonic, periodic decaying impacts from a fault (the impact period varies per window)
// and noise.
// Per window the test checks:
// - clustering with k = 15 and k = 20:
//   - every sample lies inside one of the reported circles;
//   - the counts add up to the window length when no count has saturated;
//   - centres lie inside the window;
//   - the latency is k + passes*(240 + k) + 1 cycles, with at most 5 passes.
// - importance sampling:
//   - exactly 40 samples, in time order and never adjacent;
//   - each value equals the quantised sample at its time;
//   - the most important sample (largest distance from the mean) or a neighbour of it is
//     among them;
//   - it finishes within (3 + 7) * 240 + 10 cycles.
// The testbench plays the window buffer with a combinational read of its own array.
module tb_bearing_coreset;
  import seeker_pkg::*;

  localparam int unsigned BW    = 240;   // window length for the vibration data
  localparam int unsigned BK    = 20;    // largest cluster count
  localparam int unsigned BNPTS = 40;    // importance samples

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic signed [31:0] win [BW];

  // clustering engine
  logic                        km_start, km_busy, km_done;
  logic [$clog2(BK+1)-1:0]     km_k;
  logic [$clog2(BW)-1:0]       km_idx;
  logic signed [31:0]          km_data;
  cluster_t                    km_cl [BK];
  logic [$clog2(KM_ITERS+2)-1:0] km_passes;
  assign km_data = win[km_idx];

  kmeans_coreset #(.P_K_MAX(BK), .P_WIN(BW)) u_km (
    .clk, .rst_n, .start (km_start), .k (km_k), .busy (km_busy), .rd_idx (km_idx),
    .rd_data (km_data), .done (km_done), .clusters (km_cl), .passes (km_passes)
  );

  // importance-sampling engine
  logic                        is_start, is_busy, is_done;
  logic [$clog2(BW)-1:0]       is_idx;
  logic signed [31:0]          is_data;
  point_t                      is_pts [BNPTS];
  logic [$clog2(BNPTS+1)-1:0]  is_n;
  logic [$clog2(IS_ITERS+1)-1:0] is_passes;
  assign is_data = win[is_idx];

  impsamp_coreset #(.P_WIN(BW), .P_NPTS(BNPTS)) u_is (
    .clk, .rst_n, .start (is_start), .busy (is_busy), .rd_idx (is_idx), .rd_data (is_data),
    .done (is_done), .points (is_pts), .n_sel (is_n), .passes (is_passes)
  );

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int q8(int s);
    int v;
    v = s >>> QSHIFT;
    if (v > 127) v = 127;
    if (v < -128) v = -128;
    return v;
  endfunction

  task automatic make_window(int w);
    int period;
    period = 17 + 4 * w;
    for (int i = 0; i < BW; i++) begin
      real x, ph;
      x = 9000.0 * $sin(6.2831853 * 3.0 * i / BW + w);
      ph = (i % period);
      x += 26000.0 * $exp(-ph / 3.0) * $sin(6.2831853 * ph / 5.0);
      x += real'(int'($urandom % 4001) - 2000);
      win[i] = int'(x);
    end
  endtask

  task automatic run_km(int w, int k);
    int cyc, tot;
    bit sat;
    @(negedge clk);
    km_k = ($clog2(BK+1))'(k); km_start = 1;
    @(negedge clk);
    km_start = 0;
    cyc = 1;
    while (!km_done) begin @(negedge clk); cyc++; end
    check(km_passes >= 1 && km_passes <= KM_ITERS + 1, $sformatf("w%0d k%0d: %0d passes", w, k, km_passes));
    check(cyc == k + km_passes * (BW + k) + 1,
          $sformatf("w%0d k%0d: latency %0d, want %0d", w, k, cyc, k + km_passes * (BW + k) + 1));
    tot = 0; sat = 0;
    for (int c = 0; c < k; c++) begin
      check(km_cl[c].c.t < BW, $sformatf("w%0d k%0d: centre %0d at t=%0d", w, k, c, km_cl[c].c.t));
      tot += km_cl[c].n;
      if (km_cl[c].n == 15) sat = 1;
    end
    check(sat ? tot <= BW : tot == BW, $sformatf("w%0d k%0d: counts add to %0d", w, k, tot));
    for (int i = 0; i < BW; i++) begin
      bit covered;
      covered = 0;
      for (int c = 0; c < k; c++) begin
        int dt, dv, r;
        dt = i - int'(km_cl[c].c.t);
        dv = q8(win[i]) - int'(km_cl[c].c.v);
        r  = km_cl[c].r;
        if (dt * dt + dv * dv <= r * r || r == 255) covered = 1;
      end
      check(covered, $sformatf("w%0d k%0d: sample %0d outside every cluster", w, k, i));
    end
  endtask

  task automatic run_is(int w);
    int cyc, last, mean, best, best_s;
    bit hit;
    @(negedge clk);
    is_start = 1;
    @(negedge clk);
    is_start = 0;
    cyc = 1;
    while (!is_done) begin @(negedge clk); cyc++; end
    check(cyc <= (3 + IS_ITERS) * BW + 10, $sformatf("w%0d: sampling took %0d cycles", w, cyc));
    check(is_n == BNPTS, $sformatf("w%0d: %0d samples", w, is_n));
    mean = 0;
    for (int i = 0; i < BW; i++) mean += q8(win[i]);
    mean = mean / int'(BW);
    best = 0; best_s = -1;
    for (int i = 0; i < BW; i++) begin
      int s;
      s = q8(win[i]) - mean;
      if (s < 0) s = -s;
      if (s > best_s) begin best_s = s; best = i; end
    end
    last = -2; hit = 0;
    for (int j = 0; j < int'(is_n); j++) begin
      int t;
      t = is_pts[j].t;
      check(t < BW && t >= last + 2, $sformatf("w%0d: sample %0d at t=%0d after %0d", w, j, t, last));
      if (t < BW) check(int'(is_pts[j].v) == q8(win[t]), $sformatf("w%0d: value at t=%0d", w, t));
      if (t >= best - 1 && t <= best + 1) hit = 1;
      last = t;
    end
    check(hit, $sformatf("w%0d: strongest sample %0d not represented", w, best));
  endtask

  initial begin
    repeat (400_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    km_start = 0; km_k = '0; is_start = 0;
    for (int i = 0; i < BW; i++) win[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int w = 0; w < 6; w++) begin
      make_window(w);
      run_km(w, 15);
      run_km(w, 20);
      run_is(w);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
