// tb_kmeans_coreset: self-checking test of the clustering coreset engine.
// The testbench plays the window buffer (combinational read of its own sample array) and
// runs windows of several shapes (step levels with noise, a sine, random data, a constant)
// with k = 12, 10, 8, 6 and 3. A behavioural k-means written here, with the same
// initialisation, tie rule and rounding, gives the expected coreset. The test compares
// every centre, radius and count, and checks that
//  - every point lies within the radius of its nearest centre,
//  - the unsaturated counts add up to the window length,
//  - at most 5 passes (4 updates + 1 measuring pass) are made,
//  - the latency is k + passes*(60 + k) + 1 cycles.
module tb_kmeans_coreset;
  import seeker_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                     start, busy, done;
  logic [K_W-1:0]           k;
  logic [IDX_W-1:0]         rd_idx;
  logic signed [DATA_W-1:0] rd_data;
  cluster_t                 clusters [K_MAX];
  logic [2:0]               passes;

  kmeans_coreset dut (.*);

  int checks = 0, failures = 0;
  int signed x [WIN];
  assign rd_data = x[rd_idx];

  function automatic int q(int s);
    int v;
    v = s >>> QSHIFT;
    if (v > 127) v = 127;
    if (v < -128) v = -128;
    return v;
  endfunction

  function automatic int csqrt(int d);
    int r = 0;
    while (r * r < d) r++;
    return r;
  endfunction

  function automatic int rdiv(int s, int n);   // rounded, symmetric about 0
    if (s < 0) return -((-s + n / 2) / n);
    return (s + n / 2) / n;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(input int kk, input string name);
    int ct[K_MAX], cv[K_MAX], st[K_MAX], sv[K_MAX], cnt[K_MAX], dm[K_MAX];
    int rt[K_MAX], rv[K_MAX], rr[K_MAX], rn[K_MAX];
    int it, npass, cyc, total;
    bit measure, moved;
    // reference model
    for (int j = 0; j < kk; j++) begin
      ct[j] = ((2 * j + 1) * WIN) / (2 * kk);
      cv[j] = q(x[ct[j]]);
    end
    it = 0; npass = 0; measure = 0;
    forever begin
      for (int j = 0; j < kk; j++) begin st[j] = 0; sv[j] = 0; cnt[j] = 0; dm[j] = 0; end
      for (int i = 0; i < WIN; i++) begin
        int b, bd;
        b = 0; bd = 1 << 30;
        for (int j = 0; j < kk; j++) begin
          int d;
          d = (i - ct[j]) * (i - ct[j]) + (q(x[i]) - cv[j]) * (q(x[i]) - cv[j]);
          if (d < bd) begin bd = d; b = j; end
        end
        st[b] += i; sv[b] += q(x[i]); cnt[b]++;
        if (bd > dm[b]) dm[b] = bd;
      end
      npass++;
      moved = 0;
      for (int j = 0; j < kk; j++) begin
        rt[j] = ct[j]; rv[j] = cv[j];
        rr[j] = csqrt(dm[j]); if (rr[j] > 255) rr[j] = 255;
        rn[j] = cnt[j] > 15 ? 15 : cnt[j];
      end
      if (measure) break;
      for (int j = 0; j < kk; j++) if (cnt[j] > 0) begin
        int nt, nv;
        nt = (st[j] + cnt[j] / 2) / cnt[j];
        nv = rdiv(sv[j], cnt[j]);
        if (nt != ct[j] || nv != cv[j]) moved = 1;
        ct[j] = nt; cv[j] = nv;
      end
      if (!moved) break;
      if (it == KM_ITERS - 1) measure = 1;
      it++;
    end
    // run the engine
    @(negedge clk);
    k = K_W'(kk); start = 1;
    @(negedge clk);
    start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    check(int'(passes) == npass, $sformatf("%s k=%0d: passes %0d want %0d", name, kk, passes, npass));
    check(npass <= KM_ITERS + 1, $sformatf("%s: %0d passes", name, npass));
    check(cyc == kk + npass * (WIN + kk) + 1,
          $sformatf("%s k=%0d: latency %0d want %0d", name, kk, cyc, kk + npass * (WIN + kk) + 1));
    total = 0;
    for (int j = 0; j < kk; j++) begin
      check(int'(clusters[j].c.t) == rt[j] && int'(clusters[j].c.v) == rv[j] &&
            int'(clusters[j].r) == rr[j] && int'(clusters[j].n) == rn[j],
            $sformatf("%s k=%0d cluster %0d: (%0d,%0d) r=%0d n=%0d want (%0d,%0d) r=%0d n=%0d",
                      name, kk, j, clusters[j].c.t, clusters[j].c.v, clusters[j].r, clusters[j].n,
                      rt[j], rv[j], rr[j], rn[j]));
      total += cnt[j];
    end
    check(total == WIN, "counts do not add up");
    // every point is inside the circle of its nearest reported centre
    for (int i = 0; i < WIN; i++) begin
      int b, bd;
      b = 0; bd = 1 << 30;
      for (int j = 0; j < kk; j++) begin
        int d;
        d = (i - int'(clusters[j].c.t)) ** 2 + (q(x[i]) - int'(clusters[j].c.v)) ** 2;
        if (d < bd) begin bd = d; b = j; end
      end
      if (npass > 0 && int'(clusters[b].r) < 255)
        check(bd <= int'(clusters[b].r) ** 2 || moved,
              $sformatf("%s: point %0d outside radius", name, i));
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ks[5] = '{12, 10, 8, 6, 3};
    start = 0; k = '0;
    for (int i = 0; i < WIN; i++) x[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (ks[n]) begin
      // step levels with noise
      for (int i = 0; i < WIN; i++) x[i] = ((i / 10) % 3 - 1) * 20000 + int'($urandom % 2000) - 1000;
      run(ks[n], "steps");
      // sine
      for (int i = 0; i < WIN; i++) x[i] = int'(25000.0 * $sin(6.2831853 * i / 20.0));
      run(ks[n], "sine");
      // random
      for (int i = 0; i < WIN; i++) x[i] = int'($urandom % 65536) - 32768;
      run(ks[n], "random");
    end
    for (int i = 0; i < WIN; i++) x[i] = 5000;
    run(12, "constant");
    for (int i = 0; i < WIN; i++) x[i] = (i < 30) ? 32'sh7FFF_FFFF : -32'sh7FFF_FFFF;
    run(12, "saturating");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
