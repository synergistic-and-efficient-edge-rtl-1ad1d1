// tb_impsamp_coreset: self-checking test of the importance-sampling coreset engine.
// The testbench plays the window buffer and runs 30 windows (random, sine, spikes,
// constant, saturating). For each it checks properties that hold for any correct
// run:
//  - exactly 20 points are sent (a last pass at level 0 always completes the set),
//  - the points are in time order, no two are adjacent, and each carries the
//    quantised sample at its time,
//  - at most 7 selection passes are made,
//  - the latency stays within load + max + 7 selection passes + emit (3+7 windows).
// It also compares the exact set of points with a reference model that follows the
// same level schedule and the same 16-bit LFSR.
module tb_impsamp_coreset;
  import seeker_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                     start, busy, done;
  logic [IDX_W-1:0]         rd_idx;
  logic signed [DATA_W-1:0] rd_data;
  point_t                   points [IS_POINTS];
  logic [4:0]               n_sel;
  logic [2:0]               passes;

  impsamp_coreset dut (.*);

  int checks = 0, failures = 0;
  int signed x [WIN];
  assign rd_data = x[rd_idx];
  logic [15:0] m_lfsr = 16'hACE1;

  function automatic int q(int s);
    int v;
    v = s >>> QSHIFT;
    if (v > 127) v = 127;
    if (v < -128) v = -128;
    return v;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(input string name);
    int sum, mean, smax, lvl, pass, cnt, selcyc, cyc, last_t;
    int score [WIN];
    bit sel [WIN];
    bit lz, stop;
    // reference
    sum = 0;
    for (int i = 0; i < WIN; i++) begin sum += q(x[i]); sel[i] = 0; end
    mean = sum / int'(WIN);
    smax = 0;
    for (int i = 0; i < WIN; i++) begin
      score[i] = (q(x[i]) > mean) ? q(x[i]) - mean : mean - q(x[i]);
      if (score[i] > smax) smax = score[i];
    end
    lvl = 0;
    for (int b = 0; b < 9; b++) if (smax & (1 << b)) lvl = b;
    lz = (IS_ITERS == 1); pass = 1; cnt = 0; selcyc = 0; stop = 0;
    while (!stop) begin
      for (int i = 0; i < WIN && !stop; i++) begin
        int T, r; bit acc;
        T = lz ? 0 : (1 << lvl);
        r = (lz || pass == 1) ? 0 : (int'(m_lfsr) & (T - 1));
        acc = !sel[i] && (i == 0 || !sel[i-1]) && (i == WIN - 1 || !sel[i+1]) && (score[i] + r >= T);
        m_lfsr = {1'b0, m_lfsr[15:1]} ^ (m_lfsr[0] ? 16'hB400 : 16'h0000);
        selcyc++;
        if (acc) begin sel[i] = 1; cnt++; end
        if (acc && cnt == IS_POINTS) stop = 1;
        else if (i == WIN - 1) begin
          if (pass == IS_ITERS) stop = 1;
          else begin
            lz = (pass + 1 == IS_ITERS) || (lvl == 0);
            lvl = (lvl == 0) ? 0 : lvl - 1;
            pass++;
          end
        end
      end
    end
    // engine
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    check(n_sel == IS_POINTS, $sformatf("%s: %0d points", name, n_sel));
    check(passes <= IS_ITERS && int'(passes) == pass, $sformatf("%s: passes %0d want %0d", name, passes, pass));
    check(cyc <= 3 * WIN + IS_ITERS * WIN + 2, $sformatf("%s: latency %0d", name, cyc));
    check(cyc == 3 * WIN + selcyc + 2, $sformatf("%s: latency %0d want %0d", name, cyc, 3 * WIN + selcyc + 2));
    last_t = -2;
    begin
      int k;
      k = 0;
      for (int i = 0; i < WIN; i++) if (sel[i]) begin
        if (k < int'(n_sel))
          check(int'(points[k].t) == i, $sformatf("%s: point %0d at t=%0d want %0d", name, k, points[k].t, i));
        k++;
      end
    end
    for (int p = 0; p < int'(n_sel); p++) begin
      check(int'(points[p].t) >= last_t + 2, $sformatf("%s: points %0d/%0d too close", name, p - 1, p));
      check(int'(points[p].v) == q(x[points[p].t]), $sformatf("%s: point %0d value", name, p));
      last_t = points[p].t;
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
    start = 0;
    for (int i = 0; i < WIN; i++) x[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      for (int i = 0; i < WIN; i++) x[i] = int'($urandom % 40000) - 20000;
      run("random");
    end
    for (int t = 0; t < 5; t++) begin
      for (int i = 0; i < WIN; i++) x[i] = int'(20000.0 * $sin(6.2831853 * (i + t) / 15.0));
      run("sine");
    end
    for (int t = 0; t < 3; t++) begin
      for (int i = 0; i < WIN; i++) x[i] = (i % 13 == t) ? 30000 : 100;
      run("spikes");
    end
    for (int i = 0; i < WIN; i++) x[i] = 1234;
    run("constant");
    for (int i = 0; i < WIN; i++) x[i] = (i % 2) ? 32'sh7FFF_FFFF : -32'sh7FFF_FFFF;
    run("saturating");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
