// tb_correlation_engine: self-checking test of the memoisation (correlation) engine.
// The testbench plays the window buffer and the trace store (combinational reads from
// its own arrays). For each case it computes the Pearson coefficient against every
// trace in floating point and expects the first trace with r >= 0.95. Cases: a noisy copy
// of a trace, an affine copy, a negated copy, random data, a constant window, mixes
// of trace and noise around the threshold, and full-range 32-bit samples. It also checks
// the search latency: 181 cycles per trace examined.
module tb_correlation_engine;
  import seeker_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              start, busy, done, match;
  logic [ACT_W-1:0]  rd_act, match_act;
  logic [IDX_W-1:0]  rd_idx;
  logic [CH_W-1:0]   rd_ch;
  logic signed [DATA_W-1:0] win_data, gt_data;

  correlation_engine dut (.*);

  int checks = 0, failures = 0;
  int signed win [WIN][N_CH];
  int signed gt  [N_ACT][WIN][N_CH];

  assign win_data = win[rd_idx][rd_ch];
  assign gt_data  = gt[rd_act][rd_idx][rd_ch];

  function automatic real corr(int a);
    real n, sx, sy, sxx, syy, sxy;
    n = WIN * N_CH; sx = 0; sy = 0; sxx = 0; syy = 0; sxy = 0;
    for (int i = 0; i < WIN; i++)
      for (int c = 0; c < N_CH; c++) begin
        real x, y;
        x = win[i][c]; y = gt[a][i][c];
        sx += x; sy += y; sxx += x * x; syy += y * y; sxy += x * y;
      end
    if ((n * sxx - sx * sx) <= 0 || (n * syy - sy * sy) <= 0) return 0.0;
    return (n * sxy - sx * sy) / $sqrt((n * sxx - sx * sx) * (n * syy - sy * sy));
  endfunction

  function automatic int srand(int amp);
    return int'($urandom % (2 * amp + 1)) - amp;
  endfunction

  task automatic run_case(input string name);
    int exp_act; bit exp_match; int cyc; real r;
    exp_match = 0; exp_act = N_ACT - 1;
    for (int a = 0; a < N_ACT; a++) begin
      r = corr(a);
      if (!exp_match && r >= 0.95) begin exp_match = 1; exp_act = a; end
    end
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (match !== exp_match || (exp_match && match_act !== ACT_W'(exp_act))) begin
      failures++;
      $display("FAIL %s: match=%0b act=%0d, expected match=%0b act=%0d", name, match, match_act, exp_match, exp_act);
    end
    checks++;
    if (cyc != (exp_act + 1) * (WIN * N_CH + 1) + 1) begin
      failures++;
      $display("FAIL %s: latency %0d cycles, expected %0d", name, cyc, (exp_act + 1) * (WIN * N_CH + 1) + 1);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0;
    for (int a = 0; a < N_ACT; a++)
      for (int i = 0; i < WIN; i++)
        for (int c = 0; c < N_CH; c++) gt[a][i][c] = srand(1 << 20);
    repeat (3) @(posedge clk);
    rst_n = 1;

    // noisy copy of trace 5
    for (int i = 0; i < WIN; i++) for (int c = 0; c < N_CH; c++) win[i][c] = gt[5][i][c] + srand(1 << 16);
    run_case("noisy copy");
    // affine copy of trace 3
    for (int i = 0; i < WIN; i++) for (int c = 0; c < N_CH; c++) win[i][c] = 2 * gt[3][i][c] + 12345;
    run_case("affine copy");
    // negated trace 7
    for (int i = 0; i < WIN; i++) for (int c = 0; c < N_CH; c++) win[i][c] = -gt[7][i][c];
    run_case("negated");
    // constant window
    for (int i = 0; i < WIN; i++) for (int c = 0; c < N_CH; c++) win[i][c] = 777;
    run_case("constant");
    // random windows
    for (int t = 0; t < 4; t++) begin
      for (int i = 0; i < WIN; i++) for (int c = 0; c < N_CH; c++) win[i][c] = srand(1 << 20);
      run_case("random");
    end
    // trace + noise at amplitudes around the threshold
    for (int t = 0; t < 24; t++) begin
      int a, amp;
      a = t % N_ACT;
      amp = (1 << 18) + t * 12000;
      for (int i = 0; i < WIN; i++) for (int c = 0; c < N_CH; c++) win[i][c] = gt[a][i][c] + srand(amp);
      run_case($sformatf("threshold mix %0d", t));
    end
    // full-range samples
    for (int a = 0; a < N_ACT; a++)
      for (int i = 0; i < WIN; i++)
        for (int c = 0; c < N_CH; c++) gt[a][i][c] = int'($urandom);
    for (int i = 0; i < WIN; i++) for (int c = 0; c < N_CH; c++) win[i][c] = gt[9][i][c] / 2 + srand(1 << 26);
    run_case("full range");
    for (int i = 0; i < WIN; i++) for (int c = 0; c < N_CH; c++) win[i][c] = int'($urandom);
    run_case("full range random");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
