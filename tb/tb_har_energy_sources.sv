// tb_har_energy_sources: HAR-style workload for the whole node under three harvested-energy
// profiles, at the default sizes.
//
// The stream imitates a body-worn sensor: 48 windows (60 samples, 3 channels, 30-sample
// hop) in which the activity changes only every four 30-sample blocks. Each
// 30-sample block is either a clean copy of its activity's stored trace or the trace plus
// heavy noise. The testbench models the energy store: every sample brings one harvest
// reading from the active profile, which is added to the store (capped at 60 uJ). Every
// finished window is charged the energy of the decision the node took: D0 8.81, D1 37.5,
// D2 24.85, D3 17.04 x k/12 and D4 16.84 uJ. The store is never allowed below zero. The
// profiles, 16 windows each, are:
//   steady  about 600 nJ per sample (a strong, regular source)
//   bursty  900 nJ in 30 % of the samples, else nothing (RF-like)
//   weak    about 120 nJ per sample
// The AAC table marks activities 0..5 as simple (10 and 8 clusters cost little accuracy)
// and 6..11 as complex (only 12 clusters are acceptable).
// For every window the testbench predicts the decision independently:
// - the correlation in floating point;
// - the predicted energy, from its own moving-average model of the last 8 harvest readings;
// - the AAC rule.
// It compares the prediction with the node's decision, and the node's predicted energy
// with its model. It counts packets and checks their headers, and checks the label of
// every result packet against the true activity. At the end it prints the decision mix of
// each profile. It checks that every profile completes windows, and that the steady
// source completes at least as many inferences on the node as the weak one.
module tb_har_energy_sources;
  import seeker_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                        s_valid;
  logic [N_CH-1:0][DATA_W-1:0] s_data;
  logic                        h_valid;
  logic [15:0]                 h_energy;
  logic [E_W-1:0]              stored_energy;
  logic                        gt_we;
  logic [ACT_W-1:0]            gt_act;
  logic [IDX_W-1:0]            gt_idx;
  logic [CH_W-1:0]             gt_ch;
  logic [DATA_W-1:0]           gt_data;
  logic                        aac_cfg_we;
  logic [1:0]                  aac_cfg_sel;
  logic [ACT_W-1:0]            aac_cfg_act;
  logic [KOPT_W-1:0]           aac_cfg_kopt;
  logic [E_W-1:0]              aac_cfg_data;
  logic                        dnn_req, dnn_sel, dnn_done;
  logic [ACT_W-1:0]            dnn_class;
  logic [IDX_W-1:0]            dnn_rd_idx;
  logic [CH_W-1:0]             dnn_rd_ch;
  logic [DATA_W-1:0]           dnn_rd_data;
  logic                        tx_valid, tx_last, tx_ready;
  logic [7:0]                  tx_data;
  logic                        decision_valid, win_missed;
  decision_e                   decision;
  logic [E_W-1:0]              pred_energy;
  logic [K_W-1:0]              cluster_k;

  seeker_node dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  localparam int N_PROF   = 3;
  localparam int WIN_PER  = 16;                       // windows per profile
  localparam int N_WINS   = N_PROF * WIN_PER;
  localparam int N_SAMP   = WIN + (N_WINS - 1) * 30;  // samples streamed
  localparam int N_BLK    = N_SAMP / 30;
  localparam int GAP      = 4500;                     // clocks per sample
  localparam int E_CAP    = 60000;

  int signed   hist  [N_SAMP][N_CH];
  int signed   trace [N_ACT][WIN][N_CH];
  int          blk_act   [N_BLK];
  bit          blk_noisy [N_BLK];
  int unsigned harvest   [N_SAMP];

  function automatic int signed trace_val(int a, int i, int c);
    return int'(60000.0 * $sin(6.2831853 * (2 * (a + 1)) * i / 60.0 + 0.7 * c + 0.3 * a));
  endfunction

  // ---- reference model -----------------------------------------------------------------------
  int unsigned m_cost [N_KOPT] = '{17040, 14200, 11360, 8520};
  int unsigned m_loss [N_ACT][N_KOPT];
  bit m_known = 0; int m_act = 0;

  function automatic real corr(int n_end, int a);
    real n, sx, sy, sxx, syy, sxy;
    n = WIN * N_CH; sx = 0; sy = 0; sxx = 0; syy = 0; sxy = 0;
    for (int i = 0; i < WIN; i++)
      for (int c = 0; c < N_CH; c++) begin
        real x, y;
        x = hist[n_end - WIN + i][c]; y = trace[a][i][c];
        sx += x; sy += y; sxx += x * x; syy += y * y; sxy += x * y;
      end
    if ((n * sxx - sx * sx) <= 0 || (n * syy - sy * sy) <= 0) return 0.0;
    return (n * sxy - sx * sy) / $sqrt((n * sxx - sx * sx) * (n * syy - sy * sy));
  endfunction

  function automatic int unsigned model_pred(int n_end, int unsigned store);
    longint unsigned s;
    s = 0;
    for (int j = 1; j <= 8; j++) if (n_end - j >= 0) s += harvest[n_end - j];
    return store + 4 * int'(s / 8);
  endfunction

  decision_e exp_dec;
  int        exp_label, exp_k;
  task automatic predict(int n_end, int unsigned pred, int truth);
    exp_dec = D_DROP; exp_label = -1; exp_k = 0;
    for (int a = 0; a < N_ACT; a++)
      if (exp_label < 0 && corr(n_end, a) >= 0.95) exp_label = a;
    if (exp_label >= 0) begin exp_dec = D0_MEMO; return; end
    for (int i = N_KOPT - 1; i >= 0; i--)
      if (m_cost[i] <= pred && (i == 0 || (m_known && m_loss[m_act][i] <= 20)))
        exp_k = int'(kopt_k(KOPT_W'(i)));
    exp_label = truth;
    if (pred >= E_D1)      exp_dec = D1_DNN16;
    else if (pred >= E_D2) exp_dec = D2_DNN12;
    else if (exp_k > 0)    exp_dec = D3_CLUST;
    else if (pred >= E_D4) exp_dec = D4_IMPS;
  endtask

  // ---- behavioural DNN crossbar: reads the window, answers with the newest activity ------------
  int dnn_label = 0;
  always @(posedge clk) begin
    if (rst_n && dnn_req) fork
      begin
        @(negedge clk);
        for (int i = 0; i < WIN; i++) begin
          dnn_rd_idx = IDX_W'(i); dnn_rd_ch = '0;
          @(negedge clk);
        end
        dnn_class = ACT_W'(dnn_label);
        dnn_done  = 1;
        @(negedge clk);
        dnn_done  = 0;
      end
    join_none
  end

  // ---- radio receiver (always ready) ----------------------------------------------------------
  byte unsigned rx [$];
  byte unsigned pkts [$][$];
  assign tx_ready = 1'b1;
  always @(posedge clk) begin
    if (rst_n && tx_valid) begin
      rx.push_back(tx_data);
      if (tx_last) begin pkts.push_back(rx); rx = {}; end
    end
  end

  // ---- statistics per profile -------------------------------------------------------------------
  int n_dec [N_PROF][8];
  int n_right [N_PROF];
  int n_missed = 0;
  always @(posedge clk) if (rst_n && win_missed) n_missed++;

  // ---- watchdog ---------------------------------------------------------------------------------
  initial begin
    repeat (8_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned store;
    s_valid = 0; s_data = '0; h_valid = 0; h_energy = '0; stored_energy = '0;
    gt_we = 0; gt_act = '0; gt_idx = '0; gt_ch = '0; gt_data = '0;
    aac_cfg_we = 0; aac_cfg_sel = '0; aac_cfg_act = '0; aac_cfg_kopt = '0; aac_cfg_data = '0;
    dnn_done = 0; dnn_class = '0; dnn_rd_idx = '0; dnn_rd_ch = '0;
    foreach (n_dec[p, d]) n_dec[p][d] = 0;
    foreach (n_right[p]) n_right[p] = 0;

    // workload generation
    for (int a = 0; a < N_ACT; a++)
      for (int i = 0; i < WIN; i++)
        for (int c = 0; c < N_CH; c++) trace[a][i][c] = trace_val(a, i, c);
    for (int b = 0; b < N_BLK; b++) begin
      blk_act[b]   = (b / 4 * 5 + 3) % N_ACT;     // a new activity every 4 blocks
      blk_noisy[b] = ($urandom % 10) < 6;
    end
    for (int n = 0; n < N_SAMP; n++) begin
      int p;
      p = (n < WIN) ? 0 : ((n - WIN) / 30 + 1) / WIN_PER;
      if (p >= N_PROF) p = N_PROF - 1;
      for (int c = 0; c < N_CH; c++)
        hist[n][c] = trace_val(blk_act[n / 30], n % 60, c) +
                     (blk_noisy[n / 30] ? int'($urandom % 160001) - 80000 : 0);
      case (p)
        0:       harvest[n] = 500 + $urandom % 201;
        1:       harvest[n] = (($urandom % 10) < 3) ? 900 : 0;
        default: harvest[n] = 80 + $urandom % 81;
      endcase
    end
    for (int a = 0; a < N_ACT; a++) begin
      m_loss[a][0] = 0;
      m_loss[a][1] = (a < 6) ? 5 : 40;
      m_loss[a][2] = (a < 6) ? 15 : 80;
      m_loss[a][3] = (a < 6) ? 45 : 120;
    end

    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < N_ACT; a++)
      for (int i = 0; i < WIN; i++)
        for (int c = 0; c < N_CH; c++) begin
          @(negedge clk);
          gt_we = 1; gt_act = ACT_W'(a); gt_idx = IDX_W'(i); gt_ch = CH_W'(c);
          gt_data = trace[a][i][c];
        end
    @(negedge clk); gt_we = 0;
    for (int a = 0; a < N_ACT; a++)
      for (int i = 1; i < N_KOPT; i++) begin
        @(negedge clk);
        aac_cfg_we = 1; aac_cfg_sel = 2'd0; aac_cfg_act = ACT_W'(a); aac_cfg_kopt = KOPT_W'(i);
        aac_cfg_data = m_loss[a][i];
      end
    @(negedge clk); aac_cfg_we = 0;

    store = 20000;
    for (int n = 0; n < N_SAMP; n++) begin
      bit is_win;
      int w, p, truth;
      is_win = (n + 1 >= WIN) && ((n + 1) % 30 == 0);
      w = (n + 1 - WIN) / 30;
      p = w / WIN_PER;
      store += harvest[n];
      if (store > E_CAP) store = E_CAP;
      truth = blk_act[n / 30];
      dnn_label = truth;
      stored_energy = store;
      @(negedge clk);
      s_valid = 1; h_valid = 1; h_energy = 16'(harvest[n]);
      for (int c = 0; c < N_CH; c++) s_data[c] = hist[n][c];
      @(negedge clk);
      s_valid = 0; h_valid = 0;
      if (is_win) begin
        decision_e got;
        int npk, cost;
        @(negedge clk);
        predict(n + 1, model_pred(n + 1, store), truth);
        check(pred_energy == model_pred(n + 1, store),
              $sformatf("w%0d: predicted %0d, model %0d", w, pred_energy, model_pred(n + 1, store)));
        while (!decision_valid) @(posedge clk);
        got = decision;
        @(negedge clk);
        check(got == exp_dec, $sformatf("w%0d: decision %s, model %s", w, got.name(), exp_dec.name()));
        n_dec[p][got]++;
        npk = (got == D3_CLUST || got == D4_IMPS) ? N_CH : (got == D_DROP ? 0 : 1);
        check(pkts.size() == npk, $sformatf("w%0d: %0d packets, want %0d", w, pkts.size(), npk));
        foreach (pkts[i]) begin
          check(pkts[i][0][5:3] == got, $sformatf("w%0d: header %h", w, pkts[i][0]));
          if (got == D3_CLUST) check(pkts[i][1] == exp_k, $sformatf("w%0d: k=%0d want %0d", w, pkts[i][1], exp_k));
          if (npk == 1) begin
            check(pkts[i][1] == exp_label, $sformatf("w%0d: label %0d want %0d", w, pkts[i][1], exp_label));
            if (pkts[i][1] == truth) n_right[p]++;
          end
        end
        pkts = {};
        case (got)
          D0_MEMO:  cost = 8810;
          D1_DNN16: cost = E_D1;
          D2_DNN12: cost = E_D2;
          D3_CLUST: cost = E_D3 * exp_k / K_MAX;
          D4_IMPS:  cost = E_D4;
          default:  cost = 0;
        endcase
        store = (store > cost) ? store - cost : 0;
        if (got == D1_DNN16 || got == D2_DNN12) begin m_known = 1; m_act = truth; end
      end
      repeat (GAP - 2 - (is_win ? 1 : 0)) @(negedge clk);
    end
    repeat (100) @(negedge clk);

    begin
      string nm [N_PROF] = '{"steady", "bursty", "weak"};
      int local_inf [N_PROF];
      for (int p = 0; p < N_PROF; p++) begin
        int done_w;
        done_w = WIN_PER - n_dec[p][D_DROP];
        local_inf[p] = n_dec[p][D0_MEMO] + n_dec[p][D1_DNN16] + n_dec[p][D2_DNN12];
        $display("%-7s D0=%0d D1=%0d D2=%0d D3=%0d D4=%0d drop=%0d | results on the node %0d, correct labels %0d",
                 nm[p], n_dec[p][D0_MEMO], n_dec[p][D1_DNN16], n_dec[p][D2_DNN12], n_dec[p][D3_CLUST],
                 n_dec[p][D4_IMPS], n_dec[p][D_DROP], local_inf[p], n_right[p]);
        check(done_w > 0, $sformatf("profile %s completed no window", nm[p]));
      end
      check(local_inf[0] >= local_inf[2], "steady source finished fewer inferences on the node than the weak one");
      check(n_missed == 0, $sformatf("%0d windows missed at 50 Hz-like pacing", n_missed));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
