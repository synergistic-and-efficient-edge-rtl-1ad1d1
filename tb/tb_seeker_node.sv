// tb_seeker_node: end-to-end test of the sensor node at its default (paper) sizes.
//
// The testbench loads 12 activity traces (sines whose frequency depends on the
// activity, periodic over 30 samples) and an AAC loss table. It then streams 3-channel
// samples in blocks of 30, each block either a clean trace of one activity or a noisy
// one. One sample arrives every 5000 clocks, and every sample also brings a harvest
// reading of 100 nJ. For each window it sets the storage reading so that the window
// exercises one branch of the decision flow:
//   w0 memo (D0), w1 16-bit DNN (D1), w2 12-bit DNN (D2), w3 12-cluster coreset (D3),
//   w4 activity-aware 10-cluster coreset (D3, reduced k), w5 importance sampling (D4, after
//   the table entry that allowed 10 clusters is tightened through the configuration port),
//   w6 drop, w7 memo again.
// A last burst of fast samples makes windows arrive while the node is busy (win_missed).
// Independently of the design, the testbench computes for every window the correlation
// with each trace (floating point), the predicted energy and the AAC choice, and from
// them the expected decision. It parses every packet on the radio stream (random
// back-pressure) and checks the header, the label, the cluster count and payload
// length, the structure of each cluster coreset, and each importance sample against
// the window data. A behavioural DNN crossbar model reads the window through the DNN read
// port, checks what it reads and answers with the label of the newest block.
// Each mechanism (D0, D1, D2, D3, reduced k, D4, drop, missed window, radio stall)
// is counted, and one that never happens counts as a failure.
module tb_seeker_node;
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

  // ---- stimulus data ------------------------------------------------------------------------
  localparam int N_SLOW_BLOCKS = 9;   // blocks 0..8 slow (windows w0..w7)
  localparam int N_BLOCKS      = 13;
  localparam int GAP_SLOW      = 5000;
  localparam int GAP_FAST      = 40;
  int  blk_act   [N_BLOCKS] = '{2, 2, 3, 4, 4, 4, 4, 5, 5, 1, 1, 1, 1};
  bit  blk_noisy [N_BLOCKS] = '{0, 0, 1, 1, 1, 1, 1, 0, 0, 1, 1, 1, 1};
  // stored energy (nJ) per window; prediction adds 4 x 100 nJ of expected income
  int unsigned win_store [8] = '{0, 50000, 30000, 19600, 15000, 16500, 0, 0};

  int signed hist [N_BLOCKS * 30][N_CH];
  int signed trace [N_ACT][WIN][N_CH];

  function automatic int signed trace_val(int a, int i, int c);
    return int'(60000.0 * $sin(6.2831853 * (2 * (a + 1)) * i / 60.0 + 0.7 * c + 0.3 * a));
  endfunction

  function automatic int q8(int s);
    int v;
    v = s >>> QSHIFT;
    if (v > 127) v = 127;
    if (v < -128) v = -128;
    return v;
  endfunction

  // ---- reference model of one window ------------------------------------------------------
  int unsigned m_cost [N_KOPT] = '{17040, 14200, 11360, 8520};
  int unsigned m_loss [N_ACT][N_KOPT];
  int unsigned m_max = 20;
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

  decision_e exp_dec;
  int        exp_label, exp_k, cur_end;

  task automatic predict(int n_end, int unsigned pred);
    exp_dec = D_DROP; exp_label = -1; exp_k = 0;
    for (int a = 0; a < N_ACT; a++)
      if (exp_label < 0 && corr(n_end, a) >= 0.95) exp_label = a;
    if (exp_label >= 0) begin exp_dec = D0_MEMO; return; end
    for (int i = N_KOPT - 1; i >= 0; i--)
      if (m_cost[i] <= pred && (i == 0 || (m_known && m_loss[m_act][i] <= m_max)))
        exp_k = int'(kopt_k(KOPT_W'(i)));
    exp_label = dnn_label;
    if (pred >= E_D1)      exp_dec = D1_DNN16;
    else if (pred >= E_D2) exp_dec = D2_DNN12;
    else if (exp_k > 0)    exp_dec = D3_CLUST;
    else if (pred >= E_D4) exp_dec = D4_IMPS;
  endtask

  // ---- behavioural DNN crossbar -------------------------------------------------------------
  int dnn_read_bad = 0;
  int dnn_label;
  always @(posedge clk) begin
    if (rst_n && dnn_req) fork
      begin
        @(negedge clk);
        for (int i = 0; i < WIN; i++) begin
          dnn_rd_idx = IDX_W'(i); dnn_rd_ch = CH_W'(i % N_CH);
          #1;
          if (int'(dnn_rd_data) != hist[cur_end - WIN + i][i % N_CH]) begin
            if (dnn_read_bad == 0) $display("DNN read %0d: %h want %h", i, dnn_rd_data, hist[cur_end - WIN + i][i % N_CH]);
            dnn_read_bad++;
          end
          @(negedge clk);
        end
        dnn_class = ACT_W'(dnn_label);
        dnn_done  = 1;
        @(negedge clk);
        dnn_done  = 0;
      end
    join_none
  end

  // ---- radio receiver -------------------------------------------------------------------------
  byte unsigned rx [$];
  byte unsigned pkts [$][$];
  int n_stall = 0;
  always @(posedge clk) begin
    if (rst_n && tx_valid && !tx_ready) n_stall++;
    if (rst_n && tx_valid && tx_ready) begin
      rx.push_back(tx_data);
      if (tx_last) begin pkts.push_back(rx); rx = {}; end
    end
  end
  always @(negedge clk) tx_ready <= ($urandom % 3) != 0;

  // ---- mechanism counters -------------------------------------------------------------------
  int n_d0 = 0, n_d1 = 0, n_d2 = 0, n_d3 = 0, n_d3_small = 0, n_d4 = 0, n_drop = 0, n_missed = 0;
  always @(posedge clk) if (win_missed) n_missed++;

  // ---- checking one window's outcome ------------------------------------------------------------
  task automatic check_window(int w);
    int npk;
    decision_e got;
    // wait for the decision
    while (!decision_valid) @(posedge clk);
    got = decision;
    @(negedge clk);
    check(got == exp_dec, $sformatf("w%0d: decision %s want %s", w, got.name(), exp_dec.name()));
    case (got)
      D0_MEMO: n_d0++;
      D1_DNN16: n_d1++;
      D2_DNN12: n_d2++;
      D3_CLUST: begin n_d3++; if (exp_k < K_MAX) n_d3_small++; end
      D4_IMPS: n_d4++;
      default: n_drop++;
    endcase
    npk = (got == D3_CLUST || got == D4_IMPS) ? N_CH : (got == D_DROP ? 0 : 1);
    check(pkts.size() == npk, $sformatf("w%0d: %0d packets, want %0d", w, pkts.size(), npk));
    for (int p = 0; p < pkts.size() && p < npk; p++) begin
      byte unsigned b [$];
      b = pkts[p];
      check(b[0][7:6] == ((got == D3_CLUST) ? PK_CLUSTER : (got == D4_IMPS) ? PK_IMPS : PK_RESULT) &&
            b[0][5:3] == got && (npk == 1 || b[0][2:1] == p),
            $sformatf("w%0d pkt %0d: header %h", w, p, b[0]));
      if (npk == 1) begin
        check(b.size() == 2 && b[1] == exp_label, $sformatf("w%0d: label %0d want %0d", w, b[1], exp_label));
      end else if (got == D3_CLUST) begin
        int tot, kk;
        bit bits [$];
        kk = b[1];
        check(kk == exp_k, $sformatf("w%0d: k=%0d want %0d", w, kk, exp_k));
        check(b.size() == 2 + (kk * 28 + 7) / 8, $sformatf("w%0d: cluster packet %0d bytes", w, b.size()));
        for (int i = 2; i < b.size(); i++) for (int j = 7; j >= 0; j--) bits.push_back(b[i][j]);
        tot = 0;
        for (int c = 0; c < kk && (c + 1) * 28 <= bits.size(); c++) begin
          int t, n, r, v;
          logic [27:0] wd;
          for (int j = 0; j < 28; j++) wd[27 - j] = bits[c * 28 + j];
          t = wd[27:20]; v = $signed(wd[19:12]); r = wd[11:4]; n = wd[3:0];
          check(t < WIN, $sformatf("w%0d ch%0d cluster %0d: centre t=%0d", w, p, c, t));
          tot += n;
          // every sample is within some cluster's circle
          if (c == kk - 1) begin
            for (int i = 0; i < WIN; i++) begin
              bit covered = 0;
              for (int cc = 0; cc < kk; cc++) begin
                logic [27:0] w2;
                int t2, v2, r2;
                for (int j = 0; j < 28; j++) w2[27 - j] = bits[cc * 28 + j];
                t2 = w2[27:20]; v2 = $signed(w2[19:12]); r2 = w2[11:4];
                if ((i - t2) ** 2 + (q8(hist[cur_end - WIN + i][p]) - v2) ** 2 <= r2 * r2 || r2 == 255) covered = 1;
              end
              check(covered, $sformatf("w%0d ch%0d: sample %0d outside every cluster", w, p, i));
            end
          end
        end
        check(tot > 0 && tot <= WIN, $sformatf("w%0d ch%0d: counts add to %0d", w, p, tot));
      end else begin
        int n, last;
        n = b[1];
        check(n == IS_POINTS && b.size() == 2 + 2 * n, $sformatf("w%0d: %0d samples, %0d bytes", w, n, b.size()));
        last = -2;
        for (int i = 0; i < n && 3 + 2 * i < b.size(); i++) begin
          int t, v;
          t = b[2 + 2 * i]; v = $signed(b[3 + 2 * i]);
          check(t < WIN && t >= last + 2, $sformatf("w%0d ch%0d: sample time %0d after %0d", w, p, t, last));
          if (t < WIN)
            check(v == q8(hist[cur_end - WIN + t][p]), $sformatf("w%0d ch%0d: sample %0d value %0d", w, p, t, v));
          last = t;
        end
      end
    end
    pkts = {};
    if (got == D1_DNN16 || got == D2_DNN12) begin m_known = 1; m_act = dnn_label; end
  endtask

  // ---- watchdog -------------------------------------------------------------------------------
  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- main sequence ---------------------------------------------------------------------------
  initial begin
    s_valid = 0; s_data = '0; h_valid = 0; h_energy = 16'd100; stored_energy = '0;
    gt_we = 0; gt_act = '0; gt_idx = '0; gt_ch = '0; gt_data = '0;
    aac_cfg_we = 0; aac_cfg_sel = '0; aac_cfg_act = '0; aac_cfg_kopt = '0; aac_cfg_data = '0;
    dnn_done = 0; dnn_class = '0; dnn_rd_idx = '0; dnn_rd_ch = '0; dnn_label = 0;
    for (int a = 0; a < N_ACT; a++)
      for (int i = 0; i < WIN; i++)
        for (int c = 0; c < N_CH; c++) trace[a][i][c] = trace_val(a, i, c);
    for (int n = 0; n < N_BLOCKS * 30; n++)
      for (int c = 0; c < N_CH; c++)
        hist[n][c] = trace_val(blk_act[n / 30], n % 60, c) +
                     (blk_noisy[n / 30] ? int'($urandom % 160001) - 80000 : 0);
    for (int a = 0; a < N_ACT; a++) begin
      m_loss[a][0] = 0;
      m_loss[a][1] = 5;
      m_loss[a][2] = 50;
      m_loss[a][3] = 60;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // load traces and the AAC table
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

    // stream
    for (int n = 0; n < N_BLOCKS * 30; n++) begin
      int w;
      bit slow;
      slow = n < N_SLOW_BLOCKS * 30;
      w = (n + 1 - WIN) / 30;
      if (slow && n + 1 >= WIN && (n + 1) % 30 == 0) begin
        if (w == 5) begin
          // the host tightens the table: 10 clusters are no longer good enough for activity 4
          m_loss[4][1] = 40;
          @(negedge clk);
          aac_cfg_we = 1; aac_cfg_sel = 2'd0; aac_cfg_act = ACT_W'(4); aac_cfg_kopt = KOPT_W'(1);
          aac_cfg_data = 40;
          @(negedge clk);
          aac_cfg_we = 0;
        end
        stored_energy = win_store[w];
        cur_end   = n + 1;
        dnn_label = blk_act[n / 30];
      end
      @(negedge clk);
      s_valid = 1; h_valid = 1;
      for (int c = 0; c < N_CH; c++) s_data[c] = hist[n][c];
      @(negedge clk);
      s_valid = 0; h_valid = 0;
      if (slow && n + 1 >= WIN && (n + 1) % 30 == 0) begin
        predict(n + 1, stored_energy + 400);
        check(pred_energy == stored_energy + 400, $sformatf("w%0d: predicted %0d", w, pred_energy));
        check_window(w);
      end
      repeat ((slow ? GAP_SLOW : GAP_FAST) - 2) @(negedge clk);
    end
    repeat (20000) @(negedge clk);

    check(dnn_read_bad == 0, $sformatf("%0d bad reads on the DNN port", dnn_read_bad));
    $display("mechanisms: D0=%0d D1=%0d D2=%0d D3=%0d (reduced k %0d) D4=%0d drop=%0d missed=%0d stalls=%0d",
             n_d0, n_d1, n_d2, n_d3, n_d3_small, n_d4, n_drop, n_missed, n_stall);
    check(n_d0 > 0, "memoisation never happened");
    check(n_d1 > 0, "16-bit DNN never used");
    check(n_d2 > 0, "12-bit DNN never used");
    check(n_d3 > 0, "clustering coreset never built");
    check(n_d3_small > 0, "activity-aware reduction never happened");
    check(n_d4 > 0, "importance sampling never used");
    check(n_drop > 0, "no window dropped");
    check(n_missed > 0, "no window arrived while busy");
    check(n_stall > 0, "radio never stalled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
