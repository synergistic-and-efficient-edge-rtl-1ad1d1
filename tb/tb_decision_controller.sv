// tb_decision_controller: self-checking test of the per-window decision flow.
// Behavioural responders stand in for the correlation engine, the DNN crossbars, the
// coreset engines and the packet builder, each answering a start with a done pulse after
// a random delay. For each case the test counts the requests the controller makes and
// checks them against the flow chart:
//   match -> D0 (one result packet, nothing else); E >= 37.5 uJ -> D1 (16-bit DNN);
//   24.85 <= E < 37.5 -> D2 (12-bit DNN); otherwise k > 0 -> D3 (3 clustering packets,
//   one per channel, with k); otherwise E >= 16.84 -> D4 (3 sampling packets);
//   otherwise drop (no work). Energy levels at each boundary are included.
// It also checks the label sent, the activity report after a DNN inference and the
// win_missed pulse for a window that arrives while busy.
module tb_decision_controller;
  import seeker_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic             win_ready;
  logic [E_W-1:0]   pred_energy;
  logic             corr_start, corr_done, corr_match;
  logic [ACT_W-1:0] corr_act, dnn_class, inf_act;
  logic             dnn_req, dnn_sel, dnn_done;
  logic [K_W-1:0]   aac_k, km_k;
  logic             inf_valid;
  logic [CH_W-1:0]  ch;
  logic             km_start, km_done, is_start, is_done;
  logic             pk_start, pk_done;
  pkt_e             pk_kind;
  decision_e        pk_decision, decision;
  logic [7:0]       pk_label;
  logic             busy, decision_valid, win_missed;

  decision_controller dut (.*);

  int checks = 0, failures = 0;

  // ---- responders -------------------------------------------------------------------
  task automatic respond(ref logic done_sig, input int dly);
    repeat (dly) @(posedge clk);
    done_sig <= 1'b1;
    @(posedge clk);
    done_sig <= 1'b0;
  endtask

  int n_corr, n_dnn16, n_dnn12, n_km, n_is, n_pk, n_inf, n_dec, n_missed;
  int km_ch_seen [3];
  int km_k_bad, pk_label_seen, pk_kind_seen;
  decision_e last_dec;

  always @(posedge clk) begin
    if (corr_start) begin n_corr++; fork respond(corr_done, 5 + $urandom % 20); join_none end
    if (dnn_req)    begin if (dnn_sel) n_dnn12++; else n_dnn16++; fork respond(dnn_done, 3 + $urandom % 30); join_none end
    if (km_start)   begin n_km++; km_ch_seen[ch]++; if (km_k != aac_k) km_k_bad++; fork respond(km_done, 2 + $urandom % 10); join_none end
    if (is_start)   begin n_is++; fork respond(is_done, 2 + $urandom % 10); join_none end
    if (pk_start)   begin n_pk++; pk_label_seen = pk_label; pk_kind_seen = pk_kind; fork respond(pk_done, 2 + $urandom % 10); join_none end
    if (inf_valid)  begin n_inf++; if (inf_act != dnn_class) km_k_bad++; end
    if (decision_valid) begin n_dec++; last_dec = decision; end
    if (win_missed) n_missed++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run_window(input bit match, input int unsigned e, input int k, input string name,
                            input decision_e exp_dec);
    n_corr = 0; n_dnn16 = 0; n_dnn12 = 0; n_km = 0; n_is = 0; n_pk = 0; n_inf = 0; n_dec = 0;
    km_ch_seen = '{0, 0, 0}; km_k_bad = 0;
    corr_match = match; corr_act = ACT_W'($urandom % N_ACT); dnn_class = ACT_W'($urandom % N_ACT);
    pred_energy = e; aac_k = K_W'(k);
    @(negedge clk); win_ready = 1; @(negedge clk); win_ready = 0;
    // a second window while busy is not taken
    repeat (2) @(negedge clk);
    win_ready = 1; @(negedge clk); win_ready = 0;
    while (n_dec == 0) @(negedge clk);
    repeat (3) @(negedge clk);
    check(n_dec == 1 && last_dec == exp_dec, $sformatf("%s: decision %s want %s", name, last_dec.name(), exp_dec.name()));
    check(n_corr == 1, $sformatf("%s: %0d correlation runs", name, n_corr));
    check(n_dnn16 == (exp_dec == D1_DNN16) && n_dnn12 == (exp_dec == D2_DNN12),
          $sformatf("%s: dnn16=%0d dnn12=%0d", name, n_dnn16, n_dnn12));
    check(n_inf == ((exp_dec == D1_DNN16 || exp_dec == D2_DNN12) ? 1 : 0), $sformatf("%s: %0d activity reports", name, n_inf));
    check(n_km == ((exp_dec == D3_CLUST) ? N_CH : 0), $sformatf("%s: %0d clustering runs", name, n_km));
    check(n_is == ((exp_dec == D4_IMPS) ? N_CH : 0), $sformatf("%s: %0d sampling runs", name, n_is));
    check(km_k_bad == 0, $sformatf("%s: wrong k or activity", name));
    if (exp_dec == D3_CLUST)
      check(km_ch_seen[0] == 1 && km_ch_seen[1] == 1 && km_ch_seen[2] == 1, $sformatf("%s: channels", name));
    case (exp_dec)
      D0_MEMO:  check(n_pk == 1 && pk_kind_seen == PK_RESULT && pk_label_seen == corr_act, $sformatf("%s: packet", name));
      D1_DNN16, D2_DNN12:
                check(n_pk == 1 && pk_kind_seen == PK_RESULT && pk_label_seen == dnn_class, $sformatf("%s: packet", name));
      D3_CLUST: check(n_pk == N_CH && pk_kind_seen == PK_CLUSTER, $sformatf("%s: packets %0d", name, n_pk));
      D4_IMPS:  check(n_pk == N_CH && pk_kind_seen == PK_IMPS, $sformatf("%s: packets %0d", name, n_pk));
      default:  check(n_pk == 0, $sformatf("%s: packets %0d", name, n_pk));
    endcase
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    win_ready = 0; pred_energy = '0; corr_done = 0; corr_match = 0; corr_act = '0;
    dnn_done = 0; dnn_class = '0; aac_k = '0; km_done = 0; is_done = 0; pk_done = 0;
    n_missed = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 3; rep++) begin
      run_window(1, 100000, 12, "memo, rich", D0_MEMO);
      run_window(1, 0,      0,  "memo, empty", D0_MEMO);
      run_window(0, E_D1,   12, "16-bit at boundary", D1_DNN16);
      run_window(0, E_D1 - 1, 12, "12-bit below 16-bit", D2_DNN12);
      run_window(0, E_D2,   12, "12-bit at boundary", D2_DNN12);
      run_window(0, E_D2 - 1, 12, "cluster k=12", D3_CLUST);
      run_window(0, 15000,  10, "cluster k=10", D3_CLUST);
      run_window(0, 9000,   6,  "cluster k=6", D3_CLUST);
      run_window(0, E_D4,   0,  "sampling at boundary", D4_IMPS);
      run_window(0, E_D4 - 1, 0, "drop", D_DROP);
    end
    check(n_missed == 30, $sformatf("%0d missed windows flagged, want 30", n_missed));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
