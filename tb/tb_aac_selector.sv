// tb_aac_selector: self-checking test of the activity-aware cluster-count selector.
// Checks the reset costs (k/12 of 17.04 uJ), that only k = 12 is offered before any
// activity is known, then programs a random loss table, costs and loss limit, reports
// random completed inferences, and compares k and k_cost with a reference model for
// 400 random energy levels.
module tb_aac_selector;
  import seeker_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              inf_valid;
  logic [ACT_W-1:0]  inf_act, cfg_act, act_pred;
  logic              cfg_we, act_known;
  logic [1:0]        cfg_sel;
  logic [KOPT_W-1:0] cfg_kopt;
  logic [E_W-1:0]    cfg_data, pred_energy, k_cost;
  logic [K_W-1:0]    k;

  aac_selector dut (.*);

  int checks = 0, failures = 0;
  int unsigned m_loss [N_ACT][N_KOPT];
  int unsigned m_cost [N_KOPT];
  int unsigned m_max;
  int m_act; bit m_known;

  task automatic expect_k(input string name);
    int ek; int unsigned ec;
    ek = 0; ec = 0;
    for (int i = N_KOPT - 1; i >= 0; i--)
      if (m_cost[i] <= pred_energy && (i == 0 || (m_known && m_loss[m_act][i] <= m_max))) begin
        ek = kopt_k(KOPT_W'(i)); ec = m_cost[i];
      end
    #1;
    checks++;
    if (k != K_W'(ek) || k_cost != ec) begin
      failures++;
      $display("FAIL %s: E=%0d k=%0d cost=%0d want k=%0d cost=%0d", name, pred_energy, k, k_cost, ek, ec);
    end
  endtask

  task automatic cfg(input int sel, input int act, input int kopt, input int unsigned data);
    @(negedge clk);
    cfg_we = 1; cfg_sel = 2'(sel); cfg_act = ACT_W'(act); cfg_kopt = KOPT_W'(kopt); cfg_data = data;
    @(negedge clk);
    cfg_we = 0;
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    inf_valid = 0; inf_act = '0; cfg_we = 0; cfg_sel = '0; cfg_act = '0; cfg_kopt = '0;
    cfg_data = '0; pred_energy = '0;
    m_cost[0] = 17040; m_cost[1] = 14200; m_cost[2] = 11360; m_cost[3] = 8520;
    for (int a = 0; a < N_ACT; a++) for (int i = 0; i < N_KOPT; i++) m_loss[a][i] = 255;
    m_max = 20; m_known = 0; m_act = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // reset state: only 12 clusters possible
    foreach (m_cost[i]) begin
      pred_energy = m_cost[i]; expect_k("reset exact");
      pred_energy = m_cost[i] - 1; expect_k("reset below");
    end
    pred_energy = 100000; expect_k("reset plenty");
    // program the table
    for (int a = 0; a < N_ACT; a++)
      for (int i = 1; i < N_KOPT; i++) begin
        m_loss[a][i] = $urandom % 60;
        cfg(0, a, i, m_loss[a][i]);
      end
    m_max = 25; cfg(2, 0, 0, m_max);
    m_cost[0] = 17040; m_cost[1] = 15000; m_cost[2] = 12000; m_cost[3] = 9000;
    for (int i = 0; i < N_KOPT; i++) cfg(1, 0, i, m_cost[i]);
    pred_energy = 13000; expect_k("programmed, no activity yet");
    for (int t = 0; t < 400; t++) begin
      if (t % 10 == 0) begin
        @(negedge clk);
        inf_valid = 1; inf_act = ACT_W'($urandom % N_ACT);
        m_known = 1; m_act = inf_act;
        @(negedge clk);
        inf_valid = 0;
        checks++;
        if (!act_known || act_pred != ACT_W'(m_act)) begin
          failures++; $display("FAIL: activity prediction %0d want %0d", act_pred, m_act);
        end
      end
      pred_energy = 7000 + $urandom % 12000;
      expect_k("random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
