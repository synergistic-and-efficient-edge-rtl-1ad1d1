// tb_power_predictor: self-checking test of the moving-average power predictor.
// Feeds 200 random harvest samples (with gaps) and random storage readings, and checks
// avg_income against the mean of the last 8 samples (missing ones count as 0) and
// pred_energy against stored + 4 * avg_income, saturated to 32 bits. The prediction
// must follow its inputs after one clock.
module tb_power_predictor;
  import seeker_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic             h_valid;
  logic [15:0]      h_energy, avg_income;
  logic [E_W-1:0]   stored_energy, pred_energy;

  power_predictor dut (.*);

  int checks = 0, failures = 0;
  int unsigned hist [8];
  int hp = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint unsigned sum, exp_pred;
    int unsigned exp_avg;
    h_valid = 0; h_energy = '0; stored_energy = '0;
    for (int i = 0; i < 8; i++) hist[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      h_valid  = ($urandom % 3) != 0;
      h_energy = 16'($urandom);
      stored_energy = (t % 50 == 49) ? 32'hFFFF_F000 : ($urandom % 200000);
      if (h_valid) begin hist[hp] = h_energy; hp = (hp + 1) % 8; end
      @(negedge clk);          // sum updated
      h_valid = 0;
      @(negedge clk);          // prediction registered
      sum = 0;
      for (int i = 0; i < 8; i++) sum += hist[i];
      exp_avg  = int'(sum / 8);
      exp_pred = longint'(stored_energy) + 4 * longint'(exp_avg);
      if (exp_pred > 64'hFFFF_FFFF) exp_pred = 64'hFFFF_FFFF;
      checks++;
      if (avg_income != 16'(exp_avg)) begin
        failures++; $display("FAIL t=%0d avg %0d want %0d", t, avg_income, exp_avg);
      end
      checks++;
      if (pred_energy != 32'(exp_pred)) begin
        failures++; $display("FAIL t=%0d pred %0d want %0d", t, pred_energy, exp_pred);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
