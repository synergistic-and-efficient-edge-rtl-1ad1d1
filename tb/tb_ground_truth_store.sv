// tb_ground_truth_store: self-checking test of the activity trace store.
// Writes a pseudo-random value to every cell (all activities, indices and channels),
// then reads every cell back in a different order and compares it with a model array.
module tb_ground_truth_store;
  import seeker_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  logic              wr_en;
  logic [ACT_W-1:0]  wr_act, rd_act;
  logic [IDX_W-1:0]  wr_idx, rd_idx;
  logic [CH_W-1:0]   wr_ch, rd_ch;
  logic [DATA_W-1:0] wr_data, rd_data;

  ground_truth_store dut (.*);

  int checks = 0, failures = 0;
  logic [DATA_W-1:0] model [N_ACT][WIN][N_CH];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; wr_act = '0; wr_idx = '0; wr_ch = '0; wr_data = '0;
    rd_act = '0; rd_idx = '0; rd_ch = '0;
    for (int a = 0; a < N_ACT; a++)
      for (int i = 0; i < WIN; i++)
        for (int c = 0; c < N_CH; c++) begin
          @(negedge clk);
          wr_en = 1; wr_act = ACT_W'(a); wr_idx = IDX_W'(i); wr_ch = CH_W'(c);
          wr_data = $urandom;
          model[a][i][c] = wr_data;
        end
    @(negedge clk);
    wr_en = 0;
    for (int c = N_CH - 1; c >= 0; c--)
      for (int i = WIN - 1; i >= 0; i--)
        for (int a = 0; a < N_ACT; a++) begin
          rd_act = ACT_W'(a); rd_idx = IDX_W'(i); rd_ch = CH_W'(c);
          #1;
          checks++;
          if (rd_data !== model[a][i][c]) begin
            failures++;
            if (failures < 10) $display("FAIL: act %0d idx %0d ch %0d read %h want %h", a, i, c, rd_data, model[a][i][c]);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
