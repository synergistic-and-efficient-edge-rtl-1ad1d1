// tb_window_buffer: self-checking test of the moving-window sensor buffer.
// Streams 180 samples whose values encode (sample number, channel). It checks that
// win_ready pulses exactly after samples 60, 90, 120, 150 and 180 (first full window,
// then every 30 samples), and that at each pulse every cell of the window holds the
// expected sample, oldest first.
module tb_window_buffer;
  import seeker_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                          in_valid;
  logic [N_CH-1:0][DATA_W-1:0]   in_data;
  logic                          win_ready;
  logic [IDX_W-1:0]              rd_idx;
  logic [CH_W-1:0]               rd_ch;
  logic [DATA_W-1:0]             rd_data;

  window_buffer dut (.*);

  int checks = 0, failures = 0;
  int n_written = 0;
  int n_windows = 0;

  function automatic logic [DATA_W-1:0] sample(int n, int ch);
    return DATA_W'(n * 16 + ch + 32'h1000_0000);
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // watchdog
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_data = '0; rd_idx = '0; rd_ch = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 180; n++) begin
      @(negedge clk);
      in_valid = 1;
      for (int c = 0; c < N_CH; c++) in_data[c] = sample(n, c);
      @(negedge clk);
      in_valid = 0;
      n_written = n + 1;
      // win_ready is registered: visible now, after the write edge
      begin
        bit expect_win;
        expect_win = (n_written == WIN) || (n_written > WIN && (n_written - WIN) % HOP == 0);
        check(win_ready == expect_win, $sformatf("win_ready=%0b after %0d samples", win_ready, n_written));
        if (win_ready) begin
          n_windows++;
          for (int i = 0; i < WIN; i++)
            for (int c = 0; c < N_CH; c++) begin
              rd_idx = IDX_W'(i); rd_ch = CH_W'(c);
              #1;
              check(rd_data == sample(n_written - WIN + i, c),
                    $sformatf("window cell %0d ch %0d = %h", i, c, rd_data));
            end
        end
      end
      // a few idle cycles between samples: no pulse may appear
      repeat (2) begin
        @(negedge clk);
        check(win_ready == 0, "spurious win_ready");
      end
    end
    check(n_windows == 5, $sformatf("windows seen %0d", n_windows));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
