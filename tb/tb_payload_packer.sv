// tb_payload_packer: self-checking test of the radio packet builder.
// Sends result, clustering (k = 12, 10, 8, 6) and importance-sampling (n = 20, 13)
// packets with random contents under random back-pressure from the radio. The test
// builds the expected byte sequence bit by bit and checks every byte, tx_last on the
// final byte, the packet length (44 bytes for 12 clusters: 2 header + 42 payload) and
// the done pulse.
module tb_payload_packer;
  import seeker_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic           start, busy, tx_valid, tx_last, tx_ready, done;
  pkt_e           kind;
  decision_e      decision;
  logic [1:0]     channel;
  logic [7:0]     label, tx_data;
  logic [K_W-1:0] k;
  cluster_t       clusters [K_MAX];
  logic [4:0]     n_pts;
  point_t         points [IS_POINTS];

  payload_packer dut (.*);

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic send_and_check(input string name);
    bit bits [$];
    byte unsigned exp [$];
    int got, cyc;
    // expected stream
    exp.push_back({kind, decision, channel, 1'b0});
    if (kind == PK_RESULT) exp.push_back(label);
    else if (kind == PK_CLUSTER) begin
      exp.push_back(8'(k));
      for (int c = 0; c < int'(k); c++) begin
        logic [27:0] w;
        w = {clusters[c].c.t, clusters[c].c.v, clusters[c].r, clusters[c].n};
        for (int b = 27; b >= 0; b--) bits.push_back(w[b]);
      end
      while (bits.size() % 8 != 0) bits.push_back(1'b0);
      for (int i = 0; i < bits.size(); i += 8) begin
        byte unsigned v;
        v = 0;
        for (int b = 0; b < 8; b++) v = {v[6:0], bits[i + b]};
        exp.push_back(v);
      end
    end else begin
      exp.push_back(8'(n_pts));
      for (int p = 0; p < int'(n_pts); p++) begin
        exp.push_back(points[p].t);
        exp.push_back(points[p].v);
      end
    end
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    got = 0; cyc = 0;
    while (got < exp.size() + 2 && cyc < 1000) begin
      tx_ready = ($urandom % 4) != 0;
      #1;
      if (tx_valid && tx_ready) begin
        if (got < exp.size())
          check(tx_data == exp[got], $sformatf("%s byte %0d: %h want %h", name, got, tx_data, exp[got]));
        check(tx_last == (got == exp.size() - 1), $sformatf("%s byte %0d: tx_last=%0b", name, got, tx_last));
        got++;
      end
      @(negedge clk);
      cyc++;
      if (got == exp.size()) begin
        check(done == 1, $sformatf("%s: done missing", name));
        check(tx_valid == 0, $sformatf("%s: extra byte", name));
        break;
      end
    end
    check(got == exp.size(), $sformatf("%s: %0d bytes, want %0d", name, got, exp.size()));
    tx_ready = 0;
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int kk[4] = '{12, 10, 8, 6};
    start = 0; tx_ready = 0; kind = PK_RESULT; decision = D0_MEMO; channel = 0; label = 0;
    k = '0; n_pts = '0;
    foreach (clusters[c]) clusters[c] = '0;
    foreach (points[p]) points[p] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 3; r++) begin
      kind = PK_RESULT; decision = (r == 0) ? D0_MEMO : D1_DNN16; label = 8'($urandom % 12);
      channel = 0;
      send_and_check("result");
      foreach (kk[i]) begin
        foreach (clusters[c]) clusters[c] = cluster_t'($urandom);
        kind = PK_CLUSTER; decision = D3_CLUST; k = K_W'(kk[i]); channel = 2'(i % 3);
        send_and_check($sformatf("cluster k=%0d", kk[i]));
      end
      foreach (points[p]) points[p] = point_t'($urandom);
      kind = PK_IMPS; decision = D4_IMPS; n_pts = 20; channel = 2;
      send_and_check("imps 20");
      n_pts = 13;
      send_and_check("imps 13");
    end
    // length of a full clustering packet
    begin
      int len;
      kind = PK_CLUSTER; k = 12;
      @(negedge clk); start = 1; @(negedge clk); start = 0; tx_ready = 1;
      len = 0;
      while (!done) begin if (tx_valid) len++; @(negedge clk); end
      check(len == 44, $sformatf("12-cluster packet is %0d bytes", len));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
