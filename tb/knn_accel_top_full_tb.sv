// knn_accel_top_full_tb: one complete classification job at full size.
// The accelerator is used with every parameter at its default (36,225
// training samples, 6 features, k up to 5). The test loads the whole training
// set (16 classes, each a random centre with noise), then classifies three
// flows, with k = 5, k = 3 and k = 1, over all 36,225 samples. Each result is
// compared with a reference KNN computed here from all distances (stable sort,
// first k, most common label, smaller label on equal counts), and each latency
// with the 36,225 + 5 cycles of a one-sample-per-cycle scan.
module knn_accel_top_full_tb;
  localparam int unsigned NMAX = 36225, N_FEAT = 6, FEAT_W = 16, LABEL_W = 4;
  localparam int unsigned AW = 16, KCFG_W = 3;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0;

  logic                          tr_wr_en = 0;
  logic [AW-1:0]                 tr_wr_addr = '0, n_train = '0;
  logic [N_FEAT-1:0][FEAT_W-1:0] tr_wr_feat = '0, q_feat = '0;
  logic [LABEL_W-1:0]            tr_wr_label = '0, r_class;
  logic [KCFG_W-1:0]             k_cfg = '0, r_votes;
  logic                          q_valid = 0, q_ready, r_valid, r_ready = 0, busy;

  knn_accel_top dut (.*);

  int checks = 0, failures = 0, cycle = 0;
  int feat [NMAX][N_FEAT];
  int lab  [NMAX];
  int centre [16][N_FEAT];

  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int clip(int v);
    return (v < 0) ? 0 : (v > 65535) ? 65535 : v;
  endfunction

  function automatic int ref_knn(int q[N_FEAT], int n, int k, output int votes);
    longint keys[$];
    int cnt[16];
    int best = 0, bn = 0;
    for (int i = 0; i < n; i++) begin
      longint d = 0;
      for (int f = 0; f < N_FEAT; f++) d += (feat[i][f] > q[f]) ? feat[i][f] - q[f] : q[f] - feat[i][f];
      keys.push_back((d << 20) | longint'(i));
    end
    keys.sort();
    foreach (cnt[c]) cnt[c] = 0;
    for (int j = 0; j < k; j++) cnt[lab[int'(keys[j] & 64'hFFFFF)]]++;
    for (int c = 0; c < 16; c++) if (cnt[c] > bn) begin bn = cnt[c]; best = c; end
    votes = bn;
    return best;
  endfunction

  task automatic run_query(int q[N_FEAT], int k);
    int exp_c, exp_v, t_acc;
    exp_c = ref_knn(q, NMAX, k, exp_v);
    for (int f = 0; f < N_FEAT; f++) q_feat[f] = FEAT_W'(q[f]);
    n_train = AW'(NMAX); k_cfg = KCFG_W'(k); q_valid = 1;
    #1;
    check(q_ready, "query accepted at once");
    t_acc = cycle;
    @(negedge clk);
    q_valid = 0;
    while (!r_valid && cycle - t_acc < int'(NMAX) + 100) @(negedge clk);
    check(cycle - t_acc == int'(NMAX) + 5, $sformatf("latency %0d cycles", cycle - t_acc));
    check(int'(r_class) == exp_c && int'(r_votes) == exp_v,
          $sformatf("k=%0d: class %0d/%0d exp %0d/%0d", k, r_class, r_votes, exp_c, exp_v));
    $display("k=%0d: class %0d with %0d votes after %0d cycles", k, r_class, r_votes, cycle - t_acc);
    r_ready = 1;
    @(negedge clk);
    r_ready = 0;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int q[N_FEAT];
    for (int c = 0; c < 16; c++)
      for (int f = 0; f < N_FEAT; f++) centre[c][f] = int'($urandom_range(60000)) + 2000;
    for (int i = 0; i < int'(NMAX); i++) begin
      lab[i] = int'($urandom_range(15));
      for (int f = 0; f < N_FEAT; f++)
        feat[i][f] = clip(centre[lab[i]][f] + int'($urandom_range(8000)) - 4000);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < int'(NMAX); i++) begin
      tr_wr_en = 1; tr_wr_addr = AW'(i); tr_wr_label = LABEL_W'(lab[i]);
      for (int f = 0; f < N_FEAT; f++) tr_wr_feat[f] = FEAT_W'(feat[i][f]);
      @(negedge clk);
    end
    tr_wr_en = 0;
    for (int t = 0; t < 3; t++) begin
      for (int f = 0; f < N_FEAT; f++) q[f] = clip(centre[3 * t + 1][f] + int'($urandom_range(6000)) - 3000);
      run_query(q, (t == 0) ? 5 : (t == 1) ? 3 : 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
