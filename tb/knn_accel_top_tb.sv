// knn_accel_top_tb: end-to-end test of the KNN accelerator at a reduced
// capacity (256 training samples; every other parameter at its default).
// Loads a clustered training set (16 classes, each a random centre plus noise,
// some samples duplicated so that equal distances occur), then sends queries
// with every k from 1 to 5, out-of-range k and n_train values, and random
// result back-pressure. Each class is compared with a reference KNN computed
// here from all distances (stable sort, first k, most common label, smaller
// label on equal counts), and the latency with n_train + 5 cycles.
// Mechanisms counted, each must occur: neighbour replaced, sample rejected,
// k below and at K_MAX, k clamped, n_train clamped, tied vote, result
// back-pressure, query offered while busy, empty training set.
module knn_accel_top_tb;
  localparam int unsigned NMAX = 256, N_FEAT = 6, FEAT_W = 16, LABEL_W = 4, K_MAX = 5;
  localparam int unsigned AW = $clog2(NMAX + 1), KCFG_W = 3;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0;

  logic                          tr_wr_en = 0;
  logic [AW-1:0]                 tr_wr_addr = '0, n_train = '0;
  logic [N_FEAT-1:0][FEAT_W-1:0] tr_wr_feat = '0, q_feat = '0;
  logic [LABEL_W-1:0]            tr_wr_label = '0, r_class;
  logic [KCFG_W-1:0]             k_cfg = '0, r_votes;
  logic                          q_valid = 0, q_ready, r_valid, r_ready = 0, busy;

  knn_accel_top #(.N_TRAIN_MAX(NMAX)) dut (.*);

  int checks = 0, failures = 0, cycle = 0;
  int feat [NMAX][N_FEAT];
  int lab  [NMAX];
  int centre [16][N_FEAT];

  // mechanism counters
  int n_repl = 0, n_rej = 0, n_k_small = 0, n_k_full = 0, n_k_clamp = 0, n_n_clamp = 0;
  int n_tie = 0, n_backp = 0, n_busy_offer = 0, n_empty = 0;

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n && dut.u_sel.replaced) n_repl++;
    if (rst_n && dut.d_valid && !dut.u_sel.take) n_rej++;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int clip(int v);
    return (v < 0) ? 0 : (v > 65535) ? 65535 : v;
  endfunction

  // reference KNN; returns class, sets votes and whether the vote was tied
  function automatic int ref_knn(int q[N_FEAT], int n, int k, output int votes, output bit tied);
    longint keys[$];
    int cnt[16];
    int best = 0, bn = 0, nb = 0;
    for (int i = 0; i < n; i++) begin
      longint d = 0;
      for (int f = 0; f < N_FEAT; f++) d += (feat[i][f] > q[f]) ? feat[i][f] - q[f] : q[f] - feat[i][f];
      keys.push_back((d << 20) | longint'(i));
    end
    keys.sort();
    foreach (cnt[c]) cnt[c] = 0;
    for (int j = 0; j < k && j < keys.size(); j++) cnt[lab[int'(keys[j] & 64'hFFFFF)]]++;
    for (int c = 0; c < 16; c++) if (cnt[c] > bn) begin bn = cnt[c]; best = c; end
    for (int c = 0; c < 16; c++) if (cnt[c] == bn && bn > 0) nb++;
    votes = bn;
    tied  = (nb > 1);
    return best;
  endfunction

  task automatic run_query(int q[N_FEAT], int n, int k, int stall, bit early);
    int n_eff, k_eff, exp_c, exp_v, t_acc;
    bit tied;
    n_eff = (n > int'(NMAX)) ? NMAX : n;
    k_eff = (k == 0) ? 1 : (k > int'(K_MAX)) ? K_MAX : k;
    if (n != n_eff) n_n_clamp++;
    if (k != k_eff) n_k_clamp++;
    if (k_eff < int'(K_MAX)) n_k_small++; else n_k_full++;
    if (n_eff == 0) n_empty++;
    exp_c = ref_knn(q, n_eff, k_eff, exp_v, tied);
    if (tied) n_tie++;
    for (int f = 0; f < N_FEAT; f++) q_feat[f] = FEAT_W'(q[f]);
    n_train = AW'(n); k_cfg = KCFG_W'(k); q_valid = 1;
    #1;
    while (!q_ready) begin
      @(negedge clk); #1;
    end
    t_acc = cycle;
    @(negedge clk);
    q_valid = 0;
    while (!r_valid && cycle - t_acc < 10000) @(negedge clk);
    check(cycle - t_acc == n_eff + 5, $sformatf("latency %0d, n=%0d", cycle - t_acc, n_eff));
    check(int'(r_class) == exp_c && int'(r_votes) == exp_v,
          $sformatf("n=%0d k=%0d: class %0d/%0d exp %0d/%0d", n_eff, k_eff, r_class, r_votes, exp_c, exp_v));
    if (stall > 0) n_backp++;
    repeat (stall) begin
      @(negedge clk);
      check(r_valid && int'(r_class) == exp_c, "result held under back-pressure");
    end
    if (early) begin
      // next query already offered while the result waits: must not be taken
      q_valid = 1;
      #1;
      if (busy && !q_ready) n_busy_offer++;
      check(!q_ready, "query not accepted while busy");
    end
    r_ready = 1;
    @(negedge clk);
    r_ready = 0;
    q_valid = 0;
  endtask

  initial begin
    repeat (300000) @(posedge clk);
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
        feat[i][f] = clip(centre[lab[i]][f] + int'($urandom_range(3000)) - 1500);
      if (i % 17 == 5) begin feat[i] = feat[i-3]; lab[i] = int'($urandom_range(15)); end
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // empty training set first
    for (int f = 0; f < N_FEAT; f++) q[f] = 0;
    run_query(q, 0, 5, 0, 0);
    // load the training set
    for (int i = 0; i < int'(NMAX); i++) begin
      tr_wr_en = 1; tr_wr_addr = AW'(i); tr_wr_label = LABEL_W'(lab[i]);
      for (int f = 0; f < N_FEAT; f++) tr_wr_feat[f] = FEAT_W'(feat[i][f]);
      @(negedge clk);
    end
    tr_wr_en = 0;
    for (int t = 0; t < 60; t++) begin
      int c, k, n;
      c = int'($urandom_range(15));
      k = (t < 5) ? t + 1 : (t == 5) ? 0 : (t == 6) ? 7 : int'($urandom_range(1, 5));
      n = (t == 7) ? 300 : (t % 3 == 0) ? int'(NMAX) : int'($urandom_range(1, NMAX));
      for (int f = 0; f < N_FEAT; f++) q[f] = clip(centre[c][f] + int'($urandom_range(6000)) - 3000);
      if (t % 9 == 4) q = feat[int'($urandom_range(NMAX - 1))];   // exact match present
      if (t % 11 == 10) q = '{default: 32768};                    // between clusters: ties likely
      run_query(q, n, k, int'($urandom_range(2)), (t % 5 == 2));
    end
    // k = 2 and k = 4 queries on cluster centres: a split vote is likely
    for (int t = 0; t < 20; t++) begin
      q = centre[t % 16];
      run_query(q, NMAX, (t % 2 == 0) ? 2 : 4, 0, 0);
    end
    $display("mechanisms: replaced=%0d rejected=%0d k<5=%0d k=5=%0d k_clamp=%0d n_clamp=%0d tie=%0d backpressure=%0d busy_offer=%0d empty=%0d",
             n_repl, n_rej, n_k_small, n_k_full, n_k_clamp, n_n_clamp, n_tie, n_backp, n_busy_offer, n_empty);
    check(n_repl > 0, "neighbour replacement happened");
    check(n_rej > 0, "sample rejection happened");
    check(n_k_small > 0 && n_k_full > 0, "both reduced and full k used");
    check(n_k_clamp > 0, "k clamp happened");
    check(n_n_clamp > 0, "n_train clamp happened");
    check(n_tie > 0, "tied vote happened");
    check(n_backp > 0, "result back-pressure happened");
    check(n_busy_offer > 0, "query offered while busy");
    check(n_empty > 0, "empty training set classified");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
