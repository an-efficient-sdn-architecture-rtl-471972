// knn_workload_tb: the training-set sizes of the evaluation, on one
// accelerator built with room for the largest of them.
// The evaluation splits a data set of 72,450 labelled flows (36,225 is its
// 50 % split) into training sets of 1, 5, 10, 30, 50, 70 and 90 %: 725, 3,623,
// 7,245, 21,735, 36,225, 50,715 and 65,205 samples. The default build holds
// 36,225 samples, so this test raises N_TRAIN_MAX to 65,205. It loads 65,205
// synthetic flows (16 classes, random centres plus noise; the real flow
// records are not available), then for each size classifies one flow with the
// default k = 5 and one with a reduced k = 3, checking each class against a
// reference KNN over the same first n samples and each latency with n + 5
// cycles. The cycle counts are printed per size.
module knn_workload_tb;
  localparam int unsigned NMAX = 65205, N_FEAT = 6, FEAT_W = 16, LABEL_W = 4;
  localparam int unsigned AW = 17, KCFG_W = 3;
  localparam int unsigned N_SIZES = 7;
  localparam int SIZES [N_SIZES] = '{725, 3623, 7245, 21735, 36225, 50715, 65205};
  localparam int PCT   [N_SIZES] = '{1, 5, 10, 30, 50, 70, 90};

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

  task automatic run_query(int q[N_FEAT], int n, int k, int pct);
    int exp_c, exp_v, t_acc;
    exp_c = ref_knn(q, n, k, exp_v);
    for (int f = 0; f < N_FEAT; f++) q_feat[f] = FEAT_W'(q[f]);
    n_train = AW'(n); k_cfg = KCFG_W'(k); q_valid = 1;
    #1;
    check(q_ready, "query accepted at once");
    t_acc = cycle;
    @(negedge clk);
    q_valid = 0;
    while (!r_valid && cycle - t_acc < n + 100) @(negedge clk);
    check(cycle - t_acc == n + 5, $sformatf("latency %0d cycles for n=%0d", cycle - t_acc, n));
    check(int'(r_class) == exp_c && int'(r_votes) == exp_v,
          $sformatf("n=%0d k=%0d: class %0d/%0d exp %0d/%0d", n, k, r_class, r_votes, exp_c, exp_v));
    $display("split %2d%%: %5d samples, k=%0d -> class %0d (%0d votes) in %0d cycles",
             pct, n, k, r_class, r_votes, cycle - t_acc);
    r_ready = 1;
    @(negedge clk);
    r_ready = 0;
  endtask

  initial begin
    repeat (1000000) @(posedge clk);
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
    for (int s = 0; s < int'(N_SIZES); s++) begin
      for (int f = 0; f < N_FEAT; f++) q[f] = clip(centre[(5 * s) % 16][f] + int'($urandom_range(6000)) - 3000);
      run_query(q, SIZES[s], 5, PCT[s]);
      run_query(q, SIZES[s], 3, PCT[s]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
