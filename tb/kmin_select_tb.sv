// kmin_select_tb: self-checking test of the K-Min neighbour selection.
// For every k from 1 to 5 and several streams (distinct distances, many equal
// distances, fewer samples than k) it feeds distances one per cycle, then
// compares the kept (distance, label) pairs with a reference that sorts the
// whole stream by (distance, arrival order) and takes the first k. Also checks
// that clear restarts the registers and that replaced pulses exactly for the
// samples that entered.
module kmin_select_tb;
  localparam int unsigned K_MAX = 5, DIST_W = 20, LABEL_W = 4, KCFG_W = 3;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0;

  logic                          clear = 0, in_valid = 0;
  logic [KCFG_W-1:0]             k_cfg = 3'd5;
  logic [DIST_W-1:0]             in_dist = '0;
  logic [LABEL_W-1:0]            in_label = '0;
  logic [K_MAX-1:0][DIST_W-1:0]  nb_dist;
  logic [K_MAX-1:0][LABEL_W-1:0] nb_label;
  logic [K_MAX-1:0]              nb_valid;
  logic                          replaced;

  kmin_select dut (.*);

  int checks = 0, failures = 0;
  int n_replaced = 0, n_rejected = 0, exp_replaced = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n && replaced) n_replaced++;

  // key = distance * 2^20 + arrival index: sorting keys gives the reference order
  task automatic run_stream(int k, int n, int mode);
    longint keys[$];
    int     lab[int];
    int     cur_max;
    int     got[$], expd[$];
    exp_replaced = 0;
    n_replaced   = 0;
    k_cfg = KCFG_W'(k);
    clear = 1; @(negedge clk); clear = 0;
    check(nb_valid == '0, "clear empties the registers");
    for (int i = 0; i < n; i++) begin
      int d;
      case (mode)
        0: d = int'($urandom_range(1000000));
        1: d = int'($urandom_range(8));          // many equal distances
        3: d = (i == 1) ? 7 : (i == n - 1) ? 3 : 5;  // equal furthest neighbours
        default: d = (n - i) * 3;                // falling: every sample enters
      endcase
      // reference of "enters": strictly below the current k-th smallest
      begin
        longint tmp[$] = keys;
        tmp.sort();
        if (tmp.size() < k) exp_replaced++;
        else if (longint'(d) < (tmp[k-1] >> 20)) exp_replaced++;
        else n_rejected++;
      end
      keys.push_back((longint'(d) << 20) | longint'(i));
      lab[i] = int'($urandom_range(15));
      in_valid = 1; in_dist = DIST_W'(d); in_label = LABEL_W'(lab[i]);
      @(negedge clk);
    end
    in_valid = 0;
    @(negedge clk);
    keys.sort();
    for (int j = 0; j < k && j < keys.size(); j++)
      expd.push_back(int'(keys[j] >> 20) * 16 + lab[int'(keys[j] & 64'hFFFFF)]);
    for (int j = 0; j < K_MAX; j++)
      if (nb_valid[j]) got.push_back(int'(nb_dist[j]) * 16 + int'(nb_label[j]));
    got.sort(); expd.sort();
    check(got.size() == expd.size(), $sformatf("k=%0d n=%0d count %0d exp %0d", k, n, got.size(), expd.size()));
    for (int j = 0; j < got.size() && j < expd.size(); j++)
      check(got[j] == expd[j], $sformatf("k=%0d mode=%0d neighbour %0d got %0d exp %0d", k, mode, j, got[j], expd[j]));
    check(n_replaced == exp_replaced, $sformatf("replacements %0d exp %0d", n_replaced, exp_replaced));
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(nb_valid == '0, "reset empties the registers");
    for (int k = 1; k <= K_MAX; k++) begin
      run_stream(k, 200, 0);
      run_stream(k, 100, 1);
      run_stream(k, 40, 2);
      run_stream(k, (k > 1) ? k - 1 : 1, 0);   // fewer samples than k
      run_stream(k, k + 2, 3);
    end
    check(n_rejected > 0, "some samples were rejected");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
