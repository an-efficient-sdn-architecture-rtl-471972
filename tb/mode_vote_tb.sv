// mode_vote_tb: self-checking test of the neighbour majority vote.
// Drives random neighbour labels and valid masks (plus chosen ties and the
// empty case), and compares class_out / votes with a reference that counts
// each label and prefers the smaller label on equal counts. Checks that done
// follows start by one cycle and that the result holds until the next start.
module mode_vote_tb;
  localparam int unsigned K_MAX = 5, LABEL_W = 4, CNT_W = 3;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0;

  logic                          start = 0;
  logic [K_MAX-1:0][LABEL_W-1:0] nb_label = '0;
  logic [K_MAX-1:0]              nb_valid = '0;
  logic                          done;
  logic [LABEL_W-1:0]            class_out;
  logic [CNT_W-1:0]              votes;

  mode_vote dut (.*);

  int checks = 0, failures = 0, ties = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic one(logic [K_MAX-1:0][LABEL_W-1:0] l, logic [K_MAX-1:0] v);
    int cnt[16];
    int bc = 0, bn = 0, nbest = 0;
    foreach (cnt[c]) cnt[c] = 0;
    for (int i = 0; i < K_MAX; i++) if (v[i]) cnt[l[i]]++;
    for (int c = 0; c < 16; c++) if (cnt[c] > bn) begin bn = cnt[c]; bc = c; end
    for (int c = 0; c < 16; c++) if (cnt[c] == bn && bn > 0) nbest++;
    if (nbest > 1) ties++;
    nb_label = l; nb_valid = v; start = 1;
    @(negedge clk);
    start = 0;
    check(done == 1'b1, "done one cycle after start");
    check(int'(class_out) == bc && int'(votes) == bn,
          $sformatf("labels %h valid %b: got %0d/%0d exp %0d/%0d", l, v, class_out, votes, bc, bn));
    nb_label = ~l;   // inputs change, result must hold
    @(negedge clk);
    check(done == 1'b0 && int'(class_out) == bc, "result held, done is a pulse");
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    one({4'd9, 4'd9, 4'd3, 4'd3, 4'd7}, 5'b11111);   // tie 9 vs 3: 3 wins
    one({4'd9, 4'd9, 4'd9, 4'd3, 4'd3}, 5'b11111);   // 9 wins 3:2
    one({4'd1, 4'd1, 4'd1, 4'd4, 4'd4}, 5'b00011);   // masked: 4 wins
    one('0, 5'b00000);                                // no neighbour
    one({4'd15, 4'd2, 4'd8, 4'd6, 4'd0}, 5'b11111);  // all different: 0
    for (int t = 0; t < 2000; t++) begin
      logic [K_MAX-1:0][LABEL_W-1:0] l;
      for (int i = 0; i < K_MAX; i++) l[i] = LABEL_W'($urandom_range(($urandom_range(1) == 0) ? 3 : 15));
      one(l, K_MAX'($urandom));
    end
    check(ties > 0, "ties occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
