// manhattan_dist_tb: self-checking test of the L1 distance pipeline.
// Streams random samples (with gaps) against random queries, including the
// all-zero / all-ones extremes, and checks every distance, its label and that
// it appears exactly two cycles after the sample.
module manhattan_dist_tb;
  localparam int unsigned N_FEAT = 6, FEAT_W = 16, LABEL_W = 4, DIST_W = 20;
  localparam int unsigned LAT = 2;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0;

  logic                          in_valid = 0;
  logic [N_FEAT-1:0][FEAT_W-1:0] in_feat = '0, query = '0;
  logic [LABEL_W-1:0]            in_label = '0;
  logic                          out_valid;
  logic [DIST_W-1:0]             out_dist;
  logic [LABEL_W-1:0]            out_label;

  manhattan_dist dut (.*);

  int checks = 0, failures = 0;
  int cycle = 0;
  typedef struct { int t; longint d; int l; } exp_t;
  exp_t expq[$];

  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic longint ref_dist(logic [N_FEAT-1:0][FEAT_W-1:0] a, logic [N_FEAT-1:0][FEAT_W-1:0] b);
    longint s = 0;
    for (int f = 0; f < N_FEAT; f++) begin
      longint x = longint'(a[f]) - longint'(b[f]);
      s += (x < 0) ? -x : x;
    end
    return s;
  endfunction

  // output monitor
  always @(negedge clk) if (rst_n) begin
    if (out_valid) begin
      exp_t e;
      if (expq.size() == 0) check(0, "unexpected output");
      else begin
        e = expq.pop_front();
        check(longint'(out_dist) == e.d && int'(out_label) == e.l,
              $sformatf("dist got %0d exp %0d", out_dist, e.d));
        check(cycle - e.t == LAT, $sformatf("latency %0d", cycle - e.t));
      end
    end
  end

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
    for (int q = 0; q < 6; q++) begin
      case (q)
        0: query = '0;
        1: query = '1;
        default: for (int f = 0; f < N_FEAT; f++) query[f] = FEAT_W'($urandom);
      endcase
      for (int i = 0; i < 400; i++) begin
        in_valid = ($urandom_range(3) != 0);
        for (int f = 0; f < N_FEAT; f++) in_feat[f] = FEAT_W'($urandom);
        if (i == 0) in_feat = (q == 0) ? '1 : '0;   // largest distance
        if (i == 1) in_feat = query;                // zero distance
        in_label = LABEL_W'($urandom);
        if (in_valid) expq.push_back('{cycle, ref_dist(in_feat, query), int'(in_label)});
        @(negedge clk);
      end
      in_valid = 0;
      repeat (4) @(negedge clk);
    end
    check(expq.size() == 0, "all samples produced a distance");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
