// train_mem_tb: self-checking test of the training-sample store.
// Writes random samples to random addresses of the full-size memory while a
// shadow copy is kept, then reads them back and checks each word arrives one
// cycle after rd_en, that read-during-write returns the old word, that a write
// outside the depth changes nothing, and that rd_en low holds the output.
module train_mem_tb;
  localparam int unsigned DEPTH = 36225, N_FEAT = 6, FEAT_W = 16, LABEL_W = 4;
  localparam int unsigned AW = $clog2(DEPTH + 1);

  logic clk = 0;
  always #5 clk = ~clk;

  logic                          wr_en = 0, rd_en = 0;
  logic [AW-1:0]                 wr_addr = '0, rd_addr = '0;
  logic [N_FEAT-1:0][FEAT_W-1:0] wr_feat = '0, rd_feat;
  logic [LABEL_W-1:0]            wr_label = '0, rd_label;

  train_mem dut (.*);

  int checks = 0, failures = 0;
  logic [N_FEAT-1:0][FEAT_W-1:0] sh_feat [int];
  logic [LABEL_W-1:0]            sh_label [int];
  int addrs[$];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [N_FEAT-1:0][FEAT_W-1:0] rand_feat();
    logic [N_FEAT-1:0][FEAT_W-1:0] v;
    for (int f = 0; f < N_FEAT; f++) v[f] = FEAT_W'($urandom);
    return v;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk);
    // corners first, then random addresses
    addrs.push_back(0); addrs.push_back(DEPTH - 1);
    for (int i = 0; i < 300; i++) addrs.push_back(int'($urandom_range(DEPTH - 1)));
    foreach (addrs[i]) begin
      wr_en = 1; wr_addr = AW'(addrs[i]); wr_feat = rand_feat(); wr_label = LABEL_W'($urandom);
      sh_feat[addrs[i]] = wr_feat; sh_label[addrs[i]] = wr_label;
      @(negedge clk);
    end
    // write beyond the depth: must not alias onto a stored word
    wr_addr = AW'(DEPTH); wr_feat = '1; wr_label = '1;
    @(negedge clk);
    wr_en = 0;
    // read back, back to back
    foreach (addrs[i]) begin
      rd_en = 1; rd_addr = AW'(addrs[i]);
      @(negedge clk);
      check(rd_feat == sh_feat[addrs[i]] && rd_label == sh_label[addrs[i]],
            $sformatf("read addr %0d", addrs[i]));
    end
    // hold: rd_en low keeps the last word
    rd_en = 0; rd_addr = AW'(addrs[0]);
    @(negedge clk);
    check(rd_feat == sh_feat[addrs[$]], "output held with rd_en low");
    // read during write to the same address returns the old word
    rd_en = 1; rd_addr = AW'(addrs[0]); wr_en = 1; wr_addr = AW'(addrs[0]);
    wr_feat = ~sh_feat[addrs[0]]; wr_label = ~sh_label[addrs[0]];
    @(negedge clk);
    check(rd_feat == sh_feat[addrs[0]], "read-during-write returns old word");
    wr_en = 0;
    @(negedge clk);
    check(rd_feat == ~sh_feat[addrs[0]] && rd_label == ~sh_label[addrs[0]], "new word after write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
