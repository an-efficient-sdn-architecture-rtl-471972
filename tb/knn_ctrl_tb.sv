// knn_ctrl_tb: self-checking test of the classification sequencer.
// Runs queries with assorted sample counts (including 0, 1 and a count above
// the capacity, which must be clamped) and result back-pressure. A monitor
// checks that the reads cover addresses 0..n-1 once each in order, that
// sel_clear pulses on the accepting cycle, that vote_start comes n+4 cycles
// and r_valid n+5 cycles after acceptance, that r_valid holds until r_ready
// and that q_ready is low while busy. Uses a capacity of 100 samples.
module knn_ctrl_tb;
  localparam int unsigned NMAX = 100, AW = 7;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0;

  logic          q_valid = 0, q_ready, r_ready = 0, r_valid, busy;
  logic [AW-1:0] n_train = '0, mem_rd_addr;
  logic          mem_rd_en, sel_clear, vote_start;

  knn_ctrl #(.N_TRAIN_MAX(NMAX)) dut (.*);

  int checks = 0, failures = 0, cycle = 0;
  int t_acc, n_exp, next_addr, t_vote, t_res;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) cycle <= cycle + 1;

  // monitor of the read stream
  always @(negedge clk) if (rst_n) begin
    if (mem_rd_en) begin
      check(int'(mem_rd_addr) == next_addr && next_addr < n_exp,
            $sformatf("read addr %0d exp %0d of %0d", mem_rd_addr, next_addr, n_exp));
      next_addr++;
    end
    if (vote_start) t_vote = cycle;
    if (busy) check(!q_ready, "no query accepted while busy");
  end

  task automatic query(int n, int stall);
    q_valid = 1; n_train = AW'(n);
    #1;
    check(q_ready && sel_clear, "ready and clear on accept");
    t_acc = cycle; n_exp = (n > NMAX) ? NMAX : n; next_addr = 0; t_vote = -1;
    @(negedge clk);
    q_valid = 0;
    check(!sel_clear, "clear is a pulse");
    while (!r_valid) begin
      @(negedge clk);
      if (cycle - t_acc > 1000) break;
    end
    t_res = cycle;
    check(next_addr == n_exp, $sformatf("%0d reads for n=%0d", next_addr, n));
    check(t_vote - t_acc == n_exp + 4, $sformatf("vote after %0d cycles, n=%0d", t_vote - t_acc, n_exp));
    check(t_res - t_acc == n_exp + 5, $sformatf("result after %0d cycles, n=%0d", t_res - t_acc, n_exp));
    repeat (stall) begin
      @(negedge clk);
      check(r_valid, "result held under back-pressure");
    end
    r_ready = 1;
    @(negedge clk);
    r_ready = 0;
    check(!r_valid && q_ready && !busy, "idle after the result is taken");
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(q_ready && !busy && !mem_rd_en && !r_valid, "idle after reset");
    query(10, 0);
    query(1, 3);
    query(0, 0);
    query(100, 1);
    query(120, 0);    // clamped to 100
    for (int i = 0; i < 10; i++) query(int'($urandom_range(100)), int'($urandom_range(3)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
