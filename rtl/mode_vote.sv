// mode_vote: majority (mode) of the neighbour labels.
//
// On start, every class c in 0..2^LABEL_W-1 counts how many valid neighbours
// carry label c (all classes in parallel); the class with the highest count
// wins, the smallest label among equal counts. class_out and votes (that
// count) are registered and done pulses on the clock edge after start. With
// no valid neighbour the result is class 0 with votes 0.
//
// Returning the mode of the k neighbour labels follows the paper; the
// parallel counters and the smallest-label tie rule are this design's choices.
module mode_vote
#(
  parameter int unsigned K_MAX   = knn_pkg::K_MAX_DEF,
  parameter int unsigned LABEL_W = knn_pkg::LABEL_W_DEF,
  parameter int unsigned CNT_W   = $clog2(K_MAX + 1)
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           start,
  input  logic [K_MAX-1:0][LABEL_W-1:0]  nb_label,
  input  logic [K_MAX-1:0]               nb_valid,
  output logic                           done,
  output logic [LABEL_W-1:0]             class_out,
  output logic [CNT_W-1:0]               votes
);

  localparam int unsigned N_CLASS = 1 << LABEL_W;

  logic [N_CLASS-1:0][CNT_W-1:0] cnt;
  logic [LABEL_W-1:0]            best_class;
  logic [CNT_W-1:0]              best_cnt;

  always_comb begin
    for (int c = 0; c < int'(N_CLASS); c++) begin
      cnt[c] = '0;
      for (int i = 0; i < int'(K_MAX); i++)
        if (nb_valid[i] && (nb_label[i] == LABEL_W'(c)))
          cnt[c] = cnt[c] + 1'b1;
    end
  end

  always_comb begin
    best_class = '0;
    best_cnt   = cnt[0];
    for (int c = 1; c < int'(N_CLASS); c++) begin
      if (cnt[c] > best_cnt) begin
        best_class = LABEL_W'(c);
        best_cnt   = cnt[c];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      done      <= 1'b0;
      class_out <= '0;
      votes     <= '0;
    end else begin
      done <= start;
      if (start) begin
        class_out <= best_class;
        votes     <= best_cnt;
      end
    end
  end

endmodule
