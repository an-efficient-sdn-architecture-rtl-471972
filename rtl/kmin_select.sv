// kmin_select: K-Min selection of the k nearest neighbours.
//
// Holds K_MAX (distance, label) registers. A clear pulse sets every distance to
// "infinity" (all ones, larger than any real distance). For each incoming
// (in_dist, in_label) the module finds, among the first k_cfg registers, the one
// with the largest distance (lowest index on equal distances) and overwrites it
// when in_dist is strictly smaller. So a sample is compared only with the
// furthest recorded neighbour, never sorted against the others, and after the
// whole training set has passed the registers hold the k smallest distances
// (of equal distances, the sample seen first is kept).
//
// Timing: one input per cycle; the max search is combinational over the
// registers and the update lands on the next clock edge, so a sample can use
// the result of the previous one without a stall. Each register also keeps
// the arrival number of its sample (counted from clear); the entry evicted is
// the one with the largest (distance, arrival) pair, so among neighbours at
// the same distance the latest is dropped first. The final set is therefore
// exactly the first k of the stream sorted stably by distance. replaced pulses one cycle
// after an input that was taken. Outputs nb_dist/nb_label/nb_valid show the
// registers; nb_valid marks entries below k_cfg that hold a real sample.
// k_cfg must lie in 1..K_MAX and stay stable during a query.
//
// The selection rule is the paper's K-Min algorithm; the single-cycle
// parallel max search and the arrival-order tie rule are this design's
// choices.
module kmin_select
#(
  parameter int unsigned K_MAX   = knn_pkg::K_MAX_DEF,
  parameter int unsigned DIST_W  = knn_pkg::DIST_W_DEF,
  parameter int unsigned LABEL_W = knn_pkg::LABEL_W_DEF,
  parameter int unsigned SEQ_W   = $clog2(knn_pkg::N_TRAIN_MAX_DEF + 1),
  parameter int unsigned KCFG_W  = $clog2(K_MAX + 1)
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             clear,
  input  logic [KCFG_W-1:0]                k_cfg,
  input  logic                             in_valid,
  input  logic [DIST_W-1:0]                in_dist,
  input  logic [LABEL_W-1:0]               in_label,
  output logic [K_MAX-1:0][DIST_W-1:0]     nb_dist,
  output logic [K_MAX-1:0][LABEL_W-1:0]    nb_label,
  output logic [K_MAX-1:0]                 nb_valid,
  output logic                             replaced
);

  localparam logic [DIST_W-1:0] INF = '1;
  localparam int unsigned IDX_W = (K_MAX > 1) ? $clog2(K_MAX) : 1;

  logic [K_MAX-1:0][DIST_W-1:0]  dist_q;
  logic [K_MAX-1:0][LABEL_W-1:0] label_q;
  logic [K_MAX-1:0][SEQ_W-1:0]   seq_q;
  logic [SEQ_W-1:0]              seq_cnt;
  logic [IDX_W-1:0]              max_idx;
  logic [DIST_W-1:0]             max_dist;
  logic [SEQ_W-1:0]              max_seq;
  logic                          take;

  // Furthest recorded neighbour among the active entries (tmp_max); on equal
  // distances the later arrival counts as further.
  always_comb begin
    max_idx  = '0;
    max_dist = dist_q[0];
    max_seq  = seq_q[0];
    for (int i = 1; i < int'(K_MAX); i++) begin
      if ((i < int'(k_cfg)) && ({dist_q[i], seq_q[i]} > {max_dist, max_seq})) begin
        max_idx  = IDX_W'(i);
        max_dist = dist_q[i];
        max_seq  = seq_q[i];
      end
    end
  end

  assign take = in_valid && (k_cfg != '0) && (in_dist < max_dist);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      dist_q   <= {K_MAX{INF}};
      label_q  <= '0;
      seq_q    <= '0;
      seq_cnt  <= '0;
      replaced <= 1'b0;
    end else if (clear) begin
      dist_q   <= {K_MAX{INF}};
      label_q  <= '0;
      seq_q    <= '0;
      seq_cnt  <= '0;
      replaced <= 1'b0;
    end else begin
      replaced <= take;
      if (in_valid) seq_cnt <= seq_cnt + 1'b1;
      if (take) begin
        dist_q[max_idx]  <= in_dist;
        label_q[max_idx] <= in_label;
        seq_q[max_idx]   <= seq_cnt;
      end
    end
  end

  always_comb begin
    for (int i = 0; i < int'(K_MAX); i++)
      nb_valid[i] = (i < int'(k_cfg)) && (dist_q[i] != INF);
  end

  assign nb_dist  = dist_q;
  assign nb_label = label_q;

  // k must be a legal neighbour count while samples arrive.
  a_k_range: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid |-> (k_cfg >= 1 && 32'(k_cfg) <= K_MAX));

endmodule
