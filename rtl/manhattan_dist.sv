// manhattan_dist: pipelined Manhattan (L1) distance between a training sample
// and the query.
//
// out_dist = sum over f of |in_feat[f] - query[f]|, computed in two register
// stages: stage 1 forms the N_FEAT absolute differences, stage 2 adds them.
// One sample enters per cycle; out_valid/out_dist/out_label follow in_valid by
// two cycles. The label of the sample travels alongside so the selector gets
// the pair together. The query must stay stable while samples stream through.
//
// The paper chooses the Manhattan metric to avoid square roots; the two-stage
// pipeline and the widths (features unsigned FEAT_W bits, distance
// DIST_W = FEAT_W + clog2(N_FEAT) + 1 bits) are this design's choices.
module manhattan_dist
#(
  parameter int unsigned N_FEAT  = knn_pkg::N_FEAT_DEF,
  parameter int unsigned FEAT_W  = knn_pkg::FEAT_W_DEF,
  parameter int unsigned LABEL_W = knn_pkg::LABEL_W_DEF,
  parameter int unsigned DIST_W  = knn_pkg::dist_width(FEAT_W, N_FEAT)
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           in_valid,
  input  logic [N_FEAT-1:0][FEAT_W-1:0]  in_feat,
  input  logic [LABEL_W-1:0]             in_label,
  input  logic [N_FEAT-1:0][FEAT_W-1:0]  query,
  output logic                           out_valid,
  output logic [DIST_W-1:0]              out_dist,
  output logic [LABEL_W-1:0]             out_label
);

  logic [N_FEAT-1:0][FEAT_W-1:0] absd_q;
  logic [N_FEAT-1:0][FEAT_W-1:0] absd_d;
  logic                          s1_valid;
  logic [LABEL_W-1:0]            s1_label;
  logic [DIST_W-1:0]             sum_d;

  always_comb begin
    for (int f = 0; f < int'(N_FEAT); f++)
      absd_d[f] = (in_feat[f] >= query[f]) ? in_feat[f] - query[f]
                                           : query[f] - in_feat[f];
  end

  always_comb begin
    sum_d = '0;
    for (int f = 0; f < int'(N_FEAT); f++)
      sum_d = sum_d + DIST_W'(absd_q[f]);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s1_valid  <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      s1_valid  <= in_valid;
      out_valid <= s1_valid;
    end
  end

  always_ff @(posedge clk) begin
    absd_q    <= absd_d;
    s1_label  <= in_label;
    out_dist  <= sum_d;
    out_label <= s1_label;
  end

endmodule
