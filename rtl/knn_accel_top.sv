// knn_accel_top: K-Min KNN accelerator for smart-home flow classification.
//
// The SDN controller sends the features it extracted from one flow (a query);
// the accelerator returns the class of the nearest stored flows: the device it
// came from or the attack it belongs to. Inside:
//   train_mem       labelled training samples, loaded by the host beforehand
//   manhattan_dist  L1 distance of each stored sample to the query (2 stages)
//   kmin_select     K-Min: keeps the k smallest distances, each new distance
//                   compared only with the furthest kept one
//   mode_vote       most common label among the k kept neighbours
//   knn_ctrl        accepts the query, scans every sample once, starts the vote
// Interface: training samples are written through tr_wr_* while the core is
// idle. A query is a valid/ready transfer of q_feat; n_train (samples to scan)
// and k_cfg (neighbours, 0 is taken as 1 and values above K_MAX as K_MAX) are
// sampled with it. The result is a valid/ready transfer of r_class and r_votes.
// Timing: one training sample per cycle; r_valid rises n_train + 5 cycles
// after the query is accepted (36,230 cycles for the full 36,225-sample set,
// 0.36 ms at 100 MHz).
//
// The data flow (distance and K-Min selection fused in one pipelined pass,
// then the mode) is the paper's; the handshakes, widths, the on-chip
// training store and the cycle timing are this design's choices.
module knn_accel_top
#(
  parameter int unsigned N_TRAIN_MAX = knn_pkg::N_TRAIN_MAX_DEF,
  parameter int unsigned N_FEAT      = knn_pkg::N_FEAT_DEF,
  parameter int unsigned FEAT_W      = knn_pkg::FEAT_W_DEF,
  parameter int unsigned LABEL_W     = knn_pkg::LABEL_W_DEF,
  parameter int unsigned K_MAX       = knn_pkg::K_MAX_DEF,
  parameter int unsigned AW          = $clog2(N_TRAIN_MAX + 1),
  parameter int unsigned KCFG_W      = $clog2(K_MAX + 1)
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // training-set load
  input  logic                           tr_wr_en,
  input  logic [AW-1:0]                  tr_wr_addr,
  input  logic [N_FEAT-1:0][FEAT_W-1:0]  tr_wr_feat,
  input  logic [LABEL_W-1:0]             tr_wr_label,
  // configuration, sampled with the query
  input  logic [AW-1:0]                  n_train,
  input  logic [KCFG_W-1:0]              k_cfg,
  // query (extracted features)
  input  logic                           q_valid,
  output logic                           q_ready,
  input  logic [N_FEAT-1:0][FEAT_W-1:0]  q_feat,
  // classification and detection result
  output logic                           r_valid,
  input  logic                           r_ready,
  output logic [LABEL_W-1:0]             r_class,
  output logic [KCFG_W-1:0]              r_votes,
  output logic                           busy
);

  localparam int unsigned DIST_W = knn_pkg::dist_width(FEAT_W, N_FEAT);

  logic                          accept;
  logic [N_FEAT-1:0][FEAT_W-1:0] query_q;
  logic [KCFG_W-1:0]             k_q;
  logic [KCFG_W-1:0]             k_eff;

  logic                          mem_rd_en;
  logic [AW-1:0]                 mem_rd_addr;
  logic                          mem_valid;
  logic [N_FEAT-1:0][FEAT_W-1:0] mem_feat;
  logic [LABEL_W-1:0]            mem_label;

  logic                          d_valid;
  logic [DIST_W-1:0]             d_dist;
  logic [LABEL_W-1:0]            d_label;

  logic                          sel_clear;
  logic [K_MAX-1:0][LABEL_W-1:0] nb_label;
  logic [K_MAX-1:0]              nb_valid;

  logic                          vote_start;
  logic                          vote_done;

  assign accept = q_valid && q_ready;
  assign k_eff  = (k_cfg == '0) ? KCFG_W'(1)
                : (32'(k_cfg) > K_MAX) ? KCFG_W'(K_MAX) : k_cfg;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      query_q   <= '0;
      k_q       <= KCFG_W'(K_MAX);
      mem_valid <= 1'b0;
    end else begin
      if (accept) begin
        query_q <= q_feat;
        k_q     <= k_eff;
      end
      mem_valid <= mem_rd_en;
    end
  end

  knn_ctrl #(.N_TRAIN_MAX(N_TRAIN_MAX), .PIPE_LAT(4), .AW(AW)) u_ctrl (
    .clk, .rst_n,
    .q_valid, .q_ready, .n_train,
    .mem_rd_en, .mem_rd_addr,
    .sel_clear, .vote_start,
    .r_valid, .r_ready, .busy
  );

  train_mem #(.DEPTH(N_TRAIN_MAX), .N_FEAT(N_FEAT), .FEAT_W(FEAT_W),
              .LABEL_W(LABEL_W), .AW(AW)) u_mem (
    .clk,
    .wr_en(tr_wr_en), .wr_addr(tr_wr_addr), .wr_feat(tr_wr_feat), .wr_label(tr_wr_label),
    .rd_en(mem_rd_en), .rd_addr(mem_rd_addr), .rd_feat(mem_feat), .rd_label(mem_label)
  );

  manhattan_dist #(.N_FEAT(N_FEAT), .FEAT_W(FEAT_W), .LABEL_W(LABEL_W),
                   .DIST_W(DIST_W)) u_dist (
    .clk, .rst_n,
    .in_valid(mem_valid), .in_feat(mem_feat), .in_label(mem_label),
    .query(query_q),
    .out_valid(d_valid), .out_dist(d_dist), .out_label(d_label)
  );

  kmin_select #(.K_MAX(K_MAX), .DIST_W(DIST_W), .LABEL_W(LABEL_W),
                .SEQ_W(AW), .KCFG_W(KCFG_W)) u_sel (
    .clk, .rst_n,
    .clear(sel_clear), .k_cfg(k_q),
    .in_valid(d_valid), .in_dist(d_dist), .in_label(d_label),
    .nb_dist(), .nb_label, .nb_valid, .replaced()
  );

  mode_vote #(.K_MAX(K_MAX), .LABEL_W(LABEL_W), .CNT_W(KCFG_W)) u_vote (
    .clk, .rst_n,
    .start(vote_start), .nb_label, .nb_valid,
    .done(vote_done), .class_out(r_class), .votes(r_votes)
  );

  // The vote result lands exactly when the controller starts offering it.
  a_vote_timing: assert property (@(posedge clk) disable iff (!rst_n)
    $rose(r_valid) |-> vote_done);
  // The training set must not change under a running query.
  a_no_load_when_busy: assert property (@(posedge clk) disable iff (!rst_n)
    tr_wr_en |-> !busy);

endmodule
