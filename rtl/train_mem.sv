// train_mem: training-sample store of the KNN accelerator.
//
// KNN has no training step beyond keeping the labelled samples, so this memory
// is the whole "model". Each word holds one sample: N_FEAT features of FEAT_W
// bits and a LABEL_W-bit class label. The host writes samples one per cycle
// through the write port (wr_en, wr_addr, wr_feat, wr_label). During a
// classification the controller reads one sample per cycle: rd_feat/rd_label
// appear on the clock edge after rd_en (synchronous read, one cycle latency),
// which maps onto FPGA block RAM. A write and a read of the same address in
// one cycle return the old word.
//
// That the samples are kept in memory follows the paper; the word layout, the
// single write and single read port and the on-chip placement are this
// design's choices. Addresses at or above DEPTH are ignored on write.
module train_mem
#(
  parameter int unsigned DEPTH   = knn_pkg::N_TRAIN_MAX_DEF,
  parameter int unsigned N_FEAT  = knn_pkg::N_FEAT_DEF,
  parameter int unsigned FEAT_W  = knn_pkg::FEAT_W_DEF,
  parameter int unsigned LABEL_W = knn_pkg::LABEL_W_DEF,
  parameter int unsigned AW      = $clog2(DEPTH + 1)
) (
  input  logic                           clk,
  input  logic                           wr_en,
  input  logic [AW-1:0]                  wr_addr,
  input  logic [N_FEAT-1:0][FEAT_W-1:0]  wr_feat,
  input  logic [LABEL_W-1:0]             wr_label,
  input  logic                           rd_en,
  input  logic [AW-1:0]                  rd_addr,
  output logic [N_FEAT-1:0][FEAT_W-1:0]  rd_feat,
  output logic [LABEL_W-1:0]             rd_label
);

  localparam int unsigned WORD_W = N_FEAT * FEAT_W + LABEL_W;

  logic [WORD_W-1:0] mem [DEPTH];
  logic [WORD_W-1:0] rd_word;

  always_ff @(posedge clk) begin
    if (wr_en && (32'(wr_addr) < DEPTH))
      mem[wr_addr] <= {wr_label, wr_feat};
    if (rd_en)
      rd_word <= mem[rd_addr];
  end

  assign rd_feat  = rd_word[N_FEAT*FEAT_W-1:0];
  assign rd_label = rd_word[WORD_W-1 -: LABEL_W];

endmodule
