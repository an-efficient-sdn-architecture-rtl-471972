// knn_pkg: constants shared by the K-Min KNN accelerator.
//
// The accelerator classifies one flow-feature vector (a "query") against a
// stored training set with the k-nearest-neighbour rule, using the Manhattan
// distance and the K-Min selection (each training sample is compared only with
// the furthest of the k neighbours recorded so far). The numbers below are the
// defaults of the module parameters:
//   N_TRAIN_MAX = 36225  training samples held (the 50 % split of the data set)
//   N_FEAT      = 6      features per flow: ICMP, TCP and UDP percentage,
//                        IP diversity ratio, packet count, packet size
//   K_MAX       = 5      neighbours (the default k of the evaluation)
// The feature width (16-bit unsigned fixed point) and the label width (4 bits,
// 16 device / attack classes) are choices of this design; the paper gives
// neither.
package knn_pkg;

  localparam int unsigned N_TRAIN_MAX_DEF = 36225;
  localparam int unsigned N_FEAT_DEF      = 6;
  localparam int unsigned FEAT_W_DEF      = 16;
  localparam int unsigned LABEL_W_DEF     = 4;
  localparam int unsigned K_MAX_DEF       = 5;

  // Manhattan distance width: large enough for N_FEAT * (2^FEAT_W - 1) with one
  // spare bit, so that the all-ones value ("infinity") exceeds every real distance.
  function automatic int unsigned dist_width(int unsigned feat_w, int unsigned n_feat);
    return feat_w + $clog2(n_feat) + 1;
  endfunction

  localparam int unsigned DIST_W_DEF = dist_width(FEAT_W_DEF, N_FEAT_DEF);

endpackage
