// knn_ctrl: sequencer for one K-Min KNN classification.
//
// States:
//   IDLE  q_ready is high. When q_valid is seen the query is accepted: the
//         number of samples to scan is latched (clamped to N_TRAIN_MAX) and
//         sel_clear pulses so the neighbour registers restart at infinity.
//   SCAN  one training-sample read per cycle, addresses 0 .. n_train-1, so the
//         training set is traversed exactly once.
//   DRAIN PIPE_LAT-1 cycles while the last samples pass through the memory,
//         the distance pipeline and the neighbour update.
//   VOTE  one cycle: vote_start asks for the mode of the neighbour labels.
//   RES   r_valid is high (the vote result appears on this cycle) until
//         r_ready; then back to IDLE.
// Timing: with the query accepted in cycle a, r_valid rises in cycle
// a + n_train + PIPE_LAT + 1 (n_train + 5 cycles with the default pipeline).
// A query with n_train = 0 skips SCAN and returns the empty vote.
//
// Traversing the data once, with distance and selection fused into one
// pipelined loop, is the paper's scheme; the state machine, the valid/ready
// handshakes and the pipeline depth are this design's choices.
module knn_ctrl
#(
  parameter int unsigned N_TRAIN_MAX = knn_pkg::N_TRAIN_MAX_DEF,
  parameter int unsigned PIPE_LAT    = 4,
  parameter int unsigned AW          = $clog2(N_TRAIN_MAX + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          q_valid,
  output logic          q_ready,
  input  logic [AW-1:0] n_train,
  output logic          mem_rd_en,
  output logic [AW-1:0] mem_rd_addr,
  output logic          sel_clear,
  output logic          vote_start,
  output logic          r_valid,
  input  logic          r_ready,
  output logic          busy
);

  typedef enum logic [2:0] {IDLE, SCAN, DRAIN, VOTE, RES} state_e;

  localparam int unsigned DW = $clog2(PIPE_LAT + 1);

  state_e        state_q;
  logic [AW-1:0] n_q;
  logic [AW-1:0] addr_q;
  logic [DW-1:0] drain_q;
  logic          accept;
  logic [AW-1:0] n_clamped;

  assign accept    = (state_q == IDLE) && q_valid;
  assign n_clamped = (32'(n_train) > N_TRAIN_MAX) ? AW'(N_TRAIN_MAX) : n_train;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q <= IDLE;
      n_q     <= '0;
      addr_q  <= '0;
      drain_q <= '0;
    end else begin
      unique case (state_q)
        IDLE: if (accept) begin
          n_q     <= n_clamped;
          addr_q  <= '0;
          drain_q <= DW'(PIPE_LAT - 1);
          state_q <= (n_clamped == '0) ? DRAIN : SCAN;
        end
        SCAN: begin
          addr_q <= addr_q + 1'b1;
          if (addr_q == n_q - 1'b1) state_q <= DRAIN;
        end
        DRAIN: begin
          drain_q <= drain_q - 1'b1;
          if (drain_q <= DW'(1)) state_q <= VOTE;
        end
        VOTE: state_q <= RES;
        RES:  if (r_ready) state_q <= IDLE;
        default: state_q <= IDLE;
      endcase
    end
  end

  assign q_ready     = (state_q == IDLE);
  assign sel_clear   = accept;
  assign mem_rd_en   = (state_q == SCAN);
  assign mem_rd_addr = addr_q;
  assign vote_start  = (state_q == VOTE);
  assign r_valid     = (state_q == RES);
  assign busy        = (state_q != IDLE);

  // The scan never reads past the latched sample count.
  a_addr_range: assert property (@(posedge clk) disable iff (!rst_n)
    mem_rd_en |-> (addr_q < n_q));
  // A result, once offered, stays offered until it is taken.
  a_res_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (r_valid && !r_ready) |=> r_valid);

endmodule
