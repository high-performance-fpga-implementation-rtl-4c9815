// easi_top: fully pipelined EASI independent component analysis with
// sequential mini-batch gradient descent (SMBGD).
//
// Each valid sample x (M features) is separated into N component estimates
// y = B x and, in the same pass, trains the separation matrix B:
//   y    = B x                                  mat_vec_mul        3 stages
//   g    = y^3 (element-wise)                   cubic_nl           2 stages
//   H    = I - y y^T + g y^T - y g^T            rel_gradient       3 stages
//   Hhat = c * Hhat + mu * H   (c = gamma at    smbgd_update       2 stages
//          the first sample of a mini-batch,
//          0 in the first mini-batch, beta otherwise)
//   B    = B - Hhat B                           sep_matrix_update  3 stages
// That is 10 + log2(M*N) = 13 register stages for M = 4, N = 2, with a new
// sample accepted on every clock edge and no back-pressure; idle cycles
// (x_valid low) pass through as bubbles. A sample presented on edge t gives
// y after edge t+3 and changes B on edge t+12. Every sample is multiplied by
// the B of the edge on which it enters, so the updates of the 12 samples
// still in flight are not yet in it. The SMBGD rule and the formulas follow
// the method; the stage split, the stale-B pipelining, the run-time
// hyperparameters and the load interface are this design's choices.
//
// MOMENTUM = 0 drops the momentum term (gamma is then ignored), the lower-cost
// variant of SMBGD; the default keeps it.
//
// b_load copies b_init into B and restarts SMBGD (p = 0, k = 0, Hhat = 0).
// It must be issued while no sample is in flight (checked by an assertion).
module easi_top
  import easi_pkg::*;
#(
  parameter int unsigned M        = EASI_M,
  parameter int unsigned N        = EASI_N,
  parameter bit          MOMENTUM = 1'b1
) (
  input  logic               clk,
  input  logic               rst_n,
  // sample stream
  input  logic               x_valid,
  input  fp32_t              x [M],
  // hyperparameters and mini-batch size P
  input  fp32_t              mu,
  input  fp32_t              beta,
  input  fp32_t              gamma,
  input  logic [BATCH_W-1:0] batch_size,
  // start matrix
  input  logic               b_load,
  input  fp32_t              b_init [N][M],
  // results
  output logic               y_valid,
  output fp32_t              y [N],
  output fp32_t              b [N][M],
  output logic               hhat_valid,
  output fp32_t              hhat [N][N],
  output logic [BATCH_W-1:0] sample_index,
  output logic [31:0]        batch_index,
  output logic               busy
);

  localparam int unsigned DEPTH = 10 + $clog2(M) + $clog2(N);

  fp32_t b_cur [N][M];
  fp32_t g [N], y_al [N];
  fp32_t h [N][N];
  logic  g_valid, h_valid;
  logic [DEPTH-2:0] flight_q;

  mat_vec_mul #(.M(M), .N(N)) u_mvm (
    .clk, .rst_n,
    .in_valid  (x_valid),
    .x         (x),
    .b         (b_cur),
    .out_valid (y_valid),
    .y         (y)
  );

  cubic_nl #(.N(N)) u_nl (
    .clk, .rst_n,
    .in_valid  (y_valid),
    .y         (y),
    .out_valid (g_valid),
    .g         (g),
    .y_d       (y_al)
  );

  rel_gradient #(.N(N)) u_grad (
    .clk, .rst_n,
    .in_valid  (g_valid),
    .y         (y_al),
    .g         (g),
    .out_valid (h_valid),
    .h         (h)
  );

  smbgd_update #(.N(N), .MOMENTUM(MOMENTUM)) u_smbgd (
    .clk, .rst_n,
    .restart    (b_load),
    .in_valid   (h_valid),
    .h          (h),
    .mu, .beta, .gamma,
    .batch_size,
    .out_valid  (hhat_valid),
    .hhat       (hhat),
    .p          (sample_index),
    .k          (batch_index)
  );

  sep_matrix_update #(.M(M), .N(N)) u_bupd (
    .clk, .rst_n,
    .in_valid (hhat_valid),
    .hhat     (hhat),
    .load     (b_load),
    .b_init   (b_init),
    .b        (b_cur)
  );

  assign b = b_cur;

  // Samples in flight: a sample entering on edge t is done after edge t+12.
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) flight_q <= '0;
    else        flight_q <= {flight_q[DEPTH-3:0], x_valid};

  assign busy = |flight_q;

  // A new start matrix may only be loaded into an empty pipeline.
  a_load_idle: assert property (@(posedge clk) disable iff (!rst_n)
                                b_load |-> !busy && !x_valid)
    else $error("b_load while samples are in flight");

endmodule
