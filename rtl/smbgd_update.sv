// smbgd_update: sequential mini-batch gradient accumulator (SMBGD).
//
// For the p-th gradient H of mini-batch k it forms
//   Hhat = gamma * Hhat_prev + mu * H   when p = 0 (gamma taken as 0 in the
//                                        first mini-batch, k = 0)
//   Hhat = beta  * Hhat_prev + mu * H   when 0 < p < P
// where Hhat_prev is the accumulator's previous value, i.e. for p = 0 the last
// value of the previous mini-batch. Stage 1 registers mu*H; stage 2 closes
// the recurrence in one cycle (multiply by the selected coefficient and add),
// so one gradient per cycle is accepted with no stall. Every accumulated
// value leaves on hhat with out_valid, two cycles after its H entered. The
// sample counters live in minibatch_ctrl, advanced by stage 1's valid.
// restart clears Hhat, the counters and the samples inside this unit.
// MOMENTUM = 0 builds the cheaper variant without the momentum term: the
// first sample of every mini-batch then starts from 0 * Hhat, as in the
// first mini-batch, and the gamma input is unused.
// mu, beta, gamma are run-time single-precision inputs. Keeping one register
// (the "reset to zero" at a batch boundary is implied by the p = 0 rule
// overwriting it) and the two-stage split are this design's choices.
module smbgd_update
  import easi_pkg::*;
#(
  parameter int unsigned N        = EASI_N,
  parameter bit          MOMENTUM = 1'b1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               restart,
  input  logic               in_valid,
  input  fp32_t              h [N][N],
  input  fp32_t              mu,
  input  fp32_t              beta,
  input  fp32_t              gamma,
  input  logic [BATCH_W-1:0] batch_size,
  output logic               out_valid,
  output fp32_t              hhat [N][N],
  output logic [BATCH_W-1:0] p,
  output logic [31:0]        k
);

  fp32_t muh_d [N][N], muh_q [N][N];
  fp32_t dec_d [N][N], acc_d [N][N], acc_q [N][N];
  fp32_t coeff;
  logic  v1_q, v2_q;
  logic  first_sample, first_batch;

  minibatch_ctrl #(.PW(BATCH_W), .KW(32)) u_ctrl (
    .clk, .rst_n, .restart,
    .advance     (v1_q),
    .batch_size,
    .p, .k,
    .first_sample,
    .first_batch
  );

  always_comb
    if (!first_sample)    coeff = beta;
    else if (first_batch || !MOMENTUM) coeff = FP_ZERO;
    else                  coeff = gamma;

  for (genvar i = 0; i < N; i++) begin : g_r
    for (genvar j = 0; j < N; j++) begin : g_c
      fp_mul u_mu  (.a(mu),    .b(h[i][j]),     .y(muh_d[i][j]));
      fp_mul u_dec (.a(coeff), .b(acc_q[i][j]), .y(dec_d[i][j]));
      fp_add u_acc (.a(dec_d[i][j]), .b(muh_q[i][j]), .y(acc_d[i][j]));
    end
  end

  always_ff @(posedge clk) muh_q <= muh_d;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      v1_q  <= 1'b0;
      v2_q  <= 1'b0;
      acc_q <= '{default: FP_ZERO};
    end else if (restart) begin
      v1_q  <= 1'b0;
      v2_q  <= 1'b0;
      acc_q <= '{default: FP_ZERO};
    end else begin
      v1_q <= in_valid;
      v2_q <= v1_q;
      if (v1_q) acc_q <= acc_d;
    end

  assign hhat      = acc_q;
  assign out_valid = v2_q;

endmodule
