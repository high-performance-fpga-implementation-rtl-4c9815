// rel_gradient: EASI relative (natural) gradient
//   H = I - y y^T + g(y) y^T - y g(y)^T          (N x N)
//
// Stage 1 registers the three outer products y_i*y_j, g_i*y_j and y_i*g_j.
// Stage 2 registers A = I - y y^T and C = g y^T - y g^T. Stage 3 registers
// H = A + C. One sample per cycle, latency 3. The signs follow the formula
// as the design states it (I - y y^T, not the y y^T - I of the original
// EASI paper); with a negative learning rate the update then moves in the
// original direction. The three-stage split is this design's choice.
module rel_gradient
  import easi_pkg::*;
#(
  parameter int unsigned N = EASI_N
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  fp32_t y [N],
  input  fp32_t g [N],
  output logic  out_valid,
  output fp32_t h [N][N]
);

  fp32_t yy_d [N][N], gy_d [N][N], yg_d [N][N];
  fp32_t yy_q [N][N], gy_q [N][N], yg_q [N][N];
  fp32_t a_d  [N][N], c_d  [N][N], a_q  [N][N], c_q [N][N];
  fp32_t h_d  [N][N], h_q  [N][N];
  logic [2:0] vpipe;

  for (genvar i = 0; i < N; i++) begin : g_r
    for (genvar j = 0; j < N; j++) begin : g_c
      localparam fp32_t EYE = (i == j) ? FP_ONE : FP_ZERO;
      fp_mul u_yy (.a(y[i]), .b(y[j]), .y(yy_d[i][j]));
      fp_mul u_gy (.a(g[i]), .b(y[j]), .y(gy_d[i][j]));
      fp_mul u_yg (.a(y[i]), .b(g[j]), .y(yg_d[i][j]));
      fp_add u_a  (.a(EYE),        .b(fp_neg(yy_q[i][j])), .y(a_d[i][j]));
      fp_add u_c  (.a(gy_q[i][j]), .b(fp_neg(yg_q[i][j])), .y(c_d[i][j]));
      fp_add u_h  (.a(a_q[i][j]),  .b(c_q[i][j]),          .y(h_d[i][j]));
    end
  end

  always_ff @(posedge clk) begin
    yy_q <= yy_d;
    gy_q <= gy_d;
    yg_q <= yg_d;
    a_q  <= a_d;
    c_q  <= c_d;
    h_q  <= h_d;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) vpipe <= '0;
    else        vpipe <= {vpipe[1:0], in_valid};

  assign h         = h_q;
  assign out_valid = vpipe[2];

endmodule
