// sep_matrix_update: separation-matrix register and its update
//   B <- B - Hhat * B        (Hhat: N x N, B: N x M)
//
// The unit owns the separation matrix B that the y = B x stage reads. For
// every valid Hhat it forms all N*N*M products Hhat[i][l]*B[l][j] (stage 1,
// using B as it is on that edge), sums over l in a registered adder tree of
// log2(N) levels, and on the following edge subtracts the sum from the B held
// then. An Hhat presented on edge t therefore changes B on edge
// t + 2 + log2(N) (edge t+2 for N = 2); a new Hhat may come every cycle.
// Because the product is taken 1 + log2(N) edges before the subtraction,
// later updates overlap earlier ones: this is the pipelined form of the
// per-sample update, and the exact overlap is this design's choice.
// load copies b_init into B (the externally chosen random start matrix) and
// wins over an update on the same edge; reset clears B to zero.
module sep_matrix_update
  import easi_pkg::*;
#(
  parameter int unsigned M = EASI_M,
  parameter int unsigned N = EASI_N
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  fp32_t hhat [N][N],
  input  logic  load,
  input  fp32_t b_init [N][M],
  output fp32_t b [N][M]
);

  localparam int unsigned TREE = (N <= 1) ? 0 : $clog2(N);
  localparam int unsigned LAT  = 1 + TREE;  // edges before the subtraction

  fp32_t b_q    [N][M];
  fp32_t prod_d [N][M][N];
  fp32_t prod_q [N][M][N];
  fp32_t hb     [N][M];
  fp32_t b_d    [N][M];
  logic [LAT-1:0] vpipe;

  for (genvar i = 0; i < N; i++) begin : g_r
    for (genvar j = 0; j < M; j++) begin : g_c
      for (genvar l = 0; l < N; l++) begin : g_l
        fp_mul u_mul (.a(hhat[i][l]), .b(b_q[l][j]), .y(prod_d[i][j][l]));
      end
      fp_adder_tree #(.NUM(N)) u_tree (.clk(clk), .in(prod_q[i][j]), .sum(hb[i][j]));
      fp_add u_sub (.a(b_q[i][j]), .b(fp_neg(hb[i][j])), .y(b_d[i][j]));
    end
  end

  always_ff @(posedge clk) prod_q <= prod_d;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      vpipe <= '0;
      b_q   <= '{default: FP_ZERO};
    end else begin
      vpipe <= LAT'({vpipe, in_valid});
      if (load)                 b_q <= b_init;
      else if (vpipe[LAT-1])    b_q <= b_d;
    end

  assign b = b_q;

endmodule
