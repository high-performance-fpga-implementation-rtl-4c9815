// mat_vec_mul: pipelined matrix-vector product y = B x.
//
// B is the N x M separation matrix, x one M-element input sample. All N*M
// products B[i][j]*x[j] are formed in parallel and registered (stage 1);
// each row is then summed by a registered adder tree of log2(M) levels. A
// new sample may enter on every clock edge; y for the sample presented with
// in_valid on edge t appears with out_valid after edge t + 1 + log2(M)
// (three cycles for M = 4). B is sampled on the same edge as x. The
// function is the y = B x block of the EASI loop; the one-multiply-then-tree
// pipelining is this design's choice.
module mat_vec_mul
  import easi_pkg::*;
#(
  parameter int unsigned M = EASI_M,
  parameter int unsigned N = EASI_N
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  fp32_t x [M],
  input  fp32_t b [N][M],
  output logic  out_valid,
  output fp32_t y [N]
);

  localparam int unsigned TREE = (M <= 1) ? 0 : $clog2(M);
  localparam int unsigned LAT  = 1 + TREE;

  fp32_t prod_d [N][M];
  fp32_t prod_q [N][M];
  logic [LAT-1:0] vpipe;

  for (genvar i = 0; i < N; i++) begin : g_row
    for (genvar j = 0; j < M; j++) begin : g_col
      fp_mul u_mul (.a(b[i][j]), .b(x[j]), .y(prod_d[i][j]));
    end
    fp_adder_tree #(.NUM(M)) u_tree (.clk(clk), .in(prod_q[i]), .sum(y[i]));
  end

  always_ff @(posedge clk) prod_q <= prod_d;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) vpipe <= '0;
    else        vpipe <= LAT'({vpipe, in_valid});

  assign out_valid = vpipe[LAT-1];

endmodule
