// cubic_nl: element-wise cubic nonlinearity g(y) = y^3.
//
// The EASI loop applies a nonlinearity to every output feature to bring
// higher-order statistics into the gradient; a cubic is used because it
// needs only multiplications. Stage 1 registers y*y, stage 2 registers
// (y*y)*y. The input vector is delayed by the same two stages and leaves on
// y_d, so that y and g(y) of one sample reach the gradient unit together.
// Latency 2 cycles, one vector per cycle. The exact polynomial (a plain y^3
// with unit coefficient) is this design's choice.
module cubic_nl
  import easi_pkg::*;
#(
  parameter int unsigned N = EASI_N
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  fp32_t y [N],
  output logic  out_valid,
  output fp32_t g [N],
  output fp32_t y_d [N]
);

  fp32_t sq_d [N], sq_q [N], y1_q [N], cube_d [N], cube_q [N], y2_q [N];
  logic  v1_q, v2_q;

  for (genvar i = 0; i < N; i++) begin : g_el
    fp_mul u_sq   (.a(y[i]),    .b(y[i]),    .y(sq_d[i]));
    fp_mul u_cube (.a(sq_q[i]), .b(y1_q[i]), .y(cube_d[i]));
  end

  always_ff @(posedge clk) begin
    sq_q   <= sq_d;
    y1_q   <= y;
    cube_q <= cube_d;
    y2_q   <= y1_q;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      v1_q <= 1'b0;
      v2_q <= 1'b0;
    end else begin
      v1_q <= in_valid;
      v2_q <= v1_q;
    end

  assign g         = cube_q;
  assign y_d       = y2_q;
  assign out_valid = v2_q;

endmodule
