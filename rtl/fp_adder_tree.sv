// fp_adder_tree: pipelined balanced tree of fp_add units.
//
// Sums NUM single-precision inputs in ceil(log2(NUM)) levels with one
// register after every level, so the sum of the inputs presented on one
// clock edge appears LEVELS edges later; a new set may enter every cycle.
// Inputs are padded with +0 up to the next power of two. The tree is kept in
// heap order: internal node k adds children 2k+1 and 2k+2, the leaves are
// the inputs. The summation order is therefore fixed:
// ((in0 + in1) + (in2 + in3)) for NUM = 4. The data registers have no reset
// and no enable; the parent tracks validity.
module fp_adder_tree
  import easi_pkg::*;
#(
  parameter int unsigned NUM = 4
) (
  input  logic  clk,
  input  fp32_t in [NUM],
  output fp32_t sum
);

  localparam int unsigned LEVELS = (NUM <= 1) ? 0 : $clog2(NUM);
  localparam int unsigned W      = 1 << LEVELS;

  if (LEVELS == 0) begin : g_wire
    assign sum = in[0];
  end else begin : g_tree
    fp32_t leaf   [W];
    fp32_t node_d [W-1];
    fp32_t node_q [W-1];

    for (genvar i = 0; i < W; i++) begin : g_leaf
      if (i < NUM) begin : g_in
        assign leaf[i] = in[i];
      end else begin : g_pad
        assign leaf[i] = FP_ZERO;
      end
    end

    for (genvar k = 0; k < W - 1; k++) begin : g_node
      fp32_t lhs, rhs;
      if (2 * k + 1 >= W - 1) begin : g_from_leaf
        assign lhs = leaf[2 * k + 1 - (W - 1)];
        assign rhs = leaf[2 * k + 2 - (W - 1)];
      end else begin : g_from_node
        assign lhs = node_q[2 * k + 1];
        assign rhs = node_q[2 * k + 2];
      end
      fp_add u_add (.a(lhs), .b(rhs), .y(node_d[k]));
    end

    always_ff @(posedge clk) node_q <= node_d;

    assign sum = node_q[0];
  end

endmodule
