// tb_mat_vec_mul: streams random samples and matrices into y = B x, mostly
// back to back with occasional idle cycles, and checks every y against a
// reference computed with fp_ref_pkg in the same tree order, and that each
// result comes exactly 1 + log2(M) = 3 cycles after its sample.
module tb_mat_vec_mul;
  import fp_ref_pkg::*;

  localparam int M = 4, N = 2, LAT = 3;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic        rst_n, in_valid, out_valid;
  logic [31:0] x [M];
  logic [31:0] b [N][M];
  logic [31:0] y [N];
  int checks = 0, failures = 0, cycle = 0;

  typedef struct { int due; logic [31:0] y [N]; } exp_t;
  exp_t q[$];

  mat_vec_mul #(.M(M), .N(N)) dut (.*);

  always @(posedge clk) cycle <= cycle + 1;

  // reference: computed on the edge that samples the inputs
  always @(posedge clk) if (rst_n && in_valid) begin
    exp_t e;
    e.due = cycle + LAT;
    for (int i = 0; i < N; i++) begin
      logic [31:0] p[$];
      p = {};
      for (int j = 0; j < M; j++) p.push_back(fp_mul_ref(b[i][j], x[j]));
      e.y[i] = tree_sum(p);
    end
    q.push_back(e);
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    exp_t e;
    checks++;
    if (q.size() == 0) begin
      failures++;
      $display("FAIL unexpected out_valid");
    end else begin
      e = q.pop_front();
      if (e.due != cycle) begin
        failures++;
        $display("FAIL latency: due %0d now %0d", e.due, cycle);
      end
      for (int i = 0; i < N; i++) begin
        checks++;
        if (y[i] !== e.y[i]) begin
          failures++;
          if (failures < 10) $display("FAIL y[%0d]=%h expected %h", i, y[i], e.y[i]);
        end
      end
    end
  end

  initial begin
    rst_n = 1'b0; in_valid = 1'b0;
    foreach (x[j]) x[j] = '0;
    foreach (b[i, j]) b[i][j] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      in_valid = ($urandom_range(7) != 0);
      foreach (x[j]) x[j] = rand_val(127);
      foreach (b[i, j]) b[i][j] = rand_val(126);
    end
    @(negedge clk) in_valid = 1'b0;
    repeat (LAT + 2) @(negedge clk);
    checks++;
    if (q.size() != 0) begin
      failures++;
      $display("FAIL %0d results never came out", q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
