// tb_rel_gradient: streams random y, g pairs into the relative-gradient unit
// and checks every element of H = I - y y^T + g y^T - y g^T, evaluated with
// fp_ref_pkg in the unit's order ((I - y y^T) + (g y^T - y g^T)), and the
// three-cycle latency.
module tb_rel_gradient;
  import fp_ref_pkg::*;

  localparam int N = 2, LAT = 3;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic        rst_n, in_valid, out_valid;
  logic [31:0] y [N], g [N];
  logic [31:0] h [N][N];
  int checks = 0, failures = 0, cycle = 0;

  typedef struct { int due; logic [31:0] h [N][N]; } exp_t;
  exp_t q[$];

  rel_gradient #(.N(N)) dut (.*);

  always @(posedge clk) cycle <= cycle + 1;

  always @(posedge clk) if (rst_n && in_valid) begin
    exp_t e;
    e.due = cycle + LAT;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        logic [31:0] eye, a, c;
        eye = (i == j) ? 32'h3F80_0000 : 32'h0;
        a = fp_sub_ref(eye, fp_mul_ref(y[i], y[j]));
        c = fp_sub_ref(fp_mul_ref(g[i], y[j]), fp_mul_ref(y[i], g[j]));
        e.h[i][j] = fp_add_ref(a, c);
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
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++) begin
          checks++;
          if (h[i][j] !== e.h[i][j]) begin
            failures++;
            if (failures < 10) $display("FAIL h[%0d][%0d]=%h expected %h", i, j, h[i][j], e.h[i][j]);
          end
        end
    end
  end

  initial begin
    rst_n = 1'b0; in_valid = 1'b0;
    foreach (y[i]) begin y[i] = '0; g[i] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      in_valid = ($urandom_range(5) != 0);
      foreach (y[i]) begin
        y[i] = rand_val(128);
        g[i] = rand_val(130);
      end
    end
    @(negedge clk) in_valid = 1'b0;
    repeat (LAT + 2) @(negedge clk);
    checks++;
    if (q.size() != 0) failures++;
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
