// tb_cubic_nl: streams random vectors into the cubic nonlinearity and checks
// g = (y*y)*y against fp_ref_pkg, the delayed copy of y, and the two-cycle
// latency.
module tb_cubic_nl;
  import fp_ref_pkg::*;

  localparam int N = 2, LAT = 2;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic        rst_n, in_valid, out_valid;
  logic [31:0] y [N], g [N], y_d [N];
  int checks = 0, failures = 0, cycle = 0;

  typedef struct { int due; logic [31:0] g [N]; logic [31:0] y [N]; } exp_t;
  exp_t q[$];

  cubic_nl #(.N(N)) dut (.*);

  always @(posedge clk) cycle <= cycle + 1;

  always @(posedge clk) if (rst_n && in_valid) begin
    exp_t e;
    e.due = cycle + LAT;
    for (int i = 0; i < N; i++) begin
      e.g[i] = fp_mul_ref(fp_mul_ref(y[i], y[i]), y[i]);
      e.y[i] = y[i];
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
        checks += 2;
        if (g[i] !== e.g[i] || y_d[i] !== e.y[i]) begin
          failures++;
          if (failures < 10) $display("FAIL g[%0d]=%h expected %h", i, g[i], e.g[i]);
        end
      end
    end
  end

  initial begin
    rst_n = 1'b0; in_valid = 1'b0;
    foreach (y[i]) y[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      in_valid = ($urandom_range(5) != 0);
      foreach (y[i]) y[i] = rand_fp(90, 165);
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
