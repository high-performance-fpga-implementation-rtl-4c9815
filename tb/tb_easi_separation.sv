// tb_easi_separation: the separation workload at the design's default size,
// m = 4 mixtures of n = 2 independent sources.
//
// Two independent unit-variance Laplacian (super-Gaussian) sources are
// generated in the testbench and mixed by a fixed random 4 x 2 matrix A; the
// mixtures stream into the pipeline at one sample per cycle for 10000
// samples, with mu = -2^-12, beta = 0.5, gamma = 0.25 and P = 8. With the
// gradient's sign convention and a cubic g, a negative mu separates
// super-Gaussian sources; plusargs +src=0 (uniform and binary, sub-Gaussian
// sources), +mu=<real> and +samples=<n> change the experiment. After training, the global matrix
// C = B A (2 x 2) should be close to a scaled permutation: each row of C
// dominated by one source and the two rows by different sources. The test
// prints the cross-talk of each row, |c_small|^2 / |c_large|^2, at several
// points during training and checks at the end that it is below 2 % for
// both rows and that the two rows picked different sources.
module tb_easi_separation;
  import fp_ref_pkg::*;

  localparam int M = 4, N = 2;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic        rst_n, x_valid, b_load, y_valid, hhat_valid, busy;
  logic [31:0] x [M], mu, beta, gamma;
  logic [15:0] batch_size, sample_index;
  logic [31:0] batch_index;
  logic [31:0] b_init [N][M], b [N][M], y [N], hhat [N][N];

  easi_top dut (.*);

  int  checks = 0, failures = 0;
  real a_mix [M][N];
  int  samples = 10000;
  int  src_kind = 1;   // 1: Laplacian sources, 0: uniform and binary sources
  real mu_r = -1.0 / 4096.0;

  function automatic real urand();
    return (real'($urandom) + 0.5) / 4294967296.0;
  endfunction

  function automatic real source(int i);
    if (src_kind == 1) begin
      real u = urand();
      return ((u < 0.5) ? $ln(2.0 * u) : -$ln(2.0 - 2.0 * u)) / $sqrt(2.0);
    end
    if (i == 0) return (2.0 * urand() - 1.0) * $sqrt(3.0);
    return ($urandom_range(1) == 1) ? 1.0 : -1.0;
  endfunction

  function automatic logic [31:0] to_fp(real r);
    return fp_round(r);
  endfunction

  // cross-talk of row i of C = B A
  function automatic real crosstalk(int i, output int dom);
    real c [N];
    real c_hi, c_lo;
    for (int s = 0; s < N; s++) begin
      c[s] = 0.0;
      for (int j = 0; j < M; j++) c[s] += to_real(b[i][j]) * a_mix[j][s];
    end
    dom   = (c[0] * c[0] >= c[1] * c[1]) ? 0 : 1;
    c_hi  = c[dom] * c[dom];
    c_lo  = c[1 - dom] * c[1 - dom];
    return (c_hi == 0.0) ? 1.0 : c_lo / c_hi;
  endfunction

  initial begin
    int d0, d1;
    real x0, x1;
    void'($value$plusargs("samples=%d", samples));
    void'($value$plusargs("src=%d", src_kind));
    void'($value$plusargs("mu=%f", mu_r));
    rst_n = 1'b0; x_valid = 1'b0; b_load = 1'b0;
    foreach (x[j]) x[j] = '0;
    foreach (a_mix[j, s]) a_mix[j][s] = 2.0 * urand() - 1.0;
    foreach (b_init[i, j]) b_init[i][j] = to_fp(0.5 * (2.0 * urand() - 1.0));
    mu = to_fp(mu_r); beta = 32'h3F00_0000; gamma = 32'h3E80_0000; batch_size = 16'd8;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk) b_load = 1'b1;
    @(negedge clk) b_load = 1'b0;
    for (int n = 0; n < samples; n++) begin
      real s [N];
      foreach (s[k]) s[k] = source(k);
      foreach (x[j]) x[j] = to_fp(a_mix[j][0] * s[0] + a_mix[j][1] * s[1]);
      x_valid = 1'b1;
      @(negedge clk);
      if (n % 1000 == 999) begin
        x0 = crosstalk(0, d0);
        x1 = crosstalk(1, d1);
        $display("after %0d samples: cross-talk row0 %.5f (source %0d), row1 %.5f (source %0d)", n + 1, x0, d0, x1, d1);
      end
    end
    x_valid = 1'b0;
    repeat (16) @(negedge clk);
    x0 = crosstalk(0, d0);
    x1 = crosstalk(1, d1);
    checks += 3;
    if (x0 > 0.02) failures++;
    if (x1 > 0.02) failures++;
    if (d0 == d1) failures++;
    foreach (b[i, j]) begin
      checks++;
      if (is_inf(b[i][j])) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
