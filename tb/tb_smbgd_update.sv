// tb_smbgd_update: feeds random gradients H, with gaps, through the SMBGD
// accumulator for several mini-batch sizes and hyperparameter sets, with
// restarts in between, and checks after every clock edge the accumulator,
// out_valid (two cycles after H) and the p, k counters against a model:
//   p == 0, k == 0 : Hhat = 0     * Hhat + mu*H
//   p == 0, k >  0 : Hhat = gamma * Hhat + mu*H
//   p >  0         : Hhat = beta  * Hhat + mu*H
// It also counts that each of the three cases occurred. A second instance
// built with MOMENTUM = 0 runs on the same inputs and must match a model in
// which gamma is always replaced by zero.
module tb_smbgd_update;
  import fp_ref_pkg::*;

  localparam int N = 2;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic        rst_n, restart, in_valid, out_valid;
  logic [31:0] h [N][N], hhat [N][N];
  logic [31:0] mu, beta, gamma;
  logic [15:0] batch_size, p;
  logic [31:0] k;
  int checks = 0, failures = 0;

  // model state
  logic [31:0] acc [N][N], muh [N][N];
  bit          s1v, acc_now;
  int          mp, mk;
  bit          mfb;
  int          n_first = 0, n_mom = 0, n_beta = 0;

  smbgd_update #(.N(N)) dut (.*);

  logic        out_valid_nm;
  logic [31:0] hhat_nm [N][N];
  logic [15:0] p_nm;
  logic [31:0] k_nm;
  logic [31:0] acc_nm [N][N];

  smbgd_update #(.N(N), .MOMENTUM(1'b0)) dut_nm (
    .clk, .rst_n, .restart, .in_valid, .h, .mu, .beta, .gamma, .batch_size,
    .out_valid (out_valid_nm), .hhat (hhat_nm), .p (p_nm), .k (k_nm)
  );

  task automatic model_edge();
    logic [31:0] c;
    acc_now = 0;
    if (restart) begin
      s1v = 0; mp = 0; mk = 0; mfb = 1;
      foreach (acc[i, j]) acc[i][j] = 32'h0;
      foreach (acc_nm[i, j]) acc_nm[i][j] = 32'h0;
      return;
    end
    if (s1v) begin
      if (mp != 0)  begin c = beta;  n_beta++;  end
      else if (mfb) begin c = 32'h0; n_first++; end
      else          begin c = gamma; n_mom++;   end
      foreach (acc[i, j]) acc[i][j] = fp_add_ref(fp_mul_ref(c, acc[i][j]), muh[i][j]);
      if (mp == 0) c = 32'h0;
      foreach (acc_nm[i, j]) acc_nm[i][j] = fp_add_ref(fp_mul_ref(c, acc_nm[i][j]), muh[i][j]);
      acc_now = 1;
      if (mp + 1 >= ((batch_size == 0) ? 1 : int'(batch_size))) begin
        mp = 0; mk++; mfb = 0;
      end else mp++;
    end
    s1v = in_valid;
    if (in_valid) foreach (muh[i, j]) muh[i][j] = fp_mul_ref(mu, h[i][j]);
  endtask

  initial begin
    rst_n = 1'b0; restart = 1'b0; in_valid = 1'b0;
    foreach (h[i, j]) h[i][j] = '0;
    mu = 32'h3C00_0000; beta = 32'h3F00_0000; gamma = 32'h3E80_0000; batch_size = 16'd4;
    s1v = 0; mp = 0; mk = 0; mfb = 1;
    foreach (acc[i, j]) acc[i][j] = 32'h0;
    foreach (acc_nm[i, j]) acc_nm[i][j] = 32'h0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      restart  = (n % 1000 == 999);
      if (n % 1000 == 0) begin
        batch_size = 16'(1 + $urandom_range(6));
        mu    = rand_fp(115, 123);
        beta  = rand_fp(120, 126);
        gamma = rand_fp(120, 126);
      end
      in_valid = !restart && ($urandom_range(4) != 0);
      foreach (h[i, j]) h[i][j] = rand_val(128);
      @(posedge clk);
      model_edge();
      #1;
      checks++;
      if (out_valid !== acc_now || p !== 16'(mp) || k !== 32'(mk)) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d valid=%b/%b p=%0d/%0d k=%0d/%0d", n, out_valid, acc_now, p, mp, k, mk);
      end
      foreach (acc[i, j]) begin
        checks++;
        if (hhat[i][j] !== acc[i][j]) begin
          failures++;
          if (failures < 10) $display("FAIL n=%0d hhat[%0d][%0d]=%h expected %h", n, i, j, hhat[i][j], acc[i][j]);
        end
        checks++;
        if (hhat_nm[i][j] !== acc_nm[i][j] || out_valid_nm !== acc_now) begin
          failures++;
          if (failures < 10) $display("FAIL n=%0d no-momentum hhat[%0d][%0d]=%h expected %h", n, i, j, hhat_nm[i][j], acc_nm[i][j]);
        end
      end
    end
    checks++;
    if (n_first == 0 || n_mom == 0 || n_beta == 0) begin
      failures++;
      $display("FAIL a case never occurred: first=%0d momentum=%0d beta=%0d", n_first, n_mom, n_beta);
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
