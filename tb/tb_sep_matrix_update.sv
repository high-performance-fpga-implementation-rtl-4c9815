// tb_sep_matrix_update: drives random Hhat matrices (with gaps) and
// occasional loads into the separation-matrix unit and checks B after every
// clock edge against a model: an Hhat presented on edge t forms Hhat*B with
// the B before edge t and is subtracted from the B before edge t+2; a load
// replaces B and wins over an update on the same edge.
module tb_sep_matrix_update;
  import fp_ref_pkg::*;

  localparam int M = 4, N = 2;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic        rst_n, in_valid, load;
  logic [31:0] hhat [N][N];
  logic [31:0] b_init [N][M], b [N][M];
  int checks = 0, failures = 0, n_upd = 0, n_load = 0;

  typedef struct { bit v; logic [31:0] s [N][M]; } stage_t;
  stage_t st0, st1;
  logic [31:0] mb [N][M];

  sep_matrix_update #(.M(M), .N(N)) dut (.*);

  task automatic model_edge();
    stage_t nw;
    nw.v = in_valid;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < M; j++) begin
        logic [31:0] pr[$];
        pr = {};
        for (int l = 0; l < N; l++) pr.push_back(fp_mul_ref(hhat[i][l], mb[l][j]));
        nw.s[i][j] = tree_sum(pr);
      end
    if (load) begin
      mb = b_init; n_load++;
    end else if (st1.v) begin
      foreach (mb[i, j]) mb[i][j] = fp_sub_ref(mb[i][j], st1.s[i][j]);
      n_upd++;
    end
    st1 = st0;
    st0 = nw;
  endtask

  initial begin
    rst_n = 1'b0; in_valid = 1'b0; load = 1'b0;
    foreach (hhat[i, j]) hhat[i][j] = '0;
    foreach (b_init[i, j]) b_init[i][j] = '0;
    foreach (mb[i, j]) mb[i][j] = 32'h0;
    st0.v = 0; st1.v = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      load = (n == 0) || ($urandom_range(150) == 0);
      in_valid = ($urandom_range(4) != 0);
      foreach (hhat[i, j]) hhat[i][j] = rand_val(119);
      foreach (b_init[i, j]) b_init[i][j] = rand_val(126);
      @(posedge clk);
      model_edge();
      #1;
      foreach (mb[i, j]) begin
        checks++;
        if (b[i][j] !== mb[i][j]) begin
          failures++;
          if (failures < 10) $display("FAIL n=%0d b[%0d][%0d]=%h expected %h", n, i, j, b[i][j], mb[i][j]);
        end
      end
    end
    checks++;
    if (n_upd < 1000 || n_load < 5) failures++;
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
