// tb_easi_top: end-to-end test of the EASI/SMBGD pipeline at its default
// size (M = 4 features, N = 2 components), no parameter overrides.
//
// A transaction model built on fp_ref_pkg follows every sample through
// y = B x, g = y^3, H = I - y y^T + g y^T - y g^T and the SMBGD accumulator,
// and applies B <- B - Hhat B with the pipeline's timing: a sample entering
// on edge t is multiplied by the B before edge t, its Hhat is multiplied by
// the B before edge t+10 and subtracted from the B before edge t+12. After
// every edge the test compares B, and whenever they are valid y (due at
// t+2, i.e. three edges) and Hhat (due at t+9), bit for bit.
//
// Three training runs, each started with b_load on an idle pipeline, use
// different mini-batch sizes and hyperparameters. Samples arrive in long
// back-to-back bursts with random idle cycles between. The test counts, and
// requires at least once each: a b_load restart, a full-rate burst of more
// samples than the pipeline is deep, a bubble inside the pipeline, a
// mini-batch boundary, a momentum step (p = 0, k > 0), a first-batch step
// with the momentum term forced to zero, and a step with P = 1.
module tb_easi_top;
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

  int checks = 0, failures = 0, cycle = 0;

  typedef struct {
    int t;
    logic [31:0] y [N];
    logic [31:0] hh [N][N];
    logic [31:0] s [N][M];
  } rec_t;
  rec_t fl[$];           // samples in flight, oldest first
  rec_t yq[$], hq[$];    // expected outputs

  logic [31:0] mb [N][M], acc [N][N];
  int  mp, mk;
  bit  mfb;
  int  run_len = 0;
  int  n_load = 0, n_fullrate = 0, n_bubble = 0, n_wrap = 0, n_mom = 0, n_first = 0, n_p1 = 0;

  function automatic void fail(string msg);
    failures++;
    if (failures < 12) $display("FAIL cycle %0d: %s", cycle, msg);
  endfunction

  task automatic model_edge();
    logic [31:0] nb [N][M];
    nb = mb;
    foreach (fl[q]) begin
      if (fl[q].t == cycle - 10)
        for (int i = 0; i < N; i++)
          for (int j = 0; j < M; j++) begin
            logic [31:0] pr[$];
            pr = {};
            for (int l = 0; l < N; l++) pr.push_back(fp_mul_ref(fl[q].hh[i][l], mb[l][j]));
            fl[q].s[i][j] = tree_sum(pr);
          end
    end
    if (fl.size() > 0 && fl[0].t == cycle - 12) begin
      foreach (nb[i, j]) nb[i][j] = fp_sub_ref(mb[i][j], fl[0].s[i][j]);
      void'(fl.pop_front());
    end
    if (x_valid) begin
      rec_t r;
      logic [31:0] g [N], h [N][N], c;
      r.t = cycle;
      for (int i = 0; i < N; i++) begin
        logic [31:0] pr[$];
        pr = {};
        for (int j = 0; j < M; j++) pr.push_back(fp_mul_ref(mb[i][j], x[j]));
        r.y[i] = tree_sum(pr);
        g[i] = fp_mul_ref(fp_mul_ref(r.y[i], r.y[i]), r.y[i]);
      end
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++)
          h[i][j] = fp_add_ref(fp_sub_ref((i == j) ? 32'h3F80_0000 : 32'h0, fp_mul_ref(r.y[i], r.y[j])),
                               fp_sub_ref(fp_mul_ref(g[i], r.y[j]), fp_mul_ref(r.y[i], g[j])));
      if (mp != 0)  c = beta;
      else if (mfb) begin c = 32'h0; n_first++; end
      else          begin c = gamma; n_mom++; end
      if (batch_size == 16'd1) n_p1++;
      foreach (acc[i, j]) acc[i][j] = fp_add_ref(fp_mul_ref(c, acc[i][j]), fp_mul_ref(mu, h[i][j]));
      if (mp + 1 >= ((batch_size == 0) ? 1 : int'(batch_size))) begin
        mp = 0; mk++; mfb = 0; n_wrap++;
      end else mp++;
      r.hh = acc;
      fl.push_back(r);
      yq.push_back(r);
      hq.push_back(r);
    end
    if (b_load) begin
      nb = b_init;
      mp = 0; mk = 0; mfb = 1;
      foreach (acc[i, j]) acc[i][j] = 32'h0;
      n_load++;
    end
    mb = nb;
  endtask

  task automatic compare();
    foreach (mb[i, j]) begin
      if (is_inf(mb[i][j])) fail("training diverged to infinity");
      checks++;
      if (b[i][j] !== mb[i][j]) fail($sformatf("b[%0d][%0d]=%h expected %h", i, j, b[i][j], mb[i][j]));
    end
    if (y_valid) begin
      checks++;
      if (yq.size() == 0) fail("unexpected y_valid");
      else begin
        rec_t r = yq.pop_front();
        if (cycle != r.t + 3) fail($sformatf("y latency: sample at %0d", r.t));
        foreach (y[i]) if (y[i] !== r.y[i]) fail($sformatf("y[%0d]=%h expected %h", i, y[i], r.y[i]));
      end
    end
    if (hhat_valid) begin
      checks++;
      if (hq.size() == 0) fail("unexpected hhat_valid");
      else begin
        rec_t r = hq.pop_front();
        if (cycle != r.t + 10) fail($sformatf("hhat latency: sample at %0d", r.t));
        foreach (hhat[i, j]) if (hhat[i][j] !== r.hh[i][j]) fail($sformatf("hhat[%0d][%0d]=%h expected %h", i, j, hhat[i][j], r.hh[i][j]));
      end
    end
  endtask

  // one clock: drive at the falling edge, model and compare around the rising one
  task automatic step(bit v, bit ld);
    @(negedge clk);
    x_valid = v;
    b_load  = ld;
    foreach (x[j]) x[j] = rand_fp(120, 127);
    if (ld) foreach (b_init[i, j]) b_init[i][j] = rand_fp(118, 125);
    if (v) begin
      run_len++;
      if (run_len == 14) n_fullrate++;
    end else begin
      run_len = 0;
      if (busy) n_bubble++;
    end
    @(posedge clk);
    model_edge();
    #1;
    cycle++;
    compare();
  endtask

  task automatic train(int samples, logic [15:0] p_size, logic [31:0] m, logic [31:0] bt, logic [31:0] gm);
    int sent = 0;
    repeat (16) step(0, 0);          // drain
    batch_size = p_size; mu = m; beta = bt; gamma = gm;
    step(0, 1);                      // load a random start matrix
    while (sent < samples) begin
      if ($urandom_range(9) == 0) step(0, 0);
      else begin
        step(1, 0);
        sent++;
      end
    end
  endtask

  initial begin
    rst_n = 1'b0; x_valid = 1'b0; b_load = 1'b0;
    foreach (x[j]) x[j] = '0;
    foreach (b_init[i, j]) b_init[i][j] = '0;
    mu = '0; beta = '0; gamma = '0; batch_size = 16'd1;
    foreach (mb[i, j]) mb[i][j] = 32'h0;
    foreach (acc[i, j]) acc[i][j] = 32'h0;
    mp = 0; mk = 0; mfb = 1;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // mu = -2^-10, beta = 0.5, gamma = 0.25, P = 7
    train(800, 16'd7, 32'hBA80_0000, 32'h3F00_0000, 32'h3E80_0000);
    // mu = -2^-11, beta = 0.75, gamma = 0.5, P = 1 (every sample starts a batch)
    train(400, 16'd1, 32'hBA00_0000, 32'h3F40_0000, 32'h3F00_0000);
    // mu = -2^-9, beta = 0.875, gamma = 0.125, P = 16
    train(800, 16'd16, 32'hBB00_0000, 32'h3F60_0000, 32'h3E00_0000);
    repeat (16) step(0, 0);
    checks++;
    if (yq.size() != 0 || hq.size() != 0 || fl.size() != 0) fail("samples left in flight");
    $display("events: loads=%0d full_rate_bursts=%0d bubbles=%0d batch_ends=%0d momentum_steps=%0d first_batch_steps=%0d p1_steps=%0d",
             n_load, n_fullrate, n_bubble, n_wrap, n_mom, n_first, n_p1);
    foreach (mb[i, j]) $display("final b[%0d][%0d] = %f", i, j, to_real(mb[i][j]));
    checks++;
    if (n_load == 0 || n_fullrate == 0 || n_bubble == 0 || n_wrap == 0 || n_mom == 0 || n_first == 0 || n_p1 == 0)
      fail("a mechanism was never exercised");
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
