// tb_minibatch_ctrl: drives random advance pulses, several mini-batch sizes
// (including P = 0, read as 1, and P = 1) and occasional restarts, and
// compares p, k and both flags with a counter model every cycle.
module tb_minibatch_ctrl;

  localparam int PW = 16, KW = 32;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic          rst_n, restart, advance;
  logic [PW-1:0] batch_size, p;
  logic [KW-1:0] k;
  logic          first_sample, first_batch;
  int checks = 0, failures = 0;
  int mp, mk, wraps;
  bit mfb;

  minibatch_ctrl #(.PW(PW), .KW(KW)) dut (.*);

  initial begin
    rst_n = 1'b0; restart = 1'b0; advance = 1'b0; batch_size = 16'd5;
    mp = 0; mk = 0; mfb = 1; wraps = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 6000; n++) begin
      @(negedge clk);
      // compare the state reached
      checks++;
      if (p !== PW'(mp) || k !== KW'(mk) || first_sample !== (mp == 0) || first_batch !== mfb) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d p=%0d/%0d k=%0d/%0d fs=%b fb=%b/%b", n, p, mp, k, mk, first_sample, first_batch, mfb);
      end
      // new stimulus
      if (n % 1000 == 0) batch_size = PW'((n / 1000 == 2) ? 0 : (n / 1000 == 3) ? 1 : 2 + $urandom_range(9));
      restart = ($urandom_range(199) == 0);
      advance = ($urandom_range(3) != 0);
      // model of the edge to come
      if (restart) begin
        mp = 0; mk = 0; mfb = 1;
      end else if (advance) begin
        if (mp + 1 >= ((batch_size == 0) ? 1 : int'(batch_size))) begin
          mp = 0; mk++; mfb = 0; wraps++;
        end else mp++;
      end
    end
    checks++;
    if (wraps < 100) failures++;
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
