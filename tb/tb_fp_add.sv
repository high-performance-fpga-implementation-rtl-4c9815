// tb_fp_add: checks the single-precision adder against the reference
// rounding of fp_ref_pkg and against hand-worked constants (ties to even,
// exact cancellation, overflow to infinity, flush of tiny results). The
// operand exponents are drawn so that all alignment distances, equal
// exponents with heavy cancellation and far-apart operands all occur.
module tb_fp_add;
  import fp_ref_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [31:0] a, b, y;
  int checks = 0, failures = 0;

  fp_add dut (.a(a), .b(b), .y(y));

  task automatic check(logic [31:0] ta, logic [31:0] tb_, logic [31:0] exp_y);
    a = ta; b = tb_;
    #1;
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10) $display("FAIL %h + %h = %h, expected %h", ta, tb_, y, exp_y);
    end
  endtask

  initial begin
    // hand-worked cases
    check(32'h3F80_0000, 32'h3F80_0000, 32'h4000_0000);  // 1 + 1 = 2
    check(32'h3F80_0000, 32'h3380_0000, 32'h3F80_0000);  // 1 + 2^-24: tie, stays even
    check(32'h3F80_0001, 32'h3380_0000, 32'h3F80_0002);  // tie rounds up to even
    check(32'h4040_0000, 32'hC040_0000, 32'h0000_0000);  // 3 - 3 = +0
    check(32'h7F7F_FFFF, 32'h7F7F_FFFF, 32'h7F80_0000);  // overflow to +inf
    check(32'h0080_0001, 32'h8080_0000, 32'h0000_0000);  // result below 2^-126 flushes
    check(32'h3F80_0000, 32'hBF7F_FFFF, 32'h3380_0000);  // 1 - (1 - 2^-24)
    check(32'h4120_0000, 32'hC0A0_0000, 32'h40A0_0000);  // 10 - 5 = 5
    check(32'h0000_0000, 32'hC2F6_0000, 32'hC2F6_0000);  // 0 + -123
    // random cases
    for (int n = 0; n < 40000; n++) begin
      logic [31:0] ra, rb;
      int ea, eb;
      ea = 1 + int'($urandom_range(253));
      case ($urandom_range(3))
        0: eb = ea;
        1: eb = ea + int'($urandom_range(6)) - 3;
        2: eb = ea + int'($urandom_range(60)) - 30;
        default: eb = 1 + int'($urandom_range(253));
      endcase
      if (eb < 1) eb = 1;
      if (eb > 254) eb = 254;
      ra = {1'($urandom), 8'(ea), 23'($urandom)};
      rb = {1'($urandom), 8'(eb), 23'($urandom)};
      if ($urandom_range(7) == 0) rb = {~ra[31], ra[30:23], ra[22:0] ^ 23'($urandom_range(3))};
      check(ra, rb, fp_add_ref(ra, rb));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
