// tb_fp_mul: checks the single-precision multiplier against the reference
// rounding of fp_ref_pkg and hand-worked constants (exact products, ties,
// overflow, underflow flush, zero operands).
module tb_fp_mul;
  import fp_ref_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [31:0] a, b, y;
  int checks = 0, failures = 0;

  fp_mul dut (.a(a), .b(b), .y(y));

  task automatic check(logic [31:0] ta, logic [31:0] tb_, logic [31:0] exp_y);
    a = ta; b = tb_;
    #1;
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10) $display("FAIL %h * %h = %h, expected %h", ta, tb_, y, exp_y);
    end
  endtask

  initial begin
    check(32'h4040_0000, 32'h4040_0000, 32'h4110_0000);  // 3 * 3 = 9
    check(32'hBFC0_0000, 32'h4000_0000, 32'hC040_0000);  // -1.5 * 2 = -3
    check(32'h3F80_0001, 32'h3F80_0001, 32'h3F80_0002);  // (1+u)^2 rounds to 1+2u
    check(32'h3FFF_FFFF, 32'h3FFF_FFFF, 32'h407F_FFFE);  // (2-u)^2
    check(32'h7F00_0000, 32'h4080_0000, 32'h7F80_0000);  // overflow to +inf
    check(32'h0100_0000, 32'h3E80_0000, 32'h0000_0000);  // 2^-125 / 4 flushes
    check(32'h0000_0000, 32'hC2F6_0000, 32'h8000_0000);  // +0 * -123 = -0
    check(32'h3DCC_CCCD, 32'h4120_0000, 32'h3F80_0000);  // 0.1f * 10 = 1
    for (int n = 0; n < 40000; n++) begin
      logic [31:0] ra, rb;
      int ea, eb;
      ea = 1 + int'($urandom_range(253));
      if ($urandom_range(1) == 0) eb = 254 - ea + int'($urandom_range(20)) - 10;
      else                        eb = 1 + int'($urandom_range(253));
      if (eb < 1) eb = 1;
      if (eb > 254) eb = 254;
      ra = {1'($urandom), 8'(ea), 23'($urandom)};
      rb = {1'($urandom), 8'(eb), 23'($urandom)};
      check(ra, rb, fp_mul_ref(ra, rb));
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
