// fp_mul: combinational IEEE-754 single-precision multiplier.
//
// y = a * b, rounded to nearest with ties to even. The 24x24-bit significand
// product is normalised by at most one position, rounded once, and the
// exponent is checked after rounding. Number-format choices of this design
// (the source only asks for 32-bit floating-point operations): subnormal
// inputs count as zero and subnormal results are flushed to a signed zero;
// an exponent field of 255 counts as infinity whatever its fraction, an
// overflow gives infinity, and 0 * infinity gives zero, so NaN never appears.
// Purely combinational: the matrix units around it place the registers.
module fp_mul
  import easi_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);

  logic        sign;
  logic [7:0]  ea, eb;
  logic [47:0] prod;
  logic [23:0] mant;
  logic        guard, sticky;
  logic        rnd;
  logic [24:0] mant_r;
  logic signed [10:0] exp_n;

  always_comb begin
    sign   = a[31] ^ b[31];
    ea     = a[30:23];
    eb     = b[30:23];
    prod   = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    exp_n  = 11'(ea) + 11'(eb) - 11'sd127;
    if (prod[47]) begin
      mant   = prod[47:24];
      guard  = prod[23];
      sticky = |prod[22:0];
      exp_n  = exp_n + 11'sd1;
    end else begin
      mant   = prod[46:23];
      guard  = prod[22];
      sticky = |prod[21:0];
    end
    rnd    = guard & (sticky | mant[0]);
    mant_r = {1'b0, mant} + {24'd0, rnd};
    if (mant_r[24]) begin
      exp_n  = exp_n + 11'sd1;
      mant_r = mant_r >> 1;
    end

    if (ea == 8'd0 || eb == 8'd0)          y = {sign, 31'd0};
    else if (ea == 8'hFF || eb == 8'hFF)   y = {sign, 8'hFF, 23'd0};
    else if (exp_n >= 11'sd255)            y = {sign, 8'hFF, 23'd0};
    else if (exp_n <= 11'sd0)              y = {sign, 31'd0};
    else                                   y = {sign, exp_n[7:0], mant_r[22:0]};
  end

endmodule
