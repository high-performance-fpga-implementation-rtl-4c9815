// fp_add: combinational IEEE-754 single-precision adder.
//
// y = a + b, rounded to nearest with ties to even; a subtractor is this
// module with the sign of b flipped (easi_pkg::fp_neg). The operand of larger
// magnitude is kept unshifted, the other is shifted right into a field with
// 27 extra low bits whose last bit collects a sticky bit, the two are added
// or subtracted, the result is normalised by a leading-one search and
// rounded once. Exact cancellation gives +0. Number-format choices of this
// design, as in fp_mul: subnormals are flushed to zero on input and output,
// an exponent field of 255 is infinity, overflow gives infinity, and
// infinity minus infinity returns the first infinity (no NaN). Purely
// combinational.
module fp_add
  import easi_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);

  fp32_t       larger, lesser;
  logic [7:0]  el, es;
  logic [7:0]  d;
  logic [50:0] mb, ms, ms_sh;
  logic        lost;
  logic [51:0] sum;
  logic [5:0]  lz;
  logic [51:0] norm;
  logic [23:0] mant;
  logic        guard, sticky;
  logic        rnd;
  logic [24:0] mant_r;
  logic signed [10:0] exp_n;
  logic        sign;

  always_comb begin
    // order by magnitude (exponent, then fraction)
    if (a[30:0] >= b[30:0]) begin larger = a; lesser = b; end
    else                    begin larger = b; lesser = a; end
    el  = larger[30:23];
    es  = lesser[30:23];
    sign = larger[31];
    d    = el - es;
    mb   = (el == 8'd0) ? 51'd0 : {1'b1, larger[22:0], 27'd0};
    ms   = (es == 8'd0) ? 51'd0 : {1'b1, lesser[22:0], 27'd0};
    if (d >= 8'd51) begin
      ms_sh = 51'd0;
      lost  = |ms;
    end else begin
      ms_sh = ms >> d;
      lost  = |(ms & ~(51'h7_FFFF_FFFF_FFFF << d));
    end
    ms_sh[0] = ms_sh[0] | lost;
    if (larger[31] == lesser[31]) sum = {1'b0, mb} + {1'b0, ms_sh};
    else                      sum = {1'b0, mb} - {1'b0, ms_sh};

    lz = 6'd52;
    for (int i = 0; i < 52; i++)
      if (sum[i]) lz = 6'(51 - i);
    norm   = sum << lz;
    mant   = norm[51:28];
    guard  = norm[27];
    sticky = |norm[26:0];
    exp_n  = 11'(el) + 11'sd1 - 11'(lz);
    rnd    = guard & (sticky | mant[0]);
    mant_r = {1'b0, mant} + {24'd0, rnd};
    if (mant_r[24]) begin
      exp_n  = exp_n + 11'sd1;
      mant_r = mant_r >> 1;
    end

    if (el == 8'hFF)            y = {sign, 8'hFF, 23'd0};
    else if (el == 8'd0)        y = {a[31] & b[31], 31'd0};
    else if (sum == 52'd0)       y = FP_ZERO;
    else if (exp_n >= 11'sd255)  y = {sign, 8'hFF, 23'd0};
    else if (exp_n <= 11'sd0)    y = {sign, 31'd0};
    else                         y = {sign, exp_n[7:0], mant_r[22:0]};
  end

endmodule
