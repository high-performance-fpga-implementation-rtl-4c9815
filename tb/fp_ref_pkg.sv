// fp_ref_pkg: reference single-precision arithmetic for the testbenches.
//
// The values are computed through the simulator's 64-bit real type and then
// rounded to single precision by fp_round, which is written independently
// of the RTL. A product of two singles is exact in double precision, and a
// sum is either exact or so lopsided that the second rounding cannot change
// the single-precision result, so fp_mul_ref/fp_add_ref give the correctly
// rounded result. They follow the number format of the RTL: round to
// nearest even, subnormals flushed to signed zero after rounding, exponent
// 255 read as infinity, no NaN.
package fp_ref_pkg;

  typedef logic [31:0] f32;

  function automatic real to_real(f32 f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return $bitstoreal({f[31], 63'd0});
    d = {f[31], 11'(f[30:23]) + 11'd896, f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic f32 fp_round(real r);
    logic [63:0] d;
    logic [24:0] mant;
    int          e;
    d = $realtobits(r);
    if (d[62:52] == 11'd0) return {d[63], 31'd0};
    if (d[62:52] == 11'h7FF) return {d[63], 8'hFF, 23'd0};
    e    = int'(d[62:52]) - 1023 + 127;
    mant = {2'b01, d[51:29]};
    if (d[28] && ((|d[27:0]) || mant[0])) mant = mant + 25'd1;
    if (mant[24]) begin
      mant = mant >> 1;
      e    = e + 1;
    end
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    if (e <= 0)   return {d[63], 31'd0};
    return {d[63], e[7:0], mant[22:0]};
  endfunction

  function automatic logic is_inf(f32 f);
    return f[30:23] == 8'hFF;
  endfunction

  function automatic f32 fp_mul_ref(f32 a, f32 b);
    logic s;
    s = a[31] ^ b[31];
    if (a[30:23] == 8'd0 || b[30:23] == 8'd0) return {s, 31'd0};
    if (is_inf(a) || is_inf(b)) return {s, 8'hFF, 23'd0};
    return fp_round(to_real(a) * to_real(b));
  endfunction

  function automatic f32 fp_add_ref(f32 a, f32 b);
    if (is_inf(a)) return {a[31], 8'hFF, 23'd0};
    if (is_inf(b)) return {b[31], 8'hFF, 23'd0};
    if (a[30:23] == 8'd0 && b[30:23] == 8'd0) return {a[31] & b[31], 31'd0};
    return fp_round(to_real(a) + to_real(b));
  endfunction

  function automatic f32 fp_sub_ref(f32 a, f32 b);
    return fp_add_ref(a, {~b[31], b[30:0]});
  endfunction

  // Random normal number with exponent field in [emin, emax].
  function automatic f32 rand_fp(int emin, int emax);
    int e;
    e = emin + int'($urandom_range(emax - emin));
    return {1'($urandom), 8'(e), 23'($urandom)};
  endfunction

  // Random number of magnitude below 2^(emax-127+1), sometimes zero.
  function automatic f32 rand_val(int emax);
    if ($urandom_range(31) == 0) return 32'd0;
    return rand_fp(emax - 12, emax);
  endfunction

  // Pairwise sum in the order of a balanced tree (adjacent pairs per level).
  function automatic f32 tree_sum(f32 v[$]);
    f32 nxt[$];
    if (v.size() == 0) return 32'd0;
    while (v.size() > 1) begin
      if (v.size() % 2 == 1) v.push_back(32'd0);
      nxt = {};
      for (int i = 0; i < v.size(); i += 2) nxt.push_back(fp_add_ref(v[i], v[i+1]));
      v = nxt;
    end
    return v[0];
  endfunction

endpackage
