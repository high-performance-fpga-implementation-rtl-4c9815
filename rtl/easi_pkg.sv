// easi_pkg: types and constants shared by the EASI/SMBGD pipeline.
//
// Every datapath value is an IEEE-754 single-precision number carried as a
// 32-bit vector (fp32_t), as in the 32-bit floating-point datapath the design
// is built around. The default problem size is M = 4 input features and
// N = 2 independent components. BATCH_W is the width of the run-time
// mini-batch size P, a choice of this design.
package easi_pkg;

  typedef logic [31:0] fp32_t;

  localparam fp32_t FP_ZERO = 32'h0000_0000;
  localparam fp32_t FP_ONE  = 32'h3F80_0000;

  localparam int unsigned EASI_M = 4;   // input features (m)
  localparam int unsigned EASI_N = 2;   // independent components (n)

  localparam int unsigned BATCH_W = 16;


  // Negation is a sign flip.
  function automatic fp32_t fp_neg(fp32_t a);
    return {~a[31], a[30:0]};
  endfunction

endpackage
