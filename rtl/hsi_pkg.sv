// hsi_pkg: types and helpers shared by the spectrum-inversion engines.
//
// method_e selects which inversion the top level runs: the block-floating-
// point FFT, the pseudo-inverse (PINV) product, or the penalised SVD in its
// truncated (TSVD) or Tikhonov (TIK) form. coef_sel_e names the coefficient
// memory that a host write goes to. sat() clamps a wide signed value to a
// narrower two's-complement width; every fixed-point narrowing in the design
// goes through it so that the testbench models can mirror it exactly.
package hsi_pkg;

  typedef enum logic [1:0] {
    METH_FFT  = 2'd0,
    METH_PINV = 2'd1,
    METH_TSVD = 2'd2,
    METH_TIK  = 2'd3
  } method_e;

  typedef enum logic [1:0] {
    SEL_PINV_A = 2'd0,   // pseudo-inverse matrix A_dagger, N x M
    SEL_SVD_UT = 2'd1,   // U transposed, R x M
    SEL_SVD_V  = 2'd2,   // V, N x R
    SEL_SVD_XI = 2'd3    // singular values xi_r, R entries (column index used)
  } coef_sel_e;

  // Saturate a 64-bit signed value to a signed field of 'w' bits.
  function automatic logic signed [63:0] sat(input logic signed [63:0] v, input int w);
    logic signed [63:0] hi, lo;
    hi = (64'sd1 <<< (w - 1)) - 64'sd1;
    lo = -(64'sd1 <<< (w - 1));
    if (v > hi) return hi;
    if (v < lo) return lo;
    return v;
  endfunction

  // Ceiling division for parameter arithmetic.
  function automatic int cdiv(input int a, input int b);
    return (a + b - 1) / b;
  endfunction

endpackage
