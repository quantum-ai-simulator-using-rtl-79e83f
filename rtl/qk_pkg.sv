// qk_pkg: number formats shared by the quantum-kernel datapath.
//
// The datapath uses 16-bit fixed point throughout, as the design calls for.
// The binary point is this implementation's choice:
//   fx_t    signed Q2.14: sin/cos, chi, phi, u, v, f, inner products, K.
//           The range is [-2, 2). Every value in the datapath stays below
//           about 1.25 in magnitude.
//   angle_t signed Q3.13 radians: half-angles x_q/2, range [-4, 4).
// A complex number is a packed {re, im} pair of fx_t.
// fx_round_sat() turns a wide product that has 2*FX_FRAC fractional bits back into fx_t.
// It rounds half up and saturates, and it can also divide by a power of two.
package qk_pkg;

  localparam int unsigned FX_W    = 16;
  localparam int unsigned FX_FRAC = 14;
  localparam int unsigned ANG_FRAC = 13;
  // Wide product/accumulator width used by complex multipliers.
  localparam int unsigned PROD_W  = 2*FX_W + 4;

  typedef logic signed [FX_W-1:0]   fx_t;
  typedef logic signed [FX_W-1:0]   angle_t;
  typedef logic signed [PROD_W-1:0] prod_t;

  typedef struct packed {
    fx_t re;
    fx_t im;
  } cplx_t;

  // Per-qubit single-qubit gate data, as stored in the chi/phi RAM:
  // chi = first column of U_q = Ry(x) Rz(x) H (without the 1/sqrt2 factor),
  // phi = diagonal of V_q = Rz(x).
  typedef struct packed {
    cplx_t chi1;
    cplx_t chi2;
    cplx_t phi1;
    cplx_t phi2;
  } gate_t;

  localparam fx_t FX_MAX = fx_t'({1'b0, {(FX_W-1){1'b1}}});
  localparam fx_t FX_MIN = fx_t'({1'b1, {(FX_W-1){1'b0}}});

  // Round a value with (FX_FRAC + shift) fractional bits to Q2.14, saturating.
  function automatic fx_t fx_round_sat(input prod_t p, input int unsigned shift);
    prod_t r;
    r = (p + (prod_t'(1) <<< (shift - 1))) >>> shift;
    if (r > prod_t'(FX_MAX))      return FX_MAX;
    else if (r < prod_t'(FX_MIN)) return FX_MIN;
    else                          return fx_t'(r);
  endfunction

  function automatic cplx_t cconj(input cplx_t a);
    cplx_t r;
    r.re = a.re;
    r.im = (a.im == FX_MIN) ? FX_MAX : -a.im;
    return r;
  endfunction

endpackage
