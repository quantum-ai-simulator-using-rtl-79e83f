// cmult: complex multiplier z = (x1 + i y1) * (x2 + i y2) built from three real multipliers.
//
// It follows the complex-multiplier diagram of the design. Two pre-subtractions
// and one pre-addition feed three multipliers. Two post-additions then give
//   k1 = x1 * (x2 - y2),  k2 = y2 * (x1 - y1),  k3 = y1 * (x2 + y2),
//   Re z = k1 + k2 = x1 x2 - y1 y2,  Im z = k2 + k3 = x1 y2 + y1 x2.
// The printed symbols fix the counts: three multipliers, two subtractors and
// three adders. Which operand goes to which operator was read from the drawing
// and checked against the algebra above.
// The module is purely combinational. zf is the full-precision result with
// 2*FX_FRAC fractional bits. z is zf rounded back to Q2.14 and divided by
// 2**EXTRA_SHIFT. The 1/2 Hadamard prefactor uses that division, and so does
// no extra rounding step.
module cmult
  import qk_pkg::*;
#(
  parameter int unsigned EXTRA_SHIFT = 0
) (
  input  cplx_t a,      // x1 + i y1
  input  cplx_t b,      // x2 + i y2
  output prod_t zf_re,
  output prod_t zf_im,
  output cplx_t z
);
  logic signed [FX_W:0] d_a, d_b, s_b;   // one guard bit for the pre-adders
  prod_t k1, k2, k3;

  always_comb begin
    d_b = {b.re[FX_W-1], b.re} - {b.im[FX_W-1], b.im};   // x2 - y2
    d_a = {a.re[FX_W-1], a.re} - {a.im[FX_W-1], a.im};   // x1 - y1
    s_b = {b.re[FX_W-1], b.re} + {b.im[FX_W-1], b.im};   // x2 + y2
    k1  = prod_t'(a.re) * prod_t'(d_b);
    k2  = prod_t'(b.im) * prod_t'(d_a);
    k3  = prod_t'(a.im) * prod_t'(s_b);
    zf_re = k1 + k2;
    zf_im = k2 + k3;
    z.re  = fx_round_sat(zf_re, FX_FRAC + EXTRA_SHIFT);
    z.im  = fx_round_sat(zf_im, FX_FRAC + EXTRA_SHIFT);
  end
endmodule
