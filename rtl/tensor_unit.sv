// tensor_unit: the tensor-product subunit. It forms all four products of two complex 2-vectors.
//
// The inputs are a = (a1, a2) and b = (b1, b2). The outputs are
// (a1*b1, a1*b2, a2*b1, a2*b2). In the first layer of the tensor tree, a is
// the pair for qubit n-1 and b is the pair for qubit n. In a later layer, a is
// the pair for the next qubit up and b is two adjacent entries of the partial
// product vector. There are four complex multipliers, as in the design's
// subunit diagram. EXTRA_SHIFT = 1 multiplies every product by 1/2. The tree
// uses that to apply the Hadamard prefactor.
// The module is purely combinational. The tensor tree registers its outputs.
module tensor_unit
  import qk_pkg::*;
#(
  parameter int unsigned EXTRA_SHIFT = 0
) (
  input  cplx_t a [2],
  input  cplx_t b [2],
  output cplx_t p [4]
);
  for (genvar ia = 0; ia < 2; ia++) begin : g_a
    for (genvar ib = 0; ib < 2; ib++) begin : g_b
      prod_t unused_re, unused_im;
      cmult #(.EXTRA_SHIFT(EXTRA_SHIFT)) u_cm (
        .a(a[ia]), .b(b[ib]), .zf_re(unused_re), .zf_im(unused_im), .z(p[2*ia + ib])
      );
    end
  end
endmodule
