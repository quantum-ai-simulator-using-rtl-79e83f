// uv_gen: builds the single-qubit gate data for one qubit from cos/sin of its half-angle.
//
// Write c = cos(x/2) and s = sin(x/2). For the qubit the feature map applies
// U_q = Ry(x) Rz(x) H and then V_q = Rz(x). Only two parts of these gates are
// needed. The first is the first column of U_q, (chi1, chi2). The 1/sqrt2 of H
// is left out here and applied later in the tensor tree. The second is the
// diagonal of V_q, (phi1, phi2):
//   chi1 = c e^{-ix/2} - s e^{ix/2} = (c*c - s*c) - i (c*s + s*s)
//   chi2 = s e^{-ix/2} + c e^{ix/2} = (s*c + c*c) + i (c*s - s*s)
//   phi1 = e^{-ix/2} = c - i s,   phi2 = e^{ix/2} = c + i s
// This uses eight real multipliers, a -1 on three of the terms and four adders,
// as in the generator diagram of the design. The operand of each multiplier is
// this implementation's reading of the algebra. Each sum keeps full precision
// and is then rounded to Q2.14 once.
// Timing: one register stage, so the latency is 1. out_tag follows in_tag.
module uv_gen
  import qk_pkg::*;
#(
  parameter int unsigned TAG_W = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [TAG_W-1:0] in_tag,
  input  fx_t              cos_i,
  input  fx_t              sin_i,
  output logic             out_valid,
  output logic [TAG_W-1:0] out_tag,
  output gate_t            gate
);
  prod_t m_cc1, m_sc1, m_cs1, m_ss1, m_sc2, m_cc2, m_ss2, m_cs2;
  gate_t g;

  always_comb begin
    m_cc1 = prod_t'(cos_i) * prod_t'(cos_i);
    m_sc1 = prod_t'(sin_i) * prod_t'(cos_i);
    m_cs1 = prod_t'(cos_i) * prod_t'(sin_i);
    m_ss1 = prod_t'(sin_i) * prod_t'(sin_i);
    m_sc2 = prod_t'(sin_i) * prod_t'(cos_i);
    m_cc2 = prod_t'(cos_i) * prod_t'(cos_i);
    m_ss2 = prod_t'(sin_i) * prod_t'(sin_i);
    m_cs2 = prod_t'(cos_i) * prod_t'(sin_i);
    g.chi1.re = fx_round_sat(m_cc1 + (-m_sc1), FX_FRAC);
    g.chi1.im = fx_round_sat(-(m_cs1 + m_ss1), FX_FRAC);
    g.chi2.re = fx_round_sat(m_sc2 + m_cc2, FX_FRAC);
    g.chi2.im = fx_round_sat((-m_ss2) + m_cs2, FX_FRAC);
    g.phi1.re = cos_i;
    g.phi1.im = (sin_i == FX_MIN) ? FX_MAX : -sin_i;
    g.phi2.re = cos_i;
    g.phi2.im = sin_i;
  end

  always_ff @(posedge clk) begin
    gate    <= g;
    out_tag <= in_tag;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end
endmodule
