// square_norm: kernel entry K_ij = (Re <psi_i|psi_j>)^2 + (Im <psi_i|psi_j>)^2.
//
// Two real multipliers and one adder work at full precision. The result is
// rounded once to Q2.14, a value in [0, 1].
// Timing: one register stage, latency 1. out_tag follows in_tag.
module square_norm
  import qk_pkg::*;
#(
  parameter int unsigned TAG_W = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [TAG_W-1:0] in_tag,
  input  fx_t              ip_re,
  input  fx_t              ip_im,
  output logic             out_valid,
  output logic [TAG_W-1:0] out_tag,
  output fx_t              k
);
  prod_t sq;
  assign sq = prod_t'(ip_re) * prod_t'(ip_re) + prod_t'(ip_im) * prod_t'(ip_im);

  always_ff @(posedge clk) begin
    k       <= fx_round_sat(sq, FX_FRAC);
    out_tag <= in_tag;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end
endmodule
