// inner_product: <psi_i|psi_j> = sum_l conj(f_l(x_i)) * f_l(x_j) for one pair of samples.
//
// The feature-map pipeline delivers the two states of a pair on two
// consecutive beats. First comes f(x_i) (beat = 0), then f(x_j) (beat = 1).
// On beat 0 the unit conjugates f(x_i) by negating its imaginary parts and
// holds it. On beat 1 it forms k_l = conj(f_l(x_i)) * f_l(x_j) with M complex
// multipliers and keeps each k_l at full precision. One cycle later it adds
// up Re k_l and Im k_l in two adder trees. It rounds each sum once, to Q2.14.
// When n is odd, the tensor tree leaves a factor sqrt2 on each of the two
// states, so the unit also multiplies both sums by 1/2 here.
// Timing: out_valid comes 2 cycles after a beat-1 input. A pair may start on
// any cycle after the previous beat 1. Beat 0 must come before beat 1.
module inner_product
  import qk_pkg::*;
#(
  parameter int unsigned NQ    = 6,
  parameter int unsigned TAG_W = 1,
  localparam int unsigned M = 1 << NQ
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic             in_beat,     // 0: f(x_i), 1: f(x_j)
  input  logic [TAG_W-1:0] in_tag,
  input  cplx_t            f [M],
  output logic             out_valid,
  output logic [TAG_W-1:0] out_tag,
  output fx_t              ip_re,
  output fx_t              ip_im
);
  localparam int unsigned ACC_W = PROD_W + NQ;
  localparam int unsigned ODD   = NQ % 2;
  typedef logic signed [ACC_W-1:0] acc_t;

  cplx_t fi_conj [M];
  prod_t kre [M];
  prod_t kim [M];
  prod_t kre_q [M];
  prod_t kim_q [M];
  logic  v1, v2;
  logic [TAG_W-1:0] t1, t2;

  for (genvar l = 0; l < M; l++) begin : g_cm
    cplx_t unused_z;
    cmult #(.EXTRA_SHIFT(0)) u_cm (.a(fi_conj[l]), .b(f[l]), .zf_re(kre[l]), .zf_im(kim[l]), .z(unused_z));
  end

  acc_t sum_re, sum_im;
  always_comb begin
    sum_re = '0;
    sum_im = '0;
    for (int l = 0; l < M; l++) begin
      sum_re += acc_t'(kre_q[l]);
      sum_im += acc_t'(kim_q[l]);
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && !in_beat)
      for (int l = 0; l < M; l++) fi_conj[l] <= cconj(f[l]);
    if (in_valid && in_beat) begin
      kre_q <= kre;
      kim_q <= kim;
      t1    <= in_tag;
    end
    if (v1) begin
      ip_re <= fx_round_sat(prod_t'(sum_re >>> ODD), FX_FRAC);
      ip_im <= fx_round_sat(prod_t'(sum_im >>> ODD), FX_FRAC);
      t2    <= t1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0;
      v2 <= 1'b0;
    end else begin
      v1 <= in_valid && in_beat;
      v2 <= v1;
    end
  end

  assign out_valid = v2;
  assign out_tag   = t2;
endmodule
