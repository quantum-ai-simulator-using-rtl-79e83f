// tensor_tree: the tensor-product module. It forms u, the first column of
// U1 x ... x Un, or v, the diagonal of V1 x ... x Vn, from n complex 2-vectors.
//
// The input pair[q] is (chi1, chi2) or (phi1, phi2) of qubit q+1. Qubit 1 is
// the most significant index bit of the 2^n-entry result, as in Eq. (8) of
// the construction.
// The tree has n-1 layers. Layer 1 is a single tensor subunit that combines
// qubit n-1 with qubit n. Layer k (k >= 2) has 2^(k-1) subunits. Each one
// combines qubit n-k with two adjacent entries w[2p], w[2p+1] of the previous
// layer's vector. It writes its four products to entries 2p, 2p+1, 2^k+2p and
// 2^k+2p+1 of the new vector. That is new[a*2^k + j] = pair[n-k][a] * w[j].
// In total there are 4*(2^(n-1) - 1) complex multipliers.
// When HADAMARD = 1 (the U side), the layers that close an even number of
// qubits (layers 1, 3, 5, ...) multiply by 1/2. That applies the dropped
// 1/sqrt2 factor of H two qubits at a time. For odd n, one factor sqrt2 is
// left over on u, and the inner-product unit removes it. The V side uses
// HADAMARD = 0.
// Timing: each layer is one register stage, so the latency is n-1 cycles at
// one vector per clock. The pair of each later qubit is delayed to meet its
// layer. out_valid/out_tag follow in_valid/in_tag.
module tensor_tree
  import qk_pkg::*;
#(
  parameter int unsigned NQ       = 6,
  parameter bit          HADAMARD = 1'b1,
  parameter int unsigned TAG_W    = 2,
  localparam int unsigned M = 1 << NQ
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [TAG_W-1:0] in_tag,
  input  cplx_t            pair [NQ][2],
  output logic             out_valid,
  output logic [TAG_W-1:0] out_tag,
  output cplx_t            vec [M]
);
  // Delayed copies of the input pairs: pd[k] is aligned with layer k+1.
  cplx_t pd [NQ][NQ][2];
  logic  vld [NQ];
  logic [TAG_W-1:0] tag [NQ];

  assign pd[0] = pair;
  assign vld[0] = in_valid;
  assign tag[0] = in_tag;

  for (genvar k = 1; k < NQ; k++) begin : g_layer
    localparam int unsigned LEN  = 1 << (k + 1);
    localparam int unsigned HALF = 1 << k;
    localparam int unsigned SH   = (HADAMARD && (k % 2 == 1)) ? 1 : 0;
    cplx_t v [LEN];
    cplx_t p [LEN];

    for (genvar u = 0; u < HALF/2; u++) begin : g_unit
      cplx_t b [2];
      cplx_t o [4];
      if (k == 1) begin : g_first
        assign b = pd[0][NQ-1];
      end else begin : g_next
        assign b[0] = g_layer[k-1].v[2*u];
        assign b[1] = g_layer[k-1].v[2*u+1];
      end
      tensor_unit #(.EXTRA_SHIFT(SH)) u_tu (.a(pd[k-1][NQ-1-k]), .b(b), .p(o));
      assign p[2*u]          = o[0];
      assign p[2*u+1]        = o[1];
      assign p[HALF+2*u]     = o[2];
      assign p[HALF+2*u+1]   = o[3];
    end

    always_ff @(posedge clk) begin
      v      <= p;
      pd[k]  <= pd[k-1];
      tag[k] <= tag[k-1];
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) vld[k] <= 1'b0;
      else        vld[k] <= vld[k-1];
    end
  end

  assign vec       = g_layer[NQ-1].v;
  assign out_valid = vld[NQ-1];
  assign out_tag   = tag[NQ-1];
endmodule
