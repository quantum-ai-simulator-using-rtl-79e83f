// qstate: the quantum feature map f = V * U_ent * u, with the CNOT chain done as an index rearrangement.
//
// V is diagonal and U_ent = prod_{q=1}^{n-1} CNOT_{q,q+1} has one non-zero
// (a 1) per row. So each output entry is a single complex product,
//   f_k = v_k * u_{xi(k)},
// where xi(k) is the column of the non-zero entry in row k of U_ent. No matrix
// is stored. xi is fixed at elaboration by walking the block recursion of the
// construction from the top index bit down:
//   U_{2^(m+1)} = [U_{2^m} 0; 0 Y_{2^m}],  Y_{2^(m+1)} = [0 U_{2^m}; Y_{2^m} 0],
// with U_2 = I and Y_2 = X.
// (This walk comes out as xi(k) = k ^ (k >> 1) with 0-based k. For n = 2 it
// gives xi = 1, 2, 4, 3 in 1-based terms.)
// There are M = 2^n complex multipliers, one register stage and latency 1.
// out_valid/out_tag follow in_valid/in_tag.
module qstate
  import qk_pkg::*;
#(
  parameter int unsigned NQ    = 6,
  parameter int unsigned TAG_W = 2,
  localparam int unsigned M = 1 << NQ
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [TAG_W-1:0] in_tag,
  input  cplx_t            u [M],
  input  cplx_t            v [M],
  output logic             out_valid,
  output logic [TAG_W-1:0] out_tag,
  output cplx_t            f [M]
);
  // Column of the non-zero entry in row `row` of U_{2^NQ}, from the recursion.
  function automatic int unsigned ent_col(input int unsigned row);
    int unsigned col;
    bit in_y;          // currently inside a Y block (else a U block)
    bit top;
    col  = 0;
    in_y = 1'b0;
    for (int lvl = NQ - 1; lvl >= 0; lvl--) begin
      top = row[lvl];
      // U block: top half -> U (same column half), bottom half -> Y (right half).
      // Y block: top half -> U (right half),      bottom half -> Y (left half).
      // At the 2x2 base the same rule gives I (U_2) and X (Y_2).
      if (top ^ in_y) col |= (1 << lvl);
      in_y = top;
    end
    return col;
  endfunction

  cplx_t fz [M];
  for (genvar k = 0; k < M; k++) begin : g_k
    localparam int unsigned XI = ent_col(k);
    prod_t unused_re, unused_im;
    cmult #(.EXTRA_SHIFT(0)) u_cm (.a(v[k]), .b(u[XI]), .zf_re(unused_re), .zf_im(unused_im), .z(fz[k]));
  end

  always_ff @(posedge clk) begin
    f       <= fz;
    out_tag <= in_tag;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end
endmodule
