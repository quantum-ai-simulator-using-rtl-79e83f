// qk_top: the quantum-kernel accelerator. It streams in feature vectors and
// streams out the kernel entries K_ij = |<psi(x_i)|psi(x_j)>|^2 of one block.
//
// The feature map of a block of n features is
//   |psi(x)> = (Rz(x_1) x ... x Rz(x_n)) CNOT-chain (Ry Rz H (x) ... ) |0...0>.
// The host runs the accelerator once per block and multiplies the block
// kernels itself.
// The datapath follows the block diagram of the design:
//   s_axis -> data divider -> angle RAM (one per qubit) -> CORDIC sin/cos
//   -> U_q/V_q generator -> chi/phi RAM (one per qubit)
//   -> tensor tree for u  \
//   -> tensor tree for v  / -> quantum state f_k = v_k u_xi(k)
//   -> inner product -> square of the norm -> FIFO -> m_axis
// A run loads n_samples samples. Each sample's chi/phi are prepared once.
// Then every pair i <= j passes through the single feature-map pipeline as
// two beats (x_i, then x_j), which gives one K_ij every 2 clocks. The results
// leave in row order (0,0), (0,1), .., (0,n-1), (1,1), .., (n-1,n-1), and the
// last one carries tlast.
// Interface:
//   s_axis_*  16-bit words, x in signed Q4.12, n words per sample, tlast on the final word.
//   m_axis_*  16-bit K_ij in Q2.14.
//   n_samples number of samples in this run, 1..MAX_SAMPLES. It must be
//             stable while busy is high.
//   tlast_err sticky: the tlast position did not match n_samples.
//   stall     a pair is held back because the output FIFO is full.
// The PCIe shell and the AXI infrastructure of the FPGA platform sit outside
// this module. Its s_axis/m_axis ports are where they connect.
// Latency from the beat-1 read of a pair to the FIFO write:
// 1 (RAM) + (NQ-1) (tensor) + 1 (state) + 2 (inner product) + 1 (norm).
module qk_top
  import qk_pkg::*;
#(
  parameter int unsigned NQ          = 6,
  parameter int unsigned MAX_SAMPLES = 1024,
  parameter int unsigned FIFO_DEPTH  = 512,
  parameter int unsigned CORDIC_ITER = 16,
  localparam int unsigned AW = $clog2(MAX_SAMPLES),
  localparam int unsigned M  = 1 << NQ
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [AW:0] n_samples,
  input  logic [15:0] s_axis_tdata,
  input  logic        s_axis_tvalid,
  input  logic        s_axis_tlast,
  output logic        s_axis_tready,
  output logic [15:0] m_axis_tdata,
  output logic        m_axis_tvalid,
  output logic        m_axis_tlast,
  input  logic        m_axis_tready,
  output logic        busy,
  output logic        stall,
  output logic        done,
  output logic        tlast_err,
  output logic        fifo_overflow
);
  localparam int unsigned CW = $clog2(FIFO_DEPTH + 1);

  // ---------------- control ----------------
  logic          div_en, load_done, prep_rd, prep_wr, pair_rd, pair_beat, pair_last, k_done;
  logic [AW-1:0] prep_addr, pair_addr;
  logic [CW-1:0] fifo_count;

  qk_ctrl #(.MAX_SAMPLES(MAX_SAMPLES), .FIFO_DEPTH(FIFO_DEPTH)) u_ctrl (
    .clk, .rst_n, .n_samples,
    .div_en, .load_done,
    .prep_rd, .prep_addr, .prep_wr,
    .pair_rd, .pair_addr, .pair_beat, .pair_last,
    .k_done, .fifo_count,
    .busy, .stall, .done
  );

  // ---------------- input: divider and angle RAMs ----------------
  logic [NQ-1:0] ang_we;
  logic [AW-1:0] ang_waddr;
  angle_t        ang_wdata;
  angle_t        theta [NQ];

  data_divider #(.NQ(NQ), .MAX_SAMPLES(MAX_SAMPLES)) u_div (
    .clk, .rst_n, .enable(div_en), .n_samples,
    .s_tdata(s_axis_tdata), .s_tvalid(s_axis_tvalid), .s_tlast(s_axis_tlast), .s_tready(s_axis_tready),
    .we(ang_we), .wr_addr(ang_waddr), .wr_data(ang_wdata), .done(load_done), .tlast_err
  );

  // Read-side alignment of the preparation pipeline (RAM latency 1).
  logic          prep_v1;
  logic [AW-1:0] prep_a1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) prep_v1 <= 1'b0;
    else        prep_v1 <= prep_rd;
  end
  always_ff @(posedge clk) prep_a1 <= prep_addr;

  // ---------------- per qubit: RAM, CORDIC, U_q/V_q, chi/phi RAM ----------------
  gate_t         gate_w [NQ];
  gate_t         gate_r [NQ];
  logic [NQ-1:0] uv_valid;
  logic [AW-1:0] uv_addr [NQ];

  for (genvar q = 0; q < NQ; q++) begin : g_q
    fx_t           c, s;
    logic          cs_valid;
    logic [AW-1:0] cs_addr;
    logic [15:0]   theta_raw;

    qk_ram #(.WIDTH(16), .DEPTH(MAX_SAMPLES)) u_ang_ram (
      .clk, .we(ang_we[q]), .wr_addr(ang_waddr), .wr_data(ang_wdata),
      .rd_en(prep_rd), .rd_addr(prep_addr), .rd_data(theta_raw)
    );
    assign theta[q] = angle_t'(theta_raw);

    cordic_sincos #(.ITER(CORDIC_ITER), .TAG_W(AW)) u_cordic (
      .clk, .rst_n, .in_valid(prep_v1), .in_tag(prep_a1), .theta(theta[q]),
      .out_valid(cs_valid), .out_tag(cs_addr), .cos_o(c), .sin_o(s)
    );

    uv_gen #(.TAG_W(AW)) u_uv (
      .clk, .rst_n, .in_valid(cs_valid), .in_tag(cs_addr), .cos_i(c), .sin_i(s),
      .out_valid(uv_valid[q]), .out_tag(uv_addr[q]), .gate(gate_w[q])
    );

    qk_ram #(.WIDTH($bits(gate_t)), .DEPTH(MAX_SAMPLES)) u_gate_ram (
      .clk, .we(uv_valid[q]), .wr_addr(uv_addr[q]), .wr_data(gate_w[q]),
      .rd_en(pair_rd), .rd_addr(pair_addr), .rd_data(gate_r[q])
    );
  end

  assign prep_wr = uv_valid[0];

  // ---------------- pair pipeline ----------------
  logic       pv1;
  logic [1:0] ptag1;   // {last, beat}
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pv1 <= 1'b0;
    else        pv1 <= pair_rd;
  end
  always_ff @(posedge clk) ptag1 <= {pair_last, pair_beat};

  cplx_t upair [NQ][2];
  cplx_t vpair [NQ][2];
  for (genvar q = 0; q < NQ; q++) begin : g_pairs
    assign upair[q][0] = gate_r[q].chi1;
    assign upair[q][1] = gate_r[q].chi2;
    assign vpair[q][0] = gate_r[q].phi1;
    assign vpair[q][1] = gate_r[q].phi2;
  end

  cplx_t      uvec [M];
  cplx_t      vvec [M];
  logic       t_valid, v_valid_unused;
  logic [1:0] t_tag, v_tag_unused;

  tensor_tree #(.NQ(NQ), .HADAMARD(1'b1), .TAG_W(2)) u_tensor_u (
    .clk, .rst_n, .in_valid(pv1), .in_tag(ptag1), .pair(upair),
    .out_valid(t_valid), .out_tag(t_tag), .vec(uvec)
  );
  tensor_tree #(.NQ(NQ), .HADAMARD(1'b0), .TAG_W(2)) u_tensor_v (
    .clk, .rst_n, .in_valid(pv1), .in_tag(ptag1), .pair(vpair),
    .out_valid(v_valid_unused), .out_tag(v_tag_unused), .vec(vvec)
  );

  cplx_t      fvec [M];
  logic       f_valid;
  logic [1:0] f_tag;
  qstate #(.NQ(NQ), .TAG_W(2)) u_state (
    .clk, .rst_n, .in_valid(t_valid), .in_tag(t_tag), .u(uvec), .v(vvec),
    .out_valid(f_valid), .out_tag(f_tag), .f(fvec)
  );

  fx_t  ip_re, ip_im;
  logic ip_valid, ip_last;
  inner_product #(.NQ(NQ), .TAG_W(1)) u_ip (
    .clk, .rst_n, .in_valid(f_valid), .in_beat(f_tag[0]), .in_tag(f_tag[1]), .f(fvec),
    .out_valid(ip_valid), .out_tag(ip_last), .ip_re, .ip_im
  );

  fx_t  kval;
  logic k_last;
  square_norm #(.TAG_W(1)) u_norm (
    .clk, .rst_n, .in_valid(ip_valid), .in_tag(ip_last), .ip_re, .ip_im,
    .out_valid(k_done), .out_tag(k_last), .k(kval)
  );

  // ---------------- output FIFO ----------------
  logic [16:0] fifo_out;
  kfifo #(.WIDTH(17), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n, .wr_en(k_done), .wr_data({k_last, kval}),
    .m_valid(m_axis_tvalid), .m_ready(m_axis_tready), .m_data(fifo_out),
    .count(fifo_count), .overflow(fifo_overflow)
  );
  assign m_axis_tdata = fifo_out[15:0];
  assign m_axis_tlast = fifo_out[16];
endmodule
