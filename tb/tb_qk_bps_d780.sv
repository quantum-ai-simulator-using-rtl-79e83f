// tb_qk_bps_d780: the largest block-product-state kernel: d = 780 features as 130 blocks of 6 qubits.
//
// For each block b the testbench streams the 6 features of every sample into
// qk_top (default sizes) and collects the block kernel
// K_b(i,j) = |<psi_b(x_i)|psi_b(x_j)>|^2. It multiplies the block kernels
// into the full kernel, as the host does: K(i,j) = prod_b K_b(i,j). The
// features are uniform in [-1, 1], the range the features have after
// scaling. N = 60 samples keeps the run short. The sample count only changes
// the length of the pair loop.
// Checks: every block entry against the double-precision circuit simulation
// (tolerance 4e-3); the rate of one K per 2 clocks within each block; and the
// final kernel against the product of the reference block kernels. That last
// check is relative: |K_dut - K_ref| <= 0.1 * K_ref + 1e-6. The log prints
// the largest deviation of the diagonal from 1 and the largest relative error.
module tb_qk_bps_d780;
  import qk_ref_pkg::*;
  localparam int NQ = 6;
  localparam int D = 780;
  localparam int NB = D / NQ;
  localparam int N = 60;
  localparam int P = N * (N + 1) / 2;

  logic clk = 1'b0;
  logic rst_n = 1'b1;
  initial #0.5 rst_n = 1'b0;
  always #2 clk = ~clk;

  logic [10:0] n_s;
  logic [15:0] sd, md;
  logic sv, sl, sr, mv, ml, mr, busy, stall, done, te, ov;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  qk_top u_dut (
    .clk, .rst_n, .n_samples(n_s),
    .s_axis_tdata(sd), .s_axis_tvalid(sv), .s_axis_tlast(sl), .s_axis_tready(sr),
    .m_axis_tdata(md), .m_axis_tvalid(mv), .m_axis_tlast(ml), .m_axis_tready(mr),
    .busy, .stall, .done, .tlast_err(te), .fifo_overflow(ov)
  );

  logic signed [15:0] xq [N][NQ];
  real  rr [N][64];
  real  ri [N][64];
  real  kd [N][N];    // product of DUT block kernels
  real  kr [N][N];    // product of reference block kernels

  task automatic chk(input bit ok, input string m);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", m);
    end
  endtask

  initial begin
    real max_blk, max_rel, max_diag;
    max_blk = 0; max_rel = 0; max_diag = 0;
    sv = 0; sl = 0; sd = 0; mr = 1; n_s = 11'(N);
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin kd[i][j] = 1.0; kr[i][j] = 1.0; end
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);
    for (int b = 0; b < NB; b++) begin
      int w, got, i, j;
      longint t0, t1;
      real x [MAXN];
      vec_t s_r, s_i;
      for (int s = 0; s < N; s++) begin
        for (int q = 0; q < MAXN; q++) x[q] = 0.0;
        for (int q = 0; q < NQ; q++) begin
          int v;
          v = int'($urandom_range(8192)) - 4096;
          xq[s][q] = 16'(v);
          x[q] = real'(v) / 4096.0;
        end
        feature_state(NQ, x, s_r, s_i);
        for (int k = 0; k < 64; k++) begin rr[s][k] = s_r[k]; ri[s][k] = s_i[k]; end
      end
      w = 0; got = 0; i = 0; j = 0; t0 = 0; t1 = 0;
      fork
        begin
          while (w < N * NQ) begin
            sv <= 1'b1;
            sd <= xq[w / NQ][w % NQ];
            sl <= (w == N * NQ - 1);
            @(posedge clk);
            if (sv && sr) w++;
          end
          sv <= 1'b0;
          sl <= 1'b0;
        end
        begin
          while (got < P) begin
            @(posedge clk);
            if (mv && mr) begin
              vec_t ar, ai, br, bi;
              real kref, kdut;
              for (int k = 0; k < 64; k++) begin
                ar[k] = rr[i][k]; ai[k] = ri[i][k]; br[k] = rr[j][k]; bi[k] = ri[j][k];
              end
              kref = kernel_of(NQ, ar, ai, br, bi);
              kdut = fx2r(md, 14);
              if (rabs(kdut - kref) > max_blk) max_blk = rabs(kdut - kref);
              chk(rabs(kdut - kref) <= 4.0e-3, $sformatf("block %0d K(%0d,%0d)", b, i, j));
              kd[i][j] *= kdut;
              kr[i][j] *= kref;
              if (got == 0) t0 = cyc;
              t1 = cyc;
              got++;
              if (j == N - 1) begin i++; j = i; end else j++;
            end
          end
        end
      join
      chk(t1 - t0 == longint'(2 * (P - 1)), $sformatf("block %0d rate", b));
      while (busy) @(posedge clk);
    end
    for (int i = 0; i < N; i++)
      for (int j = i; j < N; j++) begin
        real rel;
        rel = rabs(kd[i][j] - kr[i][j]) / (kr[i][j] + 1.0e-12);
        if (rel > max_rel) max_rel = rel;
        if (i == j && rabs(kd[i][i] - 1.0) > max_diag) max_diag = rabs(kd[i][i] - 1.0);
        chk(rabs(kd[i][j] - kr[i][j]) <= 0.1 * kr[i][j] + 1.0e-6, $sformatf("K(%0d,%0d) dut %g ref %g", i, j, kd[i][j], kr[i][j]));
      end
    $display("d=%0d, %0d blocks, N=%0d: max block error %g, max relative error of K %g, max |K_ii - 1| %g, K(0,1) = %g (ref %g)",
             D, NB, N, max_blk, max_rel, max_diag, kd[0][1], kr[0][1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    $display("watchdog: timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
