// qk_tb_agent: stimulus and scoreboard for qk_top, shared by the end-to-end testbenches.
//
// It makes random feature vectors. Every fourth sample draws its features
// from the wide range |x| < 7.5, so its half-angles need the CORDIC fold.
// The rest come from [-1, 1], the normalised range the features have after
// PCA. The agent streams the samples in with random gaps on tvalid. It
// compares every K_ij that comes out, in the expected (i <= j) row order,
// with the double-precision circuit simulation in qk_ref_pkg.
// The output ready is driven at random with probability READY_PCT percent.
// At 100 percent the agent also checks the rate: the last K comes exactly
// 2*(pairs-1) cycles after the first.
// It runs RUNS complete operations back to back. If BAD_TLAST is set, it then
// sends one stream with tlast on the wrong word and checks that tlast_err
// rises.
// Mechanism counters: stall cycles, folded samples, completed runs and the
// tlast error. A mechanism the configuration asks for but that never happened
// counts as a failure.
module qk_tb_agent
  import qk_ref_pkg::*;
#(
  parameter int unsigned NQ          = 3,
  parameter int unsigned AW          = 4,
  parameter int unsigned N_RUN       = 8,
  parameter int unsigned RUNS        = 2,
  parameter int unsigned READY_PCT   = 100,
  parameter int unsigned VALID_PCT   = 100,
  parameter bit          EXPECT_STALL = 1'b0,
  parameter bit          BAD_TLAST   = 1'b0,
  parameter real         TOL         = 4.0e-3,
  parameter int unsigned SEED        = 1
) (
  input  logic        clk,
  input  logic        rst_n,
  output logic [AW:0] n_samples,
  output logic [15:0] s_tdata,
  output logic        s_tvalid,
  output logic        s_tlast,
  input  logic        s_tready,
  input  logic [15:0] m_tdata,
  input  logic        m_tvalid,
  input  logic        m_tlast,
  output logic        m_tready,
  input  logic        busy,
  input  logic        stall,
  input  logic        done,
  input  logic        tlast_err,
  input  logic        fifo_overflow,
  output logic        finished,
  output int          checks,
  output int          failures
);
  localparam int unsigned M     = 1 << NQ;
  localparam int unsigned PAIRS = N_RUN * (N_RUN + 1) / 2;

  logic signed [15:0] xq [N_RUN][NQ];
  real  ref_r [N_RUN][M];
  real  ref_i [N_RUN][M];
  int   n_stall, n_fold, n_runs_done, n_tlast_err;
  real  max_err;
  longint cyc;

  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (stall) n_stall <= n_stall + 1;
    if (m_tvalid && m_tready) begin
      // sampled by the receive task
    end
  end

  initial begin
    cyc = 0;
    n_stall = 0;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL [NQ=%0d] %s", NQ, what);
    end
  endtask

  task automatic make_data(input int run);
    real x [MAXN];
    vec_t sr, si;
    for (int s = 0; s < N_RUN; s++) begin
      bit wide;
      wide = (s % 4 == 3);
      for (int q = 0; q < MAXN; q++) x[q] = 0.0;
      for (int q = 0; q < NQ; q++) begin
        int lim, v;
        lim = wide ? 30720 : 4096;            // 7.5 or 1.0 in Q4.12
        v = int'($urandom_range(2*lim)) - lim;
        xq[s][q] = 16'(v);
        x[q] = real'(v) / 4096.0;
        if (rabs(x[q] / 2.0) > 1.5707963) n_fold++;
      end
      feature_state(NQ, x, sr, si);
      for (int k = 0; k < M; k++) begin
        ref_r[s][k] = sr[k];
        ref_i[s][k] = si[k];
      end
    end
    if (run == 0) $display("[NQ=%0d] data ready (%0d samples, %0d pairs)", NQ, N_RUN, PAIRS);
  endtask

  task automatic send_stream(input bit bool_bad);
    int total, w;
    total = N_RUN * NQ;
    w = 0;
    while (w < total) begin
      s_tvalid <= ($urandom_range(99) < VALID_PCT);
      s_tdata  <= xq[w / NQ][w % NQ];
      s_tlast  <= bool_bad ? (w == total - 2) : (w == total - 1);
      @(posedge clk);
      if (s_tvalid && s_tready) w++;
    end
    s_tvalid <= 1'b0;
    s_tlast  <= 1'b0;
  endtask

  task automatic receive(input int run);
    int i, j, got;
    longint t_first, t_last;
    vec_t ar, ai, br, bi;
    i = 0; j = 0; got = 0;
    t_first = 0; t_last = 0;
    while (got < PAIRS) begin
      m_tready <= ($urandom_range(99) < READY_PCT);
      @(posedge clk);
      if (m_tvalid && m_tready) begin
        real kref, kdut, err;
        for (int k = 0; k < M; k++) begin
          ar[k] = ref_r[i][k]; ai[k] = ref_i[i][k];
          br[k] = ref_r[j][k]; bi[k] = ref_i[j][k];
        end
        kref = kernel_of(NQ, ar, ai, br, bi);
        kdut = fx2r(m_tdata, 14);
        err  = rabs(kdut - kref);
        if (err > max_err) max_err = err;
        check(err <= TOL, $sformatf("run %0d K(%0d,%0d) dut=%f ref=%f", run, i, j, kdut, kref));
        check(m_tlast == (got == PAIRS - 1), $sformatf("tlast at pair %0d", got));
        if (got == 0) t_first = cyc;
        t_last = cyc;
        got++;
        if (j == N_RUN - 1) begin
          i++;
          j = i;
        end else begin
          j++;
        end
      end
    end
    m_tready <= 1'b0;
    if (READY_PCT == 100)
      check((t_last - t_first) == longint'(2 * (PAIRS - 1)),
            $sformatf("rate: %0d cycles for %0d pairs", t_last - t_first, PAIRS));
  endtask

  initial begin
    finished = 1'b0;
    checks = 0;
    failures = 0;
    n_fold = 0;
    n_runs_done = 0;
    n_tlast_err = 0;
    max_err = 0.0;
    s_tvalid = 1'b0;
    s_tlast = 1'b0;
    s_tdata = '0;
    m_tready = 1'b0;
    n_samples = (AW+1)'(N_RUN);
    void'($urandom(SEED));
    @(posedge rst_n);
    repeat (3) @(posedge clk);
    for (int run = 0; run < int'(RUNS); run++) begin
      make_data(run);
      fork
        send_stream(1'b0);
        receive(run);
      join
      // the controller must return to LOAD and pulse done
      while (busy) @(posedge clk);
      n_runs_done++;
      check(!tlast_err, "tlast_err after a correct stream");
      check(!fifo_overflow, "fifo overflow");
    end
    if (BAD_TLAST) begin
      make_data(RUNS);
      send_stream(1'b1);
      repeat (2) @(posedge clk);
      if (tlast_err) n_tlast_err++;
      check(tlast_err, "tlast_err not raised for a misplaced tlast");
    end
    $display("[NQ=%0d] max |K_dut - K_ref| = %g, stall cycles %0d, folded samples %0d, runs %0d, tlast errors %0d",
             NQ, max_err, n_stall, n_fold, n_runs_done, n_tlast_err);
    check(n_fold > 0, "mechanism: CORDIC quadrant fold never used");
    check(n_runs_done == int'(RUNS), "mechanism: back-to-back runs");
    if (EXPECT_STALL) check(n_stall > 0, "mechanism: FIFO back-pressure stall never happened");
    if (BAD_TLAST) check(n_tlast_err > 0, "mechanism: tlast error never flagged");
    finished = 1'b1;
  end
endmodule
