// tb_qk_ctrl: checks the sequencing of the controller against models of its surroundings.
//
// The models are these. The divider reports load_done a few cycles into
// LOAD. The preparation pipeline returns prep_wr 20 cycles after each prep_rd.
// The pair pipeline returns k_done 8 cycles after each beat-1 read. The FIFO
// is modelled by a counter that a random consumer drains.
// Checks:
//   * every sample is prepared once, in order;
//   * pairs come in upper-triangle row order with beat 0 = i and beat 1 = j
//     on consecutive cycles;
//   * pair_last marks only the final pair;
//   * the FIFO never overflows, and stalls happen when it is full;
//   * done pulses once per run;
//   * with a free-running consumer, n(n+1)/2 pairs take exactly n(n+1)
//     cycles.
module tb_qk_ctrl;
  localparam int DEPTH = 8;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #0.5 rst_n = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic [4:0] n_samples;
  logic div_en, load_done, prep_rd, prep_wr, pair_rd, pair_beat, pair_last, k_done, busy, stall, done;
  logic [3:0] prep_addr, pair_addr;
  logic [3:0] fifo_count;
  qk_ctrl #(.MAX_SAMPLES(16), .FIFO_DEPTH(DEPTH)) dut (.clk, .rst_n, .n_samples, .div_en, .load_done,
    .prep_rd, .prep_addr, .prep_wr, .pair_rd, .pair_addr, .pair_beat, .pair_last, .k_done, .fifo_count,
    .busy, .stall, .done);

  logic [19:0] prep_pipe;
  logic [7:0]  k_pipe;
  int fcount, drain_pct, n_stall, n_done, exp_prep, exp_i, exp_j, pairs_seen, last_i;
  bit in_pair;
  int t_first, t_last, cyc;

  assign prep_wr    = prep_pipe[19];
  assign k_done     = k_pipe[7];
  assign fifo_count = 4'(fcount);

  task automatic chk(input bit ok, input string m);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", m);
    end
  endtask

  always @(posedge clk) begin
    cyc <= cyc + 1;
    prep_pipe <= {prep_pipe[18:0], prep_rd};
    k_pipe    <= {k_pipe[6:0], pair_rd && pair_beat};
    if (stall) n_stall <= n_stall + 1;
    if (done)  n_done  <= n_done + 1;
    // FIFO model
    begin
      int nc;
      nc = fcount + (k_done ? 1 : 0);
      if (fcount > 0 && $urandom_range(99) < drain_pct) nc--;
      chk(nc <= DEPTH, "FIFO model overflow");
      fcount <= nc;
    end
    if (prep_rd) begin
      chk(int'(prep_addr) == exp_prep, $sformatf("prep address %0d exp %0d", prep_addr, exp_prep));
      exp_prep <= exp_prep + 1;
    end
    if (pair_rd) begin
      if (!pair_beat) begin
        chk(!in_pair, "beat 0 while a pair is open");
        chk(int'(pair_addr) == exp_i, $sformatf("beat 0 address %0d exp %0d", pair_addr, exp_i));
        if (pairs_seen == 0) t_first <= cyc;
        in_pair <= 1;
      end else begin
        chk(in_pair, "beat 1 without beat 0");
        chk(int'(pair_addr) == exp_j, $sformatf("beat 1 address %0d exp %0d", pair_addr, exp_j));
        chk(pair_last == (exp_i == int'(n_samples) - 1 && exp_j == int'(n_samples) - 1), "pair_last");
        in_pair <= 0;
        pairs_seen <= pairs_seen + 1;
        t_last <= cyc;
        if (exp_j == int'(n_samples) - 1) begin
          exp_i <= exp_i + 1;
          exp_j <= exp_i + 1;
        end else begin
          exp_j <= exp_j + 1;
        end
      end
    end else begin
      chk(!in_pair, "beat 1 must follow beat 0 directly");
    end
  end

  task automatic run(input int n, input int pct);
    int p;
    p = n * (n + 1) / 2;
    n_samples = 5'(n);
    drain_pct = pct;
    exp_prep = 0; exp_i = 0; exp_j = 0; pairs_seen = 0;
    @(negedge clk);
    chk(div_en && !busy, "idle in LOAD");
    repeat (3) @(negedge clk);
    load_done = 1;
    @(negedge clk);
    load_done = 0;
    while (!done) @(negedge clk);
    chk(exp_prep == n, "all samples prepared");
    chk(pairs_seen == p, $sformatf("pairs %0d exp %0d", pairs_seen, p));
    if (pct == 100) chk(t_last - t_first == 2 * p - 1, $sformatf("pair rate: %0d cycles", t_last - t_first + 1));
    @(negedge clk);
    chk(!busy && div_en, "back in LOAD");
  endtask

  initial begin
    load_done = 0; n_samples = 0; prep_pipe = 0; k_pipe = 0; fcount = 0; drain_pct = 100;
    n_stall = 0; n_done = 0; in_pair = 0; cyc = 0; t_first = 0; t_last = 0;
    exp_prep = 0; exp_i = 0; exp_j = 0; pairs_seen = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(6, 20);
    chk(n_stall > 0, "stalls under back-pressure");
    run(7, 100);
    run(1, 100);
    chk(n_done == 3, "done pulses");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog: timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
