// tb_qk_top: end-to-end test of qk_top at reduced sizes.
//
// Two accelerators run side by side.
//  * NQ = 3 (odd): exercises the final 1/2 in the inner product. It has a
//    4-entry output FIFO and a 40 % ready rate on m_axis, so the controller
//    must stall on back-pressure. It also gets gaps on s_axis and ends with a
//    misplaced-tlast stream.
//  * NQ = 6 (the design's block size, even), with the default FIFO and full
//    ready rate. Here the agent also checks the rate of one K per 2 clocks.
// Every K_ij is compared with a double-precision simulation of the circuit.
module tb_qk_top;
  logic clk = 1'b0;
  logic rst_n = 1'b1;
  initial #0.5 rst_n = 1'b0;
  always #2 clk = ~clk;

  localparam int unsigned AW_A = 4;   // MAX_SAMPLES 16
  localparam int unsigned AW_B = 5;   // MAX_SAMPLES 32

  // ---------- DUT A: NQ=3 ----------
  logic [AW_A:0] n_a;
  logic [15:0] sd_a, md_a;
  logic sv_a, sl_a, sr_a, mv_a, ml_a, mr_a, busy_a, stall_a, done_a, te_a, ov_a, fin_a;
  int ch_a, fl_a;
  qk_top #(.NQ(3), .MAX_SAMPLES(16), .FIFO_DEPTH(4)) u_dut_a (
    .clk, .rst_n, .n_samples(n_a),
    .s_axis_tdata(sd_a), .s_axis_tvalid(sv_a), .s_axis_tlast(sl_a), .s_axis_tready(sr_a),
    .m_axis_tdata(md_a), .m_axis_tvalid(mv_a), .m_axis_tlast(ml_a), .m_axis_tready(mr_a),
    .busy(busy_a), .stall(stall_a), .done(done_a), .tlast_err(te_a), .fifo_overflow(ov_a)
  );
  qk_tb_agent #(.NQ(3), .AW(AW_A), .N_RUN(12), .RUNS(2), .READY_PCT(40), .VALID_PCT(70),
                .EXPECT_STALL(1'b1), .BAD_TLAST(1'b1), .SEED(11)) u_agent_a (
    .clk, .rst_n, .n_samples(n_a),
    .s_tdata(sd_a), .s_tvalid(sv_a), .s_tlast(sl_a), .s_tready(sr_a),
    .m_tdata(md_a), .m_tvalid(mv_a), .m_tlast(ml_a), .m_tready(mr_a),
    .busy(busy_a), .stall(stall_a), .done(done_a), .tlast_err(te_a), .fifo_overflow(ov_a),
    .finished(fin_a), .checks(ch_a), .failures(fl_a)
  );

  // ---------- DUT B: NQ=6 ----------
  logic [AW_B:0] n_b;
  logic [15:0] sd_b, md_b;
  logic sv_b, sl_b, sr_b, mv_b, ml_b, mr_b, busy_b, stall_b, done_b, te_b, ov_b, fin_b;
  int ch_b, fl_b;
  qk_top #(.NQ(6), .MAX_SAMPLES(32)) u_dut_b (
    .clk, .rst_n, .n_samples(n_b),
    .s_axis_tdata(sd_b), .s_axis_tvalid(sv_b), .s_axis_tlast(sl_b), .s_axis_tready(sr_b),
    .m_axis_tdata(md_b), .m_axis_tvalid(mv_b), .m_axis_tlast(ml_b), .m_axis_tready(mr_b),
    .busy(busy_b), .stall(stall_b), .done(done_b), .tlast_err(te_b), .fifo_overflow(ov_b)
  );
  qk_tb_agent #(.NQ(6), .AW(AW_B), .N_RUN(20), .RUNS(2), .READY_PCT(100), .VALID_PCT(100),
                .EXPECT_STALL(1'b0), .BAD_TLAST(1'b0), .SEED(22)) u_agent_b (
    .clk, .rst_n, .n_samples(n_b),
    .s_tdata(sd_b), .s_tvalid(sv_b), .s_tlast(sl_b), .s_tready(sr_b),
    .m_tdata(md_b), .m_tvalid(mv_b), .m_tlast(ml_b), .m_tready(mr_b),
    .busy(busy_b), .stall(stall_b), .done(done_b), .tlast_err(te_b), .fifo_overflow(ov_b),
    .finished(fin_b), .checks(ch_b), .failures(fl_b)
  );

  initial begin
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    wait (fin_a && fin_b);
    $display("TB_RESULT checks=%0d failures=%0d", ch_a + ch_b, fl_a + fl_b);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog: timeout");
    $display("TB_RESULT checks=%0d failures=%0d", ch_a + ch_b, fl_a + fl_b + 1);
    $finish;
  end
endmodule
