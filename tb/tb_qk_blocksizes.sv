// tb_qk_blocksizes: the smaller block sizes, n = 2 and n = 3 qubits, each with N = 1000 samples.
//
// The design is also built with 2 and 3 qubits per block. The 2-qubit build
// has 1024-sample buffers, and 2 qubits per block is the setting for the
// ten-class task. Both builds compute the full 1000 x 1000 kernel (500,500
// pairs). Every entry is compared with the double-precision circuit
// simulation, and the rate of one K per 2 clocks is checked.
module tb_qk_blocksizes;
  logic clk = 1'b0;
  logic rst_n = 1'b1;
  initial #0.5 rst_n = 1'b0;
  always #2 clk = ~clk;

  localparam int unsigned AW = 10;

  logic [AW:0] n2, n3;
  logic [15:0] sd2, md2, sd3, md3;
  logic sv2, sl2, sr2, mv2, ml2, mr2, busy2, stall2, done2, te2, ov2, fin2;
  logic sv3, sl3, sr3, mv3, ml3, mr3, busy3, stall3, done3, te3, ov3, fin3;
  int ch2, fl2, ch3, fl3;

  qk_top #(.NQ(2)) u_dut2 (
    .clk, .rst_n, .n_samples(n2),
    .s_axis_tdata(sd2), .s_axis_tvalid(sv2), .s_axis_tlast(sl2), .s_axis_tready(sr2),
    .m_axis_tdata(md2), .m_axis_tvalid(mv2), .m_axis_tlast(ml2), .m_axis_tready(mr2),
    .busy(busy2), .stall(stall2), .done(done2), .tlast_err(te2), .fifo_overflow(ov2)
  );
  qk_tb_agent #(.NQ(2), .AW(AW), .N_RUN(1000), .RUNS(1), .SEED(7)) u_agent2 (
    .clk, .rst_n, .n_samples(n2),
    .s_tdata(sd2), .s_tvalid(sv2), .s_tlast(sl2), .s_tready(sr2),
    .m_tdata(md2), .m_tvalid(mv2), .m_tlast(ml2), .m_tready(mr2),
    .busy(busy2), .stall(stall2), .done(done2), .tlast_err(te2), .fifo_overflow(ov2),
    .finished(fin2), .checks(ch2), .failures(fl2)
  );

  qk_top #(.NQ(3)) u_dut3 (
    .clk, .rst_n, .n_samples(n3),
    .s_axis_tdata(sd3), .s_axis_tvalid(sv3), .s_axis_tlast(sl3), .s_axis_tready(sr3),
    .m_axis_tdata(md3), .m_axis_tvalid(mv3), .m_axis_tlast(ml3), .m_axis_tready(mr3),
    .busy(busy3), .stall(stall3), .done(done3), .tlast_err(te3), .fifo_overflow(ov3)
  );
  qk_tb_agent #(.NQ(3), .AW(AW), .N_RUN(1000), .RUNS(1), .SEED(8)) u_agent3 (
    .clk, .rst_n, .n_samples(n3),
    .s_tdata(sd3), .s_tvalid(sv3), .s_tlast(sl3), .s_tready(sr3),
    .m_tdata(md3), .m_tvalid(mv3), .m_tlast(ml3), .m_tready(mr3),
    .busy(busy3), .stall(stall3), .done(done3), .tlast_err(te3), .fifo_overflow(ov3),
    .finished(fin3), .checks(ch3), .failures(fl3)
  );

  initial begin
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    wait (fin2 && fin3);
    $display("TB_RESULT checks=%0d failures=%0d", ch2 + ch3, fl2 + fl3);
    $finish;
  end

  initial begin
    repeat (1200000) @(posedge clk);
    $display("watchdog: timeout");
    $display("TB_RESULT checks=%0d failures=%0d", ch2 + ch3, fl2 + fl3 + 1);
    $finish;
  end
endmodule
