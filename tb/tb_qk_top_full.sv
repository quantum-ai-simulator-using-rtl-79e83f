// tb_qk_top_full: one complete operation of qk_top at its default sizes.
//
// The defaults are 6 qubits per block, 1024-sample buffers and a 512-entry
// FIFO. The run uses N = 1000 samples, so it computes 500,500 kernel entries.
// That is the kernel-matrix size at which the design's speed was reported.
// Every entry is compared with the double-precision circuit simulation. The
// rate check (one K per 2 clocks) gives the cycle count: about 1.0e6 cycles,
// or 4.0 ms at 250 MHz.
module tb_qk_top_full;
  logic clk = 1'b0;
  logic rst_n = 1'b1;
  initial #0.5 rst_n = 1'b0;
  always #2 clk = ~clk;

  localparam int unsigned AW = 10;

  logic [AW:0] n_s;
  logic [15:0] sd, md;
  logic sv, sl, sr, mv, ml, mr, busy, stall, done, te, ov, fin;
  int ch, fl;
  longint cycles;

  qk_top u_dut (
    .clk, .rst_n, .n_samples(n_s),
    .s_axis_tdata(sd), .s_axis_tvalid(sv), .s_axis_tlast(sl), .s_axis_tready(sr),
    .m_axis_tdata(md), .m_axis_tvalid(mv), .m_axis_tlast(ml), .m_axis_tready(mr),
    .busy, .stall, .done, .tlast_err(te), .fifo_overflow(ov)
  );
  qk_tb_agent #(.NQ(6), .AW(AW), .N_RUN(1000), .RUNS(1), .READY_PCT(100), .VALID_PCT(100),
                .EXPECT_STALL(1'b0), .BAD_TLAST(1'b0), .SEED(5)) u_agent (
    .clk, .rst_n, .n_samples(n_s),
    .s_tdata(sd), .s_tvalid(sv), .s_tlast(sl), .s_tready(sr),
    .m_tdata(md), .m_tvalid(mv), .m_tlast(ml), .m_tready(mr),
    .busy, .stall, .done, .tlast_err(te), .fifo_overflow(ov),
    .finished(fin), .checks(ch), .failures(fl)
  );

  always_ff @(posedge clk) if (busy) cycles <= cycles + 1;

  initial begin
    cycles = 0;
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    wait (fin);
    $display("busy cycles for one operation: %0d (%f ms at 250 MHz)", cycles, real'(cycles) / 250.0e3);
    $display("TB_RESULT checks=%0d failures=%0d", ch, fl);
    $finish;
  end

  initial begin
    repeat (1200000) @(posedge clk);
    $display("watchdog: timeout");
    $display("TB_RESULT checks=%0d failures=%0d", ch, fl + 1);
    $finish;
  end
endmodule
