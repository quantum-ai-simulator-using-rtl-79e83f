// tb_kfifo: checks order, count, valid/ready behaviour and the overflow flag of the output FIFO against a queue model.
//
// Writes and reads are random, with phases that fill the FIFO to full and
// drain it to empty. In a final phase it writes into a full FIFO on purpose.
// That write must be dropped and must set `overflow`.
module tb_kfifo;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #0.5 rst_n = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  logic wr_en, m_valid, m_ready, overflow;
  logic [16:0] wd, md;
  logic [3:0] count;
  logic [16:0] q [$];
  int n_full = 0;
  kfifo #(.WIDTH(17), .DEPTH(8)) dut (.clk, .rst_n, .wr_en, .wr_data(wd), .m_valid, .m_ready, .m_data(md),
                                      .count, .overflow);

  task automatic chk(input bit ok, input string m);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", m);
    end
  endtask

  initial begin
    wr_en = 0; m_ready = 0; wd = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      int phase;
      phase = (t / 200) % 3;   // 0: fill-biased, 1: drain-biased, 2: balanced
      @(negedge clk);
      chk(int'(count) == q.size(), $sformatf("count %0d vs %0d", count, q.size()));
      chk(m_valid == (q.size() != 0), "m_valid");
      if (q.size() != 0) chk(md == q[0], "data order");
      if (q.size() == 8) n_full++;
      m_ready = (phase == 1) ? ($urandom_range(9) < 9) : (phase == 0) ? ($urandom_range(9) < 2) : $urandom_range(1);
      wr_en   = (q.size() < 8 || (m_ready && q.size() != 0 && 0)) ? ((phase == 0) ? 1'b1 : (phase == 1) ? ($urandom_range(9) < 2) : $urandom_range(1)) : 1'b0;
      wd = 17'($urandom());
      @(posedge clk);
      if (m_valid && m_ready) void'(q.pop_front());
      if (wr_en) q.push_back(wd);
    end
    chk(n_full > 0, "FIFO was filled");
    chk(!overflow, "no overflow in legal use");
    // fill, then write once more
    @(negedge clk);
    m_ready = 0;
    while (q.size() < 8) begin
      wr_en = 1; wd = 17'($urandom());
      @(posedge clk);
      q.push_back(wd);
      @(negedge clk);
    end
    wr_en = 1; wd = 17'h1ABCD;
    @(posedge clk);
    @(negedge clk);
    wr_en = 0;
    chk(overflow, "overflow flagged");
    chk(int'(count) == 8 && md == q[0], "dropped write left contents alone");
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
