// tb_data_divider: checks that word q of sample s is written to qubit q's RAM at address s, unchanged (x/2 in Q3.13).
//
// It also checks that `done` pulses on the last word only, that nothing is
// accepted while `enable` is low, that a second stream starts again at
// sample 0, and that a misplaced tlast sets `tlast_err`.
module tb_data_divider;
  import qk_pkg::*;
  localparam int NQ = 3;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #0.5 rst_n = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  logic enable, s_tvalid, s_tlast, s_tready, done, tlast_err;
  logic [4:0] n_samples;
  logic [15:0] s_tdata;
  logic [NQ-1:0] we;
  logic [3:0] wr_addr;
  angle_t wr_data;
  int n_done = 0;
  data_divider #(.NQ(NQ), .MAX_SAMPLES(16)) dut (.clk, .rst_n, .enable, .n_samples, .s_tdata, .s_tvalid, .s_tlast,
    .s_tready, .we, .wr_addr, .wr_data, .done, .tlast_err);

  task automatic chk(input bit ok, input string m);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", m);
    end
  endtask

  task automatic stream(input int n, input bit bad);
    int w;
    w = 0;
    while (w < n * NQ) begin
      @(negedge clk);
      enable = ($urandom_range(4) != 0);
      s_tvalid = ($urandom_range(3) != 0);
      s_tdata = 16'($urandom());
      s_tlast = bad ? (w == 2) : (w == n * NQ - 1);
      #0.1;
      chk(s_tready == enable, "tready follows enable");
      if (s_tvalid && enable) begin
        chk(we == NQ'(1 << (w % NQ)), $sformatf("we for word %0d", w));
        chk(int'(wr_addr) == w / NQ, $sformatf("address for word %0d", w));
        chk(wr_data == angle_t'(s_tdata), "data");
        chk(done == (w == n * NQ - 1), "done on last word only");
        w++;
      end else begin
        chk(we == '0 && !done, "no write without handshake");
      end
      @(posedge clk);
    end
    @(negedge clk);
    s_tvalid = 0;
    s_tlast = 0;
  endtask

  initial begin
    enable = 0; s_tvalid = 0; s_tlast = 0; s_tdata = 0; n_samples = 5'd7;
    repeat (3) @(posedge clk);
    rst_n = 1;
    stream(7, 0);
    chk(!tlast_err, "no tlast error on a good stream");
    n_samples = 5'd4;
    stream(4, 0);
    chk(!tlast_err, "no tlast error on second stream");
    stream(4, 1);
    chk(tlast_err, "tlast error on a bad stream");
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
