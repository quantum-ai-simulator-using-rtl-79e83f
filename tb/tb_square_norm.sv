// tb_square_norm: checks K = re^2 + im^2, rounded to Q2.14, and the latency of 1.
//
// The reference is exact 64-bit integer arithmetic with round-half-up. It
// includes the clipped corner case (re = im = -2).
module tb_square_norm;
  import qk_pkg::*;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #0.5 rst_n = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  logic iv, ov;
  logic [0:0] it, ot;
  fx_t re, im, k;
  square_norm #(.TAG_W(1)) dut (.clk, .rst_n, .in_valid(iv), .in_tag(it), .ip_re(re), .ip_im(im),
                                .out_valid(ov), .out_tag(ot), .k(k));
  initial begin
    iv = 0; it = 0; re = 0; im = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      longint e;
      @(negedge clk);
      if (t == 0) begin re = FX_MIN; im = FX_MIN; end
      else if (t % 2 == 0) begin re = fx_t'(int'($urandom_range(32768)) - 16384); im = fx_t'(int'($urandom_range(32768)) - 16384); end
      else begin re = fx_t'($urandom()); im = fx_t'($urandom()); end
      iv = 1; it = 1'(t);
      e = (longint'(re) * longint'(re) + longint'(im) * longint'(im) + 8192) >>> 14;
      if (e > 32767) e = 32767;
      @(posedge clk);
      #0.1;
      checks++;
      if (!ov || ot != 1'(t) || longint'(k) != e) begin
        failures++;
        if (failures < 10) $display("FAIL re=%0d im=%0d got %0d exp %0d", re, im, k, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    $display("watchdog: timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
