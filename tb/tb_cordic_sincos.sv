// tb_cordic_sincos: checks cos/sin of the CORDIC over the whole input range and its latency.
//
// The angles sweep [-3.99, 3.99] rad, so all four quadrants are covered and
// the fold by pi is used. The reference is $cos/$sin. The tolerance is 4 LSB
// of Q2.14 (2.4e-4). The tag must come out exactly ITER + 2 cycles after the
// input.
module tb_cordic_sincos;
  import qk_pkg::*;
  import qk_ref_pkg::rabs;
  localparam int ITER = 16;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #0.5 rst_n = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0, folds = 0;

  logic in_valid, out_valid;
  logic [15:0] in_tag, out_tag;
  angle_t theta;
  fx_t c, s;
  real exp_c [65536];
  real exp_s [65536];
  int  t_in [65536];
  int  cyc = 0;

  cordic_sincos #(.ITER(ITER), .TAG_W(16)) dut (
    .clk, .rst_n, .in_valid, .in_tag, .theta, .out_valid, .out_tag, .cos_o(c), .sin_o(s)
  );

  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (out_valid) begin
    checks++;
    if (rabs(real'(c)/16384.0 - exp_c[out_tag]) > 4.0/16384 ||
        rabs(real'(s)/16384.0 - exp_s[out_tag]) > 4.0/16384 ||
        (cyc - t_in[out_tag]) != ITER + 2) begin
      failures++;
      if (failures < 10) $display("FAIL tag %0d: cos %f exp %f sin %f exp %f lat %0d",
        out_tag, real'(c)/16384.0, exp_c[out_tag], real'(s)/16384.0, exp_s[out_tag], cyc - t_in[out_tag]);
    end
  end

  initial begin
    in_valid = 0; in_tag = 0; theta = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 3000; k++) begin
      int v;
      real th;
      v = (k < 2000) ? (-32700 + k * 32) : int'($urandom_range(65400)) - 32700;
      th = real'(v) / 8192.0;
      if (rabs(th) > 1.5707963) folds++;
      @(negedge clk);
      in_valid = ($urandom_range(3) != 0);
      theta = angle_t'(v);
      in_tag = 16'(k);
      exp_c[k] = $cos(th);
      exp_s[k] = $sin(th);
      t_in[k] = cyc;
      if (!in_valid) k--;
    end
    @(negedge clk) in_valid = 0;
    repeat (ITER + 5) @(posedge clk);
    checks++;
    if (folds == 0) failures++;
    checks++;
    if (checks < 3000) failures++;
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
