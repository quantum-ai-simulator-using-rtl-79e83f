// tb_inner_product: checks sum_l conj(f_l(x_i)) f_l(x_j) for n = 2 (even) and n = 3 (odd, extra 1/2), and the timing.
//
// Random state pairs go in as two beats, at random spacing. The reference
// sum uses real arithmetic. For odd n it is halved. The tolerance is 2 LSB,
// and the result must come 2 cycles after the beat-1 input.
module tb_inner_product;
  import qk_pkg::*;
  import qk_ref_pkg::rabs;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #0.5 rst_n = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  cplx_t f2 [4];
  cplx_t f3 [8];
  logic iv, beat, o2, o3;
  logic [7:0] it, t2, t3;
  fx_t re2, im2, re3, im3;
  inner_product #(.NQ(2), .TAG_W(8)) i2 (.clk, .rst_n, .in_valid(iv), .in_beat(beat), .in_tag(it), .f(f2),
    .out_valid(o2), .out_tag(t2), .ip_re(re2), .ip_im(im2));
  inner_product #(.NQ(3), .TAG_W(8)) i3 (.clk, .rst_n, .in_valid(iv), .in_beat(beat), .in_tag(it), .f(f3),
    .out_valid(o3), .out_tag(t3), .ip_re(re3), .ip_im(im3));

  real e2r [256], e2i [256], e3r [256], e3i [256];
  int  tb1 [256];
  int  n_out = 0;

  function automatic real r(input fx_t v);
    return real'(v) / 16384.0;
  endfunction

  task automatic chk(input bit ok, input string m);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", m);
    end
  endtask

  always @(posedge clk) if (o2 || o3) begin
    n_out++;
    chk(o2 && o3 && t2 == t3, "both widths in step");
    chk(cyc - tb1[t2] == 2, $sformatf("latency %0d", cyc - tb1[t2]));
    chk(rabs(r(re2) - e2r[t2]) <= 2.0/16384 && rabs(r(im2) - e2i[t2]) <= 2.0/16384,
        $sformatf("n=2 pair %0d got %f %f exp %f %f", t2, r(re2), r(im2), e2r[t2], e2i[t2]));
    chk(rabs(r(re3) - e3r[t3]) <= 2.0/16384 && rabs(r(im3) - e3i[t3]) <= 2.0/16384,
        $sformatf("n=3 pair %0d got %f exp %f", t3, r(re3), e3r[t3]));
  end

  initial begin
    cplx_t a [8], b [8];
    iv = 0; beat = 0; it = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      real sr, si;
      for (int k = 0; k < 8; k++) begin
        a[k].re = fx_t'(int'($urandom_range(16000)) - 8000); a[k].im = fx_t'(int'($urandom_range(16000)) - 8000);
        b[k].re = fx_t'(int'($urandom_range(16000)) - 8000); b[k].im = fx_t'(int'($urandom_range(16000)) - 8000);
      end
      sr = 0; si = 0;
      for (int k = 0; k < 8; k++) begin
        // conj(a) * b
        sr += r(a[k].re) * r(b[k].re) + r(a[k].im) * r(b[k].im);
        si += r(a[k].re) * r(b[k].im) - r(a[k].im) * r(b[k].re);
        if (k == 3) begin e2r[t] = sr; e2i[t] = si; end
      end
      e3r[t] = sr / 2.0; e3i[t] = si / 2.0;
      @(negedge clk);
      for (int k = 0; k < 8; k++) f3[k] = a[k];
      for (int k = 0; k < 4; k++) f2[k] = a[k];
      iv = 1; beat = 0; it = 8'(t);
      while ($urandom_range(2) == 0) begin
        @(negedge clk);
        iv = 0;
      end
      @(negedge clk);
      for (int k = 0; k < 8; k++) f3[k] = b[k];
      for (int k = 0; k < 4; k++) f2[k] = b[k];
      iv = 1; beat = 1; it = 8'(t);
      tb1[t] = cyc;
      if ($urandom_range(1) == 0) begin
        @(negedge clk);
        iv = 0;
      end
    end
    @(negedge clk) iv = 0;
    repeat (5) @(posedge clk);
    chk(n_out == 200, "all pairs produced");
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
