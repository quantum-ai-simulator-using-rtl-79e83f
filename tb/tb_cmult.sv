// tb_cmult: checks the three-multiplier complex multiplier against the textbook four-multiplier product.
//
// The reference is Re = x1 x2 - y1 y2 and Im = x1 y2 + y1 x2, in 64-bit
// integers. It checks the full-precision outputs exactly, and the rounded
// outputs for EXTRA_SHIFT = 0 and 1 (the 1/2 prefactor).
module tb_cmult;
  import qk_pkg::*;
  int checks = 0, failures = 0;
  cplx_t a, b, z0, z1;
  prod_t fr0, fi0, fr1, fi1;

  cmult #(.EXTRA_SHIFT(0)) u0 (.a, .b, .zf_re(fr0), .zf_im(fi0), .z(z0));
  cmult #(.EXTRA_SHIFT(1)) u1 (.a, .b, .zf_re(fr1), .zf_im(fi1), .z(z1));

  function automatic int rnd(input longint p, input int s);
    longint v;
    v = (p + (longint'(1) << (s - 1))) >>> s;
    if (v > 32767) v = 32767;
    if (v < -32768) v = -32768;
    return int'(v);
  endfunction

  task automatic chk(input bit ok, input string m);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", m);
    end
  endtask

  initial begin
    for (int t = 0; t < 5000; t++) begin
      longint er, ei;
      if (t < 4) begin
        a.re = (t[0]) ? FX_MIN : FX_MAX; a.im = (t[1]) ? FX_MIN : FX_MAX;
        b.re = FX_MIN; b.im = FX_MAX;
      end else begin
        a.re = fx_t'($urandom()); a.im = fx_t'($urandom());
        b.re = fx_t'($urandom()); b.im = fx_t'($urandom());
        if (t % 2 == 0) begin   // datapath-sized values, |.| < 1.25
          a.re = a.re >>> 1; a.im = a.im >>> 1; b.re = b.re >>> 1; b.im = b.im >>> 1;
        end
      end
      #1;
      er = longint'(a.re) * longint'(b.re) - longint'(a.im) * longint'(b.im);
      ei = longint'(a.re) * longint'(b.im) + longint'(a.im) * longint'(b.re);
      chk(longint'(fr0) == er && longint'(fi0) == ei, $sformatf("full product t=%0d", t));
      chk(int'(z0.re) == rnd(er, 14) && int'(z0.im) == rnd(ei, 14), $sformatf("rounded t=%0d", t));
      chk(int'(z1.re) == rnd(er, 15) && int'(z1.im) == rnd(ei, 15), $sformatf("halved t=%0d", t));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    $display("watchdog: timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
