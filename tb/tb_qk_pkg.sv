// tb_qk_pkg: checks the rounding, saturation and conjugation helpers of qk_pkg.
//
// The reference rounds with real arithmetic: floor(v / 2^s + 0.5), clipped to
// the signed 16-bit range.
module tb_qk_pkg;
  import qk_pkg::*;
  int checks = 0, failures = 0;

  function automatic int ref_round(input longint p, input int s);
    real r;
    longint v;
    r = real'(p) / real'(longint'(1) << s);
    v = longint'($floor(r + 0.5));
    if (v > 32767) v = 32767;
    if (v < -32768) v = -32768;
    return int'(v);
  endfunction

  initial begin
    for (int t = 0; t < 4000; t++) begin
      longint p;
      int s;
      fx_t got;
      s = (t % 3 == 0) ? 14 : (t % 3 == 1) ? 15 : 4;
      p = longint'($signed($urandom())) * ((t % 7 == 0) ? 8 : 1);
      got = fx_round_sat(prod_t'(p), s);
      checks++;
      if (int'(got) != ref_round(p, s)) begin
        failures++;
        if (failures < 10) $display("FAIL round p=%0d s=%0d got=%0d exp=%0d", p, s, got, ref_round(p, s));
      end
    end
    for (int t = 0; t < 200; t++) begin
      cplx_t a, c;
      a.re = fx_t'($urandom());
      a.im = (t == 0) ? FX_MIN : fx_t'($urandom());
      c = cconj(a);
      checks++;
      if (c.re != a.re || int'(c.im) != ((t == 0) ? 32767 : -int'(a.im))) begin
        failures++;
        $display("FAIL conj");
      end
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
