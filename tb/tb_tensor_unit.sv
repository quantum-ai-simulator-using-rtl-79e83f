// tb_tensor_unit: checks that the subunit outputs (a1 b1, a1 b2, a2 b1, a2 b2) in that order.
//
// The reference uses real complex arithmetic. The tolerance is one LSB of rounding.
module tb_tensor_unit;
  import qk_pkg::*;
  import qk_ref_pkg::rabs;
  int checks = 0, failures = 0;
  cplx_t a [2];
  cplx_t b [2];
  cplx_t p0 [4];
  cplx_t p1 [4];

  tensor_unit #(.EXTRA_SHIFT(0)) u0 (.a, .b, .p(p0));
  tensor_unit #(.EXTRA_SHIFT(1)) u1 (.a, .b, .p(p1));

  function automatic real r(input fx_t v);
    return real'(v) / 16384.0;
  endfunction

  initial begin
    for (int t = 0; t < 2000; t++) begin
      for (int k = 0; k < 2; k++) begin
        a[k].re = fx_t'($urandom()) >>> 1; a[k].im = fx_t'($urandom()) >>> 1;
        b[k].re = fx_t'($urandom()) >>> 1; b[k].im = fx_t'($urandom()) >>> 1;
      end
      #1;
      for (int ia = 0; ia < 2; ia++)
        for (int ib = 0; ib < 2; ib++) begin
          real er, ei;
          er = r(a[ia].re) * r(b[ib].re) - r(a[ia].im) * r(b[ib].im);
          ei = r(a[ia].re) * r(b[ib].im) + r(a[ia].im) * r(b[ib].re);
          checks++;
          if (rabs(r(p0[2*ia+ib].re) - er) > 1.0/16384 || rabs(r(p0[2*ia+ib].im) - ei) > 1.0/16384 ||
              rabs(r(p1[2*ia+ib].re) - er/2) > 1.0/16384 || rabs(r(p1[2*ia+ib].im) - ei/2) > 1.0/16384) begin
            failures++;
            if (failures < 10) $display("FAIL t=%0d out %0d", t, 2*ia+ib);
          end
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
