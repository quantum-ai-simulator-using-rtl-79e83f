// tb_qstate: checks f_k = v_k * u_xi(k) for n = 2, 3 and 6, and the latency of 1.
//
// The reference works out xi on its own. It pushes each basis vector e_c
// through the gates CNOT(1,2), CNOT(2,3), ..., CNOT(n-1,n), applied in that
// order to the bits of c. The row r it lands on has its non-zero entry in
// column c, so xi(r) = c. The test also checks the example given with the
// construction: for n = 2, xi = (1, 2, 4, 3) in 1-based terms.
module tb_qstate;
  import qk_pkg::*;
  import qk_ref_pkg::rabs;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #0.5 rst_n = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  cplx_t u2 [4], v2 [4], f2 [4];
  cplx_t u3 [8], v3 [8], f3 [8];
  cplx_t u6 [64], v6 [64], f6 [64];
  logic iv, o2, o3, o6;
  logic [1:0] it, t2, t3, t6;
  qstate #(.NQ(2), .TAG_W(2)) q2 (.clk, .rst_n, .in_valid(iv), .in_tag(it), .u(u2), .v(v2), .out_valid(o2), .out_tag(t2), .f(f2));
  qstate #(.NQ(3), .TAG_W(2)) q3 (.clk, .rst_n, .in_valid(iv), .in_tag(it), .u(u3), .v(v3), .out_valid(o3), .out_tag(t3), .f(f3));
  qstate #(.NQ(6), .TAG_W(2)) q6 (.clk, .rst_n, .in_valid(iv), .in_tag(it), .u(u6), .v(v6), .out_valid(o6), .out_tag(t6), .f(f6));

  function automatic int cascade(input int n, input int c);
    int b;
    b = c;
    for (int q = 1; q < n; q++)           // CNOT(q, q+1): qubit q is bit n-q
      if ((b >> (n - q)) & 1) b = b ^ (1 << (n - q - 1));
    return b;
  endfunction

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

  task automatic cmpf(input cplx_t u, input cplx_t v, input cplx_t f, input string m);
    real er, ei;
    er = r(v.re) * r(u.re) - r(v.im) * r(u.im);
    ei = r(v.re) * r(u.im) + r(v.im) * r(u.re);
    chk(rabs(r(f.re) - er) <= 1.0/16384 && rabs(r(f.im) - ei) <= 1.0/16384, m);
  endtask

  initial begin
    int xi2 [4], xi3 [8], xi6 [64];
    iv = 0; it = 0;
    for (int c = 0; c < 4; c++)  xi2[cascade(2, c)] = c;
    for (int c = 0; c < 8; c++)  xi3[cascade(3, c)] = c;
    for (int c = 0; c < 64; c++) xi6[cascade(6, c)] = c;
    chk(xi2[0] == 0 && xi2[1] == 1 && xi2[2] == 3 && xi2[3] == 2, "n=2 example xi = 1,2,4,3");
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 100; t++) begin
      @(negedge clk);
      for (int k = 0; k < 64; k++) begin
        u6[k].re = fx_t'($urandom()) >>> 2; u6[k].im = fx_t'($urandom()) >>> 2;
        v6[k].re = fx_t'($urandom()) >>> 2; v6[k].im = fx_t'($urandom()) >>> 2;
        if (k < 8) begin u3[k] = u6[k]; v3[k] = v6[k]; end
        if (k < 4) begin u2[k] = u6[k]; v2[k] = v6[k]; end
      end
      iv = 1; it = 2'(t);
      @(posedge clk);
      #0.1;
      chk(o2 && o3 && o6 && t2 == 2'(t) && t6 == 2'(t), "latency 1");
      for (int k = 0; k < 4; k++)  cmpf(u2[xi2[k]], v2[k], f2[k], $sformatf("n=2 f[%0d]", k));
      for (int k = 0; k < 8; k++)  cmpf(u3[xi3[k]], v3[k], f3[k], $sformatf("n=3 f[%0d]", k));
      for (int k = 0; k < 64; k++) cmpf(u6[xi6[k]], v6[k], f6[k], $sformatf("n=6 f[%0d]", k));
    end
    @(negedge clk) iv = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    $display("watchdog: timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
