// tb_uv_gen: checks chi and phi against the gate matrices, and the latency of 1.
//
// For an angle x it feeds c = cos(x/2), s = sin(x/2). The reference applies
// Ry(x) Rz(x) to the vector (1, 1), which is H|0> without the 1/sqrt2. That
// gives (chi1, chi2). It takes the diagonal of Rz(x) as (phi1, phi2). All of
// this is complex arithmetic on reals. The tolerance is 2 LSB.
module tb_uv_gen;
  import qk_pkg::*;
  import qk_ref_pkg::rabs;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #0.5 rst_n = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid, out_valid;
  logic [7:0] in_tag, out_tag;
  fx_t c, s;
  gate_t g;
  real e [256][8];

  uv_gen #(.TAG_W(8)) dut (.clk, .rst_n, .in_valid, .in_tag, .cos_i(c), .sin_i(s),
                           .out_valid, .out_tag, .gate(g));

  function automatic real r(input fx_t v);
    return real'(v) / 16384.0;
  endfunction

  task automatic cmp(input real got, input real exp, input string m);
    checks++;
    if (rabs(got - exp) > 2.0/16384) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %f exp %f", m, got, exp);
    end
  endtask

  always @(posedge clk) if (out_valid) begin
    cmp(r(g.chi1.re), e[out_tag][0], "chi1.re");
    cmp(r(g.chi1.im), e[out_tag][1], "chi1.im");
    cmp(r(g.chi2.re), e[out_tag][2], "chi2.re");
    cmp(r(g.chi2.im), e[out_tag][3], "chi2.im");
    cmp(r(g.phi1.re), e[out_tag][4], "phi1.re");
    cmp(r(g.phi1.im), e[out_tag][5], "phi1.im");
    cmp(r(g.phi2.re), e[out_tag][6], "phi2.re");
    cmp(r(g.phi2.im), e[out_tag][7], "phi2.im");
  end

  initial begin
    in_valid = 0; in_tag = 0; c = 0; s = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 256; k++) begin
      real x, cr, sr, a0r, a0i, a1r, a1i;
      x = -7.9 + 15.8 * real'(k) / 255.0;
      c = fx_t'($rtoi($floor($cos(x / 2.0) * 16384.0 + 0.5)));
      s = fx_t'($rtoi($floor($sin(x / 2.0) * 16384.0 + 0.5)));
      cr = r(c);
      sr = r(s);
      // Rz(x) (1,1) = (e^{-ix/2}, e^{ix/2})
      a0r = cr;  a0i = -sr;
      a1r = cr;  a1i = sr;
      // Ry(x) = [[c, -s], [s, c]]
      e[k][0] = cr * a0r - sr * a1r;  e[k][1] = cr * a0i - sr * a1i;
      e[k][2] = sr * a0r + cr * a1r;  e[k][3] = sr * a0i + cr * a1i;
      e[k][4] = cr;  e[k][5] = -sr;  e[k][6] = cr;  e[k][7] = sr;
      @(negedge clk);
      in_valid = 1;
      in_tag = 8'(k);
      @(posedge clk);
      #0.1;
      checks++;
      if (!out_valid || out_tag != 8'(k)) begin
        failures++;
        $display("FAIL latency at %0d", k);
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (4) @(posedge clk);
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
