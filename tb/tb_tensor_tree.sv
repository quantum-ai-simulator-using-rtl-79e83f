// tb_tensor_tree: checks the tensor-product tree for n = 3 and n = 6, with and without the Hadamard prefactor.
//
// The reference entry k is the product over qubits q of pair[q][bit], where
// bit is index bit n-q of k (qubit 1 is the most significant bit). It uses
// real complex arithmetic. On the U side it is scaled by 2^-floor(n/2), the
// 1/2 applied every two qubits. Inputs are random chi-sized values
// (|re|, |im| < 0.85). The tolerance is 6 LSB, since every layer rounds once.
// Latency must be n-1 cycles, with one vector per clock.
module tb_tensor_tree;
  import qk_pkg::*;
  import qk_ref_pkg::rabs;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #0.5 rst_n = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ---- n = 3, U side ----
  cplx_t p3 [3][2];
  cplx_t v3 [8];
  logic iv3, ov3;
  logic [7:0] it3, ot3;
  tensor_tree #(.NQ(3), .HADAMARD(1'b1), .TAG_W(8)) u3 (.clk, .rst_n, .in_valid(iv3), .in_tag(it3),
    .pair(p3), .out_valid(ov3), .out_tag(ot3), .vec(v3));
  // ---- n = 6, U side and V side on the same inputs ----
  cplx_t p6 [6][2];
  cplx_t v6u [64];
  cplx_t v6v [64];
  logic iv6, ov6u, ov6v;
  logic [7:0] it6, ot6u, ot6v;
  tensor_tree #(.NQ(6), .HADAMARD(1'b1), .TAG_W(8)) u6u (.clk, .rst_n, .in_valid(iv6), .in_tag(it6),
    .pair(p6), .out_valid(ov6u), .out_tag(ot6u), .vec(v6u));
  tensor_tree #(.NQ(6), .HADAMARD(1'b0), .TAG_W(8)) u6v (.clk, .rst_n, .in_valid(iv6), .in_tag(it6),
    .pair(p6), .out_valid(ov6v), .out_tag(ot6v), .vec(v6v));

  real e3r [256][8];
  real e3i [256][8];
  real e6r [256][64];
  real e6i [256][64];
  int  t3 [256];
  int  t6 [256];

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

  always @(posedge clk) begin
    if (ov3) begin
      chk(cyc - t3[ot3] == 2, "n=3 latency");
      for (int k = 0; k < 8; k++)
        chk(rabs(r(v3[k].re) - e3r[ot3][k]) <= 6.0/16384 && rabs(r(v3[k].im) - e3i[ot3][k]) <= 6.0/16384,
            $sformatf("n=3 tag %0d entry %0d got %f exp %f", ot3, k, r(v3[k].re), e3r[ot3][k]));
    end
    if (ov6u) begin
      chk(cyc - t6[ot6u] == 5 && ov6v && ot6v == ot6u, "n=6 latency");
      for (int k = 0; k < 64; k++) begin
        chk(rabs(r(v6u[k].re) - e6r[ot6u][k] / 8.0) <= 6.0/16384 &&
            rabs(r(v6u[k].im) - e6i[ot6u][k] / 8.0) <= 6.0/16384,
            $sformatf("n=6 U tag %0d entry %0d got %f exp %f", ot6u, k, r(v6u[k].re), e6r[ot6u][k] / 8.0));
        chk(rabs(r(v6v[k].re) - e6r[ot6u][k]) <= 6.0/16384 && rabs(r(v6v[k].im) - e6i[ot6u][k]) <= 6.0/16384,
            $sformatf("n=6 V tag %0d entry %0d", ot6u, k));
      end
    end
  end

  task automatic product(input int n, input cplx_t pr [6][2], output real er [64], output real ei [64]);
    for (int k = 0; k < (1 << n); k++) begin
      real ar, ai;
      ar = 1.0; ai = 0.0;
      for (int q = 0; q < n; q++) begin
        int b;
        real br, bi, tr;
        b = (k >> (n - 1 - q)) & 1;
        br = r(pr[q][b].re); bi = r(pr[q][b].im);
        tr = ar * br - ai * bi;
        ai = ar * bi + ai * br;
        ar = tr;
      end
      er[k] = ar; ei[k] = ai;
    end
  endtask

  initial begin
    cplx_t pr [6][2];
    real er [64], ei [64];
    iv3 = 0; iv6 = 0; it3 = 0; it6 = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      for (int q = 0; q < 6; q++)
        for (int a = 0; a < 2; a++) begin
          pr[q][a].re = fx_t'(int'($urandom_range(27852)) - 13926);
          pr[q][a].im = fx_t'(int'($urandom_range(27852)) - 13926);
        end
      product(3, pr, er, ei);
      for (int k = 0; k < 8; k++) begin
        e3r[t][k] = er[k] / 2.0;   // floor(3/2) = 1 halving
        e3i[t][k] = ei[k] / 2.0;
      end
      product(6, pr, er, ei);
      for (int k = 0; k < 64; k++) begin
        e6r[t][k] = er[k];         // V side; U side is this / 8
        e6i[t][k] = ei[k];
      end
      @(negedge clk);
      for (int q = 0; q < 3; q++) p3[q] = pr[q];
      p6 = pr;
      iv3 = 1; iv6 = 1; it3 = 8'(t); it6 = 8'(t);
      t3[t] = cyc; t6[t] = cyc;
    end
    @(negedge clk) begin iv3 = 0; iv6 = 0; end
    repeat (10) @(posedge clk);
    chk(checks > 200 * 130, "all vectors seen");
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
