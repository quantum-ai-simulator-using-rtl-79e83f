// tb_qk_ram: checks write, the registered read and read-during-write (old data) of qk_ram against an array model.
module tb_qk_ram;
  logic clk = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  logic we, rd_en;
  logic [5:0] wa, ra;
  logic [23:0] wd, rd;
  logic [23:0] model [64];
  logic [23:0] exp_q;
  logic        exp_v = 1'b0;
  qk_ram #(.WIDTH(24), .DEPTH(64)) dut (.clk, .we, .wr_addr(wa), .wr_data(wd), .rd_en, .rd_addr(ra), .rd_data(rd));

  initial begin
    we = 0; rd_en = 0; wa = 0; ra = 0; wd = 0;
    // fill
    for (int a = 0; a < 64; a++) begin
      @(negedge clk);
      we = 1; wa = 6'(a); wd = 24'($urandom());
      model[a] = wd;
    end
    @(negedge clk) we = 0;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      if (exp_v) begin
        checks++;
        if (rd != exp_q) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d got %h exp %h", t, rd, exp_q);
        end
      end
      we = $urandom_range(1); wa = 6'($urandom()); wd = 24'($urandom());
      rd_en = $urandom_range(3) != 0;
      ra = (t % 5 == 0) ? wa : 6'($urandom());
      if (rd_en) begin
        exp_q = model[ra];   // old data on a same-address collision
        exp_v = 1;
      end
      if (we) model[wa] = wd;
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
