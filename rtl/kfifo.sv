// kfifo: the "FIFO Mem" that holds kernel entries before they return to the host.
//
// This is a synchronous first-word-fall-through FIFO. Its read side is an
// AXI4-Stream master (valid/ready/data). A word leaves when m_valid && m_ready.
// The controller reserves room before it starts a kernel pair, so the FIFO
// never sees a write while full. The sticky `overflow` flag reports a
// violation of that rule, and an assertion warns about it. The depth is this
// implementation's choice.
// Timing: a written word is visible on m_data the cycle after it is written.
// A simultaneous read and write keep `count` unchanged.
module kfifo #(
  parameter int unsigned WIDTH = 17,
  parameter int unsigned DEPTH = 512,
  localparam int unsigned AW = $clog2(DEPTH),
  localparam int unsigned CW = $clog2(DEPTH + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  output logic             m_valid,
  input  logic             m_ready,
  output logic [WIDTH-1:0] m_data,
  output logic [CW-1:0]    count,
  output logic             overflow
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic do_wr, do_rd;

  assign m_valid = (count != '0);
  assign m_data  = mem[rp];
  assign do_rd   = m_valid && m_ready;
  assign do_wr   = wr_en && (count != CW'(DEPTH));

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
      count <= '0;
      overflow <= 1'b0;
    end else begin
      if (do_wr) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (do_rd) rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      count <= count + CW'(do_wr) - CW'(do_rd);
      if (wr_en && !do_wr) overflow <= 1'b1;
      assert (!(wr_en && !do_wr)) else $warning("kfifo: write while full, word dropped");
    end
  end
endmodule
