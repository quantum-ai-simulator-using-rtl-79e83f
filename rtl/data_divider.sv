// data_divider: splits the incoming feature stream into per-qubit half-angles.
//
// The host sends the features of one block as an AXI4-Stream of 16-bit words.
// They come sample by sample, and within a sample qubit 1 first:
// x_1(s), ..., x_n(s). The last word of the last sample carries tlast.
// Each word is a feature value x in signed Q4.12, so |x| < 8, already scaled
// by lambda. Values must be reduced modulo 4*pi beforehand.
// The divider routes word q of sample s to the angle RAM of qubit q at
// address s. It stores the half-angle x/2 in Q3.13. That halving costs
// nothing: the same 16 bits read as Q3.13 instead of Q4.12.
// The divider accepts words only while `enable` is high, and it stops after
// n_samples * n words. `done` pulses on the final word. `tlast_err` goes high
// and stays high when tlast does not fall on exactly that word.
// Timing: one word per clock at most, with s_tready = enable. The RAM write
// happens in the same cycle as the accepted word (we/addr/data are
// combinational).
module data_divider
  import qk_pkg::*;
#(
  parameter int unsigned NQ          = 6,
  parameter int unsigned MAX_SAMPLES = 1024,
  localparam int unsigned AW = $clog2(MAX_SAMPLES),
  localparam int unsigned QW = (NQ > 1) ? $clog2(NQ) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          enable,
  input  logic [AW:0]   n_samples,
  input  logic [15:0]   s_tdata,
  input  logic          s_tvalid,
  input  logic          s_tlast,
  output logic          s_tready,
  output logic [NQ-1:0] we,
  output logic [AW-1:0] wr_addr,
  output angle_t        wr_data,
  output logic          done,
  output logic          tlast_err
);
  logic [QW-1:0] q;
  logic [AW-1:0] s;
  logic accept, final_word;

  assign s_tready   = enable;
  assign accept     = s_tvalid && enable;
  assign final_word = (q == QW'(NQ - 1)) && ({1'b0, s} == n_samples - 1'b1);

  always_comb begin
    we = '0;
    if (accept) we[q] = 1'b1;
  end
  assign wr_addr = s;
  assign wr_data = angle_t'(s_tdata);   // x in Q4.12 is x/2 in Q3.13
  assign done    = accept && final_word;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q <= '0;
      s <= '0;
      tlast_err <= 1'b0;
    end else if (accept) begin
      if (s_tlast != final_word) tlast_err <= 1'b1;
      if (final_word) begin
        q <= '0;
        s <= '0;
      end else if (q == QW'(NQ - 1)) begin
        q <= '0;
        s <= s + 1'b1;
      end else begin
        q <= q + 1'b1;
      end
    end
  end
endmodule
