// qk_ram: simple dual-port RAM with one write port and one registered read port.
//
// The design keeps every sample in on-chip memory, and the controller reads it
// once per kernel pair. This module is used twice. The per-qubit angle buffers
// sit between the data divider and the CORDIC units. The per-qubit chi/phi
// buffers sit between the U_q/V_q generator and the tensor trees. It is a plain
// array, so an FPGA tool maps it to block RAM.
// Timing: a write takes effect at the clock edge with we=1. rd_data shows
// mem[rd_addr] one cycle after the edge where rd_en=1, and holds otherwise.
// Reading and writing the same address in one cycle returns the old data.
module qk_ram #(
  parameter int unsigned WIDTH = 16,
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    wr_addr,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             rd_en,
  input  logic [AW-1:0]    rd_addr,
  output logic [WIDTH-1:0] rd_data
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
