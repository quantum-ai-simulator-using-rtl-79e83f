// cordic_sincos: pipelined CORDIC in rotation mode. It gives cos(theta) and
// sin(theta) of a half-angle theta = x_q/2.
//
// The design computes the sines and cosines of the input angles with CORDIC,
// one unit per qubit. The original build used the FPGA vendor's CORDIC core.
// This module is a plain CORDIC of its own with the same function.
// Its internals are this implementation's choices:
//   * The input is angle_t, Q3.13 radians, with |theta| < 4.
//   * A first stage folds theta into [-pi/2, pi/2] by adding or subtracting pi.
//     It remembers to negate both results when it does.
//   * ITER micro-rotations run on 20-bit data with 18 fractional bits. The
//     angle runs with 17 fractional bits. The start vector is (K, 0), where
//     K = prod 1/sqrt(1 + 2^-2i) = 0.607253.
//   * The last stage rounds to Q2.14.
// The micro-rotation angles are ATAN[i] = round(atan(2^-i) * 2^17).
// Timing: fully pipelined with one result per clock. The latency is ITER + 2
// cycles. out_tag is in_tag delayed by the same amount.
module cordic_sincos
  import qk_pkg::*;
#(
  parameter int unsigned ITER  = 16,
  parameter int unsigned TAG_W = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [TAG_W-1:0] in_tag,
  input  angle_t           theta,
  output logic             out_valid,
  output logic [TAG_W-1:0] out_tag,
  output fx_t              cos_o,
  output fx_t              sin_o
);
  localparam int unsigned W  = 20;      // x/y: Q2.18, z: Q3.17
  localparam int unsigned XF = 18;
  localparam int unsigned ZF = 17;
  typedef logic signed [W-1:0] w_t;

  localparam w_t HALF_PI = w_t'(205887);  // round(pi/2 * 2^17)
  localparam w_t PI      = w_t'(411775);  // round(pi   * 2^17)
  localparam w_t K_GAIN  = w_t'(159188);  // round(0.6072529 * 2^18)

  localparam int unsigned NTAB = 20;
  localparam logic [19:0] ATAN [NTAB] = '{
    20'd102944, 20'd60771, 20'd32110, 20'd16299, 20'd8181, 20'd4095, 20'd2048,
    20'd1024, 20'd512, 20'd256, 20'd128, 20'd64, 20'd32, 20'd16, 20'd8, 20'd4,
    20'd2, 20'd1, 20'd0, 20'd0};

  w_t   x [ITER+1];
  w_t   y [ITER+1];
  w_t   z [ITER+1];
  logic neg [ITER+1];
  logic vld [ITER+2];
  logic [TAG_W-1:0] tag [ITER+2];

  // Stage 0: quadrant fold.
  w_t z_in;
  assign z_in = w_t'(theta) <<< (ZF - ANG_FRAC);

  always_ff @(posedge clk) begin
    x[0] <= K_GAIN;
    y[0] <= '0;
    if (z_in > HALF_PI) begin
      z[0] <= z_in - PI;  neg[0] <= 1'b1;
    end else if (z_in < -HALF_PI) begin
      z[0] <= z_in + PI;  neg[0] <= 1'b1;
    end else begin
      z[0] <= z_in;       neg[0] <= 1'b0;
    end
    tag[0] <= in_tag;
  end

  // Micro-rotation stages.
  for (genvar i = 0; i < ITER; i++) begin : g_stage
    always_ff @(posedge clk) begin
      if (z[i] >= 0) begin
        x[i+1] <= x[i] - (y[i] >>> i);
        y[i+1] <= y[i] + (x[i] >>> i);
        z[i+1] <= z[i] - w_t'(ATAN[i]);
      end else begin
        x[i+1] <= x[i] + (y[i] >>> i);
        y[i+1] <= y[i] - (x[i] >>> i);
        z[i+1] <= z[i] + w_t'(ATAN[i]);
      end
      neg[i+1] <= neg[i];
      tag[i+1] <= tag[i];
    end
  end

  // Output stage: sign restore and rounding to Q2.14.
  w_t x_fin, y_fin;
  assign x_fin = neg[ITER] ? -x[ITER] : x[ITER];
  assign y_fin = neg[ITER] ? -y[ITER] : y[ITER];

  always_ff @(posedge clk) begin
    cos_o <= fx_round_sat(prod_t'(x_fin), XF - FX_FRAC);
    sin_o <= fx_round_sat(prod_t'(y_fin), XF - FX_FRAC);
    tag[ITER+1] <= tag[ITER];
  end

  // Valid pipeline is reset; data registers need no reset.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < ITER+2; k++) vld[k] <= 1'b0;
    end else begin
      vld[0] <= in_valid;
      for (int k = 1; k < ITER+2; k++) vld[k] <= vld[k-1];
    end
  end

  assign out_valid = vld[ITER+1];
  assign out_tag   = tag[ITER+1];
endmodule
