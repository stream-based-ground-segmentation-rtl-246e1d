// cordic_rot: pipelined CORDIC in rotation mode, used to turn a polar point
// (r, p) into its horizontal and vertical components.
//
// The input vector (x, y) is rotated by the angle z (Q.24 radians,
// |z| <= ~1.74 rad, the CORDIC convergence range); the output is
// K * (x cos z - y sin z, x sin z + y cos z) with the uncompensated CORDIC
// gain K ~ 1.6468. Each of the ITER stages rotates by +/-atan(2^-i) to drive
// the residual angle to zero.
//
// Timing: one input per clock, latency ITER+1 cycles (an input register
// and ITER stages); the TW-bit tag is delayed alike and cleared by rst. The paper computes
// alpha from r*sin(p) and r*cos(p) but does not say how the sine and cosine
// are formed; using CORDIC rotation for them is this design's choice.
module cordic_rot
  import gs_pkg::*;
#(
  parameter int CW   = CORDIC_W,
  parameter int ITER = CORDIC_ITER,
  parameter int TW   = 1
) (
  input  logic                 clk,
  input  logic                 rst,     // clears the tag pipeline only
  input  logic signed [CW-1:0] x,
  input  logic signed [CW-1:0] y,
  input  angle_t               z,
  input  logic        [TW-1:0] tag_in,
  output logic signed [CW-1:0] xo,
  output logic signed [CW-1:0] yo,
  output logic        [TW-1:0] tag_out
);
  logic signed [CW-1:0] xs [ITER+1];
  logic signed [CW-1:0] ys [ITER+1];
  angle_t               zs [ITER+1];
  logic        [TW-1:0] ts [ITER+1];

  always_ff @(posedge clk) begin
    xs[0] <= x;
    ys[0] <= y;
    zs[0] <= z;
    ts[0] <= rst ? '0 : tag_in;
  end

  for (genvar i = 0; i < ITER; i++) begin : g_stage
    always_ff @(posedge clk) begin
      ts[i+1] <= rst ? '0 : ts[i];
      if (zs[i] >= 0) begin
        xs[i+1] <= xs[i] - (ys[i] >>> i);
        ys[i+1] <= ys[i] + (xs[i] >>> i);
        zs[i+1] <= zs[i] - angle_t'(ATAN_TAB[i]);
      end else begin
        xs[i+1] <= xs[i] + (ys[i] >>> i);
        ys[i+1] <= ys[i] - (xs[i] >>> i);
        zs[i+1] <= zs[i] + angle_t'(ATAN_TAB[i]);
      end
    end
  end

  assign xo      = xs[ITER];
  assign yo      = ys[ITER];
  assign tag_out = ts[ITER];
endmodule
