// cordic_vec: pipelined CORDIC in vectoring mode, the atan2 unit of the
// pipeline.
//
// Given a vector (x, y) it returns ang = atan2(y, x) in Q.24 radians
// (range -pi..pi) and mag = K * sqrt(x^2 + y^2), where K ~ 1.6468 is the
// CORDIC gain (not compensated here; callers multiply by
// gs_pkg::CORDIC_INV_GAIN where they need the true magnitude). A first
// stage folds the left half-plane onto the right one by negating the vector
// and starting the angle at +/-pi; ITER shift-and-add stages then rotate the
// vector onto the x axis while summing the elementary angles atan(2^-i).
//
// Timing: fully pipelined, one input per clock, latency ITER+1 cycles. The
// TW-bit tag (cleared by rst) travels with the data so that valid/flush flags and side
// information stay aligned. The paper states only that atan2 is done with
// CORDIC; the width, the iteration count and the quadrant folding are this
// design's choices.
module cordic_vec
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
  input  logic        [TW-1:0] tag_in,
  output logic signed [CW-1:0] mag,
  output angle_t               ang,
  output logic        [TW-1:0] tag_out
);
  logic signed [CW-1:0] xs [ITER+1];
  logic signed [CW-1:0] ys [ITER+1];
  angle_t               zs [ITER+1];
  logic        [TW-1:0] ts [ITER+1];

  // Stage 0: quadrant folding.
  always_ff @(posedge clk) begin
    ts[0] <= rst ? '0 : tag_in;
    if (x < 0) begin
      xs[0] <= -x;
      ys[0] <= -y;
      zs[0] <= (y >= 0) ? angle_t'(PI_Q24) : -angle_t'(PI_Q24);
    end else begin
      xs[0] <= x;
      ys[0] <= y;
      zs[0] <= '0;
    end
  end

  for (genvar i = 0; i < ITER; i++) begin : g_stage
    always_ff @(posedge clk) begin
      ts[i+1] <= rst ? '0 : ts[i];
      if (ys[i] >= 0) begin
        xs[i+1] <= xs[i] + (ys[i] >>> i);
        ys[i+1] <= ys[i] - (xs[i] >>> i);
        zs[i+1] <= zs[i] + angle_t'(ATAN_TAB[i]);
      end else begin
        xs[i+1] <= xs[i] - (ys[i] >>> i);
        ys[i+1] <= ys[i] + (xs[i] >>> i);
        zs[i+1] <= zs[i] - angle_t'(ATAN_TAB[i]);
      end
    end
  end

  assign mag     = xs[ITER];
  assign ang     = zs[ITER];
  assign tag_out = ts[ITER];
endmodule
