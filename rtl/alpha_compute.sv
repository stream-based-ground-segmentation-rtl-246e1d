// alpha_compute: forms the Alpha matrix, the inclination between each point
// and the point of the next channel up in the same column.
//
// For point A (stream row s) and point B (stream row s+1) the stage forms
// X = r sin p (horizontal) and Z = r cos p (vertical) for each point, then
//   dX = |X_A - X_B|,  dZ = |Z_A - Z_B|,  alpha = atan2(dZ, dX),
// and assigns alpha to the lower point A. Flat ground gives alpha near 0,
// a vertical surface near pi/2. The top row has no point above it; its
// alpha is copied from the row below, which a COLS-deep FIFO of earlier
// results supplies.
//
// Structure: CORDIC rotation (X, Z per point; both scaled by the same
// CORDIC gain, which atan2 ignores) -> 2x1 line buffer (A and B) ->
// differences -> CORDIC vectoring (atan2) -> top-row substitution.
// Output token: ok (both points valid; for the top row, the copied value's
// ok), alpha in Q.24 radians, label 0.
//
// Timing: one point per clock; latency COLS + 2*CORDIC_ITER + 5 cycles; uses
// COLS flush beats per frame. The 2x1 line buffer, the CORDIC atan2 and the
// top-row copy follow the paper; forming the sine and cosine with a CORDIC
// rotation is this design's choice.
module alpha_compute
  import gs_pkg::*;
#(
  parameter int COLS     = 2048,
  parameter int MAX_ROWS = 128,
  localparam int RW = $clog2(MAX_ROWS + 1)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic [RW-1:0] rows,
  input  logic          in_vld,
  input  logic          in_flush,
  input  rp_t           in_pt,
  output logic          out_vld,
  output logic          out_flush,
  output apt_t          out_tok
);
  localparam int CW = CORDIC_W;
  typedef logic signed [CW-1:0] fx_t;

  typedef struct packed {
    logic vld;
    logic flush;
    logic ok;
  } rtag_t;

  typedef struct packed {
    logic vld;
    logic flush;
    logic ok;
    logic top;
  } vtag_t;

  // --- sine / cosine by CORDIC rotation of (0, r) by p - pi/2 ---------------
  rtag_t rt_out;
  fx_t   zk, xk;   // K*r*cos p (vertical), K*r*sin p (horizontal)

  cordic_rot #(.TW($bits(rtag_t))) u_rot (
    .clk    (clk),
    .rst    (rst),
    .x      ('0),
    .y      (fx_t'(in_pt.r)),
    .z      (in_pt.p - angle_t'(HALF_PI_Q24)),
    .tag_in ({in_vld & ~rst, in_flush & ~rst, in_pt.ok}),
    .xo     (zk),
    .yo     (xk),
    .tag_out(rt_out)
  );

  // --- 2x1 line buffer: centre A (row s) and B (row s+1) --------------------
  localparam int DW = 1 + 2 * CW;
  logic                    lb_vld, lb_flush;
  logic [RW-1:0]           lb_row;
  logic [$clog2(COLS)-1:0] lb_col;
  logic [DW-1:0]           win    [2][1];
  logic                    win_ok [2][1];

  line_buffer #(
    .DW(DW), .COLS(COLS), .MAX_ROWS(MAX_ROWS), .ABOVE(1), .BELOW(0), .HR(0)
  ) u_lb (
    .clk, .rst, .rows,
    .in_vld   (rt_out.vld),
    .in_flush (rt_out.flush),
    .in_data  ({rt_out.ok, xk, zk}),
    .out_vld  (lb_vld), .out_flush (lb_flush), .out_row (lb_row), .out_col (lb_col),
    .win, .win_ok
  );

  // --- differences -----------------------------------------------------------
  fx_t   dx, dz;
  vtag_t vt_in, vt_out;
  always_ff @(posedge clk) begin
    automatic fx_t xa = fx_t'(win[0][0][2*CW-1:CW]);
    automatic fx_t za = fx_t'(win[0][0][CW-1:0]);
    automatic fx_t xb = fx_t'(win[1][0][2*CW-1:CW]);
    automatic fx_t zb = fx_t'(win[1][0][CW-1:0]);
    dx <= (xa > xb) ? xa - xb : xb - xa;
    dz <= (za > zb) ? za - zb : zb - za;
    vt_in.vld   <= lb_vld & ~rst;
    vt_in.flush <= lb_flush & ~rst;
    vt_in.ok    <= win[0][0][DW-1] & win[1][0][DW-1] & win_ok[1][0];
    vt_in.top   <= (lb_row == rows - 1'b1);
  end

  // --- atan2 -----------------------------------------------------------------
  angle_t alpha;
  fx_t    mag_unused;
  cordic_vec #(.TW($bits(vtag_t))) u_atan (
    .clk (clk), .rst (rst), .x (dx), .y (dz), .tag_in (vt_in),
    .mag (mag_unused), .ang (alpha), .tag_out (vt_out)
  );

  // --- top row: copy of the row below ----------------------------------------
  apt_t res, prev_row;
  always_comb begin
    if (vt_out.top) begin
      res       = prev_row;
      res.ok    = prev_row.ok && (rows > 1);
      res.label = 1'b0;
    end else begin
      res.ok    = vt_out.ok;
      res.alpha = alpha;
      res.label = 1'b0;
    end
  end

  line_fifo #(.DW($bits(apt_t)), .DEPTH(COLS)) u_hist (
    .clk, .rst, .en (vt_out.vld), .d (res), .q (prev_row)
  );

  always_ff @(posedge clk) begin
    if (rst) begin
      out_vld   <= 1'b0;
      out_flush <= 1'b0;
      out_tok   <= '0;
    end else begin
      out_vld   <= vt_out.vld;
      out_flush <= vt_out.flush;
      out_tok   <= res;
    end
  end

  logic unused;
  assign unused = ^{lb_col, mag_unused};
endmodule
