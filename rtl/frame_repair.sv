// frame_repair: the pre-processing repair stage of the stream.
//
// An 11x1 line buffer (STEP=5 rows above and below the centre, no
// horizontal extent) holds the range and pitch of each point. The range
// column goes to range_repair, which fills an invalid centre range with the
// average of the consistent upper/lower pairs; the centre pitch goes to
// pitch_repair, which fills pitches of missing points with the last valid
// pitch of the scan. The repaired point is registered together with an ok
// bit (repaired range > 0).
//
// Interface: beat stream in (in_vld/in_flush with a polar point), beat
// stream out (out_vld/out_flush with rp_t). Timing: latency STEP*COLS + 1
// beats through the line buffer and one output register; it uses STEP*COLS
// flush beats at the end of each frame. Window size and step follow the
// paper's hardware section; the threshold is a run-time input because the
// paper gives no value for it.
module frame_repair
  import gs_pkg::*;
#(
  parameter int COLS     = 2048,
  parameter int MAX_ROWS = 128,
  parameter int STEP     = 5,
  localparam int RW = $clog2(MAX_ROWS + 1)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic [RW-1:0] rows,
  input  range_t        range_thresh,
  input  logic          in_vld,
  input  logic          in_flush,
  input  polar_t        in_pt,
  output logic          out_vld,
  output logic          out_flush,
  output rp_t           out_pt
);
  localparam int NR = 2 * STEP + 1;

  logic                      lb_vld, lb_flush;
  logic [RW-1:0]             lb_row;
  logic [$clog2(COLS)-1:0]   lb_col;
  logic [63:0]               win    [NR][1];
  logic                      win_ok [NR][1];
  range_t                    col_r  [NR];
  logic                      col_ok [NR];
  range_t                    r_rep;
  angle_t                    p_rep;
  logic                      repaired;

  line_buffer #(
    .DW(64), .COLS(COLS), .MAX_ROWS(MAX_ROWS), .ABOVE(STEP), .BELOW(STEP), .HR(0)
  ) u_lb (
    .clk, .rst, .rows,
    .in_vld, .in_flush, .in_data ({in_pt.r, in_pt.p}),
    .out_vld (lb_vld), .out_flush (lb_flush), .out_row (lb_row), .out_col (lb_col),
    .win, .win_ok
  );

  always_comb begin
    for (int i = 0; i < NR; i++) begin
      col_r[i]  = range_t'(win[i][0][63:32]);
      col_ok[i] = win_ok[i][0];
    end
  end

  range_repair #(.STEP(STEP)) u_range (
    .win_r (col_r), .win_ok (col_ok), .thresh (range_thresh),
    .r_out (r_rep), .repaired (repaired)
  );

  pitch_repair u_pitch (
    .clk, .rst, .en (lb_vld), .in_ok (col_r[STEP] > 0),
    .in_p (angle_t'(win[STEP][0][31:0])), .p_out (p_rep)
  );

  always_ff @(posedge clk) begin
    if (rst) begin
      out_vld   <= 1'b0;
      out_flush <= 1'b0;
      out_pt    <= '0;
    end else begin
      out_vld   <= lb_vld;
      out_flush <= lb_flush;
      out_pt.ok <= r_rep > 0;
      out_pt.r  <= r_rep;
      out_pt.p  <= p_rep;
    end
  end

  // The yaw is not used after this stage; lb_row, lb_col and the repaired
  // flag are observation points only.
  logic unused;
  assign unused = ^{in_pt.y, lb_row, lb_col, repaired};
endmodule
