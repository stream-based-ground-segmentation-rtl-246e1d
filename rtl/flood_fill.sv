// flood_fill: one iteration of the cross-eight-way flood fill as a
// streaming processing unit. Several units are chained, one per iteration.
//
// For each centre point c the unit looks along the four axis directions.
// In a direction with one-step neighbour s1 and two-step neighbour s2:
//   * if |alpha_c - alpha_s1| <= thresh, the direction connects when s1 is
//     labelled ground;
//   * otherwise, if |alpha_s2 - alpha_s1| <= thresh and
//     |alpha_c - alpha_s2| <= thresh, it connects when s2 is labelled ground.
// A valid centre becomes ground when any direction connects; a point that
// already is ground stays ground. Neighbours outside the frame or without a
// valid alpha never connect.
//
// The neighbours come from a 5x5 line buffer. Labels of points the unit has
// already passed in this sweep (the two rows below and the two points to
// the left, since the stream runs bottom-up and left to right) are taken
// from the unit's own fresh results rather than from its input: a
// two-row FIFO plus two registers of updated labels (the "label FIFO" of
// the paper). A label can therefore travel upward and rightward through a
// whole frame in one pass, and downward and leftward by two points.
//
// Interface: beat stream of apt_t in and out; out_row/out_col give the
// stream position of each output point and out_grown marks a point this
// unit turned into ground. Timing: one point per clock, latency
// 2*COLS + 4 cycles, 2*COLS + 2 flush beats used per frame. The rule and
// the 5x5 window follow the paper; "<=" in the comparisons, the use of
// fresh labels only behind the centre, and the run-time threshold are this
// design's reading of it.
module flood_fill
  import gs_pkg::*;
#(
  parameter int COLS     = 2048,
  parameter int MAX_ROWS = 128,
  localparam int RW = $clog2(MAX_ROWS + 1),
  localparam int CW = $clog2(COLS)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic [RW-1:0] rows,
  input  angle_t        alpha_thresh,
  input  logic          in_vld,
  input  logic          in_flush,
  input  apt_t          in_tok,
  output logic          out_vld,
  output logic          out_flush,
  output apt_t          out_tok,
  output logic [RW-1:0] out_row,
  output logic [CW-1:0] out_col,
  output logic          out_grown
);
  localparam int DW = $bits(apt_t);

  logic          lb_vld, lb_flush;
  logic [RW-1:0] lb_row;
  logic [CW-1:0] lb_col;
  logic [DW-1:0] win    [5][5];
  logic          win_ok [5][5];

  line_buffer #(
    .DW(DW), .COLS(COLS), .MAX_ROWS(MAX_ROWS), .ABOVE(2), .BELOW(2), .HR(2)
  ) u_lb (
    .clk, .rst, .rows,
    .in_vld, .in_flush, .in_data (in_tok),
    .out_vld (lb_vld), .out_flush (lb_flush), .out_row (lb_row), .out_col (lb_col),
    .win, .win_ok
  );

  // Fresh labels behind the centre.
  logic nl;           // new label of the current centre
  logic l1, l2;       // new labels one and two points to the left
  logic d1, d2;       // new labels one and two rows below

  line_fifo #(.DW(1), .DEPTH(COLS)) u_fb1 (
    .clk, .rst, .en (lb_vld), .d (nl), .q (d1)
  );
  line_fifo #(.DW(1), .DEPTH(COLS)) u_fb2 (
    .clk, .rst, .en (lb_vld), .d (d1), .q (d2)
  );

  always_ff @(posedge clk) begin
    if (lb_vld) begin
      l1 <= nl;
      l2 <= l1;
    end
  end

  function automatic logic near(angle_t a, angle_t b, angle_t t);
    logic signed [32:0] d;
    d = 33'(a) - 33'(b);
    return ((d[32] ? -d : d) <= 33'(t));
  endfunction

  // One direction of the cross-eight-way rule. v1/v2: s1/s2 in the frame
  // with a valid alpha; lab1/lab2: their ground labels.
  function automatic logic connect(angle_t ac, angle_t a1, logic v1, logic lab1,
                                   angle_t a2, logic v2, logic lab2, angle_t t);
    if (v1 && near(ac, a1, t))
      return lab1;
    return v1 && v2 && near(a2, a1, t) && near(ac, a2, t) && lab2;
  endfunction

  apt_t c, up1, up2, dn1, dn2, lf1, lf2, rt1, rt2;
  logic any;

  always_comb begin
    c   = apt_t'(win[2][2]);
    up1 = apt_t'(win[3][2]);  up2 = apt_t'(win[4][2]);
    dn1 = apt_t'(win[1][2]);  dn2 = apt_t'(win[0][2]);
    lf1 = apt_t'(win[2][1]);  lf2 = apt_t'(win[2][0]);
    rt1 = apt_t'(win[2][3]);  rt2 = apt_t'(win[2][4]);
    any = connect(c.alpha, up1.alpha, win_ok[3][2] & up1.ok, up1.label,
                  up2.alpha, win_ok[4][2] & up2.ok, up2.label, alpha_thresh)
        | connect(c.alpha, dn1.alpha, win_ok[1][2] & dn1.ok, d1,
                  dn2.alpha, win_ok[0][2] & dn2.ok, d2, alpha_thresh)
        | connect(c.alpha, lf1.alpha, win_ok[2][1] & lf1.ok, l1,
                  lf2.alpha, win_ok[2][0] & lf2.ok, l2, alpha_thresh)
        | connect(c.alpha, rt1.alpha, win_ok[2][3] & rt1.ok, rt1.label,
                  rt2.alpha, win_ok[2][4] & rt2.ok, rt2.label, alpha_thresh);
    nl  = c.label | (c.ok & win_ok[2][2] & any);
  end

  // Labels behind the centre come from the fresh-label FIFO and registers,
  // so the input labels of those neighbours are not needed.
  logic unused;
  assign unused = ^{dn1.label, dn2.label, lf1.label, lf2.label};

  always_ff @(posedge clk) begin
    if (rst) begin
      out_vld   <= 1'b0;
      out_flush <= 1'b0;
      out_tok   <= '0;
      out_row   <= '0;
      out_col   <= '0;
      out_grown <= 1'b0;
    end else begin
      out_vld       <= lb_vld;
      out_flush     <= lb_flush;
      out_tok.ok    <= c.ok;
      out_tok.alpha <= c.alpha;
      out_tok.label <= nl;
      out_row       <= lb_row;
      out_col       <= lb_col;
      out_grown     <= lb_vld & nl & ~c.label;
    end
  end
endmodule
