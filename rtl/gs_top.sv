// gs_top: complete stream-based LiDAR ground segmentation pipeline.
//
//   input_buffer -> data_converter -> frame_repair -> alpha_compute
//     -> seed_init -> flood_fill x ITERS -> ground labels
//
// A frame is loaded into the input buffer, then streamed bottom channel
// first at one point per clock. The converter turns Cartesian floats into
// fixed-point range/pitch/yaw (or passes polar input through when `bypass`
// is set), frame repair fills missing ranges and pitches, alpha_compute
// forms the inclination between vertically adjacent points, seed_init
// marks the first valid point of each column as a ground seed when its
// inclination is small, and ITERS chained flood-fill units each perform one
// cross-eight-way propagation pass.
//
// Output: one label per point, in stream order (bottom row first), with its
// image row (0 = top channel) and column, its alpha, and the final ground
// label. frame_done pulses with the last point of the frame. grown[k] is
// high for an output point that flood-fill unit k turned into ground (for
// observation only; it refers to points leaving unit k, not to the final
// output).
//
// Defaults: COLS = 2048 points per channel and ITERS = 3 flood-fill units
// as in the paper's implementation; MAX_ROWS = 128 so that 32-, 64- and
// 128-channel frames run on one build, the channel count being the
// run-time input `rows`. The thresholds are run-time inputs (the paper does
// not give their values). One point per clock at steady state; a frame of
// R rows takes R*COLS + FLUSH cycles at the source, FLUSH = (6 + 2*ITERS) *
// COLS + 2*ITERS.
module gs_top
  import gs_pkg::*;
#(
  parameter int COLS     = 2048,
  parameter int MAX_ROWS = 128,
  parameter int ITERS    = 3,
  localparam int RW = $clog2(MAX_ROWS + 1),
  localparam int CW = $clog2(COLS)
) (
  input  logic             clk,
  input  logic             rst,
  // configuration (static during a frame)
  input  logic [RW-1:0]    rows,
  input  logic             bypass,
  input  range_t           range_thresh,
  input  angle_t           seed_thresh,
  input  angle_t           alpha_thresh,
  // frame load port
  input  logic             wr_en,
  input  logic [RW-1:0]    wr_row,
  input  logic [CW-1:0]    wr_col,
  input  logic [95:0]      wr_data,
  input  logic             start,
  output logic             busy,
  // label stream
  output logic             out_vld,
  output logic [RW-1:0]    out_row,
  output logic [CW-1:0]    out_col,
  output logic             out_ground,
  output logic             out_alpha_ok,
  output angle_t           out_alpha,
  output logic             frame_done,
  output logic [ITERS-1:0] grown
);
  localparam int FLUSH = flush_beats(COLS, ITERS);

  logic        ib_vld, ib_flush, ib_done;
  logic [95:0] ib_word;
  logic        dc_vld, dc_flush;
  polar_t      dc_pt;
  logic        fr_vld, fr_flush;
  rp_t         fr_pt;
  logic        ac_vld, ac_flush;
  apt_t        ac_tok;
  logic        sd_vld, sd_flush;
  apt_t        sd_tok;

  input_buffer #(.COLS(COLS), .MAX_ROWS(MAX_ROWS), .FLUSH(FLUSH)) u_in (
    .clk, .rst, .rows,
    .wr_en, .wr_row, .wr_col, .wr_data,
    .start, .busy, .done (ib_done),
    .out_vld (ib_vld), .out_flush (ib_flush), .out_word (ib_word)
  );

  data_converter u_conv (
    .clk, .rst, .bypass,
    .in_vld (ib_vld), .in_flush (ib_flush), .in_word (ib_word),
    .out_vld (dc_vld), .out_flush (dc_flush), .out_pt (dc_pt)
  );

  frame_repair #(.COLS(COLS), .MAX_ROWS(MAX_ROWS)) u_repair (
    .clk, .rst, .rows, .range_thresh,
    .in_vld (dc_vld), .in_flush (dc_flush), .in_pt (dc_pt),
    .out_vld (fr_vld), .out_flush (fr_flush), .out_pt (fr_pt)
  );

  alpha_compute #(.COLS(COLS), .MAX_ROWS(MAX_ROWS)) u_alpha (
    .clk, .rst, .rows,
    .in_vld (fr_vld), .in_flush (fr_flush), .in_pt (fr_pt),
    .out_vld (ac_vld), .out_flush (ac_flush), .out_tok (ac_tok)
  );

  seed_init #(.COLS(COLS), .MAX_ROWS(MAX_ROWS)) u_seed (
    .clk, .rst, .rows, .seed_thresh,
    .in_vld (ac_vld), .in_flush (ac_flush), .in_tok (ac_tok),
    .out_vld (sd_vld), .out_flush (sd_flush), .out_tok (sd_tok)
  );

  // Chain of flood-fill processing units.
  logic          ff_vld   [ITERS+1];
  logic          ff_flush [ITERS+1];
  apt_t          ff_tok   [ITERS+1];
  logic [RW-1:0] ff_row   [ITERS+1];
  logic [CW-1:0] ff_col   [ITERS+1];

  assign ff_vld[0]   = sd_vld;
  assign ff_flush[0] = sd_flush;
  assign ff_tok[0]   = sd_tok;
  assign ff_row[0]   = '0;
  assign ff_col[0]   = '0;

  for (genvar k = 0; k < ITERS; k++) begin : g_ff
    flood_fill #(.COLS(COLS), .MAX_ROWS(MAX_ROWS)) u_ff (
      .clk, .rst, .rows, .alpha_thresh,
      .in_vld (ff_vld[k]), .in_flush (ff_flush[k]), .in_tok (ff_tok[k]),
      .out_vld (ff_vld[k+1]), .out_flush (ff_flush[k+1]), .out_tok (ff_tok[k+1]),
      .out_row (ff_row[k+1]), .out_col (ff_col[k+1]), .out_grown (grown[k])
    );
  end

  // Output: convert the stream row back to the image row.
  always_ff @(posedge clk) begin
    if (rst) begin
      out_vld      <= 1'b0;
      out_row      <= '0;
      out_col      <= '0;
      out_ground   <= 1'b0;
      out_alpha_ok <= 1'b0;
      out_alpha    <= '0;
      frame_done   <= 1'b0;
    end else begin
      out_vld      <= ff_vld[ITERS];
      out_row      <= rows - 1'b1 - ff_row[ITERS];
      out_col      <= ff_col[ITERS];
      out_ground   <= ff_tok[ITERS].label;
      out_alpha_ok <= ff_tok[ITERS].ok;
      out_alpha    <= ff_tok[ITERS].alpha;
      frame_done   <= ff_vld[ITERS] && (ff_row[ITERS] == rows - 1'b1) &&
                      (ff_col[ITERS] == CW'(COLS - 1));
    end
  end

  logic unused;
  assign unused = ^{ib_done, ff_flush[ITERS], ff_row[0], ff_col[0]};
endmodule
