// gs_pkg: shared types, number formats and constants of the streaming
// LiDAR ground-segmentation pipeline.
//
// Number formats. Ranges are signed 32-bit fixed point with 23 fraction
// bits (Q9.23: sign, 8 integer bits, so up to 255 m). Angles (pitch, yaw,
// alpha) are signed 32-bit with 24 fraction bits (radians). The paper names
// fixdt(1,32,24) for all values but also says the range keeps 9 integer and
// 23 fraction bits to reach 255 m; ranges here follow the second statement.
//
// Stream convention. Every stage is driven by "beats": a beat is either a
// data point (vld) or a flush beat (flush) that carries no point. Points
// come in row-major order with the stream row 0 being the bottom channel of
// the range image (the vertical index is inverted, as in the paper). After
// the last point of a frame the source sends FLUSH_BEATS flush beats; each
// line-buffer stage uses as many of them as it needs to push out the rows it
// still holds and passes the rest on.
//
// Lint note: a file that imports this package but uses only some of its
// constants (e.g. a block without CORDIC) gets UNUSEDPARAM warnings for the
// others. They are shared constants, so these warnings stand.
package gs_pkg;

  localparam int RANGE_FRAC = 23;
  localparam int ANG_FRAC   = 24;

  // CORDIC: internal datapath width and iteration count.
  localparam int CORDIC_W    = 40;
  localparam int CORDIC_ITER = 24;

  // atan(2^-i) in Q.24 radians, i = 0..23: round(atan(2^-i) * 2^24).
  localparam int unsigned ATAN_TAB [CORDIC_ITER] = '{
    13176795, 7778716, 4110060, 2086331, 1047214, 524117, 262123, 131069,
    65536, 32768, 16384, 8192, 4096, 2048, 1024, 512,
    256, 128, 64, 32, 16, 8, 4, 2
  };
  // 1/K, the inverse CORDIC gain after 24 iterations, in Q.24:
  // round(prod_i 1/sqrt(1 + 2^-2i) * 2^24).
  localparam int unsigned CORDIC_INV_GAIN = 10188014;
  localparam int          PI_Q24      = 52707179;   // round(pi   * 2^24)
  localparam int          HALF_PI_Q24 = 26353589;   // round(pi/2 * 2^24)

  typedef logic signed [31:0] range_t;
  typedef logic signed [31:0] angle_t;

  // Polar point as produced by the data converter.
  typedef struct packed {
    range_t r;
    angle_t p;
    angle_t y;
  } polar_t;

  // Point after frame repair (yaw is not used further).
  typedef struct packed {
    logic   ok;   // point holds a valid range
    range_t r;
    angle_t p;
  } rp_t;

  // Alpha token between alpha computation, seed initialisation and flood fill.
  typedef struct packed {
    logic   ok;     // alpha is defined for this point
    angle_t alpha;
    logic   label;  // ground label (seed or propagated)
  } apt_t;

  // Line-buffer latency (in beats) of a stage whose window reaches
  // `above` stream rows ahead and `right` columns ahead of its centre.
  function automatic int stage_lat(int above, int right, int cols);
    return above * cols + right;
  endfunction

  // Flush beats that the source must send after each frame: the sum of the
  // look-ahead of all line-buffer stages (frame repair 5 rows, alpha 1 row,
  // each flood-fill unit 2 rows and 2 columns).
  function automatic int flush_beats(int cols, int iters);
    return stage_lat(5, 0, cols) + stage_lat(1, 0, cols) + iters * stage_lat(2, 2, cols);
  endfunction

endpackage
