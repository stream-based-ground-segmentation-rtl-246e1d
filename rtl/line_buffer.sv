// line_buffer: the line-buffer stream processing unit (row FIFOs, padding
// and window shift registers) that every windowed stage of the pipeline is
// built on.
//
// Points arrive one per beat in row-major order. ABOVE+BELOW row FIFOs of
// COLS entries each give ABOVE+BELOW+1 vertically aligned taps; each tap
// feeds a shift register of 2*HR+1 points, so the registers hold a window of
// NR = ABOVE+BELOW+1 stream rows by NC = 2*HR+1 columns around a centre
// point that lags the input by LAT = ABOVE*COLS + HR beats. Window positions
// that fall outside the frame (above the last row, below the first, left of
// column 0 or right of column COLS-1) are padded: their data is forced to
// zero and their win_ok bit is low.
//
// Interface. in_vld marks a point, in_flush a flush beat. A frame is
// rows*COLS points; after it the stage consumes LAT flush beats to emit its
// last LAT centres and passes any further flush beats on as out_flush.
// Outputs are registered: out_vld, out_row and out_col name the centre that
// the window holds in the same cycle. win[i][j] is the point at stream row
// offset i-BELOW and column offset j-HR from the centre. Row and column
// counts follow the paper (a range image of rows x COLS streamed one point
// per clock); the flush-beat protocol and the runtime row count are this
// design's own.
module line_buffer #(
  parameter int DW       = 32,
  parameter int COLS     = 2048,
  parameter int MAX_ROWS = 128,
  parameter int ABOVE    = 1,
  parameter int BELOW    = 1,
  parameter int HR       = 1,
  localparam int NR = ABOVE + BELOW + 1,
  localparam int NC = 2 * HR + 1,
  localparam int RW = $clog2(MAX_ROWS + 1),
  localparam int CW = $clog2(COLS)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic [RW-1:0] rows,       // frame height, 1..MAX_ROWS, static per frame
  input  logic          in_vld,
  input  logic          in_flush,
  input  logic [DW-1:0] in_data,
  output logic          out_vld,
  output logic          out_flush,
  output logic [RW-1:0] out_row,    // stream row of the centre (0 = bottom)
  output logic [CW-1:0] out_col,
  output logic [DW-1:0] win    [NR][NC],
  output logic          win_ok [NR][NC]
);
  localparam int LAT = ABOVE * COLS + HR;
  localparam int NW  = $clog2(MAX_ROWS * COLS + LAT + 1);

  logic [NW-1:0] in_cnt;
  logic [NW-1:0] frame_beats;
  logic          absorb;
  logic [RW-1:0] c_row;
  logic [CW-1:0] c_col;
  logic [DW-1:0] tap [NR];
  logic [DW-1:0] sr  [NR][NC];

  assign frame_beats = NW'(rows) * NW'(COLS);
  assign absorb      = in_vld | (in_flush & (in_cnt != '0));

  // Row FIFOs: tap t is the input delayed by t rows (t = 0 is the newest,
  // i.e. the highest stream row of the window).
  assign tap[0] = in_data;
  for (genvar t = 1; t < NR; t++) begin : g_fifo
    line_fifo #(.DW(DW), .DEPTH(COLS)) u_fifo (
      .clk (clk),
      .rst (rst),
      .en  (absorb),
      .d   (tap[t-1]),
      .q   (tap[t])
    );
  end

  // Window shift registers.
  always_ff @(posedge clk) begin
    if (absorb) begin
      for (int t = 0; t < NR; t++) begin
        sr[t][0] <= tap[t];
        for (int k = 1; k < NC; k++) sr[t][k] <= sr[t][k-1];
      end
    end
  end

  // Beat counting and centre position.
  always_ff @(posedge clk) begin
    if (rst) begin
      in_cnt    <= '0;
      c_row     <= '0;
      c_col     <= '0;
      out_vld   <= 1'b0;
      out_flush <= 1'b0;
      out_row   <= '0;
      out_col   <= '0;
    end else begin
      out_vld   <= 1'b0;
      out_flush <= 1'b0;
      if (absorb) begin
        in_cnt <= (in_cnt == frame_beats + NW'(LAT) - 1'b1) ? '0 : in_cnt + 1'b1;
        if (in_cnt >= NW'(LAT)) begin
          out_vld <= 1'b1;
          out_row <= c_row;
          out_col <= c_col;
          if (c_col == CW'(COLS - 1)) begin
            c_col <= '0;
            c_row <= (c_row == rows - 1'b1) ? '0 : c_row + 1'b1;
          end else begin
            c_col <= c_col + 1'b1;
          end
        end
      end else if (in_flush) begin
        out_flush <= 1'b1;
      end
    end
  end

  // Protocol rules: points only while the frame is being read in, flush
  // beats only after its last point.
  always_ff @(posedge clk) begin
    if (!rst && in_vld)
      assert (in_cnt < frame_beats) else $error("line_buffer: point during flush phase");
    if (!rst && in_flush && in_cnt != '0)
      assert (in_cnt >= frame_beats) else $error("line_buffer: flush beat inside a frame");
  end

  // Padding: mask window positions outside the frame.
  always_comb begin
    for (int i = 0; i < NR; i++) begin
      for (int j = 0; j < NC; j++) begin
        automatic int r = int'(out_row) + i - BELOW;
        automatic int c = int'(out_col) + j - HR;
        win_ok[i][j] = (r >= 0) && (r < int'(rows)) && (c >= 0) && (c < COLS);
        // window row i is tap NR-1-i, column j is shift position NC-1-j
        win[i][j]    = win_ok[i][j] ? sr[NR-1-i][NC-1-j] : '0;
      end
    end
  end
endmodule
