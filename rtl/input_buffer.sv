// input_buffer: on-chip frame store that feeds the pipeline.
//
// A host writes one range image (rows x COLS words of 96 bits, either
// {x, y, z} floats or {range, pitch, yaw} fixed point) through the load
// port, addressed by image row (0 = top channel) and column. A pulse on
// `start` then streams the frame out one word per clock, bottom channel
// first (image row rows-1, then rows-2, ...), each row from column 0 to
// COLS-1: the bottom-up order the flood fill needs. After the last point
// it sends FLUSH flush beats, which the line-buffer stages downstream use
// to drain the rows they still hold; `done` pulses with the last of them.
//
// Timing: synchronous-read memory, so out_vld/out_flush appear one cycle
// after the address is issued; a frame occupies rows*COLS + FLUSH cycles.
// `busy` is high from `start` until `done`; writes and `start` during busy
// are not allowed. The paper pre-loads the point cloud into an on-chip
// buffer in range-image order; the load port, the flush beats and the
// bottom-up read order as done here are this design's realisation of it.
module input_buffer
  import gs_pkg::*;
#(
  parameter int COLS     = 2048,
  parameter int MAX_ROWS = 128,
  parameter int FLUSH    = flush_beats(COLS, 3),
  localparam int RW = $clog2(MAX_ROWS + 1),
  localparam int CW = $clog2(COLS),
  localparam int AW = $clog2(MAX_ROWS * COLS)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic [RW-1:0] rows,
  // load port
  input  logic          wr_en,
  input  logic [RW-1:0] wr_row,
  input  logic [CW-1:0] wr_col,
  input  logic [95:0]   wr_data,
  // control
  input  logic          start,
  output logic          busy,
  output logic          done,
  // stream out
  output logic          out_vld,
  output logic          out_flush,
  output logic [95:0]   out_word
);
  typedef enum logic [1:0] {IDLE, STREAM, DRAIN} state_t;

  logic [95:0]   mem [MAX_ROWS * COLS];
  state_t        state;
  logic [RW-1:0] row;          // image row being read
  logic [CW-1:0] col;
  logic [$clog2(FLUSH + 1)-1:0] fcnt;
  logic          rd_en;

  assign busy  = (state != IDLE);
  assign rd_en = (state == STREAM);

  always_ff @(posedge clk) begin
    if (wr_en) mem[AW'(wr_row) * AW'(COLS) + AW'(wr_col)] <= wr_data;
  end

  always_ff @(posedge clk) begin
    out_word <= mem[AW'(row) * AW'(COLS) + AW'(col)];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= IDLE;
      row       <= '0;
      col       <= '0;
      fcnt      <= '0;
      out_vld   <= 1'b0;
      out_flush <= 1'b0;
      done      <= 1'b0;
    end else begin
      out_vld   <= rd_en;
      out_flush <= (state == DRAIN);
      done      <= 1'b0;
      case (state)
        IDLE: if (start) begin
          state <= STREAM;
          row   <= rows - 1'b1;
          col   <= '0;
        end
        STREAM: begin
          if (col == CW'(COLS - 1)) begin
            col <= '0;
            if (row == '0) begin
              state <= DRAIN;
              fcnt  <= '0;
            end else begin
              row <= row - 1'b1;
            end
          end else begin
            col <= col + 1'b1;
          end
        end
        DRAIN: begin
          if (fcnt == ($bits(fcnt))'(FLUSH - 1)) begin
            state <= IDLE;
            done  <= 1'b1;
          end
          fcnt <= fcnt + 1'b1;
        end
        default: state <= IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (!rst && start) assert (state == IDLE) else $error("input_buffer: start while busy");
    if (!rst && wr_en) assert (state == IDLE) else $error("input_buffer: write while busy");
  end
endmodule
