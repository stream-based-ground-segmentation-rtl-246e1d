// seed_init: bottom-up seed initialisation of the ground labels.
//
// Because the stream starts with the bottom channel, the first point of a
// column with a defined alpha is met before any other point of that column.
// That point becomes a ground seed if its alpha is <= seed_thresh; every
// other point leaves this stage with label 0. (The paper's algorithm
// section seeds the first valid point only if it passes the threshold,
// while its hardware section marks the column when a point within the
// threshold is found; this module follows the algorithm section.)
//
// A COLS-bit valid-seed buffer remembers which columns have had their first
// valid point. Instead of clearing it for every frame, the meaning of its
// bits flips from frame to frame: a column counts as done when its bit
// equals the current polarity. To keep the flip sound, every column is
// written with the current polarity on the top row, so at the flip all bits
// read as "not done".
//
// Interface: beat stream of apt_t in and out. Timing: one point per clock,
// one cycle of latency; no flush beats are used (they pass through).
module seed_init
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
  input  angle_t        seed_thresh,
  input  logic          in_vld,
  input  logic          in_flush,
  input  apt_t          in_tok,
  output logic          out_vld,
  output logic          out_flush,
  output apt_t          out_tok
);
  logic [COLS-1:0] seen;
  logic            pol;
  logic [RW-1:0]   row;
  logic [CW-1:0]   col;
  logic            first, top, seed;

  assign first = in_tok.ok && (seen[col] != pol);
  assign top   = (row == rows - 1'b1);
  assign seed  = first && (in_tok.alpha <= seed_thresh);

  always_ff @(posedge clk) begin
    if (rst) begin
      seen      <= '0;
      pol       <= 1'b1;
      row       <= '0;
      col       <= '0;
      out_vld   <= 1'b0;
      out_flush <= 1'b0;
      out_tok   <= '0;
    end else begin
      out_vld   <= in_vld;
      out_flush <= in_flush;
      if (in_vld) begin
        out_tok.ok    <= in_tok.ok;
        out_tok.alpha <= in_tok.alpha;
        out_tok.label <= seed;
        if (first || top) seen[col] <= pol;
        if (col == CW'(COLS - 1)) begin
          col <= '0;
          if (top) begin
            row <= '0;
            pol <= ~pol;
          end else begin
            row <= row + 1'b1;
          end
        end else begin
          col <= col + 1'b1;
        end
      end
    end
  end

  logic unused;
  assign unused = in_tok.label;
endmodule
