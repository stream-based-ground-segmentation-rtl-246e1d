// line_fifo: fixed-length delay line of DEPTH entries, used as the row FIFO
// of the line buffers (one image row of points). Each cycle with `en` high
// stores `d` and advances the pointer; `q` always shows the entry that was
// stored DEPTH enabled cycles earlier (asynchronous read of the slot about
// to be overwritten). The memory is a plain array that maps to distributed
// or block RAM; it is not reset, so its contents are only meaningful once
// DEPTH entries have been written, which the line buffer's padding logic
// guarantees by masking everything older than the current frame.
//
// The row FIFO is the one of the published line buffer; the pointer-based
// array with asynchronous read is this design's choice.
module line_fifo #(
  parameter int DW    = 32,
  parameter int DEPTH = 2048
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          en,
  input  logic [DW-1:0] d,
  output logic [DW-1:0] q
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [DW-1:0] mem [DEPTH];
  logic [AW-1:0] ptr;

  assign q = mem[ptr];

  always_ff @(posedge clk) begin
    if (en) mem[ptr] <= d;
  end

  always_ff @(posedge clk) begin
    if (rst)
      ptr <= '0;
    else if (en)
      ptr <= (ptr == AW'(DEPTH - 1)) ? '0 : ptr + 1'b1;
  end
endmodule
