// pitch_repair: row-wise nearest-neighbour repair of the pitch channel.
//
// Points are presented in scan order (en high for each point). A buffer
// keeps the pitch of the most recent point whose range was valid; a point
// with an invalid (missing) range gets the buffered pitch instead of its
// own, so each gap in a row is filled with the last good pitch before it.
// The paper gives this scheme; when a row starts with missing points the
// buffer still holds the last valid pitch of the row below (the buffer is
// not cleared per row), and it resets to 0. Those two details are this
// design's choice.
//
// p_out is combinational from the inputs and the buffer; the buffer updates
// on the clock edge of an enabled valid point.
module pitch_repair
  import gs_pkg::*;
(
  input  logic   clk,
  input  logic   rst,
  input  logic   en,
  input  logic   in_ok,   // the point's original range is valid
  input  angle_t in_p,
  output angle_t p_out
);
  angle_t nn_buf;

  assign p_out = in_ok ? in_p : nn_buf;

  always_ff @(posedge clk) begin
    if (rst)
      nn_buf <= '0;
    else if (en && in_ok)
      nn_buf <= in_p;
  end
endmodule
