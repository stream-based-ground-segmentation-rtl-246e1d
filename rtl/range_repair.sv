// range_repair: column-wise average repair of one range value.
//
// The input is a vertical window of 2*STEP+1 ranges centred on the point
// being repaired (win_r[STEP] is the centre, lower indices are the channels
// below it). If the centre is invalid (range <= 0) it is replaced by the
// average of all valid upper/lower pairs: each of the STEP upper values is
// paired with each of the STEP lower values (the STEP x STEP difference and
// sum matrices of the paper's frame-repair unit), and a pair counts when
// both members are inside the frame, both are valid and their absolute
// difference is below `thresh`. The average sum/(2*count) is formed with a
// reciprocal table and a shift. A valid centre, or one with no valid pair,
// is passed on unchanged.
//
// Purely combinational; the enclosing stage registers the result.
// STEP = 5 (an 11x1 window) is the hardware configuration of the paper; the
// algorithm section quotes a step of 2 and a window of 5, which this module
// also supports through the parameter.
module range_repair
  import gs_pkg::*;
#(
  parameter int STEP = 5,
  localparam int N = 2 * STEP + 1
) (
  input  range_t win_r  [N],
  input  logic   win_ok [N],
  input  range_t thresh,
  output range_t r_out,
  output logic   repaired
);
  localparam int RECIP_FRAC = 32;
  localparam int NPAIR      = STEP * STEP;

  // recip(n) = round(2^RECIP_FRAC / n), recip(0) unused.
  function automatic logic [RECIP_FRAC:0] recip(int n);
    if (n == 0) return '0;
    return (RECIP_FRAC+1)'(((64'd1 << RECIP_FRAC) + 64'(n / 2)) / 64'(n));
  endfunction

  logic        [63:0] sum;
  logic        [$clog2(NPAIR+1)-1:0] cnt;
  range_t             avg;
  logic               c_bad;

  always_comb begin
    sum = '0;
    cnt = '0;
    for (int u = 1; u <= STEP; u++) begin
      for (int l = 1; l <= STEP; l++) begin
        automatic range_t ru = win_r[STEP + u];
        automatic range_t rl = win_r[STEP - l];
        automatic logic signed [32:0] d = 33'(ru) - 33'(rl);
        automatic logic [32:0] ad = d[32] ? 33'(-d) : 33'(d);
        if (win_ok[STEP + u] && win_ok[STEP - l] && ru > 0 && rl > 0 &&
            ad < 33'(thresh)) begin
          sum = sum + 64'(ru) + 64'(rl);
          cnt = cnt + 1'b1;
        end
      end
    end
    // The mean of 32-bit ranges fits 32 bits, so the upper product bits are zero.
    avg      = range_t'((96'(sum) * 96'(recip(int'(cnt)))) >> (RECIP_FRAC + 1));
    c_bad    = (win_r[STEP] <= 0);
    repaired = c_bad && (cnt != '0);
    r_out    = repaired ? avg : win_r[STEP];
  end
endmodule
