// tb_gs_ref_pkg: scene generator and reference model used by the
// end-to-end testbenches of gs_top.
//
// gs_scene builds a synthetic range image for a sensor 1.7 m above flat
// ground: channel pitches spread evenly around the horizontal, columns
// spread over 360 degrees of yaw, boxes standing on the ground in some
// column spans, a span of rough ground, a span whose lowest channels see
// a pole (no seed there), a far wall where the ground is out of reach, and a few
// percent of missing returns. Arrays are flat, indexed s*cols + c with s
// the stream row (0 = bottom channel).
//
// The reference works in real arithmetic and follows the algorithm:
// range repair (all upper/lower pairs within a 5-row reach whose difference
// is below the threshold), last-valid-pitch fill along the scan, alpha
// between each point and the one above (top row copied from the row
// below), seeds at the first valid point of each column, and ITERS
// cross-eight-way sweeps in stream order.
//
// The scenes are synthetic and chosen so that every mechanism occurs; they
// do not reproduce a real dataset.
package tb_gs_ref_pkg;

  localparam real S23 = 8388608.0, S24 = 16777216.0;
  localparam real PI = 3.14159265358979;

  // IEEE single-precision bits of a real (mantissa truncated).
  function automatic logic [31:0] f32(real v);
    logic [63:0] d;
    int e;
    d = $realtobits(v);
    e = int'(d[62:52]);
    if (e == 0) return 32'h0;
    return {d[63], 8'(e - 1023 + 127), d[51:29]};
  endfunction

  class gs_scene;
    int rows, cols;
    real r[], p[], y[];     // generated polar points (r = 0: missing)

    function new(int nrows, int ncols);
      rows = nrows; cols = ncols;
      r = new[rows * cols]; p = new[rows * cols]; y = new[rows * cols];
    endfunction

    function void make(int seed_shift, int miss_pct);
      int iv;
      real h = 1.7;
      for (int s = 0; s < rows; s++)
        for (int c = 0; c < cols; c++) begin
          automatic int  k = s * cols + c;
          // pitch from +z: bottom channel looks 0.45 rad below the horizon
          automatic real pp = PI / 2 + 0.45 - 0.7 * s / (rows - 1);
          automatic real rr;
          automatic real dg, dobs;
          automatic int  blk = ((c + seed_shift) / 6) % 4;
          iv = $urandom_range(0, 200);
          pp = pp + (iv - 100) * 1.0e-5;
          dg = (pp > PI / 2) ? h * $tan(pp - PI / 2) : 1.0e9;   // dummy
          // horizontal distance at which the ray meets the ground
          dg = (pp > PI / 2 + 1.0e-3) ? h / $tan(pp - PI / 2) : 1.0e9;
          dobs = (blk == 1) ? 9.0 + (c % 3) : 1.0e9;             // box face
          if (dobs < dg && (dobs * $tan(pp - PI / 2) <= h) && (dobs * $tan(pp - PI / 2) >= h - 1.6))
            rr = dobs / $sin(pp);
          else if (dg < 60.0)
            rr = dg / $sin(pp);
          else
            rr = 60.0 / $sin(pp);                                  // far wall
          // rough ground in another span: range jitter of up to +/-15 cm
          if (blk == 3) begin
            iv = $urandom_range(0, 300);
            rr = rr + (iv - 150) * 1.0e-3;
          end
          // a pole 0.8 m away covers the two bottom channels of another
          // span, so those columns get no seed and must be filled sideways
          if (blk == 2 && s < 2) rr = 0.8 / $sin(pp);
          iv = $urandom_range(0, 99);
          if (iv < miss_pct) begin rr = 0.0; end
          r[k] = rr;
          p[k] = (rr == 0.0) ? 0.0 : pp;
          y[k] = -PI + 2.0 * PI * c / cols;
        end
    endfunction

    // 96-bit input word: Cartesian floats or polar fixed point.
    function logic [95:0] word(int s, int c, bit polar);
      automatic int  k = s * cols + c;
      automatic real x = r[k] * $sin(p[k]) * $cos(y[k]);
      automatic real yy = r[k] * $sin(p[k]) * $sin(y[k]);
      automatic real z = r[k] * $cos(p[k]);
      if (polar)
        return {32'($rtoi(r[k] * S23)), 32'($rtoi(p[k] * S24)), 32'($rtoi(y[k] * S24))};
      if (r[k] == 0.0) return '0;
      return {f32(x), f32(yy), f32(z)};
    endfunction
  endclass

  class gs_ref;
    int rows, cols, iters;
    real range_thresh, seed_thresh, alpha_thresh;
    real last_p;
    real rr[], pr[];        // repaired
    real alpha[];
    bit  aok[];
    bit  lab[];
    int  n_repair, n_pfill, n_seed, n_top, n_s2;

    function new(int nrows, int ncols, int niters);
      rows = nrows; cols = ncols; iters = niters;
      rr = new[rows * cols]; pr = new[rows * cols];
      alpha = new[rows * cols]; aok = new[rows * cols]; lab = new[rows * cols];
      last_p = 0.0;
      n_repair = 0; n_pfill = 0; n_seed = 0; n_top = 0; n_s2 = 0;
    endfunction

    // Repair and alpha from the scene.
    function void front(gs_scene sc);
      for (int s = 0; s < rows; s++)
        for (int c = 0; c < cols; c++) begin
          automatic int  k = s * cols + c;
          automatic real sum = 0.0;
          automatic int  cnt = 0;
          for (int u = 1; u <= 5; u++)
            for (int l = 1; l <= 5; l++)
              if (s + u < rows && s - l >= 0) begin
                automatic real a = sc.r[(s + u) * cols + c];
                automatic real b = sc.r[(s - l) * cols + c];
                automatic real d = (a > b) ? a - b : b - a;
                if (a > 0.0 && b > 0.0 && d < range_thresh) begin
                  sum += a + b; cnt++;
                end
              end
          if (sc.r[k] == 0.0 && cnt > 0) begin rr[k] = sum / (2.0 * cnt); n_repair++; end
          else rr[k] = sc.r[k];
          if (sc.r[k] > 0.0) last_p = sc.p[k];
          else n_pfill++;
          pr[k] = (sc.r[k] > 0.0) ? sc.p[k] : last_p;
        end
      for (int s = 0; s < rows - 1; s++)
        for (int c = 0; c < cols; c++) begin
          automatic int  k = s * cols + c, kb = (s + 1) * cols + c;
          automatic real dx = rr[k] * $sin(pr[k]) - rr[kb] * $sin(pr[kb]);
          automatic real dz = rr[k] * $cos(pr[k]) - rr[kb] * $cos(pr[kb]);
          if (dx < 0) dx = -dx;
          if (dz < 0) dz = -dz;
          alpha[k] = $atan2(dz, dx);
          aok[k] = (rr[k] > 0.0) && (rr[kb] > 0.0);
        end
      for (int c = 0; c < cols; c++) begin
        alpha[(rows - 1) * cols + c] = alpha[(rows - 2) * cols + c];
        aok[(rows - 1) * cols + c]   = aok[(rows - 2) * cols + c];
        n_top++;
      end
    endfunction

    function bit near(real a, real b);
      return ((a > b) ? a - b : b - a) <= alpha_thresh;
    endfunction

    // Seeds and flood fill on given alpha values (ok flags and angles).
    function void back(real al[], bit ok[]);
      for (int c = 0; c < cols; c++) begin
        automatic bit found = 0;
        for (int s = 0; s < rows; s++) begin
          automatic int k = s * cols + c;
          lab[k] = 0;
          if (ok[k] && !found) begin
            found = 1;
            lab[k] = (al[k] <= seed_thresh);
            if (lab[k]) n_seed++;
          end
        end
      end
      for (int it = 0; it < iters; it++) begin
        automatic bit nl[] = new[rows * cols];
        for (int s = 0; s < rows; s++)
          for (int c = 0; c < cols; c++) begin
            automatic int k = s * cols + c;
            automatic bit any = 0, via2 = 0;
            for (int d = 0; d < 4; d++) begin
              automatic int ds = (d == 0) ? 1 : (d == 1) ? -1 : 0;
              automatic int dc = (d == 2) ? -1 : (d == 3) ? 1 : 0;
              automatic int s1 = s + ds, c1 = c + dc, s2 = s + 2 * ds, c2 = c + 2 * dc;
              automatic bit in1 = s1 >= 0 && s1 < rows && c1 >= 0 && c1 < cols;
              automatic bit in2 = s2 >= 0 && s2 < rows && c2 >= 0 && c2 < cols;
              automatic int k1 = in1 ? s1 * cols + c1 : 0;
              automatic int k2 = in2 ? s2 * cols + c2 : 0;
              automatic bit v1 = in1 && ok[k1];
              automatic bit v2 = in2 && ok[k2];
              automatic bit l1 = (k1 < k) ? nl[k1] : lab[k1];
              automatic bit l2 = (k2 < k) ? nl[k2] : lab[k2];
              if (v1 && near(al[k], al[k1])) begin
                if (l1) any = 1;
              end else if (v1 && v2 && near(al[k2], al[k1]) && near(al[k], al[k2]) && l2) begin
                any = 1; via2 = 1;
              end
            end
            nl[k] = lab[k] | (ok[k] & any);
            if (nl[k] && !lab[k] && via2) n_s2++;
          end
        lab = nl;
      end
    endfunction
  endclass

endpackage
