// tb_alpha_compute: self-checking test of the Alpha computation stage.
//
// Random frames (6 rows, then 4 rows, 8 columns) of repaired points, some
// flagged invalid, are streamed with the COLS flush beats the stage needs.
// For each point A and the point B above it the expected
// alpha = atan2(|zA - zB|, |xA - xB|) with x = r sin p, z = r cos p is
// computed in real arithmetic; the top row must repeat the row below it,
// and ok must be set only where both points are valid. The first output
// must appear COLS + 2*CORDIC_ITER + 5 cycles after the first input.
//
// The alpha formula and the top-row copy follow the published method; the ok rule
// and the latency figure are this design's.
module tb_alpha_compute;
  import gs_pkg::*;
  localparam int COLS = 8, MAXR = 8;
  localparam real S23 = 8388608.0, S24 = 16777216.0;

  logic clk = 0, rst = 1;
  logic [3:0] rows;
  logic in_vld = 0, in_flush = 0;
  rp_t in_pt = '0;
  logic out_vld, out_flush;
  apt_t out_tok;

  real  fr [MAXR][COLS], fp [MAXR][COLS];
  logic fo [MAXR][COLS];
  real  ea [MAXR][COLS];
  logic eo [MAXR][COLS];
  int checks = 0, failures = 0, iv, nout = 0, cyc = 0, t_in = -1, t_out = -1, ntop = 0;
  int orow = 0, ocol = 0, nrows;

  alpha_compute #(.COLS(COLS), .MAX_ROWS(MAXR)) dut (
    .clk, .rst, .rows, .in_vld, .in_flush, .in_pt, .out_vld, .out_flush, .out_tok
  );

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  task automatic make_frame(int n);
    for (int s = 0; s < n; s++)
      for (int c = 0; c < COLS; c++) begin
        iv = $urandom_range(5000, 50000); fr[s][c] = $itor(iv) / 1000.0;
        iv = $urandom_range(0, 8000);     fp[s][c] = 1.1708 + $itor(iv) / 10000.0;
        iv = $urandom_range(0, 9);        fo[s][c] = (iv != 0);
      end
    for (int s = 0; s < n - 1; s++)
      for (int c = 0; c < COLS; c++) begin
        automatic real dx = fr[s][c] * $sin(fp[s][c]) - fr[s+1][c] * $sin(fp[s+1][c]);
        automatic real dz = fr[s][c] * $cos(fp[s][c]) - fr[s+1][c] * $cos(fp[s+1][c]);
        if (dx < 0) dx = -dx;
        if (dz < 0) dz = -dz;
        ea[s][c] = $atan2(dz, dx);
        eo[s][c] = fo[s][c] & fo[s+1][c];
      end
    for (int c = 0; c < COLS; c++) begin
      ea[n-1][c] = ea[n-2][c];
      eo[n-1][c] = eo[n-2][c];
    end
  endtask

  always @(negedge clk) begin
    if (out_vld) begin
      automatic real a = $itor(out_tok.alpha) / S24;
      if (t_out < 0) t_out = cyc;
      checks += 2;
      if (out_tok.ok !== eo[orow][ocol]) begin
        failures++; $display("FAIL ok %0d,%0d", orow, ocol);
      end
      if (eo[orow][ocol] && (a - ea[orow][ocol] > 1e-4 || ea[orow][ocol] - a > 1e-4)) begin
        failures++; $display("FAIL alpha %0d,%0d: %f expected %f", orow, ocol, a, ea[orow][ocol]);
      end
      if (orow == nrows - 1) ntop++;
      nout++;
      ocol++;
      if (ocol == COLS) begin ocol = 0; orow++; end
      if (orow == nrows) orow = 0;
    end
  end

  task automatic send(int n);
    for (int s = 0; s < n; s++)
      for (int c = 0; c < COLS; c++) begin
        @(posedge clk);
        if (t_in < 0) t_in = cyc;
        in_vld <= 1;
        in_pt.ok <= fo[s][c];
        in_pt.r  <= range_t'($rtoi(fr[s][c] * S23));
        in_pt.p  <= angle_t'($rtoi(fp[s][c] * S24));
      end
    for (int k = 0; k < COLS; k++) begin
      @(posedge clk); in_vld <= 0; in_flush <= 1;
    end
    @(posedge clk); in_flush <= 0;
    repeat (2 * CORDIC_ITER + 8) @(posedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    nrows = 6; rows = 4'(nrows);
    make_frame(nrows); send(nrows);
    checks++;
    // t_in counts from the edge before the first point is sampled
    if (t_out - t_in != COLS + 2 * CORDIC_ITER + 6) begin
      failures++; $display("FAIL latency %0d", t_out - t_in);
    end
    nrows = 4; rows = 4'(nrows);
    make_frame(nrows); send(nrows);
    checks += 2;
    if (nout != 10 * COLS) begin failures++; $display("FAIL count %0d", nout); end
    if (ntop != 2 * COLS) begin failures++; $display("FAIL top rows %0d", ntop); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
