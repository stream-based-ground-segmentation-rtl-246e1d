// tb_frame_repair: self-checking test of the frame-repair stage.
//
// Two random 12x16 frames (stream order, bottom row first) with about 15 %
// missing points are streamed in, followed by the flush beats the stage
// needs. Each output point is compared with a reference computed here in
// real arithmetic: the 5x5-pair average repair of missing ranges within an
// 11-row column window, and the last-valid-pitch fill along the scan. The
// first output must appear STEP*COLS + 2 cycles after the first input.
//
// The 11-row window and 5x5 pairs follow the hardware description; the
// invalid-point rule (range <= 0) is this design's.
module tb_frame_repair;
  import gs_pkg::*;
  localparam int COLS = 16, MAXR = 16, ROWS = 12, STEP = 5;
  localparam real S23 = 8388608.0;

  logic clk = 0, rst = 1;
  logic [4:0] rows = 5'(ROWS);
  range_t range_thresh;
  logic in_vld = 0, in_flush = 0;
  polar_t in_pt = '0;
  logic out_vld, out_flush;
  rp_t out_pt;

  range_t fr [ROWS][COLS];
  angle_t fp [ROWS][COLS];
  real    er [ROWS][COLS];
  angle_t ep [ROWS][COLS];
  angle_t last_p;
  int checks = 0, failures = 0, iv, nout = 0, nrep = 0, npfill = 0, cyc = 0, t_in = -1, t_out = -1;
  int orow = 0, ocol = 0;

  frame_repair #(.COLS(COLS), .MAX_ROWS(MAXR), .STEP(STEP)) dut (
    .clk, .rst, .rows, .range_thresh, .in_vld, .in_flush, .in_pt,
    .out_vld, .out_flush, .out_pt
  );

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  task automatic make_frame();
    for (int s = 0; s < ROWS; s++)
      for (int c = 0; c < COLS; c++) begin
        iv = $urandom_range(0, 6000);
        fr[s][c] = range_t'($rtoi((10.0 + s * 2.0 + $itor(iv) / 1000.0) * S23));
        iv = $urandom_range(0, 99);
        if (iv < 15) fr[s][c] = '0;
        fp[s][c] = angle_t'($urandom);
      end
  endtask

  task automatic reference();
    for (int s = 0; s < ROWS; s++)
      for (int c = 0; c < COLS; c++) begin
        real sum = 0.0;
        int  cnt = 0;
        for (int u = 1; u <= STEP; u++)
          for (int l = 1; l <= STEP; l++)
            if (s + u < ROWS && s - l >= 0) begin
              automatic range_t a = fr[s+u][c];
              automatic range_t b = fr[s-l][c];
              automatic longint d = longint'(a) - longint'(b);
              if (d < 0) d = -d;
              if (a > 0 && b > 0 && d < longint'(range_thresh)) begin
                sum += $itor(a) + $itor(b); cnt++;
              end
            end
        er[s][c] = (fr[s][c] == 0 && cnt > 0) ? sum / (2.0 * cnt) / S23 : $itor(fr[s][c]) / S23;
        if (fr[s][c] == 0 && cnt > 0) nrep++;
        if (fr[s][c] > 0) last_p = fp[s][c];
        else npfill++;
        ep[s][c] = (fr[s][c] > 0) ? fp[s][c] : last_p;
      end
  endtask

  always @(negedge clk) begin
    if (out_vld) begin
      automatic real got = $itor(out_pt.r) / S23;
      if (t_out < 0) t_out = cyc;
      checks += 3;
      if (got - er[orow][ocol] > 1e-5 || er[orow][ocol] - got > 1e-5) begin
        failures++; $display("FAIL range %0d,%0d: %f expected %f", orow, ocol, got, er[orow][ocol]);
      end
      if (out_pt.p !== ep[orow][ocol]) begin
        failures++; $display("FAIL pitch %0d,%0d", orow, ocol);
      end
      if (out_pt.ok !== (er[orow][ocol] > 0.0)) begin
        failures++; $display("FAIL ok %0d,%0d", orow, ocol);
      end
      nout++;
      ocol++;
      if (ocol == COLS) begin ocol = 0; orow++; end
      if (orow == ROWS) orow = 0;
    end
  end

  task automatic send();
    for (int s = 0; s < ROWS; s++)
      for (int c = 0; c < COLS; c++) begin
        @(posedge clk);
        if (t_in < 0) t_in = cyc;
        in_vld <= 1; in_pt.r <= fr[s][c]; in_pt.p <= fp[s][c]; in_pt.y <= angle_t'($urandom);
      end
    for (int k = 0; k < STEP * COLS; k++) begin
      @(posedge clk); in_vld <= 0; in_flush <= 1;
    end
    @(posedge clk); in_flush <= 0;
    repeat (4) @(posedge clk);
  endtask

  initial begin
    range_thresh = range_t'($rtoi(2.5 * S23));
    last_p = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    make_frame(); reference(); send();
    checks++;
    // t_in counts from the edge before the first point is sampled
    if (t_out - t_in != STEP * COLS + 3) begin
      failures++; $display("FAIL latency %0d", t_out - t_in);
    end
    make_frame(); reference(); send();
    checks += 2;
    if (nout != 2 * ROWS * COLS) begin failures++; $display("FAIL count %0d", nout); end
    if (nrep == 0 || npfill == 0) begin failures++; $display("FAIL no repair exercised"); end
    $display("repairs %0d pitch fills %0d", nrep, npfill);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
