// tb_gs_top: end-to-end test of the ground segmentation pipeline at a
// reduced frame size (up to 16 channels x 64 columns, three flood-fill
// units).
//
// Two synthetic scenes (flat ground, boxes, a far wall, missing returns)
// are run: the first as Cartesian floats through the converter with 16
// channels, the second as polar fixed point through the bypass with 12
// channels, so the run-time channel count and the bypass switch are both
// used. For each output point the test checks
//   * the position sequence (bottom channel first, one point per clock
//     once the first output appears);
//   * alpha and its ok flag against the real-arithmetic reference;
//   * the ground label against the reference seed + flood-fill sweeps
//     applied to the alpha values the design produced (so that rounding
//     near a threshold cannot cause false failures);
//   * the latency from the first streamed point to the first label.
// It also counts how often each mechanism occurred (range repair, pitch
// fill, top-row copy, seeds, growth in each flood-fill unit, a fill through
// a two-step neighbour, bypass and converter frames) and fails if any never
// did.
//
// The reduced sizes are this test's choice; the mechanisms counted are those
// the published architecture names.
module tb_gs_top;
  import gs_pkg::*;
  import tb_gs_ref_pkg::*;

  localparam int COLS = 64, MAXR = 16, ITERS = 3;
  localparam int PIPE_LAT = (2 * (CORDIC_ITER + 1) + 4) + (5 * COLS + 2)
                          + (COLS + 2 * CORDIC_ITER + 5) + 1 + ITERS * (2 * COLS + 4) + 1;

  logic clk = 0, rst = 1;
  logic [4:0] rows;
  logic bypass = 0;
  range_t range_thresh;
  angle_t seed_thresh, alpha_thresh;
  logic wr_en = 0;
  logic [4:0] wr_row = '0;
  logic [5:0] wr_col = '0;
  logic [95:0] wr_data = '0;
  logic start = 0, busy;
  logic out_vld, out_ground, out_alpha_ok, frame_done;
  logic [4:0] out_row;
  logic [5:0] out_col;
  angle_t out_alpha;
  logic [ITERS-1:0] grown;

  int checks = 0, failures = 0, cyc = 0;
  int nout, exp_s, exp_c, t_first_in, t_first_out, t_prev_out, gaps;
  int n_grown [ITERS];
  int n_bypass_frames = 0, n_conv_frames = 0;
  int n_repair = 0, n_pfill = 0, n_top = 0, n_seed = 0, n_s2 = 0, n_ground = 0;
  real got_a [];
  bit  got_ok [];
  bit  got_l [];

  gs_top #(.COLS(COLS), .MAX_ROWS(MAXR), .ITERS(ITERS)) dut (
    .clk, .rst, .rows, .bypass, .range_thresh, .seed_thresh, .alpha_thresh,
    .wr_en, .wr_row, .wr_col, .wr_data, .start, .busy,
    .out_vld, .out_row, .out_col, .out_ground, .out_alpha_ok, .out_alpha,
    .frame_done, .grown
  );

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  always @(negedge clk) begin
    if (dut.u_in.out_vld && t_first_in < 0) t_first_in = cyc;
    for (int k = 0; k < ITERS; k++) if (grown[k]) n_grown[k]++;
    if (out_vld) begin
      automatic int s = int'(rows) - 1 - int'(out_row);
      automatic int k = s * COLS + int'(out_col);
      if (t_first_out < 0) t_first_out = cyc;
      else if (cyc != t_prev_out + 1) gaps++;
      t_prev_out = cyc;
      checks++;
      if (s != exp_s || int'(out_col) != exp_c) begin
        failures++; $display("FAIL order: row %0d col %0d", out_row, out_col);
      end
      got_a[k]  = $itor(out_alpha) / S24;
      got_ok[k] = out_alpha_ok;
      got_l[k]  = out_ground;
      nout++;
      exp_c++;
      if (exp_c == COLS) begin exp_c = 0; exp_s++; end
    end
  end

  task automatic run_frame(int nrows, bit polar, int seed_shift);
    gs_scene sc = new(nrows, COLS);
    gs_ref   rf = new(nrows, COLS, ITERS);
    int bad_a = 0, bad_l = 0;
    sc.make(seed_shift, 4);
    rf.range_thresh = 1.0; rf.seed_thresh = 0.15; rf.alpha_thresh = 0.06;
    rf.last_p = 0.0;
    got_a = new[nrows * COLS]; got_ok = new[nrows * COLS]; got_l = new[nrows * COLS];
    rows = 5'(nrows);
    bypass = polar;
    // load: image row 0 is the top channel = stream row nrows-1
    for (int s = 0; s < nrows; s++)
      for (int c = 0; c < COLS; c++) begin
        @(posedge clk);
        wr_en <= 1; wr_row <= 5'(nrows - 1 - s); wr_col <= 6'(c); wr_data <= sc.word(s, c, polar);
      end
    @(posedge clk); wr_en <= 0;
    nout = 0; exp_s = 0; exp_c = 0; t_first_in = -1; t_first_out = -1; gaps = 0;
    @(posedge clk); start <= 1;
    @(posedge clk); start <= 0;
    wait (frame_done);
    @(posedge clk);
    wait (!busy);
    repeat (5) @(posedge clk);
    if (polar) n_bypass_frames++; else n_conv_frames++;
    // reference
    rf.front(sc);
    checks += 3;
    if (nout != nrows * COLS) begin failures++; $display("FAIL %0d outputs", nout); end
    if (gaps != 0) begin failures++; $display("FAIL %0d output gaps", gaps); end
    if (t_first_out - t_first_in != PIPE_LAT) begin
      failures++; $display("FAIL latency %0d expected %0d", t_first_out - t_first_in, PIPE_LAT);
    end
    for (int k = 0; k < nrows * COLS; k++) begin
      checks++;
      if (got_ok[k] !== rf.aok[k] ||
          (rf.aok[k] && (got_a[k] - rf.alpha[k] > 2e-4 || rf.alpha[k] - got_a[k] > 2e-4))) begin
        bad_a++;
        if (bad_a < 5) $display("FAIL alpha at %0d,%0d: %0b %f expected %0b %f",
                                k / COLS, k % COLS, got_ok[k], got_a[k], rf.aok[k], rf.alpha[k]);
      end
    end
    rf.back(got_a, got_ok);
    for (int k = 0; k < nrows * COLS; k++) begin
      checks++;
      if (got_l[k] !== rf.lab[k]) begin
        bad_l++;
        if (bad_l < 5) $display("FAIL label at %0d,%0d: %0b", k / COLS, k % COLS, got_l[k]);
      end
      if (got_l[k]) n_ground++;
    end
    failures += bad_a + bad_l;
    n_repair += rf.n_repair; n_pfill += rf.n_pfill; n_top += rf.n_top;
    n_seed += rf.n_seed; n_s2 += rf.n_s2;
    $display("frame %0dx%0d %s: ground %0d, latency %0d cycles, %0d alpha / %0d label mismatches",
             nrows, COLS, polar ? "polar" : "cartesian", n_ground, t_first_out - t_first_in, bad_a, bad_l);
  endtask

  initial begin
    range_thresh = range_t'($rtoi(1.0 * S23));
    seed_thresh  = angle_t'($rtoi(0.15 * S24));
    alpha_thresh = angle_t'($rtoi(0.06 * S24));
    for (int k = 0; k < ITERS; k++) n_grown[k] = 0;
    rows = 5'd16;
    repeat (3) @(posedge clk);
    rst <= 0;
    run_frame(16, 0, 0);
    run_frame(12, 1, 3);
    $display("mechanisms: repairs %0d, pitch fills %0d, top-row copies %0d, seeds %0d, two-step fills %0d, converter frames %0d, bypass frames %0d",
             n_repair, n_pfill, n_top, n_seed, n_s2, n_conv_frames, n_bypass_frames);
    for (int k = 0; k < ITERS; k++) $display("flood-fill unit %0d grew %0d points", k, n_grown[k]);
    checks += 7 + ITERS;
    if (n_repair == 0)       begin failures++; $display("FAIL no range repair"); end
    if (n_pfill == 0)        begin failures++; $display("FAIL no pitch fill"); end
    if (n_top == 0)          begin failures++; $display("FAIL no top-row copy"); end
    if (n_seed == 0)         begin failures++; $display("FAIL no seed"); end
    if (n_s2 == 0)           begin failures++; $display("FAIL no two-step fill"); end
    if (n_conv_frames == 0)  begin failures++; $display("FAIL no converter frame"); end
    if (n_bypass_frames == 0) begin failures++; $display("FAIL no bypass frame"); end
    for (int k = 0; k < ITERS; k++)
      if (n_grown[k] == 0) begin failures++; $display("FAIL unit %0d never grew", k); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
