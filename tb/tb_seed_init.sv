// tb_seed_init: self-checking test of the seed initialisation.
//
// Three random frames of alpha tokens (5 rows x 8 columns, about 30 %
// without a valid alpha; in the first frame one column has no valid point
// at all, in the second frame another). The expected label of each point
// is 1 exactly when it is the first valid point of its column in that frame
// and its alpha is <= seed_thresh. This exercises the polarity flip of the
// valid-seed buffer across frames. Flush beats must pass unchanged and the
// latency must be one cycle.
//
// The first-valid-point rule follows the published method; reading its
// parity flip as a per-frame flip is this design's.
module tb_seed_init;
  import gs_pkg::*;
  localparam int COLS = 8, MAXR = 8, ROWS = 5;
  localparam real S24 = 16777216.0;

  logic clk = 0, rst = 1;
  logic [3:0] rows = 4'(ROWS);
  angle_t seed_thresh;
  logic in_vld = 0, in_flush = 0;
  apt_t in_tok = '0;
  logic out_vld, out_flush;
  apt_t out_tok;

  apt_t tok [ROWS][COLS];
  logic el  [ROWS][COLS];
  int checks = 0, failures = 0, iv, nout = 0, nfl = 0, nseed = 0, cyc = 0, t_in = -1, t_out = -1;
  int orow = 0, ocol = 0;

  seed_init #(.COLS(COLS), .MAX_ROWS(MAXR)) dut (
    .clk, .rst, .rows, .seed_thresh, .in_vld, .in_flush, .in_tok, .out_vld, .out_flush, .out_tok
  );

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  task automatic make_frame(int dead_col);
    for (int c = 0; c < COLS; c++) begin
      automatic logic found = 0;
      for (int s = 0; s < ROWS; s++) begin
        iv = $urandom_range(0, 9);  tok[s][c].ok = (iv < 7) && (c != dead_col);
        iv = $urandom_range(0, 1000000); tok[s][c].alpha = angle_t'($rtoi($itor(iv) / 1000000.0 * S24));
        iv = $urandom_range(0, 1); tok[s][c].label = iv[0];
        el[s][c] = 0;
        if (tok[s][c].ok && !found) begin
          found = 1;
          el[s][c] = (tok[s][c].alpha <= seed_thresh);
        end
      end
    end
  endtask

  always @(negedge clk) begin
    if (out_flush) nfl++;
    if (out_vld) begin
      if (t_out < 0) t_out = cyc;
      checks += 3;
      if (out_tok.label !== el[orow][ocol]) begin
        failures++; $display("FAIL label %0d,%0d: %0b", orow, ocol, out_tok.label);
      end
      if (out_tok.ok !== tok[orow][ocol].ok) begin failures++; $display("FAIL ok"); end
      if (out_tok.alpha !== tok[orow][ocol].alpha) begin failures++; $display("FAIL alpha"); end
      if (el[orow][ocol]) nseed++;
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
        in_vld <= 1; in_flush <= 0; in_tok <= tok[s][c];
        if (c == 2) begin @(posedge clk); in_vld <= 0; in_flush <= 1; end
      end
    @(posedge clk); in_vld <= 0; in_flush <= 0;
    repeat (2) @(posedge clk);
  endtask

  initial begin
    seed_thresh = angle_t'($rtoi(0.3 * S24));
    repeat (3) @(posedge clk);
    rst <= 0;
    make_frame(3); send();
    checks++;
    if (t_out - t_in != 2) begin failures++; $display("FAIL latency"); end
    make_frame(5); send();
    make_frame(-1); send();
    checks += 3;
    if (nout != 3 * ROWS * COLS) begin failures++; $display("FAIL count %0d", nout); end
    if (nfl != 3 * ROWS) begin failures++; $display("FAIL flush count %0d", nfl); end
    if (nseed == 0) begin failures++; $display("FAIL no seeds"); end
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
