// tb_flood_fill: self-checking test of one cross-eight-way flood-fill unit.
//
// Random frames (10 rows x 16 columns) are built from patches of similar
// alpha (ground-like), large alpha (obstacle-like), single outliers (which
// the two-step neighbour lets the fill jump over) and invalid points, with
// random seeds. The expected labels come from a plain sweep written here:
// points in stream order, a neighbour already passed in this sweep
// contributes its new label, any other neighbour its input label. The test
// counts fills made through a one-step and through a two-step neighbour and
// requires both; it also checks out_grown, the output coordinates and the
// latency of 2*COLS + 4 cycles.
//
// The s1/s2 rule and the 5x5 window follow the published method; the use of
// fresh labels behind the centre is this design's reading of its label FIFO.
module tb_flood_fill;
  import gs_pkg::*;
  localparam int COLS = 16, MAXR = 16, ROWS = 10;
  localparam real S24 = 16777216.0;

  logic clk = 0, rst = 1;
  logic [4:0] rows = 5'(ROWS);
  angle_t alpha_thresh;
  logic in_vld = 0, in_flush = 0;
  apt_t in_tok = '0;
  logic out_vld, out_flush, out_grown;
  apt_t out_tok;
  logic [4:0] out_row;
  logic [3:0] out_col;

  apt_t tok [ROWS][COLS];
  logic nl  [ROWS][COLS];
  int checks = 0, failures = 0, iv, nout = 0, cyc = 0, t_in = -1, t_out = -1;
  int n_s1 = 0, n_s2 = 0, ngrown = 0;
  int orow = 0, ocol = 0;

  flood_fill #(.COLS(COLS), .MAX_ROWS(MAXR)) dut (
    .clk, .rst, .rows, .alpha_thresh, .in_vld, .in_flush, .in_tok,
    .out_vld, .out_flush, .out_tok, .out_row, .out_col, .out_grown
  );

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  function automatic logic near(angle_t a, angle_t b);
    longint d;
    d = longint'(a) - longint'(b);
    if (d < 0) d = -d;
    return d <= longint'(alpha_thresh);
  endfunction

  function automatic logic passed(int s, int c, int s0, int c0);
    return (s < s0) || (s == s0 && c < c0);
  endfunction

  function automatic logic lab(int s, int c, int s0, int c0);
    return passed(s, c, s0, c0) ? nl[s][c] : tok[s][c].label;
  endfunction

  function automatic logic in_frame(int s, int c);
    return s >= 0 && s < ROWS && c >= 0 && c < COLS;
  endfunction

  task automatic make_frame();
    for (int s = 0; s < ROWS; s++)
      for (int c = 0; c < COLS; c++) begin
        iv = $urandom_range(0, 99);
        tok[s][c].ok = (iv >= 5);
        iv = $urandom_range(0, 1000);
        // ground-like columns on the left, obstacle-like on the right
        tok[s][c].alpha = angle_t'($rtoi(((c < 11 ? 0.05 : 1.2) + $itor(iv) / 6667.0) * S24));
        iv = $urandom_range(0, 99);
        if (iv < 10) tok[s][c].alpha = angle_t'($rtoi(0.6 * S24));  // outlier
        iv = $urandom_range(0, 99);
        tok[s][c].label = (s == 0 && iv < 20) && tok[s][c].ok;
      end
    for (int s = 0; s < ROWS; s++)
      for (int c = 0; c < COLS; c++) begin
        automatic logic any = 0, via2 = 0;
        automatic int ds [4] = '{1, -1, 0, 0};
        automatic int dc [4] = '{0, 0, -1, 1};
        for (int d = 0; d < 4; d++) begin
          automatic int s1 = s + ds[d], c1 = c + dc[d], s2 = s + 2 * ds[d], c2 = c + 2 * dc[d];
          automatic logic v1 = in_frame(s1, c1) && tok[s1][c1].ok;
          automatic logic v2 = in_frame(s2, c2) && tok[s2][c2].ok;
          if (v1 && near(tok[s][c].alpha, tok[s1][c1].alpha)) begin
            if (lab(s1, c1, s, c)) any = 1;
          end else if (v1 && v2 && near(tok[s2][c2].alpha, tok[s1][c1].alpha) &&
                       near(tok[s][c].alpha, tok[s2][c2].alpha) && lab(s2, c2, s, c)) begin
            any = 1; via2 = 1;
          end
        end
        nl[s][c] = tok[s][c].label | (tok[s][c].ok & any);
        if (nl[s][c] && !tok[s][c].label) begin
          if (via2) n_s2++; else n_s1++;
        end
      end
  endtask

  always @(negedge clk) begin
    if (out_vld) begin
      if (t_out < 0) t_out = cyc;
      checks += 3;
      if (out_tok.label !== nl[orow][ocol]) begin
        failures++; $display("FAIL label %0d,%0d: %0b", orow, ocol, out_tok.label);
      end
      if (int'(out_row) != orow || int'(out_col) != ocol) begin
        failures++; $display("FAIL position");
      end
      if (out_grown !== (nl[orow][ocol] & ~tok[orow][ocol].label)) begin
        failures++; $display("FAIL grown %0d,%0d", orow, ocol);
      end
      if (out_grown) ngrown++;
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
        in_vld <= 1; in_tok <= tok[s][c];
      end
    for (int k = 0; k < 2 * COLS + 2; k++) begin
      @(posedge clk); in_vld <= 0; in_flush <= 1;
    end
    @(posedge clk); in_flush <= 0;
    repeat (3) @(posedge clk);
  endtask

  initial begin
    alpha_thresh = angle_t'($rtoi(0.1 * S24));
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int f = 0; f < 4; f++) begin
      make_frame(); send();
      if (f == 0) begin
        checks++;
        if (t_out - t_in != 2 * COLS + 4 + 1) begin  // +1: t_in is the edge before sampling
          failures++; $display("FAIL latency %0d", t_out - t_in);
        end
      end
    end
    checks += 3;
    if (nout != 4 * ROWS * COLS) begin failures++; $display("FAIL count %0d", nout); end
    if (n_s1 == 0 || n_s2 == 0) begin failures++; $display("FAIL fills s1 %0d s2 %0d", n_s1, n_s2); end
    if (ngrown != n_s1 + n_s2) begin failures++; $display("FAIL grown count"); end
    $display("fills through s1 %0d, through s2 %0d", n_s1, n_s2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
