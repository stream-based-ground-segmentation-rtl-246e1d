// tb_line_buffer: self-checking test of the line-buffer unit.
//
// Streams two frames of different heights through a 4x3 window (two rows
// above, one below, one column either side) with an 8-column frame, each
// point carrying its own coordinates as data. For every output it checks
// the centre coordinates, every window entry (expected point or zero
// padding) and the in-frame flags; it also checks that each frame gives
// exactly rows*COLS outputs, that the surplus flush beats are passed on,
// and that the first output appears LAT+1 cycles after the first point.
//
// The FIFO + shift-register structure follows the published line buffer;
// padding flags and flush handling are this design's own.
module tb_line_buffer;
  localparam int COLS = 8, MAXR = 6, AB = 2, BE = 1, HR = 1;
  localparam int NR = AB + BE + 1, NC = 2 * HR + 1, LAT = AB * COLS + HR;
  localparam int EXTRA = 5;

  logic clk = 0, rst = 1;
  logic [2:0] rows;
  logic in_vld = 0, in_flush = 0;
  logic [15:0] in_data = '0;
  logic out_vld, out_flush;
  logic [2:0] out_row;
  logic [2:0] out_col;
  logic [15:0] win [NR][NC];
  logic win_ok [NR][NC];

  int checks = 0, failures = 0;
  int nout = 0, nflush_out = 0, first_in_cyc = -1, first_out_cyc = -1, cyc = 0;
  int exp_row = 0, exp_col = 0;

  line_buffer #(.DW(16), .COLS(COLS), .MAX_ROWS(MAXR), .ABOVE(AB), .BELOW(BE), .HR(HR)) dut (
    .clk, .rst, .rows, .in_vld, .in_flush, .in_data,
    .out_vld, .out_flush, .out_row, .out_col, .win, .win_ok
  );

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  function automatic logic [15:0] code(int r, int c);
    return 16'(256 + r * 16 + c);
  endfunction

  always @(negedge clk) begin
    if (out_flush) nflush_out++;
    if (out_vld) begin
      if (first_out_cyc < 0) first_out_cyc = cyc;
      nout++;
      checks++;
      if (int'(out_row) != exp_row || int'(out_col) != exp_col) begin
        failures++;
        $display("FAIL centre %0d,%0d expected %0d,%0d", out_row, out_col, exp_row, exp_col);
      end
      for (int i = 0; i < NR; i++)
        for (int j = 0; j < NC; j++) begin
          automatic int r = exp_row + i - BE, c = exp_col + j - HR;
          automatic logic ok = r >= 0 && r < int'(rows) && c >= 0 && c < COLS;
          automatic logic [15:0] e = ok ? code(r, c) : 16'h0;
          checks++;
          if (win_ok[i][j] !== ok || win[i][j] !== e) begin
            failures++;
            if (failures < 10)
              $display("FAIL win[%0d][%0d] at %0d,%0d: %h/%0b expected %h/%0b",
                       i, j, exp_row, exp_col, win[i][j], win_ok[i][j], e, ok);
          end
        end
      exp_col++;
      if (exp_col == COLS) begin exp_col = 0; exp_row++; end
      if (exp_row == int'(rows)) exp_row = 0;
    end
  end

  task automatic send_frame(int nrows, int extra);
    for (int r = 0; r < nrows; r++)
      for (int c = 0; c < COLS; c++) begin
        @(posedge clk);
        if (first_in_cyc < 0) first_in_cyc = cyc;
        in_vld <= 1; in_flush <= 0; in_data <= code(r, c);
        // an idle cycle now and then
        if (c == 3) begin @(posedge clk); in_vld <= 0; end
      end
    for (int k = 0; k < LAT + extra; k++) begin
      @(posedge clk); in_vld <= 0; in_flush <= 1; in_data <= 16'hdead;
    end
    @(posedge clk); in_vld <= 0; in_flush <= 0;
    repeat (3) @(posedge clk);
  endtask

  initial begin
    rows = 3'd5;
    repeat (3) @(posedge clk);
    rst <= 0;
    send_frame(5, EXTRA);
    checks++;
    if (nout != 5 * COLS || nflush_out != EXTRA) begin
      failures++; $display("FAIL frame1 outputs %0d flush %0d", nout, nflush_out);
    end
    checks++;
    // first point enters on the cycle after first_in_cyc's edge; centre
    // becomes visible LAT beats later plus the output register; the idle
    // cycle in each row adds one cycle per row passed
    if (first_out_cyc - first_in_cyc != LAT + 1 + AB + 1) begin
      failures++; $display("FAIL latency %0d", first_out_cyc - first_in_cyc);
    end
    nout = 0; nflush_out = 0;
    rows = 3'd3;
    send_frame(3, 0);
    checks++;
    if (nout != 3 * COLS || nflush_out != 0) begin
      failures++; $display("FAIL frame2 outputs %0d flush %0d", nout, nflush_out);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
