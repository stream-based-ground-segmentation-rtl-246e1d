// tb_input_buffer: self-checking test of the frame store.
//
// Loads random words into a 6x8 store, streams frames of 4 and 6 rows and
// checks: the words come out bottom image row first, each row left to
// right, in consecutive cycles; FLUSH flush beats follow directly; `done`
// pulses once, together with the last flush beat; `busy` covers the whole frame.
//
// Bottom-up read order follows the published method; the load port and
// the flush beats are this design's own.
module tb_input_buffer;
  localparam int COLS = 8, MAXR = 6, FLUSH = 5;

  logic clk = 0, rst = 1;
  logic [2:0] rows;
  logic wr_en = 0;
  logic [2:0] wr_row = '0;
  logic [2:0] wr_col = '0;
  logic [95:0] wr_data = '0;
  logic start = 0, busy, done, out_vld, out_flush;
  logic [95:0] out_word;

  logic [95:0] img [MAXR][COLS];
  int checks = 0, failures = 0, nv, nf, ndone, last_beat, first_beat, cyc = 0;
  int er, ec;

  input_buffer #(.COLS(COLS), .MAX_ROWS(MAXR), .FLUSH(FLUSH)) dut (
    .clk, .rst, .rows, .wr_en, .wr_row, .wr_col, .wr_data, .start, .busy, .done,
    .out_vld, .out_flush, .out_word
  );

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  always @(negedge clk) begin
    if (out_vld) begin
      if (first_beat < 0) first_beat = cyc;
      checks++;
      if (out_word !== img[er][ec] || nf != 0) begin
        failures++; $display("FAIL word at %0d,%0d", er, ec);
      end
      nv++;
      ec++;
      if (ec == COLS) begin ec = 0; er--; end
    end
    if (out_flush) nf++;
    if (out_vld || out_flush) last_beat = cyc;
    if (done) begin
      ndone++;
      checks++;
      if (last_beat != cyc) begin failures++; $display("FAIL done timing"); end
    end
  end

  task automatic run(int n);
    rows = 3'(n);
    nv = 0; nf = 0; ndone = 0; first_beat = -1; er = n - 1; ec = 0;
    @(posedge clk); start <= 1;
    @(posedge clk); start <= 0;
    #1;
    checks++;
    if (!busy) begin failures++; $display("FAIL busy"); end
    wait (done);
    @(posedge clk);
    repeat (3) @(posedge clk);
    checks += 4;
    if (nv != n * COLS) begin failures++; $display("FAIL points %0d", nv); end
    if (nf != FLUSH) begin failures++; $display("FAIL flush %0d", nf); end
    if (ndone != 1 || busy) begin failures++; $display("FAIL done/busy"); end
    if (last_beat - first_beat + 1 != n * COLS + FLUSH) begin
      failures++; $display("FAIL beats not contiguous");
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int r = 0; r < MAXR; r++)
      for (int c = 0; c < COLS; c++) begin
        img[r][c] = {$urandom, $urandom, $urandom};
        @(posedge clk);
        wr_en <= 1; wr_row <= 3'(r); wr_col <= 3'(c); wr_data <= img[r][c];
      end
    @(posedge clk); wr_en <= 0;
    run(4);
    run(6);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
