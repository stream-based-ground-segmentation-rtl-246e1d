// tb_pitch_repair: self-checking test of the nearest-neighbour pitch repair.
//
// A scan of random pitches with random gaps is fed point by point; each
// output must equal the point's own pitch when its range is valid and the
// last valid pitch before it otherwise (0 before the first valid point after
// reset). Disabled cycles must not move the buffer.
//
// The last-valid buffer follows the published method; its reset value of 0
// is this design's.
module tb_pitch_repair;
  import gs_pkg::*;
  logic clk = 0, rst = 1, en = 0, in_ok = 0;
  angle_t in_p = '0, p_out;
  angle_t last;
  int checks = 0, failures = 0, iv, nfill = 0;

  pitch_repair dut (.clk, .rst, .en, .in_ok, .in_p, .p_out);

  always #5 clk = ~clk;

  initial begin
    repeat (2) @(posedge clk);
    rst <= 0;
    last = '0;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      iv = $urandom_range(0, 3);   in_ok = (iv != 0);
      iv = $urandom_range(0, 5);   en = (iv != 0);
      in_p = angle_t'($urandom);
      #1;
      checks++;
      if (p_out !== (in_ok ? in_p : last)) begin
        failures++; $display("FAIL point %0d: %h expected %h", n, p_out, in_ok ? in_p : last);
      end
      if (!in_ok) nfill++;
      if (en && in_ok) last = in_p;
    end
    checks++;
    if (nfill == 0) failures++;
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
