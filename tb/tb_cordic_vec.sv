// tb_cordic_vec: self-checking test of the two CORDIC units.
//
// Vectoring mode (cordic_vec): random vectors in all four quadrants, with
// the angle compared against $atan2 and the magnitude against
// K*sqrt(x^2+y^2), both computed in real arithmetic. Rotation mode
// (cordic_rot): rotating (0, r) by p - pi/2 must give K*(r cos p, r sin p).
// The tag must come out exactly ITER+1 cycles after the input.
//
// The CORDIC sizes (24 iterations, 40 bits) are this design's choice; the
// method only names CORDIC for atan2.
module tb_cordic_vec;
  import gs_pkg::*;
  localparam int CW = CORDIC_W, ITER = CORDIC_ITER, LAT = ITER + 1, N = 400;
  localparam real K = 1.6467602581210654;
  localparam real S23 = 8388608.0, S24 = 16777216.0;

  logic clk = 0;
  logic signed [CW-1:0] x, y, mag, rx, ry, xo, yo;
  angle_t ang, rz;
  logic [15:0] tag_in, tag_out, rtag_out;
  int checks = 0, failures = 0;
  real fx, fy, r, p;
  int iv;
  real ex_ang [N], ex_mag [N], ex_c [N], ex_s [N];

  cordic_vec #(.TW(16)) dut (.clk, .rst (1'b0), .x, .y, .tag_in, .mag, .ang, .tag_out);
  cordic_rot #(.TW(16)) dut_r (.clk, .rst (1'b0), .x (rx), .y (ry), .z (rz), .tag_in,
                               .xo, .yo, .tag_out (rtag_out));

  always #5 clk = ~clk;

  initial begin
    tag_in = 16'hffff; x = '0; y = '0; rx = '0; ry = '0; rz = '0;
    for (int n = 0; n < N + LAT; n++) begin
      if (n < N) begin
        iv = $urandom_range(0, 400000); fx = $itor(iv - 200000) / 1000.0;
        iv = $urandom_range(0, 400000); fy = $itor(iv - 200000) / 1000.0;
        iv = $urandom_range(1, 200000); r  = $itor(iv) / 1000.0;
        iv = $urandom_range(0, 31415);  p  = $itor(iv) / 10000.0;
        if (n == 0) begin fx = -5.0; fy = 0.0; end
        if (n == 1) begin fx = 0.0; fy = 3.0; end
        x  = CW'($rtoi(fx * S23));
        y  = CW'($rtoi(fy * S23));
        rx = '0;
        ry = CW'($rtoi(r * S23));
        rz = angle_t'($rtoi((p - 1.5707963267948966) * S24));
        ex_ang[n] = $atan2(fy, fx);
        ex_mag[n] = K * $sqrt(fx * fx + fy * fy);
        ex_c[n] = K * r * $cos(p);
        ex_s[n] = K * r * $sin(p);
        tag_in = 16'(n);
      end else begin
        tag_in = 16'hffff;
      end
      @(posedge clk);
      #1;
      if (n >= LAT - 1 && n - (LAT - 1) < N) begin
        automatic int k = n - (LAT - 1);
        automatic real a = $itor(ang) / S24;
        automatic real m = $itor(mag) / S23;
        automatic real c = $itor(xo) / S23;
        automatic real s = $itor(yo) / S23;
        automatic real da = a - ex_ang[k];
        if (da > 3.14159) da -= 6.283185307;
        if (da < -3.14159) da += 6.283185307;
        checks += 4;
        if (tag_out != 16'(k) || rtag_out != 16'(k)) begin
          failures++; $display("FAIL tag %0d/%0d expected %0d", tag_out, rtag_out, k);
        end
        if (da > 1e-5 || da < -1e-5) begin
          failures++; $display("FAIL angle %0d: %f expected %f", k, a, ex_ang[k]);
        end
        if (m - ex_mag[k] > 1e-4 || ex_mag[k] - m > 1e-4) begin
          failures++; $display("FAIL mag %0d: %f expected %f", k, m, ex_mag[k]);
        end
        if (c - ex_c[k] > 2e-3 || ex_c[k] - c > 2e-3 || s - ex_s[k] > 2e-3 || ex_s[k] - s > 2e-3) begin
          failures++; $display("FAIL rot %0d: %f %f expected %f %f", k, c, s, ex_c[k], ex_s[k]);
        end
      end
    end
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
