// tb_data_converter: self-checking test of the Cartesian-to-polar
// converter and its bypass.
//
// Random points (float x, y, z within +/-120 m, plus a missing point at the
// origin) are converted and compared with range, pitch (from +z) and yaw
// computed in real arithmetic. Then the bypass is switched on and fixed-
// point polar words must come out unchanged. Every output must appear
// exactly LAT cycles after its input, and flush beats must keep their place.
//
// The polar convention (pitch from +z) and fixed-point formats follow the
// published method; the float-to-fixed conversion before the CORDICs is this
// design's own.
module tb_data_converter;
  import gs_pkg::*;
  localparam int N = 300, LAT = 2 * (CORDIC_ITER + 1) + 4;
  localparam real S23 = 8388608.0, S24 = 16777216.0;

  logic clk = 0, rst = 1, bypass = 0;
  logic in_vld = 0, in_flush = 0;
  logic [95:0] in_word = '0;
  logic out_vld, out_flush;
  polar_t out_pt;

  int checks = 0, failures = 0, cyc = 0, nout = 0, nfl = 0, iv;
  int in_cyc [2*N+2];
  real er [N], ep [N], ey [N];
  logic [95:0] bw [N];
  real fx, fy, fz;

  data_converter dut (.clk, .rst, .bypass, .in_vld, .in_flush, .in_word,
                      .out_vld, .out_flush, .out_pt);

  always #5 clk = ~clk;

  // IEEE single-precision bits of a real (truncating the mantissa).
  function automatic logic [31:0] f32(real v);
    logic [63:0] d;
    int e;
    d = $realtobits(v);
    e = int'(d[62:52]);
    if (e == 0) return 32'h0;
    return {d[63], 8'(e - 1023 + 127), d[51:29]};
  endfunction

  function automatic real r32(logic [31:0] f);
    real m, sc;
    int e, mi;
    if (f[30:23] == 8'd0) return 0.0;
    e  = {24'd0, f[30:23]};
    mi = {9'd0, f[22:0]};
    sc = 1.0;
    for (int k = 127; k < e; k++) sc = sc * 2.0;
    for (int k = e; k < 127; k++) sc = sc / 2.0;
    m = (1.0 + $itor(mi) / 8388608.0) * sc;
    return f[31] ? -m : m;
  endfunction
  always @(posedge clk) cyc++;

  function automatic real ang_err(real a, real b);
    real d;
    d = a - b;
    if (d > 3.14159) d -= 6.283185307;
    if (d < -3.14159) d += 6.283185307;
    return d < 0 ? -d : d;
  endfunction

  always @(negedge clk) begin
    if (out_flush) begin
      nfl++;
      checks++;
      if (cyc - in_cyc[2*N+1] != LAT + 1) begin failures++; $display("FAIL flush latency"); end
    end
    if (out_vld) begin
      checks++;
      if (cyc - in_cyc[nout] != LAT + 1) begin
        failures++; $display("FAIL latency %0d", cyc - in_cyc[nout]);
      end
      if (nout < N) begin
        automatic real r = $itor(out_pt.r) / S23;
        automatic real p = $itor(out_pt.p) / S24;
        automatic real y = $itor(out_pt.y) / S24;
        checks += 3;
        if (r - er[nout] > 1e-3 || er[nout] - r > 1e-3) begin
          failures++; $display("FAIL range %0d: %f expected %f", nout, r, er[nout]);
        end
        if (er[nout] > 0.0 && ang_err(p, ep[nout]) > 1e-4) begin
          failures++; $display("FAIL pitch %0d: %f expected %f", nout, p, ep[nout]);
        end
        if (er[nout] > 0.0 && ang_err(y, ey[nout]) > 1e-4) begin
          failures++; $display("FAIL yaw %0d: %f expected %f", nout, y, ey[nout]);
        end
      end else begin
        checks++;
        if (out_pt !== polar_t'(bw[nout - N])) begin
          failures++; $display("FAIL bypass %0d", nout - N);
        end
      end
      nout++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int n = 0; n < N; n++) begin
      iv = $urandom_range(0, 240000); fx = $itor(iv - 120000) / 1000.0;
      iv = $urandom_range(0, 240000); fy = $itor(iv - 120000) / 1000.0;
      iv = $urandom_range(0, 40000);  fz = $itor(iv - 20000) / 1000.0;
      if (n == 5) begin fx = 0.0; fy = 0.0; fz = 0.0; end
      if (n == 6) begin fx = -7.5; fy = 0.0; fz = -1.73; end
      // reference from the single-precision values actually sent
      fx = r32(f32(fx));
      fy = r32(f32(fy));
      fz = r32(f32(fz));
      er[n] = $sqrt(fx * fx + fy * fy + fz * fz);
      ep[n] = $atan2($sqrt(fx * fx + fy * fy), fz);
      ey[n] = $atan2(fy, fx);
      @(posedge clk);
      in_cyc[n] = cyc;
      in_vld <= 1;
      in_word <= {f32(fx), f32(fy), f32(fz)};
    end
    @(posedge clk);
    in_vld <= 0;
    @(posedge clk);
    in_cyc[2*N+1] = cyc;
    in_flush <= 1;
    @(posedge clk);
    in_flush <= 0;
    repeat (LAT) @(posedge clk);
    bypass <= 1;
    for (int n = 0; n < N; n++) begin
      @(posedge clk);
      in_cyc[N + n] = cyc;
      bw[n] = {$urandom, $urandom, $urandom};
      in_vld <= 1;
      in_word <= bw[n];
    end
    @(posedge clk);
    in_vld <= 0;
    repeat (LAT + 5) @(posedge clk);
    checks++;
    if (nout != 2 * N || nfl != 1) begin
      failures++; $display("FAIL counts %0d %0d", nout, nfl);
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
