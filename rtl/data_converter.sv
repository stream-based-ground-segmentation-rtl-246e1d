// data_converter: turns a Cartesian LiDAR point into the polar form the
// rest of the pipeline works on, with a bypass for sensors that already
// deliver polar data (the optional, dashed block of the architecture).
//
// Input word {x, y, z}: three IEEE-754 single-precision floats in metres.
// Each is first converted to fixed point with 23 fraction bits (denormals
// flush to zero, magnitudes beyond the datapath saturate). A CORDIC in
// vectoring mode then gives the horizontal distance rho = |(x, y)| and the
// yaw atan2(y, x); a second one gives range = |(rho, z)| and the pitch
// atan2(rho, z), measured from the +z axis as in the alpha equations
// (x = r sin p horizontal, z = r cos p vertical). Both magnitudes are
// multiplied by the inverse CORDIC gain.
// Output: polar_t {range Q9.23, pitch Q.24, yaw Q.24}. A point at the
// origin (a missing return) yields range 0, which downstream treats as an
// invalid point.
// With bypass high the input word is taken to be {range, pitch, yaw} in the
// same fixed-point formats and is only delayed.
//
// Timing: one point per clock, fixed latency 2*(CORDIC_ITER+1) + 4
// cycles for points and flush beats alike, in both modes. The paper keeps
// this conversion in floating point; here it is fixed-point after an
// exact float-to-fixed step, which is this design's choice.
module data_converter
  import gs_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        bypass,
  input  logic        in_vld,
  input  logic        in_flush,
  input  logic [95:0] in_word,
  output logic        out_vld,
  output logic        out_flush,
  output polar_t      out_pt
);
  localparam int CW = CORDIC_W;

  typedef logic signed [CW-1:0] fx_t;

  // IEEE-754 single to signed fixed point with RANGE_FRAC fraction bits.
  function automatic fx_t f2fix(logic [31:0] f);
    logic [7:0]  e;
    logic [CW-1:0] m;
    int          sh;
    fx_t         v;
    e  = f[30:23];
    m  = CW'({1'b1, f[22:0]});        // 1.m scaled by 2^23
    sh = int'(e) - 127 + (RANGE_FRAC - 23);  // mantissa has 23 fraction bits
    if (e == 8'd0)       v = '0;
    else if (sh > 14)    v = fx_t'({1'b0, {(CW-1){1'b1}}} >> 1);
    else if (sh >= 0)    v = fx_t'(m << sh);
    else if (sh > -24)   v = fx_t'(m >> (-sh));
    else                 v = '0;
    return f[31] ? -v : v;
  endfunction

  // Multiply by 1/K (Q.24) and truncate.
  function automatic fx_t comp_gain(fx_t v);
    logic signed [CW+32-1:0] p;
    p = (CW+32)'(v) * (CW+32)'($signed({1'b0, CORDIC_INV_GAIN}));
    return fx_t'(p >>> ANG_FRAC);
  endfunction

  // Tag carried through the first CORDIC: flags, bypass word, z.
  typedef struct packed {
    logic        vld;
    logic        flush;
    logic        bypass;
    logic [95:0] word;
    fx_t         z;
  } tag1_t;
  // Tag carried through the second CORDIC: flags, bypass word, yaw.
  typedef struct packed {
    logic        vld;
    logic        flush;
    logic        bypass;
    logic [95:0] word;
    angle_t      yaw;
  } tag2_t;

  fx_t    fx_x, fx_y, rho, rng_k, rho_k;
  tag1_t  t0, t1;
  fx_t    z_r;
  tag2_t  t2, t3, t3r;
  angle_t yaw, pitch;
  fx_t    rng;
  fx_t    rho_c;
  angle_t pitch_r;

  // Stage A: float to fixed.
  always_ff @(posedge clk) begin
    fx_x     <= f2fix(in_word[95:64]);
    fx_y     <= f2fix(in_word[63:32]);
    t0.z     <= f2fix(in_word[31:0]);
    t0.word  <= in_word;
    t0.bypass<= bypass;
    t0.vld   <= in_vld & ~rst;
    t0.flush <= in_flush & ~rst;
  end

  cordic_vec #(.TW($bits(tag1_t))) u_xy (
    .clk (clk), .rst (rst), .x (fx_x), .y (fx_y), .tag_in (t0),
    .mag (rho_k), .ang (yaw), .tag_out (t1)
  );

  // Stage B: gain compensation of rho.
  always_ff @(posedge clk) begin
    rho_c <= comp_gain(rho_k);
    z_r   <= t1.z;
    t2.vld    <= t1.vld;
    t2.flush  <= t1.flush;
    t2.bypass <= t1.bypass;
    t2.word   <= t1.word;
    t2.yaw    <= yaw;
  end
  assign rho = rho_c;

  cordic_vec #(.TW($bits(tag2_t))) u_zr (
    .clk (clk), .rst (rst), .x (z_r), .y (rho), .tag_in (t2),
    .mag (rng_k), .ang (pitch), .tag_out (t3)
  );

  // Stage C: gain compensation of the range.
  always_ff @(posedge clk) begin
    rng     <= comp_gain(rng_k);
    pitch_r <= pitch;
    t3r     <= t3;
  end

  // Stage D: saturate, select bypass, register the output.
  always_ff @(posedge clk) begin
    if (rst) begin
      out_vld   <= 1'b0;
      out_flush <= 1'b0;
      out_pt    <= '0;
    end else begin
      out_vld   <= t3r.vld;
      out_flush <= t3r.flush;
      if (t3r.bypass) begin
        out_pt <= polar_t'(t3r.word);
      end else begin
        out_pt.r <= (rng > fx_t'(32'h7fff_ffff)) ? range_t'(32'h7fff_ffff) : range_t'(rng);
        out_pt.p <= pitch_r;
        out_pt.y <= t3r.yaw;
      end
    end
  end
endmodule
