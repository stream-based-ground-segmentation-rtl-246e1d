// tb_range_repair: self-checking test of the column-wise average repair.
//
// Random 11x1 windows, with missing values (0), out-of-frame positions and
// ranges drawn around a common distance so that some upper/lower pairs are
// within the threshold and some are not. The expected result is computed
// in real arithmetic: for an invalid centre, the mean of both members of
// every qualifying pair; otherwise the centre itself.
//
// The pair rule and 5x5 pairs follow the hardware description; the
// reciprocal precision (32 fraction bits, checked to 1e-5 m) is this design's.
module tb_range_repair;
  import gs_pkg::*;
  localparam int STEP = 5, N = 11, TRIALS = 3000;
  localparam real S23 = 8388608.0;

  range_t win_r [N];
  logic   win_ok [N];
  range_t thresh, r_out;
  logic   repaired;
  int checks = 0, failures = 0, nrep = 0, iv;
  real base, sum, expv, got;
  int cnt;

  range_repair #(.STEP(STEP)) dut (.win_r, .win_ok, .thresh, .r_out, .repaired);

  initial begin
    for (int t = 0; t < TRIALS; t++) begin
      iv = $urandom_range(1000, 200000); base = $itor(iv) / 1000.0;
      iv = $urandom_range(100, 3000);    thresh = range_t'($rtoi($itor(iv) / 1000.0 * S23));
      for (int i = 0; i < N; i++) begin
        iv = $urandom_range(0, 4000);
        win_r[i] = range_t'($rtoi((base + $itor(iv - 2000) / 1000.0) * S23));
        iv = $urandom_range(0, 9);
        if (iv < 2) win_r[i] = '0;
        iv = $urandom_range(0, 19);
        win_ok[i] = (iv != 0);
      end
      iv = $urandom_range(0, 3);
      if (iv != 0) win_r[STEP] = '0;
      win_ok[STEP] = 1'b1;
      #1;
      sum = 0.0; cnt = 0;
      for (int u = 1; u <= STEP; u++)
        for (int l = 1; l <= STEP; l++) begin
          automatic range_t a = win_r[STEP + u];
          automatic range_t b = win_r[STEP - l];
          automatic longint d = longint'(a) - longint'(b);
          if (d < 0) d = -d;
          if (win_ok[STEP + u] && win_ok[STEP - l] && a > 0 && b > 0 && d < longint'(thresh)) begin
            sum += $itor(a) + $itor(b);
            cnt++;
          end
        end
      if (win_r[STEP] == 0 && cnt > 0) expv = sum / (2.0 * cnt) / S23;
      else expv = $itor(win_r[STEP]) / S23;
      got = $itor(r_out) / S23;
      checks += 2;
      if (repaired !== (win_r[STEP] == 0 && cnt > 0)) begin
        failures++; $display("FAIL repaired flag trial %0d", t);
      end
      if (got - expv > 1e-5 || expv - got > 1e-5) begin
        failures++; $display("FAIL trial %0d: %f expected %f (pairs %0d)", t, got, expv, cnt);
      end
      if (repaired) nrep++;
    end
    checks++;
    if (nrep < TRIALS / 4) begin failures++; $display("FAIL too few repairs %0d", nrep); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
