// tb_spiky_test -- builds conics from known axis lengths and rotations and checks the
// spiky flag against the axis ratio computed in real arithmetic (ratios within 2% of
// the threshold 3 are skipped as ambiguous after FP16 rounding).
module tb_spiky_test;
  import flicker_pkg::*;
  import tb_pkg::*;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures <= 10) $display("FAIL: %s", msg); end
  endtask
  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  fp16_t conic_xx, conic_xy, conic_yy;
  logic spiky;
  spiky_test dut (.*);

  initial begin
    int n_spiky = 0, n_smooth = 0;
    for (int n = 0; n < 3000; n++) begin
      real s1, s2, th, c, s, a, b, d, l1, l2, tr, det, ratio;
      s1 = 0.5 + real'($urandom_range(0, 10000)) / 1000.0;    // sigma of axis 1
      s2 = s1 / (1.0 + real'($urandom_range(0, 8000)) / 1000.0);
      th = real'($urandom_range(0, 6283)) / 1000.0;
      c = $cos(th); s = $sin(th);
      // conic = R diag(1/s1^2, 1/s2^2) R^T
      a = c*c/(s1*s1) + s*s/(s2*s2);
      b = c*s*(1.0/(s1*s1) - 1.0/(s2*s2));
      d = s*s/(s1*s1) + c*c/(s2*s2);
      conic_xx = real_to_fp16(a); conic_xy = real_to_fp16(b); conic_yy = real_to_fp16(d);
      #1;
      // axis ratio from the quantised conic
      a = fp16_to_real(conic_xx); b = fp16_to_real(conic_xy); d = fp16_to_real(conic_yy);
      tr = a + d; det = a*d - b*b;
      if (det <= 0.0) begin check(spiky, "degenerate is spiky"); continue; end
      l1 = tr/2.0 + $sqrt(tr*tr/4.0 - det);
      l2 = tr/2.0 - $sqrt(tr*tr/4.0 - det);
      ratio = $sqrt(l1 / l2);
      if (absr(ratio - 3.0) < 0.06) continue;
      check(spiky == (ratio >= 3.0), $sformatf("ratio %f spiky %b", ratio, spiky));
      if (ratio >= 3.0) n_spiky++; else n_smooth++;
    end
    check(n_spiky > 100 && n_smooth > 100, "both classes seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
