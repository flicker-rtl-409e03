// tb_flicker_pkg -- checks the number-format helpers of flicker_pkg against the real-
// arithmetic reference of tb_pkg: FP16<->fixed conversion, FP16 subtraction,
// FP16->FP8 conversion and the exact three-operand products.
module tb_flicker_pkg;
  import flicker_pkg::*;
  import tb_pkg::*;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 10) $display("FAIL: %s", msg);
    end
  endtask

  function automatic real rnd(input real lo, input real hi);
    return lo + (hi - lo) * real'($urandom_range(0, 1000000)) / 1000000.0;
  endfunction

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // int -> fp16 exact
    for (int i = 0; i < 2048; i += 7)
      check(fp16_to_real(int_to_fp16(16'(i))) == real'(i), $sformatf("int_to_fp16(%0d)", i));
    for (int n = 0; n < 2000; n++) begin
      real a, b, d, want;
      logic [15:0] ha, hb;
      ha = real_to_fp16(rnd(-300.0, 300.0));
      hb = real_to_fp16(rnd(-300.0, 300.0));
      a  = fp16_to_real(ha);
      b  = fp16_to_real(hb);
      // subtraction: exact difference truncated to fp16
      want = q_fp16(a - b);
      d    = fp16_to_real(fp16_sub(ha, hb));
      check(d == want, $sformatf("fp16_sub %f - %f = %f, want %f", a, b, d, want));
      // fp16 -> fp8
      check(fp8_to_real(fp16_to_fp8(ha)) == q_fp8(a),
            $sformatf("fp16_to_fp8(%f) = %f want %f", a, fp8_to_real(fp16_to_fp8(ha)), q_fp8(a)));
      // triple product in Q.16
      begin
        logic [7:0] fa, fb, fc;
        real p, got;
        fa = fp16_to_fp8(ha);
        fb = fp16_to_fp8(hb);
        fc = fp16_to_fp8(real_to_fp16(rnd(-4.0, 4.0)));
        p   = 0.5 * fp8_to_real(fa) * fp8_to_real(fb) * fp8_to_real(fc);
        got = real'(mul3_acc(dec_fp8(fa), dec_fp8(fb), dec_fp8(fc), 1'b1)) / 65536.0;
        check(absr(got - p) < pow2(-16) + 1e-12, $sformatf("mul3 fp8 %f want %f", got, p));
        p   = fp16_to_real(ha) * fp16_to_real(hb) * 0.75;
        got = real'(mul3_acc(dec_fp16(ha), dec_fp16(hb), dec_fp16(16'h3A00), 1'b0)) / 65536.0;
        check(absr(got - p) < pow2(-16) + 1e-12, $sformatf("mul3 fp16 %f want %f", got, p));
      end
    end
    // saturation and subnormals
    check(fp16_to_fp8(16'h7BFF) == 8'h7E, "fp8 saturates at 448");
    check(fp8_to_real(fp16_to_fp8(real_to_fp16(0.005))) == q_fp8(0.005), "fp8 subnormal");
    check(fix_to_fp16(fix24_t'(64'sd1) <<< 50) == 16'h7BFF, "fp16 saturates");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
