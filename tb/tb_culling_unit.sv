// tb_culling_unit -- random depths and screen positions; checks the near/far test and
// the overlap of the 3-sigma square with the image.
module tb_culling_unit;
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

  dram_gauss_t g;
  fp16_t znear, zfar;
  logic [15:0] img_w, img_h;
  logic visible;
  culling_unit dut (.*);

  initial begin
    int nv = 0, ni = 0;
    img_w = 16'd320; img_h = 16'd240;
    znear = real_to_fp16(0.2); zfar = real_to_fp16(100.0);
    for (int n = 0; n < 3000; n++) begin
      real z, mx, my;
      int cx, cy, r;
      bit want;
      g = dram_gauss_t'({$urandom, $urandom, $urandom, $urandom, $urandom, $urandom});
      z  = -5.0 + real'($urandom_range(0, 120000)) / 1000.0;
      mx = -60.0 + real'($urandom_range(0, 440000)) / 1000.0;
      my = -60.0 + real'($urandom_range(0, 360000)) / 1000.0;
      g.depth = real_to_fp16(z); g.mean_x = real_to_fp16(mx); g.mean_y = real_to_fp16(my);
      g.radius = 16'($urandom_range(0, 50));
      #1;
      z  = fp16_to_real(g.depth);
      cx = int'($floor(fp16_to_real(g.mean_x)));
      cy = int'($floor(fp16_to_real(g.mean_y)));
      r  = int'(g.radius);
      want = (z > fp16_to_real(znear)) && (z < fp16_to_real(zfar)) &&
             (cx + r >= 0) && (cx - r < 320) && (cy + r >= 0) && (cy - r < 240);
      check(visible == want, $sformatf("z %f c (%0d,%0d) r %0d", z, cx, cy, r));
      if (want) nv++; else ni++;
    end
    check(nv > 100 && ni > 100, "both outcomes seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
