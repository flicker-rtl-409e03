// tb_aabb_test -- random Gaussian centres and radii around a tile; checks the sub-tile
// mask against a pixel-by-pixel overlap count.
module tb_aabb_test;
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

  fp16_t mean_x, mean_y;
  logic [15:0] radius, tile_x, tile_y;
  logic [3:0] mask;
  aabb_test dut (.*);

  initial begin
    for (int n = 0; n < 3000; n++) begin
      real mx, my;
      int cx, cy, r;
      logic [3:0] want;
      tile_x = 16'(16 * $urandom_range(0, 20));
      tile_y = 16'(16 * $urandom_range(0, 20));
      mx = real'(tile_x) - 12.0 + real'($urandom_range(0, 40000)) / 1000.0;
      my = real'(tile_y) - 12.0 + real'($urandom_range(0, 40000)) / 1000.0;
      mean_x = real_to_fp16(mx); mean_y = real_to_fp16(my);
      radius = 16'($urandom_range(0, 10));
      #1;
      cx = int'($floor(fp16_to_real(mean_x)));
      cy = int'($floor(fp16_to_real(mean_y)));
      r  = int'(radius);
      want = 0;
      for (int y = 0; y < 16; y++)
        for (int x = 0; x < 16; x++)
          if (int'(tile_x) + x >= cx - r && int'(tile_x) + x <= cx + r &&
              int'(tile_y) + y >= cy - r && int'(tile_y) + y <= cy + r)
            want[(y / 8) * 2 + x / 8] = 1;
      check(mask == want, $sformatf("mask %b want %b c=(%0d,%0d) r=%0d t=(%0d,%0d) m=%h", mask, want, cx, cy, r, tile_x, tile_y, mean_x));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
