// tb_rendering_core -- drives one rendering core (8x8 sub-tile) with Gaussians carrying
// random mini-tile masks and checks:
//  * all 64 pixel colours against vanilla 3DGS blending in real arithmetic, applied only
//    to the mini-tiles each mask selects (unselected mini-tiles stay untouched);
//  * the stall output: raised whenever a feature FIFO is full, and seen at least once;
//  * the FIFO push count equals the number of mask bits sent;
//  * rate: Gaussians all aimed at one mini-tile are rendered one per 8 cycles;
//  * sub-tile early termination (all_done) with opaque Gaussians, and clear.
module tb_rendering_core;
  import flicker_pkg::*;
  import tb_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures <= 10) $display("FAIL: %s", msg); end
  endtask
  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic        clear, count_en, in_valid, in_ready, stall, all_done, idle;
  logic [15:0] sub_x, sub_y;
  ctu_out_t    in_data;
  logic [31:0] color [SUB_DIM*SUB_DIM][3];
  logic [31:0] stall_cycles, cycles, n_blend, n_fifo_push;
  rendering_core #(.FIFO_DEPTH(16)) dut (.*);

  real rc [64][3];
  real rt [64];
  bit  rdone [64];
  int  n_stall_seen = 0, mask_bits = 0;

  always @(posedge clk) if (rst_n) begin
    if (stall) n_stall_seen++;
    check(stall == (|{dut.g_ch[0].u_fifo.full, dut.g_ch[1].u_fifo.full,
                      dut.g_ch[2].u_fifo.full, dut.g_ch[3].u_fifo.full}), "stall follows FIFO full");
  end

  task automatic ref_reset();
    for (int j = 0; j < 64; j++) begin rt[j] = 1.0; rdone[j] = 0; for (int c = 0; c < 3; c++) rc[j][c] = 0.0; end
  endtask

  task automatic ref_blend(input ctu_out_t d);
    for (int j = 0; j < 64; j++) begin
      real e, al, tn;
      int x, y;
      x = j % 8; y = j / 8;
      if (!d.mask[(y / 4) * 2 + x / 4] || rdone[j]) continue;
      e = exact_e(real'(int'(sub_x) + x), real'(int'(sub_y) + y),
                  fp16_to_real(d.feat.mean_x), fp16_to_real(d.feat.mean_y), fp16_to_real(d.feat.conic_xx),
                  fp16_to_real(d.feat.conic_xy), fp16_to_real(d.feat.conic_yy));
      if (e < 0.0) continue;
      al = fp16_to_real(d.feat.opacity) * $exp(-e);
      if (al > 0.99) al = 0.99;
      if (al < 1.0 / 255.0) continue;
      tn = rt[j] * (1.0 - al);
      if (tn < 0.0001) begin rdone[j] = 1; continue; end
      rc[j][0] += fp16_to_real(d.feat.color_r) * al * rt[j];
      rc[j][1] += fp16_to_real(d.feat.color_g) * al * rt[j];
      rc[j][2] += fp16_to_real(d.feat.color_b) * al * rt[j];
      rt[j] = tn;
    end
  endtask

  function automatic ctu_out_t rand_in(input real omin, input logic [3:0] mask);
    ctu_out_t d;
    real s1, s2, th, cs, sn;
    s1 = 0.7 + real'($urandom_range(0, 3000)) / 1000.0;
    s2 = 0.7 + real'($urandom_range(0, 3000)) / 1000.0;
    th = real'($urandom_range(0, 6283)) / 1000.0;
    cs = $cos(th); sn = $sin(th);
    d.feat.mean_x   = real_to_fp16(real'(sub_x) - 2.0 + real'($urandom_range(0, 12000)) / 1000.0);
    d.feat.mean_y   = real_to_fp16(real'(sub_y) - 2.0 + real'($urandom_range(0, 12000)) / 1000.0);
    d.feat.conic_xx = real_to_fp16(cs*cs/(s1*s1) + sn*sn/(s2*s2));
    d.feat.conic_xy = real_to_fp16(cs*sn*(1.0/(s1*s1) - 1.0/(s2*s2)));
    d.feat.conic_yy = real_to_fp16(sn*sn/(s1*s1) + cs*cs/(s2*s2));
    d.feat.opacity  = real_to_fp16(omin + (0.99 - omin) * real'($urandom_range(0, 1000)) / 1000.0);
    d.feat.color_r  = real_to_fp16(real'($urandom_range(0, 1000)) / 1000.0);
    d.feat.color_g  = real_to_fp16(real'($urandom_range(0, 1000)) / 1000.0);
    d.feat.color_b  = real_to_fp16(real'($urandom_range(0, 1000)) / 1000.0);
    d.feat.spiky    = 1'($urandom);
    d.mask          = mask;
    return d;
  endfunction

  // sends n Gaussians; returns the cycle of the first and last acceptance
  task automatic send(input int n, input real omin, input int fixed_mask, output int t0, output int t1);
    for (int i = 0; i < n; i++) begin
      ctu_out_t d;
      logic [3:0] m;
      m = (fixed_mask >= 0) ? 4'(fixed_mask) : 4'($urandom_range(1, 15));
      d = rand_in(omin, m);
      @(negedge clk);
      in_valid = 1; in_data = d;
      #1;
      while (!in_ready) begin @(negedge clk); #1; end
      if (i == 0) t0 = $time / 10;
      t1 = $time / 10;
      mask_bits += $countones(m);
      ref_blend(d);
      @(posedge clk);
    end
    @(negedge clk);
    in_valid = 0;
    while (!idle) @(negedge clk);
  endtask

  task automatic compare(input string what);
    for (int j = 0; j < 64; j++)
      for (int c = 0; c < 3; c++)
        check(absr(real'(color[j][c]) / 65536.0 - rc[j][c]) < 0.03,
              $sformatf("%s pixel %0d ch %0d: %f want %f", what, j, c, real'(color[j][c]) / 65536.0, rc[j][c]));
  endtask

  task automatic new_tile();
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    ref_reset(); mask_bits = 0;
  endtask

  initial begin
    int t0, t1;
    rst_n = 0; clear = 0; count_en = 1; in_valid = 0; in_data = '0;
    sub_x = 16'd40; sub_y = 16'd24;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // random masks, translucent Gaussians
    for (int scene = 0; scene < 6; scene++) begin
      new_tile();
      sub_x = 16'($urandom_range(0, 60) * 8); sub_y = 16'($urandom_range(0, 60) * 8);
      send(40, 0.05, -1, t0, t1);
      compare("random masks");
      check(n_fifo_push == 32'(mask_bits), "FIFO pushes equal mask bits");
    end
    // single mini-tile: untouched mini-tiles stay black, one Gaussian per 8 cycles
    new_tile();
    send(30, 0.02, 4'b0100, t0, t1);
    compare("one mini-tile");
    for (int j = 0; j < 64; j++)
      if ((j / 8) / 4 != 1 || (j % 8) / 4 != 0)
        check(color[j][0] == 0 && color[j][1] == 0 && color[j][2] == 0, "unselected mini-tile untouched");
    // FIFO of 16 plus the two VRUs absorb the first Gaussians, then one per 8 cycles
    check(t1 - t0 <= (30 - 16) * 8 + 4 && t1 - t0 >= (30 - 19) * 8,
          $sformatf("one-mini-tile rate: %0d cycles for 30 Gaussians", t1 - t0));
    check(n_stall_seen > 0, "stall raised");
    // opaque Gaussians over every mini-tile: early termination
    new_tile();
    check(!all_done, "all_done cleared");
    for (int i = 0; i < 40 && !all_done; i++) begin
      ctu_out_t d;
      d = rand_in(0.99, 4'hF);
      d.feat.mean_x = real_to_fp16(real'(sub_x) + 3.5);
      d.feat.mean_y = real_to_fp16(real'(sub_y) + 3.5);
      d.feat.conic_xx = real_to_fp16(0.01); d.feat.conic_xy = 16'h0000; d.feat.conic_yy = real_to_fp16(0.01);
      @(negedge clk); in_valid = 1; in_data = d; #1;
      while (!in_ready) begin @(negedge clk); #1; end
      ref_blend(d);
      @(posedge clk);
      @(negedge clk); in_valid = 0;
      repeat (20) @(negedge clk);
    end
    check(all_done, "sub-tile early termination");
    compare("opaque");
    $display("stall cycles seen %0d", n_stall_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
