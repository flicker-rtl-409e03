// tb_flicker_top -- end-to-end test of the whole accelerator at its default parameters
// (16-deep mini-tile FIFOs, 1024-entry sub-tile lists). A behavioural DRAM model holds
// one Gaussian array per preprocessing core and answers requests in order after a few
// cycles, accepting them with random back-pressure.
//
// Several 16x16 tiles are rendered, each in one CAT mode. After every tile the
// 256 pixel colours are read back and compared with a reference written in real
// arithmetic: culling, the sub-tile AABB test, depth sorting, the mini-tile test at
// the leader pixels (sparse or dense as the mode and the spiky test decide) and vanilla
// alpha blending with early termination. Mini-tiles where the leader-pixel test is too
// close to its threshold to predict are left out of the comparison, and so is a
// sub-tile whose list overflowed (which Gaussians were dropped depends on arbitration).
//
// Each mechanism the design has is counted and must happen at least once: culling,
// CTU skip (a Gaussian contributing to no mini-tile), dense and sparse testing inside
// one adaptive tile, a mode switch between tiles, FIFO stall, sub-tile early
// termination and sub-tile list overflow.
module tb_flicker_top;
  import flicker_pkg::*;
  import tb_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures <= 20) $display("FAIL: %s", msg); end
  endtask
  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------------ DUT
  logic        start, busy, done;
  logic [15:0] tile_x, tile_y, img_w, img_h;
  fp16_t       znear, zfar;
  cat_mode_e   mode;
  logic [31:0] base_addr [N_SUB];
  logic [31:0] num [N_SUB];
  logic        mem_req_valid [N_SUB];
  logic        mem_req_ready [N_SUB];
  logic [31:0] mem_req_addr [N_SUB];
  logic        mem_rsp_valid [N_SUB];
  dram_gauss_t mem_rsp_data [N_SUB];
  logic [3:0]  rd_x, rd_y;
  logic [31:0] rd_rgb [3];
  logic [31:0] st_loaded [N_SUB], st_culled [N_SUB], st_listed [N_SUB], st_tested [N_SUB];
  logic [31:0] st_dense [N_SUB], st_skipped [N_SUB], st_fifo_push [N_SUB], st_stall [N_SUB];
  logic [31:0] st_cycles [N_SUB], st_blend [N_SUB];
  logic [N_SUB-1:0] st_overflow, st_early_term;

  flicker_top dut (.*);

  // ------------------------------------------------------------------ DRAM model
  dram_gauss_t mem [N_SUB][$];
  localparam int LAT = 4;
  for (genvar k = 0; k < N_SUB; k++) begin : g_dram
    int unsigned pend_addr [$];
    int unsigned pend_time [$];
    int unsigned cyc = 0;
    always @(posedge clk) begin
      cyc++;
      if (mem_req_valid[k] && mem_req_ready[k]) begin
        pend_addr.push_back(mem_req_addr[k] - base_addr[k]);
        pend_time.push_back(cyc + LAT);
      end
    end
    always @(negedge clk) begin
      mem_req_ready[k] <= ($urandom_range(0, 99) < 80);
      if (pend_time.size() > 0 && pend_time[0] <= cyc) begin
        mem_rsp_valid[k] <= 1'b1;
        mem_rsp_data[k]  <= mem[k][pend_addr[0]];
        void'(pend_addr.pop_front());
        void'(pend_time.pop_front());
      end else begin
        mem_rsp_valid[k] <= 1'b0;
        mem_rsp_data[k]  <= '0;
      end
    end
  end

  // ------------------------------------------------------------------ scene generation
  typedef struct {
    dram_gauss_t g;
    bit          spiky;
  } gref_t;
  gref_t scene [$];

  function automatic gref_t make_gauss(input real cx, input real cy, input real spread,
                                       input real smin, input real smax, input bit spiky,
                                       input real omin, input int depth_idx);
    gref_t r;
    real s1, s2, th, cs, sn, mx, my;
    s1 = smin + (smax - smin) * real'($urandom_range(0, 1000)) / 1000.0;
    // smooth: axis ratio <= 2; spiky: axis ratio >= 4 (away from the threshold of 3)
    s2 = spiky ? s1 * (4.0 + 2.0 * real'($urandom_range(0, 1000)) / 1000.0)
               : s1 * (1.0 + real'($urandom_range(0, 1000)) / 1000.0);
    th = real'($urandom_range(0, 6283)) / 1000.0;
    cs = $cos(th); sn = $sin(th);
    mx = cx + spread * (real'($urandom_range(0, 2000)) / 1000.0 - 1.0);
    my = cy + spread * (real'($urandom_range(0, 2000)) / 1000.0 - 1.0);
    r.g.mean_x   = real_to_fp16(mx);
    r.g.mean_y   = real_to_fp16(my);
    r.g.conic_xx = real_to_fp16(cs*cs/(s1*s1) + sn*sn/(s2*s2));
    r.g.conic_xy = real_to_fp16(cs*sn*(1.0/(s1*s1) - 1.0/(s2*s2)));
    r.g.conic_yy = real_to_fp16(sn*sn/(s1*s1) + cs*cs/(s2*s2));
    r.g.opacity  = real_to_fp16(omin + (0.99 - omin) * real'($urandom_range(0, 1000)) / 1000.0);
    r.g.color_r  = real_to_fp16(real'($urandom_range(0, 1000)) / 1000.0);
    r.g.color_g  = real_to_fp16(real'($urandom_range(0, 1000)) / 1000.0);
    r.g.color_b  = real_to_fp16(real'($urandom_range(0, 1000)) / 1000.0);
    // distinct depths, so the sorted order does not depend on arbitration
    r.g.depth    = real_to_fp16(1.0 + real'(depth_idx) / 64.0);
    r.g.radius   = 16'($rtoi($ceil(3.0 * s2)) + 1);
    r.spiky      = spiky;
    return r;
  endfunction

  // ------------------------------------------------------------------ reference
  real rc [16][16][3];
  real rt [16][16];
  bit  rdone [16][16];
  bit  unsure [16][16];

  function automatic bit ref_dense(input cat_mode_e m, input bit spiky);
    case (m)
      MODE_SMOOTH_FOCUSED: return !spiky;
      MODE_SPIKY_FOCUSED:  return spiky;
      MODE_UNIFORM_DENSE:  return 1;
      default:             return 0;
    endcase
  endfunction

  function automatic bit ref_visible(input dram_gauss_t g);
    int cx, cy, r;
    real d;
    cx = $rtoi($floor(fp16_to_real(g.mean_x)));
    cy = $rtoi($floor(fp16_to_real(g.mean_y)));
    r  = int'(g.radius);
    d  = fp16_to_real(g.depth);
    return d > fp16_to_real(znear) && d < fp16_to_real(zfar) &&
           cx + r >= 0 && cx - r < int'(img_w) && cy + r >= 0 && cy - r < int'(img_h);
  endfunction

  function automatic bit ref_aabb(input dram_gauss_t g, input int s);
    int cx, cy, r, x0, y0;
    cx = $rtoi($floor(fp16_to_real(g.mean_x)));
    cy = $rtoi($floor(fp16_to_real(g.mean_y)));
    r  = int'(g.radius);
    x0 = int'(tile_x) + 8 * (s % 2);
    y0 = int'(tile_y) + 8 * (s / 2);
    return cx + r >= x0 && cx - r <= x0 + 7 && cy + r >= y0 && cy - r <= y0 + 7;
  endfunction

  int exp_skip;   // Gaussians that reach a CTU but fail every mini-tile for sure

  task automatic reference();
    int order [$];
    for (int y = 0; y < 16; y++)
      for (int x = 0; x < 16; x++) begin
        rt[y][x] = 1.0; rdone[y][x] = 0; unsure[y][x] = 0;
        for (int c = 0; c < 3; c++) rc[y][x][c] = 0.0;
      end
    for (int i = 0; i < scene.size(); i++) order.push_back(i);
    order.sort() with (fp16_to_real(scene[item].g.depth));
    exp_skip = 0;
    foreach (order[oi]) begin
      dram_gauss_t g;
      real mx, my, a, b, c, lnv;
      g = scene[order[oi]].g;
      if (!ref_visible(g)) continue;
      mx = fp16_to_real(g.mean_x); my = fp16_to_real(g.mean_y);
      a = fp16_to_real(g.conic_xx); b = fp16_to_real(g.conic_xy); c = fp16_to_real(g.conic_yy);
      lnv = $ln(255.0 * fp16_to_real(g.opacity));
      for (int s = 0; s < 4; s++) begin
        bit any_maybe;
        if (!ref_aabb(g, s)) continue;
        any_maybe = 0;
        for (int m = 0; m < 4; m++) begin
          int ox, oy, np;
          int lx [4], ly [4];
          bit must1, may1;
          ox = 8 * (s % 2) + 4 * (m % 2);     // offsets inside the tile
          oy = 8 * (s / 2) + 4 * (m / 2);
          if (ref_dense(mode, scene[order[oi]].spiky)) begin
            lx = '{ox, ox + 3, ox, ox + 3}; ly = '{oy, oy, oy + 3, oy + 3}; np = 4;
          end else begin
            lx = '{ox, ox + 3, 0, 0}; ly = '{oy, oy + 3, 0, 0}; np = 2;
          end
          must1 = 0; may1 = 0;
          for (int p = 0; p < np; p++) begin
            real e;
            e = cat_e(real'(int'(tile_x) + lx[p]), real'(int'(tile_y) + ly[p]), mx, my, a, b, c);
            if (e < lnv - 0.02) must1 = 1;
            if (e <= lnv + 0.02) may1 = 1;
          end
          if (may1) any_maybe = 1;
          if (may1 && !must1) begin
            for (int yy = 0; yy < 4; yy++)
              for (int xx = 0; xx < 4; xx++) unsure[oy + yy][ox + xx] = 1;
          end
          if (!must1) continue;
          for (int yy = 0; yy < 4; yy++)
            for (int xx = 0; xx < 4; xx++) begin
              int px, py;
              real e, al, tn;
              px = ox + xx; py = oy + yy;
              if (rdone[py][px]) continue;
              e = exact_e(real'(int'(tile_x) + px), real'(int'(tile_y) + py), mx, my, a, b, c);
              if (e < 0.0) continue;
              al = fp16_to_real(g.opacity) * $exp(-e);
              if (al > 0.99) al = 0.99;
              if (al < 1.0 / 255.0) continue;
              tn = rt[py][px] * (1.0 - al);
              if (tn < 0.0001) begin rdone[py][px] = 1; continue; end
              rc[py][px][0] += fp16_to_real(g.color_r) * al * rt[py][px];
              rc[py][px][1] += fp16_to_real(g.color_g) * al * rt[py][px];
              rc[py][px][2] += fp16_to_real(g.color_b) * al * rt[py][px];
              rt[py][px] = tn;
            end
        end
        if (!any_maybe) exp_skip++;
      end
    end
  endtask

  // ------------------------------------------------------------------ mechanism counters
  int n_cull = 0, n_skip = 0, n_stall = 0, n_early = 0, n_overflow = 0;
  int n_adaptive_mixed = 0, n_modes_used = 0, n_dense_total = 0, n_sparse_total = 0;
  int n_pix_checked = 0;
  bit mode_used [4];
  // the CTU counters run from reset; the rest restart with every tile
  int prev_tested [4] = '{0, 0, 0, 0};
  int prev_dense [4] = '{0, 0, 0, 0};
  int prev_skip [4] = '{0, 0, 0, 0};
  int skip_tile;

  task automatic run_tile(input int tx, input int ty, input cat_mode_e md, input bit expect_overflow);
    int cyc, tested, dense;
    bit ovf_lane [4];
    tile_x = 16'(tx); tile_y = 16'(ty); mode = md;
    for (int k = 0; k < N_SUB; k++) mem[k].delete();
    foreach (scene[i]) mem[i % N_SUB].push_back(scene[i].g);
    for (int k = 0; k < N_SUB; k++) begin
      base_addr[k] = 32'h1000 * (k + 1);
      num[k] = 32'(mem[k].size());
    end
    reference();
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    check(busy, "busy after start");
    cyc = 0;
    while (!done) begin @(negedge clk); cyc++; end
    check(!busy, "idle when done");
    // pixels
    for (int s = 0; s < 4; s++) ovf_lane[s] = st_overflow[s];
    for (int y = 0; y < 16; y++)
      for (int x = 0; x < 16; x++) begin
        rd_x = 4'(x); rd_y = 4'(y);
        #1;
        if (unsure[y][x] || ovf_lane[(y / 8) * 2 + x / 8]) continue;
        n_pix_checked++;
        for (int c = 0; c < 3; c++)
          check(absr(real'(rd_rgb[c]) / 65536.0 - rc[y][x][c]) < 0.03,
                $sformatf("tile (%0d,%0d) mode %0d pixel (%0d,%0d) ch %0d: %f want %f",
                          tx, ty, md, x, y, c, real'(rd_rgb[c]) / 65536.0, rc[y][x][c]));
      end
    // statistics
    tested = 0; dense = 0; skip_tile = 0;
    for (int s = 0; s < 4; s++) begin
      n_cull  += int'(st_culled[s]);
      skip_tile += int'(st_skipped[s]) - prev_skip[s];
      tested  += int'(st_tested[s]) - prev_tested[s];
      dense   += int'(st_dense[s]) - prev_dense[s];
      prev_skip[s] = int'(st_skipped[s]);
      prev_tested[s] = int'(st_tested[s]);
      prev_dense[s] = int'(st_dense[s]);
      n_stall += (st_stall[s] != 0);
      n_early += st_early_term[s];
      n_overflow += st_overflow[s];
      check(st_loaded[s] == num[s], "every record loaded");
      if (!st_overflow[s])
        check(st_listed[s] <= 32'(BUF_DEPTH_TB), "list within buffer");
    end
    n_skip += skip_tile;
    if (!expect_overflow) begin
      check(st_overflow == '0, "no overflow expected");
      check(tested > 0, "Gaussians tested");
      if (st_early_term == '0)   // an early-terminated list is not tested to its end
        check(skip_tile >= exp_skip, $sformatf("CTU skips %0d, at least %0d expected", skip_tile, exp_skip));
    end else begin
      check(st_overflow != '0, "overflow expected");
    end
    n_dense_total  += dense;
    n_sparse_total += tested - dense;
    if (md == MODE_SMOOTH_FOCUSED && dense > 0 && dense < tested) n_adaptive_mixed++;
    if (tested > 0 && !mode_used[md]) begin mode_used[md] = 1; n_modes_used++; end
    $display("tile (%0d,%0d) mode %0d: %0d cycles, %0d Gaussians, tested %0d dense %0d skipped %0d (>= %0d) stall %0d %0d %0d %0d early %b ovf %b",
             tx, ty, md, cyc, scene.size(), tested, dense,
             skip_tile, exp_skip,
             st_stall[0], st_stall[1], st_stall[2], st_stall[3], st_early_term, st_overflow);
  endtask

  localparam int BUF_DEPTH_TB = 1024;

  initial begin
    rst_n = 0; start = 0; tile_x = 0; tile_y = 0; mode = MODE_SMOOTH_FOCUSED;
    img_w = 16'd256; img_h = 16'd128; rd_x = 0; rd_y = 0;
    znear = real_to_fp16(0.2); zfar = real_to_fp16(100.0);
    for (int k = 0; k < N_SUB; k++) begin base_addr[k] = '0; num[k] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1) translucent mixed scene, adaptive mode, with culled and far-away Gaussians
    scene.delete();
    for (int i = 0; i < 90; i++)
      scene.push_back(make_gauss(72.0, 40.0, 10.0, 0.6, 2.5, ($urandom_range(0, 99) < 40), 0.05, i));
    for (int i = 0; i < 10; i++) begin   // behind the far plane or off screen
      gref_t r;
      r = make_gauss(72.0, 40.0, 8.0, 0.6, 2.0, 0, 0.3, 200 + i);
      if (i % 2 == 0) r.g.depth = real_to_fp16(150.0);
      else r.g.mean_x = real_to_fp16(-40.0);
      scene.push_back(r);
    end
    run_tile(64, 32, MODE_SMOOTH_FOCUSED, 0);

    // 2) the same scene in the other three modes (mode switches)
    run_tile(64, 32, MODE_SPIKY_FOCUSED, 0);
    run_tile(64, 32, MODE_UNIFORM_DENSE, 0);
    run_tile(64, 32, MODE_UNIFORM_SPARSE, 0);

    // 3) opaque front layer: every sub-tile finishes early
    scene.delete();
    for (int i = 0; i < 24; i++)
      scene.push_back(make_gauss(24.0, 24.0, 10.0, 4.0, 6.0, 0, 0.97, i));
    for (int i = 0; i < 200; i++)
      scene.push_back(make_gauss(24.0, 24.0, 10.0, 0.6, 2.5, ($urandom_range(0, 99) < 30), 0.1, 100 + i));
    run_tile(16, 16, MODE_SMOOTH_FOCUSED, 0);

    // 4) more Gaussians in one sub-tile than its list holds
    scene.delete();
    for (int i = 0; i < BUF_DEPTH_TB + 40; i++)
      scene.push_back(make_gauss(132.0, 68.0, 1.5, 0.4, 0.6, 0, 0.05, i % 3000));
    for (int i = 0; i < 20; i++)
      scene.push_back(make_gauss(148.0, 76.0, 2.0, 0.6, 1.5, 0, 0.3, 3000 + i));
    run_tile(128, 64, MODE_UNIFORM_SPARSE, 1);

    $display("mechanisms: culled %0d skipped %0d stall-lanes %0d early %0d overflow %0d adaptive-mixed %0d modes %0d dense %0d sparse %0d pixels-checked %0d",
             n_cull, n_skip, n_stall, n_early, n_overflow, n_adaptive_mixed, n_modes_used,
             n_dense_total, n_sparse_total, n_pix_checked);
    check(n_cull > 0, "culling happened");
    check(n_skip > 0, "CTU skip happened");
    check(n_stall > 0, "FIFO stall happened");
    check(n_early > 0, "early termination happened");
    check(n_overflow > 0, "list overflow happened");
    check(n_adaptive_mixed > 0, "adaptive tile used both dense and sparse testing");
    check(n_modes_used == 4, "all four modes used");
    check(n_pix_checked > 500, "enough pixels compared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
