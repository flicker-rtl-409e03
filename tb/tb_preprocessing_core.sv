// tb_preprocessing_core -- runs one preprocessing core against a behavioural DRAM model
// (in-order responses after a fixed latency, random request back-pressure) and checks
// every record that comes out against a reference worked out in the testbench:
//  * culled records (depth outside the near/far planes, or off screen) and records whose
//    sub-tile mask is empty are dropped, and n_culled counts them;
//  * survivors keep their order and features, carry the depth, the spiky flag
//    (axis ratio 3 or more) and the four-bit sub-tile AABB mask;
//  * with no back-pressure the record rate is bounded only by the prefetch depth against
//    the DRAM round trip (the paper gives no rate for this stage).
module tb_preprocessing_core;
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
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic        start, mem_req_valid, mem_req_ready, mem_rsp_valid, out_valid, out_ready, done;
  logic [31:0] base_addr, num, mem_req_addr, n_loaded, n_culled;
  logic [15:0] tile_x, tile_y, img_w, img_h;
  fp16_t       znear, zfar;
  dram_gauss_t mem_rsp_data;
  pre_out_t    out_data;
  preprocessing_core #(.ADDR_W(32)) dut (.*);

  // DRAM model
  dram_gauss_t mem [$];
  int unsigned pend_addr [$], pend_time [$];
  int unsigned cyc = 0;
  int ready_pct = 100;
  always @(posedge clk) begin
    cyc++;
    if (mem_req_valid && mem_req_ready) begin
      pend_addr.push_back(mem_req_addr - base_addr);
      pend_time.push_back(cyc + 3);
    end
  end
  always @(negedge clk) begin
    mem_req_ready <= ($urandom_range(0, 99) < ready_pct);
    if (pend_time.size() > 0 && pend_time[0] <= cyc) begin
      mem_rsp_valid <= 1'b1;
      mem_rsp_data  <= mem[pend_addr[0]];
      void'(pend_addr.pop_front()); void'(pend_time.pop_front());
    end else begin
      mem_rsp_valid <= 1'b0;
      mem_rsp_data  <= '0;
    end
  end

  // expected outputs
  pre_out_t exp_q [$];
  int n_exp_cull;
  int n_out = 0, t_first = 0, t_last = 0;

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    check(exp_q.size() > 0, "unexpected record");
    if (exp_q.size() > 0) begin
      check(out_data == exp_q[0], $sformatf("record %0d: mask %b/%b spiky %b/%b", n_out,
            out_data.mask, exp_q[0].mask, out_data.feat.spiky, exp_q[0].feat.spiky));
      void'(exp_q.pop_front());
    end
    if (n_out == 0) t_first = cyc;
    t_last = cyc;
    n_out++;
  end

  function automatic dram_gauss_t rand_gauss();
    dram_gauss_t g;
    real s1, s2, th, cs, sn;
    s1 = 0.5 + real'($urandom_range(0, 3000)) / 1000.0;
    s2 = s1 * (($urandom_range(0, 1)) ? (1.0 + real'($urandom_range(0, 1500)) / 1000.0)
                                      : (3.5 + real'($urandom_range(0, 3000)) / 1000.0));
    th = real'($urandom_range(0, 6283)) / 1000.0;
    cs = $cos(th); sn = $sin(th);
    g.mean_x   = real_to_fp16(-20.0 + real'($urandom_range(0, 300000)) / 1000.0);
    g.mean_y   = real_to_fp16(-20.0 + real'($urandom_range(0, 200000)) / 1000.0);
    g.conic_xx = real_to_fp16(cs*cs/(s1*s1) + sn*sn/(s2*s2));
    g.conic_xy = real_to_fp16(cs*sn*(1.0/(s1*s1) - 1.0/(s2*s2)));
    g.conic_yy = real_to_fp16(sn*sn/(s1*s1) + cs*cs/(s2*s2));
    g.opacity  = real_to_fp16(real'($urandom_range(1, 1000)) / 1000.0);
    g.color_r  = real_to_fp16(real'($urandom_range(0, 1000)) / 1000.0);
    g.color_g  = real_to_fp16(real'($urandom_range(0, 1000)) / 1000.0);
    g.color_b  = real_to_fp16(real'($urandom_range(0, 1000)) / 1000.0);
    g.depth    = real_to_fp16(real'($urandom_range(0, 120000)) / 1000.0);
    g.radius   = 16'($rtoi($ceil(3.0 * s2)));
    return g;
  endfunction

  function automatic void expect_rec(input dram_gauss_t g);
    int cx, cy, r;
    real d, a, b, c, tr, det;
    logic [3:0] mask;
    pre_out_t o;
    cx = $rtoi($floor(fp16_to_real(g.mean_x)));
    cy = $rtoi($floor(fp16_to_real(g.mean_y)));
    r  = int'(g.radius);
    d  = fp16_to_real(g.depth);
    if (!(d > fp16_to_real(znear) && d < fp16_to_real(zfar) &&
          cx + r >= 0 && cx - r < int'(img_w) && cy + r >= 0 && cy - r < int'(img_h))) begin
      n_exp_cull++;
      return;
    end
    for (int s = 0; s < 4; s++) begin
      int x0, y0;
      x0 = int'(tile_x) + 8 * (s % 2); y0 = int'(tile_y) + 8 * (s / 2);
      mask[s] = cx + r >= x0 && cx - r <= x0 + 7 && cy + r >= y0 && cy - r <= y0 + 7;
    end
    if (mask == 0) begin n_exp_cull++; return; end
    a = fp16_to_real(g.conic_xx); b = fp16_to_real(g.conic_xy); c = fp16_to_real(g.conic_yy);
    tr = a + c; det = a * c - b * b;
    o.feat.mean_x = g.mean_x; o.feat.mean_y = g.mean_y;
    o.feat.conic_xx = g.conic_xx; o.feat.conic_xy = g.conic_xy; o.feat.conic_yy = g.conic_yy;
    o.feat.opacity = g.opacity;
    o.feat.color_r = g.color_r; o.feat.color_g = g.color_g; o.feat.color_b = g.color_b;
    o.feat.spiky = (9.0 * tr * tr >= 100.0 * det);
    o.depth = g.depth;
    o.mask = mask;
    exp_q.push_back(o);
  endfunction

  task automatic run(input int n, input int rpct, input int opct);
    mem.delete(); exp_q.delete(); n_exp_cull = 0; n_out = 0;
    ready_pct = rpct;
    for (int i = 0; i < n; i++) begin
      mem.push_back(rand_gauss());
      expect_rec(mem[i]);
    end
    base_addr = 32'($urandom_range(0, 65535)); num = 32'(n);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) begin
      @(negedge clk);
      out_ready = ($urandom_range(0, 99) < opct);
    end
    @(negedge clk);
    check(exp_q.size() == 0, $sformatf("%0d records missing", exp_q.size()));
    check(n_loaded == num, "n_loaded");
    check(int'(n_culled) == n_exp_cull, $sformatf("n_culled %0d want %0d", n_culled, n_exp_cull));
  endtask

  initial begin
    rst_n = 0; start = 0; out_ready = 1; base_addr = 0; num = 0;
    tile_x = 16'd96; tile_y = 16'd48; img_w = 16'd256; img_h = 16'd160;
    znear = real_to_fp16(0.2); zfar = real_to_fp16(100.0);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 10; k++) begin
      tile_x = 16'($urandom_range(0, 15) * 16); tile_y = 16'($urandom_range(0, 9) * 16);
      run(300, 70, 70);
    end
    // rate: everything inside the tile, no back-pressure
    tile_x = 16'd96; tile_y = 16'd48;
    mem.delete(); exp_q.delete(); n_exp_cull = 0; n_out = 0; ready_pct = 100;
    for (int i = 0; i < 200; i++) begin
      dram_gauss_t g;
      g = rand_gauss();
      g.mean_x = real_to_fp16(104.0); g.mean_y = real_to_fp16(56.0); g.depth = real_to_fp16(5.0);
      mem.push_back(g); expect_rec(g);
    end
    base_addr = 0; num = 200; out_ready = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    check(n_out == 200, "all kept");
    // four prefetch slots against a six-cycle DRAM round trip: two records per three cycles
    check(t_last - t_first <= 200 * 3 / 2, $sformatf("record rate: %0d cycles for 200", t_last - t_first));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
