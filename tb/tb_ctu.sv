// tb_ctu -- drives sorted Gaussians into the CTU in all four sampling modes, with
// random stalls and random back-pressure, and checks:
//  * each output mask against the Mini-Tile CAT evaluated in real arithmetic (a mini-
//    tile bit must be 1 if a leader pixel clearly passes, 0 if all clearly fail);
//  * Gaussians contributing nowhere are dropped, all others arrive, in order;
//  * intake is refused whenever stall is high, and nothing is lost during stalls;
//  * throughput: one Gaussian per cycle with sparse sampling, one per two with dense.
module tb_ctu;
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

  cat_mode_e   mode;
  logic [15:0] sub_x, sub_y, img_w, img_h;
  logic in_valid, in_ready, stall, out_valid, out_ready, busy;
  feat_t in_feat;
  ctu_out_t out_data;
  logic [31:0] n_tested, n_dense, n_dropped, n_stall;
  ctu #(.FIFO_DEPTH(8)) dut (.*);

  typedef struct { feat_t f; logic [3:0] must1; logic [3:0] must0; } exp_t;
  exp_t q [$];
  int n_out = 0, n_stall_seen = 0, n_drop_expected = 0;

  function automatic bit is_dense(input cat_mode_e m, input logic spiky);
    case (m)
      MODE_SMOOTH_FOCUSED: return !spiky;
      MODE_SPIKY_FOCUSED:  return spiky;
      MODE_UNIFORM_DENSE:  return 1;
      default:             return 0;
    endcase
  endfunction

  function automatic exp_t reference(input feat_t f);
    exp_t x;
    real mx, my, a, b, c, lnv;
    x.f = f; x.must1 = 0; x.must0 = 4'hF;
    mx = fp16_to_real(f.mean_x); my = fp16_to_real(f.mean_y);
    a = fp16_to_real(f.conic_xx); b = fp16_to_real(f.conic_xy); c = fp16_to_real(f.conic_yy);
    lnv = $ln(255.0 * fp16_to_real(f.opacity));
    for (int m = 0; m < 4; m++) begin
      int ox, oy, np;
      int lx[4], ly[4];
      ox = int'(sub_x) + 4 * (m % 2); oy = int'(sub_y) + 4 * (m / 2);
      if (is_dense(mode, f.spiky)) begin
        lx = '{ox, ox + 3, ox, ox + 3}; ly = '{oy, oy, oy + 3, oy + 3}; np = 4;
      end else begin
        lx = '{ox, ox + 3, 0, 0}; ly = '{oy, oy + 3, 0, 0}; np = 2;
      end
      for (int p = 0; p < np; p++) begin
        real e;
        if (lx[p] >= int'(img_w) || ly[p] >= int'(img_h)) continue;
        e = cat_e(real'(lx[p]), real'(ly[p]), mx, my, a, b, c);
        if (e < lnv - 0.02) x.must1[m] = 1;
        if (e <= lnv + 0.02) x.must0[m] = 0;
      end
    end
    return x;
  endfunction

  // output checker
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    bit found;
    found = 0;
    while (q.size() > 0 && !found) begin
      exp_t x;
      x = q.pop_front();
      if (x.f == out_data.feat) begin
        found = 1;
        check((out_data.mask & x.must1) == x.must1 && (out_data.mask & x.must0) == 0,
              $sformatf("mask %b must1 %b must0 %b", out_data.mask, x.must1, x.must0));
      end else begin
        check(x.must1 == 0, "contributing Gaussian lost or reordered");
        if (x.must0 == 4'hF) n_drop_expected++;
      end
    end
    check(found, "unexpected output");
    n_out++;
  end

  function automatic feat_t rand_gauss();
    feat_t f;
    real s1, s2, th, cs, sn, mx, my;
    s1 = 0.4 + real'($urandom_range(0, 5000)) / 1000.0;
    s2 = 0.4 + real'($urandom_range(0, 5000)) / 1000.0;
    th = real'($urandom_range(0, 6283)) / 1000.0;
    cs = $cos(th); sn = $sin(th);
    mx = real'(sub_x) - 8.0 + real'($urandom_range(0, 24000)) / 1000.0;
    my = real'(sub_y) - 8.0 + real'($urandom_range(0, 24000)) / 1000.0;
    f.mean_x   = real_to_fp16(mx);
    f.mean_y   = real_to_fp16(my);
    f.conic_xx = real_to_fp16(cs*cs/(s1*s1) + sn*sn/(s2*s2));
    f.conic_xy = real_to_fp16(cs*sn*(1.0/(s1*s1) - 1.0/(s2*s2)));
    f.conic_yy = real_to_fp16(sn*sn/(s1*s1) + cs*cs/(s2*s2));
    f.opacity  = real_to_fp16(0.01 + real'($urandom_range(0, 990)) / 1000.0);
    f.color_r  = 16'($urandom); f.color_g = 16'($urandom); f.color_b = 16'($urandom);
    f.spiky    = 1'($urandom);
    return f;
  endfunction

  // Drive n Gaussians; returns the cycles from first offer to last acceptance.
  task automatic drive(input int n, input int stall_pct, input int ready_pct, output int cycles);
    int t0;
    t0 = -1;
    for (int i = 0; i < n; i++) begin
      feat_t f;
      f = rand_gauss();
      @(negedge clk);
      in_valid = 1; in_feat = f;
      q.push_back(reference(f));
      forever begin
        stall     = ($urandom_range(0, 99) < stall_pct);
        out_ready = ($urandom_range(0, 99) < ready_pct);
        #1;
        if (stall) begin check(!in_ready, "intake during stall"); n_stall_seen++; end
        if (t0 < 0) t0 = $time;
        if (in_ready) break;
        @(negedge clk);
      end
      @(posedge clk);
      cycles = ($time - t0) / 10 + 1;
    end
    @(negedge clk);
    in_valid = 0; stall = 0;
  endtask

  task automatic drain();
    out_ready = 1;
    while (busy) @(negedge clk);
    repeat (2) @(negedge clk);
  endtask

  initial begin
    int cyc;
    rst_n = 0; in_valid = 0; stall = 0; out_ready = 1; in_feat = '0;
    sub_x = 16'd64; sub_y = 16'd32; img_w = 16'd200; img_h = 16'd100;
    mode = MODE_UNIFORM_SPARSE;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // throughput, no stall, no back-pressure
    mode = MODE_UNIFORM_SPARSE;
    drive(100, 0, 100, cyc); drain();
    check(cyc == 100, $sformatf("sparse: %0d cycles for 100 Gaussians", cyc));
    mode = MODE_UNIFORM_DENSE;
    drive(100, 0, 100, cyc); drain();
    check(cyc == 199, $sformatf("dense: %0d cycles for 100 Gaussians", cyc));
    check(n_dense == 100, "dense count");
    // all modes with stalls and back-pressure
    for (int m = 0; m < 4; m++) begin
      mode = cat_mode_e'(m);
      drive(400, 20, 50, cyc); drain();
    end
    // image edge: right part of the sub-tile outside the image
    img_w = 16'd70; mode = MODE_SMOOTH_FOCUSED;
    drive(300, 10, 70, cyc); drain();
    check(q.size() == 0 || q[$].must1 == 0, "last Gaussians delivered");
    check(n_stall_seen > 100, "stalls exercised");
    check(n_dropped > 0, "Gaussians dropped");
    check(n_tested == 32'(100 + 100 + 1600 + 300), "tested count");
    $display("outputs %0d dropped %0d stall cycles %0d", n_out, n_dropped, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
