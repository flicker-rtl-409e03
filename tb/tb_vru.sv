// tb_vru -- streams depth-ordered Gaussians into one VRU and checks:
//  * the eight pixel colours and transmittances against vanilla 3DGS blending in real
//    arithmetic (alpha clamp 0.99, skip below 1/255, stop below T = 1e-4);
//  * the forward port repeats every Gaussian in order under random back-pressure;
//  * one Gaussian per 8 cycles (acceptance to acceptance); a finished VRU takes one
//    per cycle;
//  * early termination (all_done) with opaque Gaussians, and clear.
module tb_vru;
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

  logic clear, in_valid, in_ready, fwd_valid, fwd_ready, all_done, busy;
  logic [15:0] base_x, base_y;
  feat_t in_feat, fwd_feat;
  logic [31:0] color [VRU_PIX][3];
  logic [16:0] trans [VRU_PIX];
  logic [VRU_PIX-1:0] pix_done;
  logic [31:0] n_blend;
  vru dut (.*);

  real rc [8][3];
  real rt [8];
  bit  rdone [8];
  feat_t fq [$];
  int n_fwd = 0;

  always @(posedge clk) if (rst_n && fwd_valid && fwd_ready) begin
    check(fq.size() > 0 && fwd_feat == fq[0], "forwarded Gaussian");
    void'(fq.pop_front());
    n_fwd++;
  end

  task automatic ref_reset();
    for (int j = 0; j < 8; j++) begin rt[j] = 1.0; rdone[j] = 0; for (int c = 0; c < 3; c++) rc[j][c] = 0.0; end
  endtask

  task automatic ref_blend(input feat_t f);
    for (int j = 0; j < 8; j++) begin
      real e, al, tn;
      if (rdone[j]) continue;
      e = exact_e(real'(int'(base_x) + j % 4), real'(int'(base_y) + j / 4),
                  fp16_to_real(f.mean_x), fp16_to_real(f.mean_y), fp16_to_real(f.conic_xx),
                  fp16_to_real(f.conic_xy), fp16_to_real(f.conic_yy));
      if (e < 0.0) continue;
      al = fp16_to_real(f.opacity) * $exp(-e);
      if (al > 0.99) al = 0.99;
      if (al < 1.0 / 255.0) continue;
      tn = rt[j] * (1.0 - al);
      if (tn < 0.0001) begin rdone[j] = 1; continue; end
      rc[j][0] += fp16_to_real(f.color_r) * al * rt[j];
      rc[j][1] += fp16_to_real(f.color_g) * al * rt[j];
      rc[j][2] += fp16_to_real(f.color_b) * al * rt[j];
      rt[j] = tn;
    end
  endtask

  function automatic feat_t rand_gauss(input real omin);
    feat_t f;
    real s1, s2, th, cs, sn;
    s1 = 0.5 + real'($urandom_range(0, 4000)) / 1000.0;
    s2 = 0.5 + real'($urandom_range(0, 4000)) / 1000.0;
    th = real'($urandom_range(0, 6283)) / 1000.0;
    cs = $cos(th); sn = $sin(th);
    f.mean_x   = real_to_fp16(real'(base_x) - 3.0 + real'($urandom_range(0, 10000)) / 1000.0);
    f.mean_y   = real_to_fp16(real'(base_y) - 3.0 + real'($urandom_range(0, 8000)) / 1000.0);
    f.conic_xx = real_to_fp16(cs*cs/(s1*s1) + sn*sn/(s2*s2));
    f.conic_xy = real_to_fp16(cs*sn*(1.0/(s1*s1) - 1.0/(s2*s2)));
    f.conic_yy = real_to_fp16(sn*sn/(s1*s1) + cs*cs/(s2*s2));
    f.opacity  = real_to_fp16(omin + (1.0 - omin) * real'($urandom_range(0, 1000)) / 1000.0);
    f.color_r  = real_to_fp16(real'($urandom_range(0, 1000)) / 1000.0);
    f.color_g  = real_to_fp16(real'($urandom_range(0, 1000)) / 1000.0);
    f.color_b  = real_to_fp16(real'($urandom_range(0, 1000)) / 1000.0);
    f.spiky    = 1'($urandom);
    return f;
  endfunction

  task automatic run(input int n, input real omin, input int fwd_pct, output int cycles);
    int t0, t_last;
    t0 = $time;
    for (int i = 0; i < n; i++) begin
      feat_t f;
      f = rand_gauss(omin);
      @(negedge clk);
      in_valid = 1; in_feat = f;
      forever begin
        fwd_ready = ($urandom_range(0, 99) < fwd_pct);
        #1;
        if (in_ready) break;
        @(negedge clk);
      end
      fq.push_back(f);
      if (i == 0) t0 = $time;
      t_last = $time;
      ref_blend(f);
      @(posedge clk);
    end
    @(negedge clk);
    in_valid = 0; fwd_ready = 1;
    while (busy || fwd_valid) @(negedge clk);
    cycles = (t_last - t0) / 10;      // first to last acceptance
  endtask

  task automatic compare();
    for (int j = 0; j < 8; j++) begin
      for (int c = 0; c < 3; c++)
        check(absr(real'(color[j][c]) / 65536.0 - rc[j][c]) < 0.02,
              $sformatf("pixel %0d ch %0d: %f want %f", j, c, real'(color[j][c]) / 65536.0, rc[j][c]));
      check(absr(real'(trans[j]) / 65536.0 - rt[j]) < 0.02, $sformatf("T%0d", j));
    end
  endtask

  initial begin
    int cyc;
    rst_n = 0; clear = 0; in_valid = 0; fwd_ready = 1; in_feat = '0;
    base_x = 16'd100; base_y = 16'd50;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // translucent scene with forward back-pressure
    for (int scene = 0; scene < 20; scene++) begin
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      ref_reset();
      base_x = 16'($urandom_range(0, 500)); base_y = 16'($urandom_range(0, 500));
      run(12, 0.05, 60, cyc);
      compare();
    end
    // rate: one Gaussian per 8 cycles without back-pressure
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    ref_reset();
    run(40, 0.0, 100, cyc);
    check(cyc == 39 * 8, $sformatf("40 Gaussians in %0d cycles", cyc));
    compare();
    // early termination: opaque Gaussians centred on the pixels
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    ref_reset();
    run(60, 0.98, 100, cyc);
    compare();
    check(all_done, "all pixels terminated");
    for (int j = 0; j < 8; j++) check(pix_done[j] == rdone[j], $sformatf("done %0d", j));
    // a finished VRU consumes one Gaussian per cycle
    run(20, 0.5, 100, cyc);
    check(cyc == 19, $sformatf("finished VRU: 20 Gaussians in %0d cycles", cyc));
    check(n_fwd == 20 * 12 + 40 + 60 + 20, "all forwarded");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
