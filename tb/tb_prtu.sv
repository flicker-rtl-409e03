// tb_prtu -- one pixel rectangle per cycle with random Gaussians; checks the four
// Gaussian weights against Algorithm 1 evaluated in real arithmetic on the same FP16
// and FP8 operands, the pass bits against the threshold and valid mask, and the
// three-cycle latency.
module tb_prtu;
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
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic in_valid, out_valid;
  fp16_t mean_x, mean_y, conic_xx, conic_xy, conic_yy, top_x, top_y, bot_x, bot_y;
  logic [3:0] pix_valid, pass;
  acc_t ln_term;
  acc_t e [4];
  prtu dut (.*);

  typedef struct { real e[4]; acc_t ln; logic [3:0] pv; int t; } exp_t;
  exp_t q [$];
  int cyc = 0, npass = 0, nfail = 0;
  always @(posedge clk) cyc++;

  // ln_term is presented two cycles after its PR
  acc_t ln_cur, ln_d1;
  always @(posedge clk) begin
    ln_d1   <= ln_cur;
    ln_term <= ln_d1;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    exp_t x;
    x = q.pop_front();
    check(cyc - x.t == 3, $sformatf("latency %0d", cyc - x.t));
    for (int i = 0; i < 4; i++) begin
      real eh, lr;
      eh = real'(e[i]) / 65536.0;
      lr = real'(x.ln) / 65536.0;
      check(absr(eh - x.e[i]) <= 4.0 * pow2(-16) + 1e-9 * absr(x.e[i]),
            $sformatf("E%0d %f want %f", i, eh, x.e[i]));
      if (absr(x.e[i] - lr) > 4.0 * pow2(-16)) begin
        check(pass[i] == (x.pv[i] && x.e[i] <= lr), $sformatf("pass%0d", i));
        if (pass[i]) npass++; else nfail++;
      end
    end
  end

  initial begin
    rst_n = 1'b0; in_valid = 0;
    {mean_x, mean_y, conic_xx, conic_xy, conic_yy, top_x, top_y, bot_x, bot_y} = '0;
    pix_valid = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 3000; n++) begin
      exp_t x;
      real mx, my, a, b, c, px[2], py[2];
      int ox, oy;
      @(negedge clk);
      in_valid = ($urandom_range(0, 4) != 0);
      ox = $urandom_range(0, 1000); oy = $urandom_range(0, 1000);
      px[0] = ox; py[0] = oy;
      px[1] = ox + $urandom_range(1, 7); py[1] = oy + $urandom_range(1, 7);
      mx = ox - 6.0 + real'($urandom_range(0, 20000)) / 1000.0;
      my = oy - 6.0 + real'($urandom_range(0, 20000)) / 1000.0;
      a = 0.02 + real'($urandom_range(0, 2000)) / 1000.0;
      c = 0.02 + real'($urandom_range(0, 2000)) / 1000.0;
      b = (real'($urandom_range(0, 2000)) / 1000.0 - 1.0) * $sqrt(a * c) * 0.9;
      mean_x = real_to_fp16(mx); mean_y = real_to_fp16(my);
      conic_xx = real_to_fp16(a); conic_xy = real_to_fp16(b); conic_yy = real_to_fp16(c);
      top_x = int_to_fp16(16'(ox)); top_y = int_to_fp16(16'(oy));
      bot_x = real_to_fp16(px[1]);  bot_y = real_to_fp16(py[1]);
      pix_valid = ($urandom_range(0, 3) == 0) ? 4'($urandom) : 4'hF;
      mx = fp16_to_real(mean_x); my = fp16_to_real(mean_y);
      a = fp16_to_real(conic_xx); b = fp16_to_real(conic_xy); c = fp16_to_real(conic_yy);
      x.e[0] = cat_e(px[0], py[0], mx, my, a, b, c);
      x.e[1] = cat_e(px[1], py[0], mx, my, a, b, c);
      x.e[2] = cat_e(px[0], py[1], mx, my, a, b, c);
      x.e[3] = cat_e(px[1], py[1], mx, my, a, b, c);
      x.ln   = acc_t'($rtoi((real'($urandom_range(0, 6000)) / 1000.0 - 0.5) * 65536.0));
      x.pv   = pix_valid;
      x.t    = cyc + 1;
      ln_cur = x.ln;
      if (in_valid) q.push_back(x);
    end
    @(negedge clk);
    in_valid = 0;
    repeat (6) @(posedge clk);
    check(q.size() == 0, "all PRs returned");
    check(npass > 200 && nfail > 200, "both outcomes seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
