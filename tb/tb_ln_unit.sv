// tb_ln_unit -- random opacities; checks ln(255*o) against real arithmetic (within
// 0.01), the two-cycle latency and back-to-back throughput.
module tb_ln_unit;
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
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic  in_valid, out_valid;
  fp16_t opacity;
  acc_t  ln_term;
  ln_unit dut (.*);

  real  want [$];
  int   sent = 0, got = 0;
  int   t_in [$];
  int   cyc = 0;
  always @(posedge clk) cyc++;

  always @(posedge clk) if (rst_n && out_valid) begin
    real r;
    r = real'(ln_term) / 65536.0;
    check(absr(r - want[got]) < 0.01, $sformatf("ln %f want %f", r, want[got]));
    check(cyc - t_in[got] == 2, $sformatf("latency %0d", cyc - t_in[got]));
    got++;
  end

  initial begin
    rst_n = 1'b0; in_valid = 0; opacity = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 1000; n++) begin
      real o;
      @(negedge clk);
      o = real'($urandom_range(4, 1000000)) / 1000000.0;
      opacity  = real_to_fp16(o);
      in_valid = 1'b1;
      want.push_back($ln(255.0 * fp16_to_real(opacity)));
      t_in.push_back(cyc + 1);
      sent++;
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (5) @(posedge clk);
    check(got == sent, "all results returned");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
