// tb_mask_merge_unit -- random sparse and dense batch sequences; checks merged masks
// against a reference and that nothing is output after a first dense batch.
module tb_mask_merge_unit;
  import flicker_pkg::*;
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

  logic       in_valid, out_valid;
  batch_e     kind;
  logic [3:0] pr_a, pr_b, mask;
  mask_merge_unit dut (.*);

  initial begin
    logic [1:0] first;
    rst_n = 1'b0; in_valid = 0; kind = BATCH_SPARSE; pr_a = 0; pr_b = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 2000; n++) begin
      logic [3:0] want;
      logic       expect_out;
      @(negedge clk);
      pr_a = 4'($urandom); pr_b = 4'($urandom);
      if ($urandom_range(0, 1)) begin
        kind = BATCH_SPARSE; want = pr_a | pr_b; expect_out = 1;
        in_valid = 1;
      end else begin
        kind = BATCH_DENSE_FIRST; in_valid = 1; expect_out = 0;
        first = {|pr_b, |pr_a};
        @(posedge clk); #1;
        check(!out_valid, "no output after first dense batch");
        @(negedge clk);
        pr_a = 4'($urandom); pr_b = 4'($urandom);
        kind = BATCH_DENSE_SECOND; want = {|pr_b, |pr_a, first}; expect_out = 1;
      end
      @(posedge clk); #1;
      check(out_valid == expect_out, "out_valid");
      check(mask == want, $sformatf("mask %b want %b", mask, want));
      @(negedge clk);
      in_valid = 0;
      @(posedge clk); #1;
      check(!out_valid, "idle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
