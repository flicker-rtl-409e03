// tb_fifo_monitor -- random full patterns; checks stall = any full and the stall and
// cycle counters, including clear and count_en.
module tb_fifo_monitor;
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

  logic clear, count_en, stall;
  logic [3:0] fifo_full;
  logic [31:0] stall_cycles, cycles;
  fifo_monitor #(.N(4)) dut (.*);

  initial begin
    int ns, nc;
    rst_n = 0; clear = 0; count_en = 0; fifo_full = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 3; round++) begin
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      ns = 0; nc = 0;
      for (int n = 0; n < 1000; n++) begin
        fifo_full = ($urandom_range(0, 3) == 0) ? 4'(1 << $urandom_range(0, 3)) : 4'd0;
        count_en  = ($urandom_range(0, 9) != 0);
        #1;
        check(stall == (fifo_full != 0), "stall");
        if (count_en) begin nc++; if (fifo_full != 0) ns++; end
        @(negedge clk);
      end
      check(stall_cycles == 32'(ns), $sformatf("stall cycles %0d want %0d", stall_cycles, ns));
      check(cycles == 32'(nc), "cycles");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
