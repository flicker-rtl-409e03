// tb_sync_fifo -- random push/pop traffic against a queue model; checks data order,
// full/empty/count and simultaneous push and pop when full.
module tb_sync_fifo;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures <= 10) $display("FAIL: %s", msg); end
  endtask
  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int D = 5;
  logic push, pop, full, empty;
  logic [11:0] din, dout;
  logic [2:0] count;
  sync_fifo #(.T(logic [11:0]), .DEPTH(D)) dut (.*);

  logic [11:0] q[$];
  initial begin
    rst_n = 1'b0; push = 0; pop = 0; din = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      check(empty == (q.size() == 0), "empty flag");
      check(full == (q.size() == D), "full flag");
      check(int'(count) == q.size(), "count");
      if (q.size() > 0) check(dout == q[0], $sformatf("dout %h want %h", dout, q[0]));
      pop  = (q.size() > 0) && ($urandom_range(0, 99) < (n < 2500 ? 40 : 70));
      push = ((q.size() < D) || pop) && ($urandom_range(0, 99) < 60);
      din  = 12'($urandom);
      @(posedge clk);
      #1;
      if (pop)  void'(q.pop_front());
      if (push) q.push_back(din);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
