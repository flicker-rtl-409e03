// tb_gaussian_load_unit -- a DRAM model with random request acceptance and random
// response latency (in order); checks addresses, the record order, that no more than
// PREFETCH requests are ever open, done, and a restart with a new range.
module tb_gaussian_load_unit;
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
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic start, mem_req_valid, mem_req_ready, mem_rsp_valid, out_valid, out_ready, done;
  logic [31:0] base_addr, num, mem_req_addr;
  dram_gauss_t mem_rsp_data, out_data;
  gaussian_load_unit #(.ADDR_W(32), .PREFETCH(4)) dut (.*);

  function automatic dram_gauss_t rec(input logic [31:0] a);
    return dram_gauss_t'({a, ~a, a ^ 32'h5A5A5A5A, a * 7, a + 3, 16'(a)});
  endfunction

  // DRAM model: accepted requests return after 1..6 cycles, in order
  logic [31:0] pend_addr [$];
  int          pend_due  [$];
  int cyc = 0, open_req = 0, max_open = 0;
  always @(posedge clk) begin
    cyc++;
    if (mem_rsp_valid) open_req--;
    if (mem_req_valid && mem_req_ready) begin
      pend_addr.push_back(mem_req_addr);
      pend_due.push_back(((pend_due.size() > 0) ? pend_due[$] : cyc) + $urandom_range(1, 6));
      open_req++;
    end
    if (open_req > max_open) max_open = open_req;
  end
  always @(negedge clk) begin
    mem_req_ready = ($urandom_range(0, 99) < 70);
    mem_rsp_valid = 0;
    if (pend_due.size() > 0 && pend_due[0] <= cyc) begin
      mem_rsp_valid = 1;
      mem_rsp_data  = rec(pend_addr[0]);
      void'(pend_addr.pop_front());
      void'(pend_due.pop_front());
    end
    out_ready = ($urandom_range(0, 99) < 60);
  end

  task automatic load(input logic [31:0] b, input int n);
    int got;
    got = 0;
    @(negedge clk); base_addr = b; num = n; start = 1;
    @(negedge clk); start = 0;
    while (!done) begin
      @(posedge clk);
      if (out_valid && out_ready) begin
        check(out_data == rec(b + 32'(got)), $sformatf("record %0d", got));
        got++;
      end
    end
    check(got == n, $sformatf("got %0d of %0d", got, n));
  endtask

  initial begin
    rst_n = 0; start = 0; base_addr = 0; num = 0; mem_rsp_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    load(32'h1000, 200);
    load(32'h8000, 37);
    load(32'h20, 1);
    check(max_open <= 4, $sformatf("open requests %0d", max_open));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
