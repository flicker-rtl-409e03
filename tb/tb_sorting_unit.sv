// tb_sorting_unit -- inserts random depth keys (with repeats) while writing a buffer
// model, then streams under random back-pressure and checks the order (ascending,
// equal keys in arrival order), the buffer addresses, overflow, early stop and the
// rate of one Gaussian per cycle.
module tb_sorting_unit;
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
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int D = 64;
  logic clear, ins_valid, ins_accept, overflow, start, stop_early, buf_re, out_valid, out_ready, done;
  fp16_t ins_key;
  logic [5:0] ins_addr, buf_raddr;
  logic [6:0] count;
  feat_t buf_rdata, out_feat;
  sorting_unit #(.DEPTH(D)) dut (.*);

  // buffer model with one-cycle read latency
  feat_t mem [D];
  always @(posedge clk) begin
    if (ins_accept) mem[ins_addr] <= feat_t'({1'b0, 16'(count), 128'd0});
    if (buf_re) buf_rdata <= mem[buf_raddr];
  end

  typedef struct { fp16_t key; int order; } ent_t;
  ent_t ents [$];

  task automatic fill(input int n);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      ins_valid = 1;
      ins_key   = real_to_fp16(real'($urandom_range(1, 40)) * 0.25);   // many equal keys
      #1;
      check(ins_accept == (i < D), "accept");
      if (i < D) begin
        ents.push_back('{ins_key, i});
        check(ins_addr == 6'(i), "write address");
      end
      @(posedge clk);
    end
    @(negedge clk);
    ins_valid = 0;
  endtask

  task automatic stream(input int ready_pct, input int stop_after, output int got, output int cycles);
    int t0;
    ent_t sorted [$];
    sorted = ents;
    sorted.sort(x) with ({x.key, 16'(x.order)});
    got = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    t0 = $time;
    while (!done) begin
      out_ready = ($urandom_range(0, 99) < ready_pct);
      if (got >= stop_after) stop_early = 1;
      @(posedge clk);
      if (out_valid && out_ready) begin
        check(got < sorted.size() && out_feat[143:128] == 16'(sorted[got].order),
              $sformatf("position %0d: got %0d", got, out_feat[143:128]));
        got++;
      end
      @(negedge clk);
    end
    cycles = ($time - t0) / 10;
    stop_early = 0;
  endtask

  initial begin
    int got, cyc;
    rst_n = 0; clear = 0; ins_valid = 0; ins_key = 0; start = 0; stop_early = 0; out_ready = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 5; r++) begin
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      ents.delete();
      fill(10 + 10 * r);
      check(!overflow, "no overflow");
      stream(60, 1000, got, cyc);
      check(got == ents.size(), "all streamed");
    end
    // full rate
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    ents.delete();
    fill(D);
    stream(100, 1000, got, cyc);
    check(got == D, "all streamed at full rate");
    check(cyc <= D + 4, $sformatf("%0d Gaussians in %0d cycles", D, cyc));
    // overflow
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    ents.delete();
    fill(D + 3);
    check(overflow, "overflow flagged");
    check(int'(count) == D, "count saturates");
    stream(100, 1000, got, cyc);
    check(got == D, "list intact after overflow");
    // early stop
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    ents.delete();
    fill(40);
    stream(100, 10, got, cyc);
    check(got < 20, $sformatf("early stop after %0d", got));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
