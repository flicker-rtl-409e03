// tb_feature_buffer -- writes random records at random addresses and reads them back
// one cycle later, including a read and a write in the same cycle.
module tb_feature_buffer;
  import flicker_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
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

  localparam int D = 64;
  logic we, re;
  logic [5:0] waddr, raddr;
  feat_t wdata, rdata;
  feature_buffer #(.DEPTH(D)) dut (.*);

  feat_t model [D];
  bit    written [D];
  initial begin
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = '0;
    for (int n = 0; n < 4000; n++) begin
      feat_t want;
      bit    chk;
      @(negedge clk);
      we    = 1'($urandom);
      waddr = 6'($urandom);
      wdata = feat_t'({$urandom, $urandom, $urandom, $urandom, $urandom});
      re    = 1'($urandom);
      raddr = 6'($urandom);
      chk   = re && written[raddr];
      want  = model[raddr];
      @(posedge clk);
      if (we) begin model[waddr] = wdata; written[waddr] = 1; end
      #1;
      if (chk) check(rdata == want, $sformatf("read %0d", raddr));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
