// tb_mini_tile_demux -- random masks and FIFO-full patterns; checks push strobes,
// data and the ready rule (wait only for full FIFOs the mask selects).
module tb_mini_tile_demux;
  import flicker_pkg::*;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures <= 10) $display("FAIL: %s", msg); end
  endtask
  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic in_valid, in_ready;
  ctu_out_t in_data;
  logic [3:0] fifo_full, push;
  feat_t push_data;
  mini_tile_demux dut (.*);

  initial begin
    for (int n = 0; n < 3000; n++) begin
      bit rdy;
      in_valid = 1'($urandom);
      in_data  = '{feat: feat_t'({$urandom, $urandom, $urandom, $urandom, $urandom}), mask: 4'($urandom)};
      fifo_full = ($urandom_range(0, 2) == 0) ? 4'($urandom) : 4'd0;
      #1;
      rdy = 1;
      for (int m = 0; m < 4; m++) if (in_data.mask[m] && fifo_full[m]) rdy = 0;
      check(in_ready == rdy, "ready");
      for (int m = 0; m < 4; m++)
        check(push[m] == (in_valid && rdy && in_data.mask[m]), $sformatf("push[%0d]", m));
      check(push_data == in_data.feat, "data");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
