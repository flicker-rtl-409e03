// tb_feature_buffer_writer -- four sources offer Gaussians with random sub-tile masks;
// checks that each sub-tile buffer receives exactly the Gaussians whose mask selects it,
// each source's in order, one Gaussian per cycle, and that the round robin serves all
// sources fairly (no source waits more than N-1 cycles while others are served).
module tb_feature_buffer_writer;
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

  logic [3:0] in_valid, in_ready, wr_en;
  pre_out_t in_data [4];
  feat_t wr_feat;
  fp16_t wr_depth;
  feature_buffer_writer #(.N(4)) dut (.*);

  int sent [4], wait_cyc [4];
  pre_out_t expq [4][$];        // per sub-tile buffer, expected Gaussians
  int n_written = 0;
  logic [3:0] grant;

  function automatic pre_out_t make(input int src, input int seq);
    pre_out_t p;
    p.feat  = feat_t'({16'(src), 16'(seq), 113'($urandom)});
    p.depth = 16'($urandom);
    p.mask  = 4'($urandom_range(1, 15));
    return p;
  endfunction

  initial begin
    rst_n = 0; in_valid = 0;
    for (int k = 0; k < 4; k++) begin in_data[k] = make(k, 0); sent[k] = 0; wait_cyc[k] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      for (int k = 0; k < 4; k++)
        if (!in_valid[k] && $urandom_range(0, 99) < 70) begin
          in_valid[k] = 1; in_data[k] = make(k, sent[k]);
        end
      #1;
      check($countones(in_ready) == ((in_valid != 0) ? 1 : 0), "one grant when any valid");
      check((in_ready & ~in_valid) == 0, "grant only to a valid source");
      for (int k = 0; k < 4; k++) if (in_ready[k]) begin
        check(wr_en == in_data[k].mask && wr_feat == in_data[k].feat && wr_depth == in_data[k].depth,
              "write follows the granted source");
        for (int s = 0; s < 4; s++) if (in_data[k].mask[s]) n_written++;
      end
      for (int k = 0; k < 4; k++) begin
        if (in_valid[k] && !in_ready[k]) wait_cyc[k]++;
        else wait_cyc[k] = 0;
        check(wait_cyc[k] < 4, $sformatf("source %0d starved", k));
      end
      grant = in_ready;
      @(posedge clk);
      #1;
      for (int k = 0; k < 4; k++) if (grant[k]) begin in_valid[k] = 0; sent[k]++; end
    end
    for (int k = 0; k < 4; k++) check(sent[k] > 400, $sformatf("source %0d served %0d", k, sent[k]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
