// feature_buffer_writer -- collects the Gaussians of the four preprocessing cores and
// duplicates each into the feature buffer of every sub-tile its mask selects (paper,
// Sec. IV-B stage 1, Fig. 6: "Gaussians are duplicated into feature buffers according
// to their sub-tile intersection mask").
//
// One Gaussian is written per cycle, to all its sub-tile buffers at once; a round-robin
// pointer picks among the cores with a Gaussian waiting, starting after the core served
// last. The paper does not say how the four cores share the buffers; this arbitration
// is this design's choice. Combinational grant, registered pointer.
module feature_buffer_writer
  import flicker_pkg::*;
#(
  parameter int unsigned N = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] in_valid,
  output logic [N-1:0] in_ready,
  input  pre_out_t     in_data [N],
  output logic [3:0]   wr_en,         // one per sub-tile buffer
  output feat_t        wr_feat,
  output fp16_t        wr_depth
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic [IW-1:0] last;
  logic [IW-1:0] sel;
  logic          any;

  always_comb begin
    any = 1'b0;
    sel = '0;
    for (int k = 1; k <= N; k++) begin
      if (!any && in_valid[(int'(last) + k) % N]) begin
        any = 1'b1;
        sel = IW'((int'(last) + k) % N);
      end
    end
    in_ready = '0;
    if (any) in_ready[sel] = 1'b1;
    wr_en    = any ? in_data[sel].mask : 4'd0;
    wr_feat  = in_data[sel].feat;
    wr_depth = in_data[sel].depth;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   last <= IW'(N - 1);
    else if (any) last <= sel;
  end
endmodule
