// feature_buffer -- on-chip memory holding the Gaussian features of one sub-tile list
// (Fig. 5 "Feat. Buffer"; Fig. 6 "Feat. Buf.").
//
// One write port and one read port; reads are synchronous (data the cycle after re),
// as in an SRAM macro. Written as an array so that synthesis can map it to SRAM. The
// paper sizes feature buffers and other storage at 288 KB in all, without a split; the
// default of 1024 Gaussians per sub-tile list is this design's choice
// (4 lists x 1024 x 145 bits = 72.5 KB).
module feature_buffer
  import flicker_pkg::*;
#(
  parameter int unsigned DEPTH = 1024
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  feat_t                    wdata,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output feat_t                    rdata
);
  feat_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
