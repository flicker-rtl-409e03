// mini_tile_demux -- copies each Gaussian leaving the CTU into the feature FIFO of
// every mini-tile its contribution mask selects (Fig. 5, "Mini-Tile Demux").
//
// This is where the mini-tile skipping happens: a Gaussian whose mask bit for a
// mini-tile is clear never reaches that mini-tile's VRUs. The Gaussian is written to
// all selected FIFOs in the same cycle, so every FIFO sees its Gaussians in depth
// order. It waits while any selected FIFO is full; FIFOs it does not need never hold
// it up. The all-at-once write is this design's choice; the paper shows only the block.
// Interface: valid/ready in; one push strobe per FIFO and a shared data bus out. The
// data bus carries the Gaussian's features unchanged (the mask is consumed here); the
// block's logic is in the push strobes and the ready.
// Combinational, no latency.
module mini_tile_demux
  import flicker_pkg::*;
(
  input  logic       in_valid,
  output logic       in_ready,
  input  ctu_out_t   in_data,
  input  logic [3:0] fifo_full,
  output logic [3:0] push,
  output feat_t      push_data
);
  assign in_ready  = ~|(in_data.mask & fifo_full);
  assign push      = (in_valid && in_ready) ? in_data.mask : 4'd0;
  assign push_data = in_data.feat;
endmodule
