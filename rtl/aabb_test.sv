// aabb_test -- stage-1 sub-tile intersection test (paper, Sec. IV-B, Fig. 6).
//
// The Gaussian's axis-aligned 3-sigma box, floor(mean) +- radius in whole pixels, is
// compared with each 8x8 sub-tile of the 16x16 tile whose top-left pixel is
// (tile_x, tile_y). Bit s of the mask (row-major sub-tile index) is set when the box
// overlaps sub-tile s; the Gaussian is then duplicated into that sub-tile's feature
// buffer. The paper gives the test's purpose; box rounding is this design's choice
// (whole-pixel box as in vanilla 3DGS). Combinational.
module aabb_test
  import flicker_pkg::*;
(
  input  fp16_t       mean_x,
  input  fp16_t       mean_y,
  input  logic [15:0] radius,
  input  logic [15:0] tile_x,
  input  logic [15:0] tile_y,
  output logic [3:0]  mask
);
  logic signed [31:0] cx, cy, r, x0, y0;
  always_comb begin
    cx = fp16_floor(mean_x);
    cy = fp16_floor(mean_y);
    r  = 32'(radius);
    for (int s = 0; s < 4; s++) begin
      x0 = signed'(32'(tile_x)) + 32'(SUB_DIM * (s % 2));
      y0 = signed'(32'(tile_y)) + 32'(SUB_DIM * (s / 2));
      mask[s] = (cx + r >= x0) && (cx - r <= x0 + signed'(32'(SUB_DIM - 1))) &&
                (cy + r >= y0) && (cy - r <= y0 + signed'(32'(SUB_DIM - 1)));
    end
  end
endmodule
