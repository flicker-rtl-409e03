// culling_unit -- frustum culling of a projected Gaussian (Fig. 5, "Culling Unit").
//
// A Gaussian survives when its depth lies strictly between the near and far planes
// and its 3-sigma square (floor(mean) +- radius, whole pixels) overlaps the image.
// Depths are positive FP16, so their bit patterns compare like unsigned integers;
// a negative depth (behind the camera) never passes. The paper culls clusters
// ("big Gaussians") with a test it does not detail; this unit applies the standard
// near/far/screen test to one projected Gaussian and is this design's own version.
// Combinational.
module culling_unit
  import flicker_pkg::*;
(
  input  dram_gauss_t  g,
  input  fp16_t        znear,
  input  fp16_t        zfar,
  input  logic [15:0]  img_w,
  input  logic [15:0]  img_h,
  output logic         visible
);
  logic signed [31:0] cx, cy, r;
  logic depth_ok, screen_ok;
  always_comb begin
    cx        = fp16_floor(g.mean_x);
    cy        = fp16_floor(g.mean_y);
    r         = 32'(g.radius);
    depth_ok  = !g.depth[15] && !znear[15] && (g.depth > znear) && (g.depth < zfar);
    screen_ok = (cx + r >= 0) && (cx - r < signed'(32'(img_w))) &&
                (cy + r >= 0) && (cy - r < signed'(32'(img_h)));
    visible   = depth_ok && screen_ok;
  end
endmodule
