// preprocessing_core -- per-Gaussian front end of the accelerator (Fig. 5): Gaussian
// load unit, culling unit, spiky test and the stage-1 sub-tile AABB test.
//
// Records read from DRAM pass the culling unit; survivors are classified spiky or
// smooth and tested against the four sub-tiles of the current tile. A Gaussian that
// overlaps at least one sub-tile leaves with its features, its depth (the sort key) and
// its 4-bit sub-tile mask; all others are dropped here, which is the coarse first stage
// of the paper's hierarchical testing. One Gaussian per cycle through a single output
// register with valid/ready.
//
// Departure from the paper: the paper's core also projects 3D Gaussians to 2D and
// evaluates their colour ("Feat. Comp."), and culls clustered "big Gaussians" before
// fetching their members. Those steps are not built here: the records in DRAM are
// already projected (mean, conic, opacity, RGB, depth, radius).
module preprocessing_core
  import flicker_pkg::*;
#(
  parameter int unsigned ADDR_W = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] base_addr,
  input  logic [31:0]       num,
  input  logic [15:0]       tile_x,
  input  logic [15:0]       tile_y,
  input  logic [15:0]       img_w,
  input  logic [15:0]       img_h,
  input  fp16_t             znear,
  input  fp16_t             zfar,
  // DRAM controller port
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic [ADDR_W-1:0] mem_req_addr,
  input  logic              mem_rsp_valid,
  input  dram_gauss_t       mem_rsp_data,
  // to the feature buffers
  output logic              out_valid,
  input  logic              out_ready,
  output pre_out_t          out_data,
  output logic              done,
  output logic [31:0]       n_loaded,
  output logic [31:0]       n_culled      // dropped by culling or by an empty sub-tile mask
);
  logic        ld_valid, ld_ready, ld_done;
  dram_gauss_t g;

  gaussian_load_unit #(.ADDR_W(ADDR_W)) u_load (
    .clk, .rst_n, .start, .base_addr, .num,
    .mem_req_valid, .mem_req_ready, .mem_req_addr, .mem_rsp_valid, .mem_rsp_data,
    .out_valid(ld_valid), .out_ready(ld_ready), .out_data(g), .done(ld_done)
  );

  logic       visible, spiky;
  logic [3:0] mask;

  culling_unit u_cull (
    .g, .znear, .zfar, .img_w, .img_h, .visible
  );
  spiky_test u_spiky (
    .conic_xx(g.conic_xx), .conic_xy(g.conic_xy), .conic_yy(g.conic_yy), .spiky
  );
  aabb_test u_aabb (
    .mean_x(g.mean_x), .mean_y(g.mean_y), .radius(g.radius),
    .tile_x, .tile_y, .mask
  );

  feat_t f;
  always_comb begin
    f.mean_x   = g.mean_x;
    f.mean_y   = g.mean_y;
    f.conic_xx = g.conic_xx;
    f.conic_xy = g.conic_xy;
    f.conic_yy = g.conic_yy;
    f.opacity  = g.opacity;
    f.color_r  = g.color_r;
    f.color_g  = g.color_g;
    f.color_b  = g.color_b;
    f.spiky    = spiky;
  end

  assign ld_ready = !out_valid || out_ready;
  wire take = ld_valid && ld_ready;
  wire keep = visible && (mask != 4'd0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
      n_loaded  <= '0;
      n_culled  <= '0;
    end else begin
      if (start) begin
        n_loaded <= '0;
        n_culled <= '0;
      end
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (take) begin
        n_loaded <= n_loaded + 1;
        if (keep) begin
          out_valid <= 1'b1;
          out_data  <= '{feat: f, depth: g.depth, mask: mask};
        end else begin
          n_culled <= n_culled + 1;
        end
      end
    end
  end

  assign done = ld_done && !out_valid;
endmodule
