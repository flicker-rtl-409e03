// flicker_pkg -- types, geometry constants and number-format helpers shared by the
// contribution-aware 3DGS tile renderer.
//
// Geometry follows the paper: a tile is 16x16 pixels, split into four 8x8 sub-tiles,
// each split into four 4x4 mini-tiles. Mini-tile and sub-tile indices are row-major
// (0 top-left, 1 top-right, 2 bottom-left, 3 bottom-right).
//
// Number formats. Gaussian features are IEEE binary16 (FP16), as the paper renders in
// FP16. The paper's FP8 format is not named; E4M3 (bias 7, no infinities, saturating at
// 448) is this design's choice. Every conversion here truncates toward zero (the paper
// gives no rounding mode). Sums of products are kept in a signed 64-bit fixed-point
// accumulator with 16 fraction bits (acc_t): the products of the quadratic form are
// formed exactly from the operands' mantissas and exponents and only then truncated to
// 2^-16, which is this design's reading of "FP8 operations" in the accumulation unit.
// All functions are pure and synthesizable (constant-bound loops only).
package flicker_pkg;

  // ---------------------------------------------------------------- geometry
  localparam int unsigned TILE_DIM   = 16;  // tile edge, pixels
  localparam int unsigned SUB_DIM    = 8;   // sub-tile edge, pixels
  localparam int unsigned MINI_DIM   = 4;   // mini-tile edge, pixels
  localparam int unsigned N_SUB      = 4;   // sub-tiles per tile = rendering cores
  localparam int unsigned N_MINI     = 4;   // mini-tiles per sub-tile = FIFO channels
  localparam int unsigned VRU_PIX    = 8;   // pixels per VRU (two VRUs per mini-tile)

  // ---------------------------------------------------------------- scalar types
  typedef logic [15:0]        fp16_t;
  typedef logic [7:0]         fp8_t;
  typedef logic signed [63:0] acc_t;       // Q47.16 accumulator
  localparam int unsigned ACC_FRAC = 16;
  typedef logic signed [63:0] fix24_t;     // Q39.24, holds any FP16 value exactly
  localparam int unsigned FIX_FRAC = 24;

  localparam fp16_t FP16_MAX = 16'h7BFF;   // 65504
  localparam fp8_t  FP8_MAX  = 8'h7E;      // 448 in E4M3

  // Sampling modes of the Mini-Tile CAT controller (Sec. III-A)
  typedef enum logic [1:0] {
    MODE_SMOOTH_FOCUSED = 2'd0,  // smooth -> dense, spiky -> sparse (adaptive default)
    MODE_SPIKY_FOCUSED  = 2'd1,  // spiky -> dense, smooth -> sparse
    MODE_UNIFORM_DENSE  = 2'd2,
    MODE_UNIFORM_SPARSE = 2'd3
  } cat_mode_e;

  // ---------------------------------------------------------------- records
  // A projected (2D) Gaussian as the load unit reads it from DRAM: 11 x 16 bits.
  typedef struct packed {
    fp16_t       mean_x;
    fp16_t       mean_y;
    fp16_t       conic_xx;
    fp16_t       conic_xy;
    fp16_t       conic_yy;
    fp16_t       opacity;
    fp16_t       color_r;
    fp16_t       color_g;
    fp16_t       color_b;
    fp16_t       depth;
    logic [15:0] radius;     // 3-sigma radius in whole pixels
  } dram_gauss_t;

  // Features kept in the on-chip feature buffers (Fig. 5: colour, conic, 2D coord.,
  // opacity, spiky flag).
  typedef struct packed {
    fp16_t mean_x;
    fp16_t mean_y;
    fp16_t conic_xx;
    fp16_t conic_xy;
    fp16_t conic_yy;
    fp16_t opacity;
    fp16_t color_r;
    fp16_t color_g;
    fp16_t color_b;
    logic  spiky;
  } feat_t;

  // A Gaussian leaving a preprocessing core: features, sort key and sub-tile mask.
  typedef struct packed {
    feat_t      feat;
    fp16_t      depth;
    logic [3:0] mask;      // bit s: AABB overlaps sub-tile s of the tile
  } pre_out_t;

  // A Gaussian leaving the CTU with its mini-tile contribution mask.
  typedef struct packed {
    feat_t      feat;
    logic [3:0] mask;      // bit m: contributes to mini-tile m of the sub-tile
  } ctu_out_t;

  // Batch kinds seen by the mask merge unit
  typedef enum logic [1:0] {
    BATCH_SPARSE       = 2'd0,  // two PRs across the mini-tiles, complete in one batch
    BATCH_DENSE_FIRST  = 2'd1,  // PRs of mini-tiles 0 and 1
    BATCH_DENSE_SECOND = 2'd2   // PRs of mini-tiles 2 and 3
  } batch_e;


  // ---------------------------------------------------------------- helpers
  // Index of the most significant set bit of a 64-bit magnitude (0 when zero).
  function automatic int unsigned msb64(input logic [63:0] v);
    int unsigned k;
    k = 0;
    for (int i = 0; i < 64; i++) if (v[i]) k = i;
    return k;
  endfunction

  // FP16 -> Q39.24, exact. Infinity/NaN are read as the largest finite value.
  function automatic fix24_t fp16_to_fix(input fp16_t h);
    logic [63:0] mag;
    logic [4:0]  e;
    e = h[14:10];
    if (e == 5'd0)       mag = {54'd0, h[9:0]};
    else if (e == 5'd31) mag = {53'd0, 11'h7FF} << 29;
    else                 mag = {53'd0, 1'b1, h[9:0]} << (e - 5'd1);
    return h[15] ? -fix24_t'(mag) : fix24_t'(mag);
  endfunction

  // Q39.24 -> FP16, truncating, saturating at +-65504.
  function automatic fp16_t fix_to_fp16(input fix24_t v);
    logic [63:0] mag;
    int unsigned k;
    logic        s;
    logic [9:0]  m;
    s   = v[63];
    mag = s ? 64'(-v) : 64'(v);
    if (mag == 64'd0) return 16'h0000;
    k = msb64(mag);
    if (k <= 9) return {s, 5'd0, mag[9:0]};          // subnormal
    if (k >= 40) return {s, FP16_MAX[14:0]};          // exponent above 15
    m = 10'(mag >> (k - 10));
    return {s, 5'(k - 9), m};
  endfunction

  // Unsigned integer (pixel coordinate) -> FP16, exact below 2048.
  function automatic fp16_t int_to_fp16(input logic [15:0] i);
    return fix_to_fp16(fix24_t'({24'd0, i, 24'd0}));
  endfunction

  // FP16 a - b, computed exactly and truncated to FP16.
  function automatic fp16_t fp16_sub(input fp16_t a, input fp16_t b);
    return fix_to_fp16(fp16_to_fix(a) - fp16_to_fix(b));
  endfunction

  // FP16 -> FP8 E4M3, truncating, saturating at +-448.
  function automatic fp8_t fp16_to_fp8(input fp16_t h);
    fix24_t      v;
    logic [63:0] mag;
    int unsigned k;
    logic        s;
    logic [2:0]  m;
    v   = fp16_to_fix(h);
    s   = h[15];
    mag = s ? 64'(-v) : 64'(v);
    if (mag == 64'd0) return {s, 7'd0};
    k = msb64(mag);
    if (k <= 17) return {s, 4'd0, 3'(mag >> 15)};    // subnormal, 2^-9 steps
    m = 3'(mag >> (k - 3));
    if (k > 32 || (k == 32 && m == 3'd7)) return {s, FP8_MAX[6:0]};
    return {s, 4'(k - 17), m};
  endfunction

  // Decoded floating value: value = (-1)^s * man * 2^ex.
  typedef struct packed {
    logic              s;
    logic [10:0]       man;
    logic signed [7:0] ex;
  } dec_t;

  function automatic dec_t dec_fp16(input fp16_t h);
    dec_t d;
    d.s = h[15];
    if (h[14:10] == 5'd0)       begin d.man = {1'b0, h[9:0]}; d.ex = -8'sd24; end
    else if (h[14:10] == 5'd31) begin d.man = 11'h7FF;        d.ex = 8'sd5;   end
    else begin d.man = {1'b1, h[9:0]}; d.ex = 8'(signed'({3'd0, h[14:10]})) - 8'sd25; end
    return d;
  endfunction

  function automatic dec_t dec_fp8(input fp8_t f);
    dec_t d;
    d.s = f[7];
    if (f[6:3] == 4'd0) begin d.man = {8'd0, f[2:0]};       d.ex = -8'sd9; end
    else begin d.man = {7'd0, 1'b1, f[2:0]}; d.ex = 8'(signed'({4'd0, f[6:3]})) - 8'sd10; end
    return d;
  endfunction

  // Exact product of three decoded values (times 1/2 if half), truncated to Q.16 and
  // clamped to +-2^62.
  function automatic acc_t mul3_acc(input dec_t a, input dec_t b, input dec_t c, input logic half);
    logic [32:0]  p;
    int           sh;
    logic [127:0] w;
    logic [63:0]  mag;
    p  = 33'(a.man) * 33'(b.man) * 33'(c.man);
    sh = int'(a.ex) + int'(b.ex) + int'(c.ex) + int'(ACC_FRAC) - (half ? 1 : 0);
    if (sh >= 0) w = 128'(p) << sh;
    else         w = 128'(p) >> (-sh);
    mag = (w >= 128'(64'h4000_0000_0000_0000)) ? 64'h4000_0000_0000_0000 : w[63:0];
    return (a.s ^ b.s ^ c.s) ? -acc_t'(mag) : acc_t'(mag);
  endfunction

  // floor() of an FP16 value as a signed integer
  function automatic logic signed [31:0] fp16_floor(input fp16_t h);
    fix24_t v;
    v = fp16_to_fix(h) >>> FIX_FRAC;
    return 32'(v);
  endfunction

  // Non-negative FP16 -> unsigned Q.16, truncating (negative reads as 0).
  function automatic logic [47:0] fp16_to_q16u(input fp16_t h);
    fix24_t v;
    v = fp16_to_fix(h);
    if (v < 0) return 48'd0;
    return 48'(v >>> (FIX_FRAC - ACC_FRAC));
  endfunction

endpackage
