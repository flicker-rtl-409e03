// vru -- Volume Rendering Unit: alpha-blends a depth-ordered stream of Gaussians into
// eight pixels (half of a 4x4 mini-tile: two rows of four).
//
// For each Gaussian and pixel p it evaluates the standard 3DGS rendering step the paper
// summarises in Sec. II-A:
//   E = 0.5*dx^2*Cxx + 0.5*dy^2*Cyy + dx*dy*Cxy,  alpha = min(0.99, o*exp(-E))
//   skip if alpha < 1/255; if T*(1-alpha) < 1e-4 the pixel is finished;
//   otherwise C += T*alpha*c and T *= (1-alpha).
// The pixel differences dx, dy are FP16 like the features; the products are formed
// exactly and accumulated in Q.16 fixed point, and T, alpha and the colours are Q.16.
// exp(-E) is 2^-(E*log2 e), with the fractional power 2^-f ~= 1 - 0.6699 f + 0.1699 f^2
// (error < 0.0023). The clamp 0.99 and the 1e-4 termination are vanilla 3DGS values
// (the paper names early termination but gives no number). The arithmetic formats,
// the approximation and the one-pixel-per-cycle schedule are this design's choices:
// the paper gives the VRU's function and count, not its insides.
//
// Pairing (Fig. 5: FIFO -> VRU -> VRU): a VRU passes every Gaussian it takes on to
// the next VRU of its mini-tile through a one-entry forward register (fwd_*), so one
// FIFO feeds both. A VRU whose eight pixels are all finished consumes a Gaussian in
// one cycle without computing.
// Timing: a Gaussian is taken when in_valid && in_ready; it then occupies the VRU for
// 8 cycles (one pixel per cycle), the next one being taken in the cycle of the last
// pixel, so a stream runs at one Gaussian per 8 cycles. clear (one cycle) starts a new tile: T = 1, C = 0.
module vru
  import flicker_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  logic [15:0] base_x,          // pixel 0 of this VRU; pixel j at (base_x+j%4, base_y+j/4)
  input  logic [15:0] base_y,
  input  logic        in_valid,
  output logic        in_ready,
  input  feat_t       in_feat,
  output logic        fwd_valid,
  input  logic        fwd_ready,
  output feat_t       fwd_feat,
  output logic [31:0] color [VRU_PIX][3],   // Q.16 RGB
  output logic [16:0] trans [VRU_PIX],      // Q.16 transmittance
  output logic [VRU_PIX-1:0] pix_done,
  output logic        all_done,
  output logic        busy,
  output logic [31:0] n_blend              // pixel-Gaussian blends performed
);
  localparam logic [31:0] LOG2E_Q16 = 32'd94548;
  localparam logic [31:0] EXP_A     = 32'd43903;   // 0.6699
  localparam logic [31:0] EXP_B     = 32'd11135;   // 0.1699
  localparam logic [16:0] ALPHA_MAX = 17'd64880;   // 0.99

  feat_t      cur;
  logic [2:0] pix;

  assign all_done = &pix_done;
  assign in_ready = (!busy || pix == 3'd7) && (!fwd_valid || fwd_ready);
  wire   accept   = in_valid && in_ready;

  // ---- per-pixel arithmetic for pixel `pix` of Gaussian `cur`
  logic        blend, finish;
  logic [16:0] alpha, t_next;
  always_comb begin
    fp16_t       px, py, dx, dy;
    acc_t        e;
    logic [63:0] y;
    logic [15:0] f;
    logic [47:0] p2;
    logic [47:0] expv;
    logic [47:0] op;
    logic [63:0] a_full;
    int unsigned n;
    px  = int_to_fp16(base_x + 16'(pix[1:0]));
    py  = int_to_fp16(base_y + 16'(pix[2]));
    dx  = fp16_sub(px, cur.mean_x);
    dy  = fp16_sub(py, cur.mean_y);
    e   = mul3_acc(dec_fp16(dx), dec_fp16(dx), dec_fp16(cur.conic_xx), 1'b1)
        + mul3_acc(dec_fp16(dy), dec_fp16(dy), dec_fp16(cur.conic_yy), 1'b1)
        + mul3_acc(dec_fp16(dx), dec_fp16(dy), dec_fp16(cur.conic_xy), 1'b0);
    if (e < 0) begin
      y = 64'd0;
    end else if (e[62:40] != '0) begin
      y = 64'hFFFF_FFFF_FFFF;              // E beyond 2^24: exp(-E) is zero
    end else begin
      y = (64'(e) >> 16) * 64'(LOG2E_Q16) + ((64'(e) & 64'hFFFF) * 64'(LOG2E_Q16) >> 16);
    end
    f    = y[15:0];
    n    = (y[63:16] > 48'd40) ? 40 : int'(y[21:16]);
    p2   = 48'd65536 - ((48'(EXP_A) * 48'(f)) >> 16) + ((48'(EXP_B) * 48'(f) * 48'(f)) >> 32);
    expv = (n >= 17) ? 48'd0 : (p2 >> n);
    op   = fp16_to_q16u(cur.opacity);
    if (op > 48'd65536) op = 48'd65536;
    a_full = (64'(op) * 64'(expv)) >> 16;
    alpha  = (a_full > 64'(ALPHA_MAX)) ? ALPHA_MAX : 17'(a_full);
    t_next = 17'((34'(trans[pix]) * 34'(17'd65536 - alpha)) >> 16);
    // alpha < 1/255 and T' < 1e-4, compared exactly without division
    blend  = (e >= 0) && (32'(alpha) * 32'd255 >= 32'd65536) && (32'(t_next) * 32'd10000 >= 32'd65536);
    finish = (e >= 0) && (32'(alpha) * 32'd255 >= 32'd65536) && !(32'(t_next) * 32'd10000 >= 32'd65536);
  end

  function automatic logic [31:0] add_color(input logic [31:0] c, input fp16_t col,
                                            input logic [16:0] a, input logic [16:0] t);
    logic [95:0] w;
    w = 96'(fp16_to_q16u(col)) * 96'(a) * 96'(t);
    return c + 32'(w >> 32);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      pix       <= '0;
      cur       <= '0;
      fwd_valid <= 1'b0;
      fwd_feat  <= '0;
      pix_done  <= '0;
      n_blend   <= '0;
      for (int j = 0; j < VRU_PIX; j++) begin
        trans[j] <= 17'd65536;
        for (int c = 0; c < 3; c++) color[j][c] <= '0;
      end
    end else if (clear) begin
      busy      <= 1'b0;
      pix       <= '0;
      fwd_valid <= 1'b0;
      pix_done  <= '0;
      n_blend   <= '0;
      for (int j = 0; j < VRU_PIX; j++) begin
        trans[j] <= 17'd65536;
        for (int c = 0; c < 3; c++) color[j][c] <= '0;
      end
    end else begin
      if (fwd_valid && fwd_ready) fwd_valid <= 1'b0;
      if (busy) begin
        if (!pix_done[pix]) begin
          if (blend) begin
            trans[pix]    <= t_next;
            color[pix][0] <= add_color(color[pix][0], cur.color_r, alpha, trans[pix]);
            color[pix][1] <= add_color(color[pix][1], cur.color_g, alpha, trans[pix]);
            color[pix][2] <= add_color(color[pix][2], cur.color_b, alpha, trans[pix]);
            n_blend       <= n_blend + 1;
          end else if (finish) begin
            pix_done[pix] <= 1'b1;
          end
        end
        pix <= pix + 1'b1;
        if (pix == 3'd7) busy <= 1'b0;
      end
      // a new Gaussian may be taken while the last pixel of the previous one is done
      if (accept) begin
        cur       <= in_feat;
        fwd_feat  <= in_feat;
        fwd_valid <= 1'b1;
        pix       <= '0;
        busy      <= !all_done;
      end
    end
  end

  a_fwd_hold: assert property (@(posedge clk) disable iff (!rst_n || clear)
                               fwd_valid && !fwd_ready |=> fwd_valid && $stable(fwd_feat));
endmodule
