// prtu -- Pixel-Rectangle Test Unit: tests one Gaussian against the four leader pixels
// of a pixel rectangle (PR) and says which of them it contributes to.
//
// A PR is given by its main-diagonal corners p_top = p0 and p_bot = p3; the
// off-diagonal corners are p1 = (bot.x, top.y) and p2 = (top.x, bot.y). Because the
// off-diagonal corners reuse the coordinates of the diagonal ones, only four
// coordinate differences and four squared terms are needed for four pixels
// (Algorithm 1 of the paper, followed line by line):
//   s^x_top = 0.5*dx_top^2*Cxx, s^y_top = 0.5*dy_top^2*Cyy (and likewise for bot)
//   t0 = dx_top*dy_top*Cxy, t1 = dx_bot*dy_top*Cxy, t2 = dx_top*dy_bot*Cxy, t3 = dx_bot*dy_bot*Cxy
//   E0 = s^x_top+s^y_top+t0, E1 = s^x_bot+s^y_top+t1, E2 = s^x_top+s^y_bot+t2, E3 = s^x_bot+s^y_bot+t3
// Pixel i passes when E_i <= ln(255*o) and its valid-mask bit is set (alpha >= 1/255,
// the paper's Eq. 1 threshold).
//
// Mixed precision (paper, Sec. IV-C): the differences are computed in FP16, then the
// differences and the conic are converted to FP8 for the quadratic accumulation. Here
// each product of three FP8 values is formed exactly and summed in a Q.16 fixed-point
// accumulator (a choice of this design; the paper does not describe the accumulator).
//
// Timing: three pipeline stages, one PR per cycle. in_valid with the Gaussian and PR
// at cycle 0; ln_term must be presented at cycle 2 (the ln unit's latency, so the two
// units are fed in parallel); out_valid/pass/e at cycle 3. No back-pressure.
module prtu
  import flicker_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  fp16_t      mean_x,
  input  fp16_t      mean_y,
  input  fp16_t      conic_xx,
  input  fp16_t      conic_xy,
  input  fp16_t      conic_yy,
  input  fp16_t      top_x,       // p0 = (top_x, top_y)
  input  fp16_t      top_y,
  input  fp16_t      bot_x,       // p3 = (bot_x, bot_y)
  input  fp16_t      bot_y,
  input  logic [3:0] pix_valid,   // valid mask for p0..p3
  input  acc_t       ln_term,     // ln(255*o), two cycles after in_valid
  output logic       out_valid,
  output logic [3:0] pass,        // bit i: Gaussian contributes to p_i
  output acc_t       e [4]        // Gaussian weights E0..E3 (Q.16)
);
  // ---- stage 1: FP16 coordinate differences (Alg. 1 line 1)
  logic       s1_valid;
  fp16_t      s1_dtx, s1_dty, s1_dbx, s1_dby, s1_cxx, s1_cxy, s1_cyy;
  logic [3:0] s1_pv;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      {s1_dtx, s1_dty, s1_dbx, s1_dby, s1_cxx, s1_cxy, s1_cyy} <= '0;
      s1_pv    <= '0;
    end else begin
      s1_valid <= in_valid;
      s1_dtx   <= fp16_sub(top_x, mean_x);
      s1_dty   <= fp16_sub(top_y, mean_y);
      s1_dbx   <= fp16_sub(bot_x, mean_x);
      s1_dby   <= fp16_sub(bot_y, mean_y);
      s1_cxx   <= conic_xx;
      s1_cxy   <= conic_xy;
      s1_cyy   <= conic_yy;
      s1_pv    <= pix_valid;
    end
  end

  // ---- stage 2: FP16 -> FP8, quadratic accumulation products (lines 2-5)
  dec_t dtx, dty, dbx, dby, cxx, cxy, cyy;
  always_comb begin
    dtx = dec_fp8(fp16_to_fp8(s1_dtx));
    dty = dec_fp8(fp16_to_fp8(s1_dty));
    dbx = dec_fp8(fp16_to_fp8(s1_dbx));
    dby = dec_fp8(fp16_to_fp8(s1_dby));
    cxx = dec_fp8(fp16_to_fp8(s1_cxx));
    cxy = dec_fp8(fp16_to_fp8(s1_cxy));
    cyy = dec_fp8(fp16_to_fp8(s1_cyy));
  end

  logic       s2_valid;
  acc_t       sx_top, sy_top, sx_bot, sy_bot, t0, t1, t2, t3;
  logic [3:0] s2_pv;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2_valid <= 1'b0;
      {sx_top, sy_top, sx_bot, sy_bot, t0, t1, t2, t3} <= '0;
      s2_pv    <= '0;
    end else begin
      s2_valid <= s1_valid;
      sx_top   <= mul3_acc(dtx, dtx, cxx, 1'b1);
      sy_top   <= mul3_acc(dty, dty, cyy, 1'b1);
      sx_bot   <= mul3_acc(dbx, dbx, cxx, 1'b1);
      sy_bot   <= mul3_acc(dby, dby, cyy, 1'b1);
      t0       <= mul3_acc(dtx, dty, cxy, 1'b0);
      t1       <= mul3_acc(dbx, dty, cxy, 1'b0);
      t2       <= mul3_acc(dtx, dby, cxy, 1'b0);
      t3       <= mul3_acc(dbx, dby, cxy, 1'b0);
      s2_pv    <= s1_pv;
    end
  end

  // ---- stage 3: Gaussian weights (lines 6-7) and comparison with ln(255*o)
  acc_t ew [4];
  always_comb begin
    ew[0] = sx_top + sy_top + t0;
    ew[1] = sx_bot + sy_top + t1;
    ew[2] = sx_top + sy_bot + t2;
    ew[3] = sx_bot + sy_bot + t3;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      pass      <= '0;
      for (int i = 0; i < 4; i++) e[i] <= '0;
    end else begin
      out_valid <= s2_valid;
      for (int i = 0; i < 4; i++) begin
        pass[i] <= s2_pv[i] && (ew[i] <= ln_term);
        e[i]    <= ew[i];
      end
    end
  end
endmodule
