// ln_unit -- computes the contribution threshold ln(255 * o) shared by all leader pixels.
//
// The paper rewrites the test alpha >= 1/255 as E <= ln(255*o), where E is the
// Gaussian weight, so the logarithm is computed once per Gaussian and shared by every
// PRTU (Fig. 7(a): opacity times 255, a register, then "ln"). The paper does not give
// the logarithm's circuit. This design uses the base-2 logarithm split into exponent k
// and fraction f of x = 255*o, with the fraction corrected by
// log2(1+f) ~= f + 0.34657*f*(1-f) (error below 0.008), then scales by ln 2.
// Interface: in_valid/opacity (FP16, 0..1) in; out_valid/ln_term (signed Q.16) exactly
// two cycles later. Fully pipelined, one Gaussian per cycle, no back-pressure.
// Opacity zero gives the most negative value, so no pixel passes.
module ln_unit
  import flicker_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  fp16_t opacity,
  output logic  out_valid,
  output acc_t  ln_term
);
  localparam logic [31:0] LOG_CORR = 32'd22713;  // 0.34657 in Q.16
  localparam logic [31:0] LN2      = 32'd45426;  // ln 2 in Q.16

  // Stage 1: x = 255*o in Q.24, then split into exponent and 16-bit fraction
  logic        s1_valid, s1_zero;
  logic signed [15:0] s1_k;
  logic [15:0] s1_f;


  logic [63:0] x_mag;
  int unsigned x_k;
  logic [63:0] x_norm;
  always_comb begin
    fix24_t o_fix;
    o_fix  = fp16_to_fix(opacity);
    x_mag  = (o_fix <= 0) ? 64'd0 : 64'(o_fix) * 64'd255;
    x_k    = msb64(x_mag);
    x_norm = x_mag << (63 - x_k);           // leading one at bit 63
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_zero  <= 1'b1;
      s1_k     <= '0;
      s1_f     <= '0;
    end else begin
      s1_valid <= in_valid;
      s1_zero  <= (x_mag == 64'd0);
      s1_k     <= 16'(signed'(x_k) - signed'(FIX_FRAC));
      s1_f     <= x_norm[62:47];
    end
  end

  // Stage 2: log2 with quadratic correction, times ln 2
  acc_t log2_q16, ln_q16;
  always_comb begin
    logic [47:0] corr;
    corr     = (48'(LOG_CORR) * 48'(s1_f) * (48'd65536 - 48'(s1_f))) >> 32;
    log2_q16 = (acc_t'(s1_k) <<< 16) + acc_t'(s1_f) + acc_t'(corr);
    ln_q16   = (log2_q16 * acc_t'(LN2)) >>> 16;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      ln_term   <= '0;
    end else begin
      out_valid <= s1_valid;
      ln_term   <= s1_zero ? {1'b1, 63'd0} : ln_q16;
    end
  end
endmodule
