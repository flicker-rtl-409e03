// tb_pkg -- reference arithmetic for the testbenches, written with real numbers and
// independently of the design's fixed-point helpers.
//
// fp16/fp8 encoders truncate toward zero like the design; they are derived here by
// scaling with powers of two in real arithmetic rather than by bit manipulation of a
// fixed-point value. cat_e() models the Gaussian weight as the PRTU defines it (FP16
// differences, FP8 operands), evaluated in real arithmetic.
package tb_pkg;

  function automatic real pow2(input int e);
    real r;
    r = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) r = r * 2.0;
    else        for (int i = 0; i < -e; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic real fp16_to_real(input logic [15:0] h);
    int e;
    real m;
    e = int'(h[14:10]);
    m = real'(h[9:0]);
    if (e == 0) return (h[15] ? -1.0 : 1.0) * m * pow2(-24);
    return (h[15] ? -1.0 : 1.0) * (1.0 + m / 1024.0) * pow2(e - 15);
  endfunction

  // real -> FP16, truncating toward zero, saturating at 65504
  function automatic logic [15:0] real_to_fp16(input real r);
    logic s;
    real  a;
    int   e;
    s = (r < 0.0);
    a = s ? -r : r;
    if (a >= 65504.0) return {s, 15'h7BFF};
    if (a < pow2(-14)) return {s, 5'd0, 10'($rtoi(a * pow2(24)))};
    e = 15;
    while (a < pow2(e)) e--;
    return {s, 5'(e + 15), 10'($rtoi((a / pow2(e) - 1.0) * 1024.0))};
  endfunction

  function automatic real fp8_to_real(input logic [7:0] f);
    int e;
    e = int'(f[6:3]);
    if (e == 0) return (f[7] ? -1.0 : 1.0) * real'(f[2:0]) * pow2(-9);
    return (f[7] ? -1.0 : 1.0) * (1.0 + real'(f[2:0]) / 8.0) * pow2(e - 7);
  endfunction

  // real -> FP8 E4M3 value (as a real), truncating toward zero, saturating at 448
  function automatic real q_fp8(input real r);
    logic s;
    real  a;
    int   e;
    s = (r < 0.0);
    a = s ? -r : r;
    if (a >= 448.0) return s ? -448.0 : 448.0;
    if (a < pow2(-6)) a = real'($rtoi(a * pow2(9))) * pow2(-9);
    else begin
      e = 8;
      while (a < pow2(e)) e--;
      a = (1.0 + real'($rtoi((a / pow2(e) - 1.0) * 8.0)) / 8.0) * pow2(e);
    end
    return s ? -a : a;
  endfunction

  function automatic real q_fp16(input real r);
    return fp16_to_real(real_to_fp16(r));
  endfunction

  // Gaussian weight of pixel (px,py) as the CTU computes it
  function automatic real cat_e(input real px, input real py, input real mx, input real my,
                                input real cxx, input real cxy, input real cyy);
    real dx, dy;
    dx = q_fp8(q_fp16(px - mx));
    dy = q_fp8(q_fp16(py - my));
    return 0.5 * dx * dx * q_fp8(cxx) + 0.5 * dy * dy * q_fp8(cyy) + dx * dy * q_fp8(cxy);
  endfunction

  // Exact Gaussian weight (reference for rendering)
  function automatic real exact_e(input real px, input real py, input real mx, input real my,
                                  input real cxx, input real cxy, input real cyy);
    real dx, dy;
    dx = px - mx;
    dy = py - my;
    return 0.5 * dx * dx * cxx + 0.5 * dy * dy * cyy + dx * dy * cxy;
  endfunction

  function automatic real absr(input real r);
    return (r < 0.0) ? -r : r;
  endfunction

endpackage
