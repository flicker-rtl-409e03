// spiky_test -- classifies a Gaussian as spiky (axis ratio >= 3) or smooth
// (Fig. 5, "Spiky Test"; the threshold 3 is the paper's).
//
// The axis ratio is sqrt(l1/l2) for the eigenvalues l1 >= l2 of the 2D covariance. With
// r = l1/l2, (l1+l2)^2/(l1*l2) = (r+1)^2/r grows with r and equals 100/9 at r = 9, so
//   spiky  <=>  9*trace^2 >= 100*det,
// which needs no square root or division. The ratio is the same for the conic (the
// inverse covariance), so the conic stored with the Gaussian is used directly. A
// degenerate conic (det <= 0) counts as spiky. The closed form is this design's; the
// paper gives only the classification rule. Combinational, exact (Q.24 operands,
// full-width products).
module spiky_test
  import flicker_pkg::*;
(
  input  fp16_t conic_xx,
  input  fp16_t conic_xy,
  input  fp16_t conic_yy,
  output logic  spiky
);
  logic signed [127:0] a, b, c, tr, det;
  always_comb begin
    a     = 128'(fp16_to_fix(conic_xx));
    b     = 128'(fp16_to_fix(conic_xy));
    c     = 128'(fp16_to_fix(conic_yy));
    tr    = a + c;
    det   = a * c - b * b;
    spiky = (tr * tr * 9) >= (det * 100);
  end
endmodule
