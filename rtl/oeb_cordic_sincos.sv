// oeb_cordic_sincos -- CORDIC in rotation mode: cos(angle) and sin(angle).
//
// Used by Block-2 to form e^{j theta_1} and e^{j theta_2}, which multiply
// alpha_2 Q(:, i+1) when the new optimal beamforming vector is formed (steps
// 18 and 20 of the algorithm); one instance is time-shared between the two
// angles, as in the design.  The angle may lie anywhere in [-pi, pi]: an
// angle beyond +/-pi/2 is first folded by -/+pi and the result negated.
// The vector (K, 0), K = 0.6073 the CORDIC gain compensation, is then
// rotated by ITER micro-rotations of atan(2^-i) toward the residual angle,
// which leaves (cos, sin) in (x, y).
//
// ITER = FRAC (one iteration per fractional bit) is this design's choice.
// Interface: angle in fx_t radians; cos_o, sin_o in fx_t.
// Timing: purely combinational (unrolled); the caller registers the result.
module oeb_cordic_sincos
  import oeb_pkg::*;
#(
  parameter int ITER = FRAC
) (
  input  fx_t angle,
  output fx_t cos_o,
  output fx_t sin_o
);
  localparam int IW = DW + 2;
  typedef logic signed [IW-1:0] iw_t;

  always_comb begin
    iw_t xi, yi, xn, yn, z;
    logic neg;
    neg = 1'b0;
    z   = iw_t'(angle);
    if (z > iw_t'(FX_HALF_PI)) begin
      z   = z - iw_t'(FX_PI);
      neg = 1'b1;
    end else if (z < -iw_t'(FX_HALF_PI)) begin
      z   = z + iw_t'(FX_PI);
      neg = 1'b1;
    end
    xi = iw_t'(FX_CORDIC_K);
    yi = '0;
    for (int i = 0; i < ITER; i++) begin
      if (!z[IW-1]) begin           // residual angle >= 0
        xn = xi - (yi >>> i);
        yn = yi + (xi >>> i);
        z  = z - iw_t'(atan_fx(5'(i)));
      end else begin
        xn = xi + (yi >>> i);
        yn = yi - (xi >>> i);
        z  = z + iw_t'(atan_fx(5'(i)));
      end
      xi = xn;
      yi = yn;
    end
    cos_o = neg ? fx_t'(-xi) : fx_t'(xi);
    sin_o = neg ? fx_t'(-yi) : fx_t'(yi);
  end
endmodule
