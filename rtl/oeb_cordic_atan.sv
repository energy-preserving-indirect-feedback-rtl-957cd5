// oeb_cordic_atan -- CORDIC in vectoring mode: angle of the point (x, y).
//
// Used by Block-2 to turn the pair (gamma_R, -gamma_I) into theta_1 and the
// pair (-gamma_R, gamma_I) into theta_2 (step 16 of the beamforming
// algorithm); one instance is time-shared between the two angles, as in the
// design.  The result is the full four-quadrant angle atan2(y, x) in
// (-pi, pi]: a point in the left half plane is first reflected through the
// origin (angle offset +/-pi), then ITER micro-rotations by atan(2^-i) drive
// y to zero while the rotation angles are accumulated.
//
// That the CORDIC works on the (numerator, denominator) pair rather than on
// their quotient is this design's choice: the quotient alone cannot tell
// theta_1 from theta_2, which differ by pi.  Number of iterations is also a
// choice (ITER = FRAC, one iteration per fractional bit), as is the
// internal widening by GF = 8 fractional bits.
//
// Interface: x, y in fx_t (oeb_pkg); angle in fx_t radians.
// Timing: purely combinational (the iterations are unrolled); the caller
// registers the result.
module oeb_cordic_atan
  import oeb_pkg::*;
#(
  parameter int ITER = FRAC
) (
  input  fx_t x,
  input  fx_t y,
  output fx_t angle
);
  // Three integer guard bits (the vector grows by up to 1.65 * sqrt(2)) and
  // GF extra fractional bits, so that short vectors keep their precision.
  localparam int GF = 8;
  localparam int IW = DW + 3 + GF;
  typedef logic signed [IW-1:0] iw_t;

  always_comb begin
    iw_t xi, yi, xn, yn;
    fx_t z;
    if (x[DW-1]) begin
      xi = -(iw_t'(x) <<< GF);
      yi = -(iw_t'(y) <<< GF);
      z  = y[DW-1] ? fx_t'(-FX_PI) : FX_PI;
    end else begin
      xi = iw_t'(x) <<< GF;
      yi = iw_t'(y) <<< GF;
      z  = '0;
    end
    for (int i = 0; i < ITER; i++) begin
      if (yi[IW-1]) begin           // y < 0: rotate counter-clockwise
        xn = xi - (yi >>> i);
        yn = yi + (xi >>> i);
        z  = z - atan_fx(5'(i));
      end else begin                // y >= 0: rotate clockwise
        xn = xi + (yi >>> i);
        yn = yi - (xi >>> i);
        z  = z + atan_fx(5'(i));
      end
      xi = xn;
      yi = yn;
    end
    angle = z;
  end
endmodule
