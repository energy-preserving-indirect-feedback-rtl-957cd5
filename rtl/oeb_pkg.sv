// oeb_pkg -- number formats, constants and arithmetic helpers shared by the
// optimal energy beamformer (OEB).
//
// Three number formats are used:
//   * cplx_t  : one complex element of a beamforming vector or of the basis
//               matrix Q.  16 bits in total, as the design carries Q with
//               16-bit complex elements and 80-bit (5 x 16) column vectors:
//               an 8-bit signed real part in the upper byte and an 8-bit
//               signed imaginary part in the lower byte, both Q1.7 (value =
//               code / 128).  The split into 8 + 8 bits and the Q1.7 scaling
//               are this design's choice; only the 16-bit element width is
//               given.
//   * tau_t   : a measured absolute dot product |h^H w|, 8 bits unsigned,
//               read as a fraction U0.8 (value = code / 256).  The 8-bit
//               width is given; reading it as a fraction is a choice (the
//               algorithm is invariant to the scale of tau).
//   * fx_t    : the internal real scalar of the Block-2 datapath, 16-bit
//               two's complement with FRAC = 12 fractional bits (range
//               [-8, 8)).  16 bits is the design's stated quantisation; the
//               split into 4 integer and 12 fractional bits is a choice.
//
// The helper functions are purely combinational: fixed-point multiply,
// divide and square root with saturation, plus conversions between the
// formats.  Every arithmetic result saturates to the fx_t range instead of
// wrapping.
//
// Linting one module on its own reports as unused the package constants
// that only other modules use (N_DEF, FX_PI, FX_HALF_PI, FX_2SQRT2,
// FX_INVSQRT2, FX_CORDIC_K); all of them are used in the complete design.
package oeb_pkg;

  // ---- widths -------------------------------------------------------------
  localparam int DW     = 16;           // internal scalar width
  localparam int FRAC   = 12;           // fractional bits of fx_t
  localparam int CW     = 8;            // width of one real/imag part of cplx_t
  localparam int CFRAC  = 7;            // fractional bits of that part
  localparam int TAUW   = 8;            // width of a tau value
  localparam int TFRAC  = 8;            // fractional bits of a tau value
  localparam int N_DEF  = 5;            // number of antennas

  typedef logic signed [DW-1:0]   fx_t;
  typedef logic        [TAUW-1:0] tau_t;
  typedef struct packed {
    logic signed [CW-1:0] re;
    logic signed [CW-1:0] im;
  } cplx_t;
  typedef struct packed {
    fx_t re;
    fx_t im;
  } cfx_t;

  // ---- constants (value * 2^FRAC, rounded) ---------------------------------
  localparam fx_t FX_MAX      = fx_t'({1'b0, {(DW-1){1'b1}}});
  localparam fx_t FX_MIN      = fx_t'({1'b1, {(DW-1){1'b0}}});
  localparam fx_t FX_PI       = fx_t'(int'(3.14159265358979 * (2.0 ** FRAC)));
  localparam fx_t FX_HALF_PI  = fx_t'(int'(1.57079632679490 * (2.0 ** FRAC)));
  localparam fx_t FX_2SQRT2   = fx_t'(int'(2.82842712474619 * (2.0 ** FRAC)));
  localparam fx_t FX_INVSQRT2 = fx_t'(int'(0.70710678118655 * (2.0 ** FRAC)));
  // CORDIC gain compensation 1/prod(sqrt(1 + 2^-2i)).
  localparam fx_t FX_CORDIC_K = fx_t'(int'(0.60725293500888 * (2.0 ** FRAC)));

  // atan(2^-i) in radians scaled by 2^30 (round(atan(2^-i) * 2^30)).
  localparam int ATAN_TABLE_FRAC = 30;
  localparam int ATAN_TABLE_LEN  = 24;
  localparam int unsigned ATAN_TABLE [ATAN_TABLE_LEN] = '{
    843314857, 497837829, 263043837, 133525159, 67021687, 33543516,
    16775851, 8388437, 4194283, 2097149, 1048576, 524288, 262144, 131072,
    65536, 32768, 16384, 8192, 4096, 2048, 1024, 512, 256, 128};

  // atan(2^-i) in fx_t, rounded.
  function automatic fx_t atan_fx(input logic [4:0] i);
    longint unsigned v;
    v = longint'(ATAN_TABLE[i]) + (64'd1 << (ATAN_TABLE_FRAC - FRAC - 1));
    return fx_t'(v >> (ATAN_TABLE_FRAC - FRAC));
  endfunction

  // ---- saturating arithmetic ----------------------------------------------
  function automatic fx_t sat_fx(input logic signed [63:0] v);
    if (v > 64'(signed'(FX_MAX))) return FX_MAX;
    if (v < 64'(signed'(FX_MIN))) return FX_MIN;
    return fx_t'(v);
  endfunction

  function automatic fx_t fx_add(input fx_t a, input fx_t b);
    return sat_fx(64'(a) + 64'(b));
  endfunction

  function automatic fx_t fx_sub(input fx_t a, input fx_t b);
    return sat_fx(64'(a) - 64'(b));
  endfunction

  // a * b, truncated toward minus infinity to FRAC fractional bits.
  function automatic fx_t fx_mul(input fx_t a, input fx_t b);
    logic signed [2*DW-1:0] p;
    p = a * b;
    return sat_fx(64'(p >>> FRAC));
  endfunction

  // a / b, truncated toward zero.  Division by zero saturates with the sign
  // of the numerator (zero over zero gives zero).
  function automatic fx_t fx_div(input fx_t a, input fx_t b);
    logic signed [DW+FRAC:0] num;
    logic signed [DW+FRAC:0] q;
    if (b == '0) begin
      if (a == '0)      return '0;
      else if (a[DW-1]) return FX_MIN;
      else              return FX_MAX;
    end
    num = (DW+FRAC+1)'(a) <<< FRAC;
    q   = num / (DW+FRAC+1)'(b);
    return sat_fx(64'(q));
  endfunction

  // sqrt(a) for a >= 0 (negative input gives 0); bit-serial integer square
  // root of a * 2^FRAC, so the result keeps FRAC fractional bits.
  function automatic fx_t fx_sqrt(input fx_t a);
    logic [DW+FRAC-1:0] rem;
    logic [DW+FRAC-1:0] root;
    logic [DW+FRAC-1:0] bitv;
    if (a[DW-1] || a == '0) return '0;
    rem  = (DW+FRAC)'(a) << FRAC;
    root = '0;
    bitv = (DW+FRAC)'(1) << (2 * ((DW + FRAC) / 2) - 2);
    for (int k = 0; k < (DW + FRAC) / 2; k++) begin
      if (rem >= root + bitv) begin
        rem  = rem - (root + bitv);
        root = (root >> 1) + bitv;
      end else begin
        root = root >> 1;
      end
      bitv = bitv >> 2;
    end
    return sat_fx(64'(root));
  endfunction

  // ---- format conversions -------------------------------------------------
  function automatic fx_t tau_to_fx(input tau_t t);
    return fx_t'({{(DW-TAUW){1'b0}}, t}) <<< (FRAC - TFRAC);
  endfunction

  function automatic fx_t part_to_fx(input logic signed [CW-1:0] p);
    return fx_t'(p) <<< (FRAC - CFRAC);
  endfunction

  // Round to nearest and saturate to the Q1.7 part range.
  function automatic logic signed [CW-1:0] fx_to_part(input fx_t v);
    logic signed [DW:0] r;
    r = ((DW+1)'(v) + (DW+1)'(1 << (FRAC - CFRAC - 1))) >>> (FRAC - CFRAC);
    if (r > (DW+1)'((1 << (CW-1)) - 1)) return CW'((1 << (CW-1)) - 1);
    if (r < -(DW+1)'(1 << (CW-1)))      return CW'(1 << (CW-1));
    return CW'(r);
  endfunction

  function automatic cfx_t cplx_to_cfx(input cplx_t c);
    cfx_t r;
    r.re = part_to_fx(c.re);
    r.im = part_to_fx(c.im);
    return r;
  endfunction

  function automatic cplx_t cfx_to_cplx(input cfx_t c);
    cplx_t r;
    r.re = fx_to_part(c.re);
    r.im = fx_to_part(c.im);
    return r;
  endfunction

  // Complex product (a.re + j a.im)(b.re + j b.im).
  function automatic cfx_t cfx_mul(input cfx_t a, input cfx_t b);
    cfx_t r;
    r.re = fx_sub(fx_mul(a.re, b.re), fx_mul(a.im, b.im));
    r.im = fx_add(fx_mul(a.re, b.im), fx_mul(a.im, b.re));
    return r;
  endfunction

  // Complex value times a real scalar.
  function automatic cfx_t cfx_scale(input cfx_t a, input fx_t s);
    cfx_t r;
    r.re = fx_mul(a.re, s);
    r.im = fx_mul(a.im, s);
    return r;
  endfunction

  function automatic cfx_t cfx_add(input cfx_t a, input cfx_t b);
    cfx_t r;
    r.re = fx_add(a.re, b.re);
    r.im = fx_add(a.im, b.im);
    return r;
  endfunction

  // Complex value divided by a real scalar.
  function automatic cfx_t cfx_div(input cfx_t a, input fx_t s);
    cfx_t r;
    r.re = fx_div(a.re, s);
    r.im = fx_div(a.im, s);
    return r;
  endfunction

endpackage
