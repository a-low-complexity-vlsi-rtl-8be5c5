// fusion_pkg: types, constants and arithmetic helpers shared by the
// multi-focus DCT fusion datapath.
//
// Number format. Every transform value is a 35-bit two's-complement
// fixed-point number with 1 sign bit, 10 integer bits and 24 fraction bits
// (Q10.24), as the published architecture specifies for its DCT. Pixels are
// 8-bit unsigned and are level-shifted by -128 (the JPEG convention, this
// design's choice) before the forward transform, so that every coefficient
// of an orthonormal 8x8 DCT lies in [-1024, 1024) and fits Q10.24.
//
// Transform matrix. The 8-point orthonormal DCT-II is
//   X[k] = a(k) * sum_n x[n] * cos((2n+1) k pi / 16),
//   a(0) = sqrt(1/8), a(k>0) = sqrt(2/8) = 1/2.
// Its entries are built by dct_coef() from seven base constants
//   COS_Q[j] = round(0.5 * cos(j pi / 16) * 2^24), j = 1..7,
// using cos(m pi/16) symmetries; a(0) = sqrt(1/8) equals 0.5*cos(4 pi/16),
// so the DC row uses COS_Q[4]. The inverse transform uses the transposed
// matrix.
package fusion_pkg;

  localparam int N       = 8;                // block edge and pixels per clock
  localparam int PIX_W   = 8;                // pixel width
  localparam int COEF_W  = 35;               // 1 sign + 10 integer + 24 fraction
  localparam int FRAC_W  = 24;               // fraction bits of COEF_W
  localparam int CONST_W = 26;               // cosine constants, Q1.24 signed
  localparam int ABS_W   = COEF_W;           // |coef| fits 35 unsigned bits
  localparam int SUM_W   = ABS_W + 6;        // sum of 63 magnitudes

  typedef logic signed [COEF_W-1:0]  coef_t;
  typedef coef_t                     coef_vec_t [N];
  typedef logic [PIX_W-1:0]          pix_t;
  typedef pix_t                      pix_vec_t [N];
  typedef logic [SUM_W-1:0]          sum_t;
  typedef logic signed [CONST_W-1:0] cconst_t;

  // round(0.5*cos(j*pi/16) * 2^24), index 0 unused
  localparam cconst_t COS_Q [8] = '{
    26'sd0, 26'sd8227423, 26'sd7750063, 26'sd6974873,
    26'sd5931642, 26'sd4660461, 26'sd3210181, 26'sd1636536};

  // Entry (k, n) of the forward DCT matrix, Q1.24.
  function automatic cconst_t dct_coef(int k, int n);
    int m;
    logic neg;
    if (k == 0) return COS_Q[4];
    m   = ((2*n + 1) * k) % 32;              // angle in units of pi/16
    neg = 1'b0;
    if (m > 16) m = 32 - m;                  // cos(2pi - t) = cos(t)
    if (m > 8) begin m = 16 - m; neg = 1'b1; end  // cos(pi - t) = -cos(t)
    if (m == 8) return '0;                   // cos(pi/2) = 0
    if (m == 0) return neg ? -(COS_Q[4] + COS_Q[4]) : (COS_Q[4] + COS_Q[4]);
    return neg ? -COS_Q[m] : COS_Q[m];
  endfunction

  // Round a Q.48 accumulator (64 bits >= 35 + 26 + 3) to Q10.24 with
  // saturation to the 35-bit range.
  localparam longint COEF_MAX = (64'sd1 <<< (COEF_W-1)) - 1;
  localparam longint COEF_MIN = -(64'sd1 <<< (COEF_W-1));
  function automatic coef_t round_sat(longint acc);
    longint r;
    r = (acc + (64'sd1 <<< (FRAC_W-1))) >>> FRAC_W;
    if (r > COEF_MAX) return coef_t'(COEF_MAX);
    if (r < COEF_MIN) return coef_t'(COEF_MIN);
    return coef_t'(r);
  endfunction

  // Magnitude of a coefficient (|-2^34| = 2^34 still fits ABS_W bits).
  function automatic logic [ABS_W-1:0] coef_abs(coef_t c);
    return c[COEF_W-1] ? ABS_W'(-c) : ABS_W'(c);
  endfunction

  // Pixel to level-shifted Q10.24 value.
  function automatic coef_t pix_to_coef(pix_t p);
    return (coef_t'(p) - coef_t'(128)) <<< FRAC_W;
  endfunction

  // Q10.24 value to pixel: round to nearest, add 128, clamp to 0..255.
  function automatic pix_t coef_to_pix(coef_t c);
    logic signed [COEF_W-FRAC_W+1:0] v;
    v = (COEF_W-FRAC_W+2)'((c + (coef_t'(1) <<< (FRAC_W-1))) >>> FRAC_W) + 128;
    if (v < 0)   return 8'd0;
    if (v > 255) return 8'd255;
    return pix_t'(v);
  endfunction

endpackage
