// tb_ref_pkg: floating-point reference models and test-image generator
// shared by the fusion testbenches. The reference DCT uses real arithmetic
// and $cos directly, independent of the fixed-point constants of the RTL.
package tb_ref_pkg;
  import fusion_pkg::*;

  typedef real blk_t [8][8];

  function automatic real basis(int k, int n);
    real a;
    a = (k == 0) ? $sqrt(1.0/8.0) : 0.5;
    return a * $cos((2.0*n + 1.0) * k * 3.14159265358979323846 / 16.0);
  endfunction

  // d[l][k] = sum_r sum_n basis(l,r) basis(k,n) x[r][n]
  function automatic blk_t dct8x8(blk_t x);
    blk_t t, d;
    for (int r = 0; r < 8; r++)
      for (int k = 0; k < 8; k++) begin
        t[r][k] = 0.0;
        for (int n = 0; n < 8; n++) t[r][k] += basis(k, n) * x[r][n];
      end
    for (int l = 0; l < 8; l++)
      for (int k = 0; k < 8; k++) begin
        d[l][k] = 0.0;
        for (int r = 0; r < 8; r++) d[l][k] += basis(l, r) * t[r][k];
      end
    return d;
  endfunction

  function automatic blk_t idct8x8(blk_t d);
    blk_t t, x;
    for (int r = 0; r < 8; r++)
      for (int k = 0; k < 8; k++) begin
        t[r][k] = 0.0;
        for (int l = 0; l < 8; l++) t[r][k] += basis(l, r) * d[l][k];
      end
    for (int r = 0; r < 8; r++)
      for (int n = 0; n < 8; n++) begin
        x[r][n] = 0.0;
        for (int k = 0; k < 8; k++) x[r][n] += basis(k, n) * t[r][k];
      end
    return x;
  endfunction

  function automatic real q2r(coef_t c);
    return real'(longint'(c)) / 16777216.0;
  endfunction

  function automatic coef_t r2q(real v);
    return coef_t'(longint'(v * 16777216.0));
  endfunction

  function automatic real ac_abs_sum(blk_t d);
    real s;
    s = 0.0;
    for (int l = 0; l < 8; l++)
      for (int k = 0; k < 8; k++)
        if (l != 0 || k != 0) s += (d[l][k] < 0.0) ? -d[l][k] : d[l][k];
    return s;
  endfunction

  // ---- synthetic multi-focus pair ----
  // Each block is sharp (textured) in exactly one of the two images and
  // smooth in the other. Which one follows a left/right split with isolated
  // exceptions, so that consistency verification has something to fix.
  function automatic bit a_is_sharp(int bx, int by, int wb, int seed);
    bit left;
    left = (bx < (wb + 1) / 2);
    if (((bx * 7 + by * 3 + seed) % 11) == 5) left = !left;
    return left;
  endfunction

  function automatic int hash(int x, int y, int s);
    int unsigned h;
    h = x * 32'd73856093 ^ y * 32'd19349663 ^ s * 32'd83492791;
    h = h ^ (h >> 13);
    h = h * 32'd1274126177;
    return int'(h >> 24);
  endfunction

  // pixel of image img (0 = A, 1 = B) at (x, y)
  function automatic pix_t gen_pix(int img, int x, int y, int wb, int seed);
    bit sharp;
    sharp = a_is_sharp(x / 8, y / 8, wb, seed) ^ (img == 1);
    if (sharp) return pix_t'(hash(x, y, seed + img));                   // 0..255 texture
    return pix_t'(96 + ((x / 8 + y / 8 + seed) % 64) + ((x + y) % 3)); // smooth
  endfunction

  function automatic blk_t block_of(int img, int bx, int by, int wb, int seed);
    blk_t b;
    for (int r = 0; r < 8; r++)
      for (int n = 0; n < 8; n++)
        b[r][n] = real'(gen_pix(img, bx*8 + n, by*8 + r, wb, seed)) - 128.0;
    return b;
  endfunction

endpackage
