// tb_ref_pkg: reference models used by the testbenches. They compute the
// same integer arithmetic as the RTL from first principles: the DCT
// matrix is built from cos() and the 2-D transforms are plain matrix
// sums, not the even/odd butterflies of the hardware.
package tb_ref_pkg;

  int JPEG [64] = '{
    16, 11, 10, 16, 24, 40, 51, 61, 12, 12, 14, 19, 26, 58, 60, 55,
    14, 13, 16, 24, 40, 57, 69, 56, 14, 17, 22, 29, 51, 87, 80, 62,
    18, 22, 37, 56, 68,109,103, 77, 24, 35, 55, 64, 81,104,113, 92,
    49, 64, 78, 87,103,121,120,101, 72, 92, 95, 98,112,100,103, 99};

  // DCT matrix C[k][n] with 14 fraction bits
  function automatic longint cm(int k, int n);
    real s, v;
    s = (k == 0) ? $sqrt(1.0 / 8.0) : 0.5;
    v = s * $cos((2.0 * n + 1.0) * k * 3.14159265358979 / 16.0) * 16384.0;
    return longint'($floor(v + 0.5));
  endfunction

  function automatic longint rsh(longint v, int s);
    if (s == 0) return v;
    return (v + (longint'(1) <<< (s - 1))) >>> s;
  endfunction

  function automatic longint satw(longint v, int w);
    longint hi = (longint'(1) <<< (w - 1)) - 1;
    if (v > hi) return hi;
    if (v < -hi - 1) return -hi - 1;
    return v;
  endfunction

  function automatic int qt(int level, int u, int v);
    int q = (JPEG[u*8 + v] << level) >> 3;
    return (q < 1) ? 1 : q;
  endfunction

  typedef longint blk_t [8][8];   // [row][col]

  // forward 2-D DCT: input X[row][col], output S = Z^T (S[r][i] = Z[i][r])
  function automatic blk_t dct2(blk_t x);
    blk_t y, s;
    for (int j = 0; j < 8; j++)
      for (int k = 0; k < 8; k++) begin
        longint a = 0;
        for (int n = 0; n < 8; n++) a += cm(k, n) * x[n][j];
        y[k][j] = satw(rsh(a, 14), 18);
      end
    for (int i = 0; i < 8; i++)
      for (int k = 0; k < 8; k++) begin
        longint a = 0;
        for (int r = 0; r < 8; r++) a += cm(k, r) * y[i][r];
        s[k][i] = satw(rsh(a, 14), 20);
      end
    return s;
  endfunction

  // inverse 2-D DCT of a stored matrix S, output X[row][col], 16-bit
  function automatic blk_t idct2(blk_t s);
    blk_t v, x;
    for (int j = 0; j < 8; j++)
      for (int n = 0; n < 8; n++) begin
        longint a = 0;
        for (int k = 0; k < 8; k++) a += cm(k, n) * s[k][j];
        v[n][j] = satw(rsh(a, 14), 20);
      end
    for (int i = 0; i < 8; i++)
      for (int n = 0; n < 8; n++) begin
        longint a = 0;
        for (int k = 0; k < 8; k++) a += cm(k, n) * v[i][k];
        x[n][i] = satw(satw(rsh(a, 14), 20), 16);
      end
    return x;
  endfunction

  // quantise element r of stored column i
  function automatic longint quant(longint f, int level, int i, int r, int mult, int shift);
    longint q1, mag, q;
    int t;
    q1 = rsh(f * mult, shift);
    if (q1 > 127) q1 = 127;
    if (q1 < -127) q1 = -127;
    mag = (q1 < 0) ? -q1 : q1;
    t = qt(level, i, r);
    q = (mag + t / 2) / t;
    return (q1 < 0) ? -q : q;
  endfunction

  function automatic longint dequant(longint q, int level, int i, int r, int mult, int shift);
    return satw(rsh(q * qt(level, i, r) * mult, shift), 20);
  endfunction

endpackage
