// adtt_ref_pkg -- reference model for the testbenches of the approximate DTT.
//
// Holds the 8x8 integer matrix T8* written out entry by entry and computes
// the 1-D and 2-D transforms by plain matrix products, without the sparse
// factorization the RTL uses, so it checks the RTL independently:
//   fwd1d(x)  = T8* x              inv1d(y)  = (T8*)^T y
//   fwd2d(F)  = T8* F (T8*)^T      inv2d(M)  = (T8*)^T M T8*
// All arithmetic is in 64-bit integers: exact.
package adtt_ref_pkg;

  typedef longint vec_t [8];
  typedef longint blk_t [8][8];

  localparam int T8 [8][8] = '{
    '{ 1,  1,  1,  1,  1,  1,  1,  1},
    '{-2, -1, -1,  0,  0,  1,  1,  2},
    '{ 2,  0, -1, -1, -1, -1,  0,  2},
    '{-2,  1,  2,  1, -1, -2, -1,  2},
    '{ 1, -2,  0,  1,  1,  0, -2,  1},
    '{-1,  2, -1, -1,  1,  1, -2,  1},
    '{ 0, -1,  2, -1, -1,  2, -1,  0},
    '{ 0,  0, -1,  2, -2,  1,  0,  0}
  };

  function automatic vec_t fwd1d(vec_t x);
    vec_t y;
    for (int m = 0; m < 8; m++) begin
      y[m] = 0;
      for (int n = 0; n < 8; n++) y[m] += T8[m][n] * x[n];
    end
    return y;
  endfunction

  function automatic vec_t inv1d(vec_t y);
    vec_t x;
    for (int n = 0; n < 8; n++) begin
      x[n] = 0;
      for (int m = 0; m < 8; m++) x[n] += T8[m][n] * y[m];
    end
    return x;
  endfunction

  // out = K F K^T with K = T8* (inv = 0) or K = (T8*)^T (inv = 1)
  function automatic blk_t tr2d(blk_t f, bit inv);
    blk_t tmp, res;
    longint k;
    for (int p = 0; p < 8; p++)
      for (int n = 0; n < 8; n++) begin
        tmp[p][n] = 0;
        for (int m = 0; m < 8; m++) begin
          k = inv ? longint'(T8[m][p]) : longint'(T8[p][m]);
          tmp[p][n] += k * f[m][n];
        end
      end
    for (int p = 0; p < 8; p++)
      for (int q = 0; q < 8; q++) begin
        res[p][q] = 0;
        for (int n = 0; n < 8; n++) begin
          k = inv ? longint'(T8[n][q]) : longint'(T8[q][n]);
          res[p][q] += tmp[p][n] * k;
        end
      end
    return res;
  endfunction

endpackage
