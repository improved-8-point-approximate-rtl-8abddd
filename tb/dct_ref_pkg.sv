// dct_ref_pkg -- reference model for the testbenches.
//
// Holds the 8x8 low-complexity matrix T* of the approximate DCT written out
// row by row, and computes y = T* x by plain matrix-vector products, without
// the fast factorization that the RTL uses.
package dct_ref_pkg;

  localparam int TSTAR [8][8] = '{
    '{ 1,  1,  1,  1,  1,  1,  1,  1},
    '{ 0,  1,  0,  0,  0,  0, -1,  0},
    '{ 1,  0,  0, -1, -1,  0,  0,  1},
    '{ 1,  0,  0,  0,  0,  0,  0, -1},
    '{ 1, -1, -1,  1,  1, -1, -1,  1},
    '{ 0,  0,  0,  1, -1,  0,  0,  0},
    '{ 0, -1,  1,  0,  0,  1, -1,  0},
    '{ 0,  0,  1,  0,  0, -1,  0,  0}
  };

  typedef longint vec8_t [8];
  typedef longint blk8_t [8][8];

  function automatic vec8_t ref_1d(vec8_t x);
    vec8_t y;
    for (int r = 0; r < 8; r++) begin
      y[r] = 0;
      for (int c = 0; c < 8; c++) y[r] += longint'(TSTAR[r][c]) * x[c];
    end
    return y;
  endfunction

  // Y = T* A T*^T, A indexed [row][col]
  function automatic blk8_t ref_2d(blk8_t a);
    blk8_t t, y;
    for (int i = 0; i < 8; i++)
      for (int c = 0; c < 8; c++) begin
        t[i][c] = 0;
        for (int r = 0; r < 8; r++) t[i][c] += longint'(TSTAR[i][r]) * a[r][c];
      end
    for (int i = 0; i < 8; i++)
      for (int k = 0; k < 8; k++) begin
        y[i][k] = 0;
        for (int c = 0; c < 8; c++) y[i][k] += t[i][c] * longint'(TSTAR[k][c]);
      end
    return y;
  endfunction

  // uniformly random signed value of w bits
  function automatic longint rand_signed(int w);
    longint v;
    v = longint'({$urandom(), $urandom()});
    v = v & ((64'sd1 <<< w) - 1);
    if (v >= (64'sd1 <<< (w-1))) v -= (64'sd1 <<< w);
    return v;
  endfunction

endpackage
