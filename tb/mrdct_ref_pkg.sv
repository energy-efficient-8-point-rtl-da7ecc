// mrdct_ref_pkg: golden model for the testbenches.
//
// Holds the 8x8 MRDCT matrix T entry by entry and computes the pruned
// transforms by plain matrix products, independently of the fast adder
// network in the design: X = T_K x for one vector and B = T_K A T_K^T for an
// 8x8 block, with every coefficient outside the first K rows (and, in 2-D,
// the first K columns) set to zero.
package mrdct_ref_pkg;

  localparam int T [8][8] = '{
    '{ 1,  1,  1,  1,  1,  1,  1,  1},
    '{ 1,  0,  0,  0,  0,  0,  0, -1},
    '{ 1,  0,  0, -1, -1,  0,  0,  1},
    '{ 0,  0, -1,  0,  0,  1,  0,  0},
    '{ 1, -1, -1,  1,  1, -1, -1,  1},
    '{ 0, -1,  0,  0,  0,  0,  1,  0},
    '{ 0, -1,  1,  0,  0,  1, -1,  0},
    '{ 0,  0,  0, -1,  1,  0,  0,  0}
  };

  typedef int vec_t [8];
  typedef int blk_t [8][8];

  // k-th coefficient of the K-pruned 1-D transform of v.
  function automatic int ref_1d(input vec_t v, input int k, input int kk);
    int s = 0;
    if (k >= kk) return 0;
    for (int n = 0; n < 8; n++) s += T[k][n] * v[n];
    return s;
  endfunction

  // B[m][c] of the K-pruned 2-D transform of block a.
  function automatic int ref_2d(input blk_t a, input int m, input int c, input int kk);
    int s = 0;
    if (m >= kk || c >= kk) return 0;
    for (int r = 0; r < 8; r++)
      for (int n = 0; n < 8; n++) s += T[m][r] * a[r][n] * T[c][n];
    return s;
  endfunction

endpackage
