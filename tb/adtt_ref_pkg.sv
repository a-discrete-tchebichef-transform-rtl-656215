// adtt_ref_pkg: reference model for the test benches of the approximate
// 8-point DTT cores. It holds the two integer matrices as plain tables
// (forward T*, inverse T1) and computes the products directly, row by
// column, so that it shares nothing with the adder networks of the RTL.
// It also holds diag(D1)^-1 = (8,10,8,10,4,10,8,10), the diagonal of
// T* T1, which the loop-back tests use as a check that needs neither table.
package adtt_ref_pkg;

  typedef int vec_t [8];

  localparam int TSTAR [8][8] = '{
    '{ 1,  1,  1,  1,  1,  1,  1,  1},
    '{-1, -1,  0,  0,  0,  0,  1,  1},
    '{ 1,  0,  0, -1, -1,  0,  0,  1},
    '{-1,  1,  1,  0,  0, -1, -1,  1},
    '{ 0, -1,  0,  1,  1,  0, -1,  0},
    '{ 0,  1, -1, -1,  1,  1, -1,  0},
    '{ 0, -1,  1,  0,  0,  1, -1,  0},
    '{ 0,  0, -1,  1, -1,  1,  0,  0}
  };

  localparam int T1 [8][8] = '{
    '{ 1, -3,  3, -2,  1, -1, -1, -1},
    '{ 1, -2, -1,  2, -1,  1, -1,  1},
    '{ 1, -1, -1,  1, -1, -2,  3, -2},
    '{ 1, -1, -1,  1,  1, -2, -1,  3},
    '{ 1,  1, -1, -1,  1,  2, -1, -3},
    '{ 1,  1, -1, -1, -1,  2,  3,  2},
    '{ 1,  2, -1, -2, -1, -1, -1, -1},
    '{ 1,  3,  3,  2,  1,  1, -1,  1}
  };

  localparam int D1_INV [8] = '{8, 10, 8, 10, 4, 10, 8, 10};

  function automatic vec_t fwd_ref(input vec_t x);
    vec_t r;
    for (int k = 0; k < 8; k++) begin
      r[k] = 0;
      for (int n = 0; n < 8; n++) r[k] += TSTAR[k][n] * x[n];
    end
    return r;
  endfunction

  function automatic vec_t inv_ref(input vec_t c);
    vec_t r;
    for (int n = 0; n < 8; n++) begin
      r[n] = 0;
      for (int k = 0; k < 8; k++) r[n] += T1[n][k] * c[k];
    end
    return r;
  endfunction

  // Random value in [lo, hi].
  function automatic int urand_range(input int lo, input int hi);
    return lo + int'($urandom % (hi - lo + 1));
  endfunction

endpackage
