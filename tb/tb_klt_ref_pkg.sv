// tb_klt_ref_pkg: reference data for the KLT core testbenches.
//
// Holds the six published 8x8 low-complexity matrices T (in full, not in
// factored form), the 4x4 kernel constants, the published wordlength increase
// and latency of each core, and a direct matrix-vector product. The
// testbenches compare the pipelined fast algorithms against these direct
// products, so a wrong factor anywhere in the pipeline shows up.
package tb_klt_ref_pkg;

  typedef int vec8_t [8];

  // Rows of T1, T3, T13, T16, T17, T18 in that order.
  localparam int TMAT [6][8][8] = '{
    '{'{0, 1, 1, 1, 1, 1, 1, 0}, '{1, 1, 1, 0, 0,-1,-1,-1}, '{1, 1, 0,-1,-1, 0, 1, 1},
      '{1, 0,-1,-1, 1, 1, 0,-1}, '{1, 0,-1, 1, 1,-1, 0, 1}, '{1,-1, 0, 1,-1, 0, 1,-1},
      '{1,-1, 1, 0, 0, 1,-1, 1}, '{0,-1, 1,-1, 1,-1, 1, 0}},
    '{'{1, 2, 3, 3, 3, 3, 2, 1}, '{2, 3, 3, 1,-1,-3,-3,-2}, '{3, 3, 0,-3,-3, 0, 3, 3},
      '{3, 1,-3,-2, 2, 3,-1,-3}, '{3,-1,-3, 2, 2,-3,-1, 3}, '{3,-3, 0, 3,-3, 0, 3,-3},
      '{2,-3, 3,-1,-1, 3,-3, 2}, '{1,-2, 3,-3, 3,-3, 2,-1}},
    '{'{1, 1, 1, 2, 2, 1, 1, 1}, '{2, 2, 1, 0, 0,-1,-2,-2}, '{2, 1, 0,-2,-2, 0, 1, 2},
      '{2, 0,-2,-1, 1, 2, 0,-2}, '{1,-1,-1, 1, 1,-1,-1, 1}, '{1,-2, 0, 2,-2, 0, 2,-1},
      '{1,-2, 2,-1,-1, 2,-2, 1}, '{0,-1, 2,-2, 2,-2, 1, 0}},
    '{'{2, 2, 2, 2, 2, 2, 2, 2}, '{3, 3, 2, 1,-1,-2,-3,-3}, '{3, 2,-1,-3,-3,-1, 2, 3},
      '{3, 0,-3,-2, 2, 3, 0,-3}, '{2,-2,-2, 2, 2,-2,-2, 2}, '{2,-3, 1, 2,-2,-1, 3,-2},
      '{1,-3, 3,-1,-1, 3,-3, 1}, '{1,-2, 3,-3, 3,-3, 2,-1}},
    '{'{2, 2, 2, 2, 2, 2, 2, 2}, '{3, 3, 2, 1,-1,-2,-3,-3}, '{3, 2,-1,-3,-3,-1, 2, 3},
      '{3, 0,-3,-2, 2, 3, 0,-3}, '{2,-2,-2, 2, 2,-2,-2, 2}, '{2,-3, 1, 3,-3,-1, 3,-2},
      '{1,-3, 3,-1,-1, 3,-3, 1}, '{1,-2, 3,-3, 3,-3, 2,-1}},
    '{'{1, 1, 1, 2, 2, 1, 1, 1}, '{2, 2, 1, 0, 0,-1,-2,-2}, '{2, 1,-1,-2,-2,-1, 1, 2},
      '{2, 0,-2,-1, 1, 2, 0,-2}, '{1,-1,-1, 1, 1,-1,-1, 1}, '{1,-2, 0, 2,-2, 0, 2,-1},
      '{1,-2, 2,-1,-1, 2,-2, 1}, '{0,-1, 2,-2, 2,-2, 1, 0}}
  };

  // Published wordlength increase and latency (cycles) of each core.
  localparam int DELTA_BITS [6] = '{3, 5, 4, 6, 6, 5};
  localparam int LATENCY    [6] = '{3, 3, 3, 4, 4, 4};

  // Kernel constants [transform][M1/M2][m0..m15], as published.
  localparam int KCONST [6][2][16] = '{
    '{'{0,1,1,1, 1,1,0,-1, 1,0,-1,1, 1,-1,1,0},    '{0,1,1,1, -1,-1,0,1, 1,0,-1,1, -1,1,-1,0}},
    '{'{1,2,3,3, 3,3,0,-3, 3,-1,-3,2, 2,-3,3,-1},  '{1,3,3,2, -2,-3,1,3, 3,0,-3,3, -3,3,-2,1}},
    '{'{1,1,1,2, 2,1,0,-2, 1,-1,-1,1, 1,-2,2,-1},  '{0,1,2,2, -1,-2,0,2, 2,0,-2,1, -2,2,-1,0}},
    '{'{2,2,2,0, 0,2,-1,3, 2,-2,-2,0, 0,-3,3,1},   '{1,2,3,3, -2,-3,0,3, 2,1,-3,2, -3,3,-2,1}},
    '{'{2,2,2,0, 0,2,-1,3, 2,-2,-2,0, 0,-3,3,1},   '{1,2,3,3, -2,-3,0,3, 3,1,-3,2, -3,3,-2,1}},
    '{'{1,1,0,2, 2,0,1,-2, 1,-1,0,1, 1,0,-2,-1},   '{0,1,2,2, -1,-2,0,2, 2,0,-2,1, -2,2,-1,0}}
  };

  function automatic vec8_t tmul(int t, vec8_t x);
    vec8_t y;
    for (int r = 0; r < 8; r++) begin
      y[r] = 0;
      for (int c = 0; c < 8; c++) y[r] += TMAT[t][r][c] * x[c];
    end
    return y;
  endfunction

  // Random signed value in [lo, hi].
  function automatic int rand_range(int lo, int hi);
    return lo + int'($urandom_range(hi - lo));
  endfunction

endpackage
