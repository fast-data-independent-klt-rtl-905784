// klt_pkg: shared types and constants of the 8-point KLT approximation cores.
//
// Each of the six transforms T1, T3, T13, T16, T17, T18 factors as
//   T = P * blockdiag(M1, M2) * [A2] * A1
// where A1 is an 8-point butterfly, A2 is one of two small butterflies
// (A2' for T16/T17, A2'' for T18, none for T1/T3/T13), M1/M2 are 4x4 matrices
// with entries in {0, +-1, +-2, +-3} and P is a fixed output permutation.
// This package holds the sixteen kernel constants of M1 and M2 for every
// transform (row-major, m0..m15), which A2 butterfly each transform uses, and
// the wordlength and latency rules that follow from the structure:
//   * every additive stage (A1, A2) adds one bit and one clock cycle;
//   * the M kernel adds two clock cycles and 2 + ceil(log2(max|m|)) bits
//     (0 extra bits for max|m| = 1, 1 for 2, 2 for 3).
// These rules reproduce the wordlength increase and latency columns of the
// published FPGA results (T1: +3 bits / 3 cycles ... T16: +6 bits / 4 cycles).
// The numbers in MTAB are the published kernel constants; the width rule is
// this design's reading of "each arithmetic sub-block expands the wordlength".
package klt_pkg;

  localparam int N    = 8;  // transform length
  localparam int HALF = 4;  // size of each M block
  localparam int IN_W = 8;  // input wordlength of the published designs

  typedef enum logic [2:0] {
    XF_T1  = 3'd0,
    XF_T3  = 3'd1,
    XF_T13 = 3'd2,
    XF_T16 = 3'd3,
    XF_T17 = 3'd4,
    XF_T18 = 3'd5
  } xform_e;

  localparam int NUM_XFORMS = 6;

  // Which second additive factor a transform uses.
  typedef enum logic [1:0] {
    A2_NONE   = 2'd0,  // T = P M A1
    A2_PRIME  = 2'd1,  // A2' : butterfly of elements 0 and 3
    A2_DPRIME = 2'd2   // A2'': butterfly of elements 1 and 2
  } a2_kind_e;

  // Kernel constants, indexed [transform][block: 0 = M1, 1 = M2][m_k].
  localparam int MTAB [NUM_XFORMS][2][16] = '{
    // T1
    '{'{ 0, 1, 1, 1,   1, 1, 0,-1,   1, 0,-1, 1,   1,-1, 1, 0},
      '{ 0, 1, 1, 1,  -1,-1, 0, 1,   1, 0,-1, 1,  -1, 1,-1, 0}},
    // T3
    '{'{ 1, 2, 3, 3,   3, 3, 0,-3,   3,-1,-3, 2,   2,-3, 3,-1},
      '{ 1, 3, 3, 2,  -2,-3, 1, 3,   3, 0,-3, 3,  -3, 3,-2, 1}},
    // T13
    '{'{ 1, 1, 1, 2,   2, 1, 0,-2,   1,-1,-1, 1,   1,-2, 2,-1},
      '{ 0, 1, 2, 2,  -1,-2, 0, 2,   2, 0,-2, 1,  -2, 2,-1, 0}},
    // T16
    '{'{ 2, 2, 2, 0,   0, 2,-1, 3,   2,-2,-2, 0,   0,-3, 3, 1},
      '{ 1, 2, 3, 3,  -2,-3, 0, 3,   2, 1,-3, 2,  -3, 3,-2, 1}},
    // T17
    '{'{ 2, 2, 2, 0,   0, 2,-1, 3,   2,-2,-2, 0,   0,-3, 3, 1},
      '{ 1, 2, 3, 3,  -2,-3, 0, 3,   3, 1,-3, 2,  -3, 3,-2, 1}},
    // T18
    '{'{ 1, 1, 0, 2,   2, 0, 1,-2,   1,-1, 0, 1,   1, 0,-2,-1},
      '{ 0, 1, 2, 2,  -1,-2, 0, 2,   2, 0,-2, 1,  -2, 2,-1, 0}}
  };

  function automatic a2_kind_e a2_kind(xform_e xf);
    case (xf)
      XF_T16, XF_T17: return A2_PRIME;
      XF_T18:         return A2_DPRIME;
      default:        return A2_NONE;
    endcase
  endfunction

  // Largest |m_k| over both kernel blocks of a transform.
  function automatic int m_max(xform_e xf);
    int mx = 0;
    for (int b = 0; b < 2; b++)
      for (int k = 0; k < 16; k++) begin
        int v = MTAB[int'(xf)][b][k];
        if (v < 0) v = -v;
        if (v > mx) mx = v;
      end
    return mx;
  endfunction

  // Extra bits a constant product needs: ceil(log2(max|m|)).
  function automatic int m_prod_bits(xform_e xf);
    int mx = m_max(xf);
    return (mx <= 1) ? 0 : (mx == 2) ? 1 : 2;
  endfunction

  // Number of additive (A1, A2) stages.
  function automatic int add_stages(xform_e xf);
    return (a2_kind(xf) == A2_NONE) ? 1 : 2;
  endfunction

  // Wordlength of the M kernel input and of the transform output.
  function automatic int m_in_width(xform_e xf, int in_w);
    return in_w + add_stages(xf);
  endfunction

  function automatic int out_width(xform_e xf, int in_w);
    return in_w + add_stages(xf) + 2 + m_prod_bits(xf);
  endfunction

  // Clock cycles from input to output: one per additive stage, two for M.
  function automatic int latency(xform_e xf);
    return add_stages(xf) + 2;
  endfunction

endpackage
