// polymul_pkg: types and constants shared by the large-integer multipliers.
//
// method_e names the five multiplier flavours that the top level can select.
// The Toom-Cook tables below drive the evaluation and interpolation stages of
// toom3_mul and toom4_mul.  Each operand is split into K limbs of H bits,
// x = 2^H, and both operands are evaluated at 2K-1 points.  TOOMk_EVAL[p][j]
// is the weight of limb j at point p.  The point 1/2 is used in homogeneous
// form: it is scaled by 2^(K-1), which keeps every weight an integer.
// TOOMk_INTERP[i] is row i of the inverse of the product-evaluation matrix,
// scaled by TOOMk_DEN[i] so that the row holds integers:
//   c_i = (sum_p TOOMk_INTERP[i][p] * v_p) / TOOMk_DEN[i], division exact.
// Points are {0, 1, -1, -2, inf} for 3-way (the Bodrato choice) and
// {0, 1, -1, 2, -2, 1/2, inf} for 4-way.  The paper gives only the number
// of products, five and seven.  The points and matrices are this design's
// choice.  The tables are the exact rational inverse of the Vandermonde
// matrix V[p][i] = num_p^i * den_p^(2K-2-i).
package polymul_pkg;

  typedef enum logic [2:0] {
    M_SBM          = 3'd0,
    M_KARATSUBA2   = 3'd1,
    M_TOOM3        = 3'd2,
    M_TOOM4        = 3'd3,
    M_DIGIT_SERIAL = 3'd4
  } method_e;

  localparam int unsigned NUM_METHODS = 5;

  // ---- 3-way Toom-Cook: 5 points, 3 limbs ----
  localparam int TOOM3_EVAL [5][3] = '{
    '{1,  0, 0},   // 0
    '{1,  1, 1},   // 1
    '{1, -1, 1},   // -1
    '{1, -2, 4},   // -2
    '{0,  0, 1}    // inf
  };
  localparam int TOOM3_INTERP [5][5] = '{
    '{ 1, 0,  0,  0,   0},
    '{ 3, 2, -6,  1, -12},
    '{-2, 1,  1,  0,  -2},
    '{-3, 1,  3, -1,  12},
    '{ 0, 0,  0,  0,   1}
  };
  localparam int TOOM3_DEN [5] = '{1, 6, 2, 6, 1};

  // ---- 4-way Toom-Cook: 7 points, 4 limbs ----
  localparam int TOOM4_EVAL [7][4] = '{
    '{1,  0, 0,  0},   // 0
    '{1,  1, 1,  1},   // 1
    '{1, -1, 1, -1},   // -1
    '{1,  2, 4,  8},   // 2
    '{1, -2, 4, -8},   // -2
    '{8,  4, 2,  1},   // 1/2, scaled by 2^3
    '{0,  0, 0,  1}    // inf
  };
  localparam int TOOM4_INTERP [7][7] = '{
    '{   1,    0,   0,  0,  0, 0,    0},
    '{-360, -120, -40,  5,  3, 8, -360},
    '{ -30,   16,  16, -1, -1, 0,   96},
    '{  45,   27,  -7, -1,  0, -1,  45},
    '{   6,   -4,  -4,  1,  1, 0, -120},
    '{ -90,  -60,  20,  5, -3, 2,  -90},
    '{   0,    0,   0,  0,  0, 0,    1}
  };
  localparam int TOOM4_DEN [7] = '{1, 180, 24, 18, 24, 180, 1};

  // Number of trailing zero bits of a positive constant.
  function automatic int unsigned tzcount(input int unsigned v);
    int unsigned n = 0;
    while (v != 0 && v[0] == 1'b0) begin
      v = v >> 1;
      n++;
    end
    return n;
  endfunction

endpackage
