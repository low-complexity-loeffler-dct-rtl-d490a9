// loeffler_ref_pkg -- reference model for the testbenches of the
// Loeffler-based approximate DCT.
//
// The reference does not follow the hardware's signal flow: it builds the
// three matrices of the factorisation T_alpha = P * M_alpha * A as plain
// integer tables and multiplies them out. To stay in integers every matrix
// that holds a parameter is kept at twice its value (2*alpha is always an
// integer for alpha in {0, +-1/2, +-1, +-2}), so m2 = 2*M_alpha and
// t2 = 2*T_alpha.
package loeffler_ref_pkg;
  import loeffler_pkg::*;

  typedef int mat8_t [8][8];
  typedef int mat4_t [4][4];

  // Butterfly matrix A.
  localparam mat8_t MAT_A = '{
    '{1, 0, 0, 0, 0, 0, 0, 1},
    '{0, 1, 0, 0, 0, 0, 1, 0},
    '{0, 0, 1, 0, 0, 1, 0, 0},
    '{0, 0, 0, 1, 1, 0, 0, 0},
    '{0, 0, 0, 1,-1, 0, 0, 0},
    '{0, 0, 1, 0, 0,-1, 0, 0},
    '{0, 1, 0, 0, 0, 0,-1, 0},
    '{1, 0, 0, 0, 0, 0, 0,-1}};

  // Output permutation P.
  localparam mat8_t MAT_P = '{
    '{1, 0, 0, 0, 0, 0, 0, 0},
    '{0, 0, 0, 0, 0, 0, 0, 1},
    '{0, 0, 1, 0, 0, 0, 0, 0},
    '{0, 0, 0, 0, 0, 1, 0, 0},
    '{0, 1, 0, 0, 0, 0, 0, 0},
    '{0, 0, 0, 0, 0, 0, 1, 0},
    '{0, 0, 0, 1, 0, 0, 0, 0},
    '{0, 0, 0, 0, 1, 0, 0, 0}};

  // 2 * E_alpha.
  function automatic mat4_t even2(alpha_vec_t al);
    int a2 = alpha_times2(al.a2);
    int a5 = alpha_times2(al.a5);
    mat4_t m = '{
      '{ 2,  2,  2,  2},
      '{ 2, -2, -2,  2},
      '{a2, a5, -a5, -a2},
      '{a5, -a2, a2, -a5}};
    return m;
  endfunction

  // 2 * O_alpha.
  function automatic mat4_t odd2(alpha_vec_t al);
    int a1 = alpha_times2(al.a1);
    int a3 = alpha_times2(al.a3);
    int a4 = alpha_times2(al.a4);
    int a6 = alpha_times2(al.a6);
    mat4_t m = '{
      '{-a1,  a3, -a4,  a6},
      '{-a4, -a1, -a6,  a3},
      '{ a3,  a6, -a1,  a4},
      '{ a6,  a4,  a3,  a1}};
    return m;
  endfunction

  // 2 * M_alpha = blockdiag(2E, 2O).
  function automatic mat8_t m2_of(alpha_vec_t al);
    mat8_t m = '{default: 0};
    mat4_t e = even2(al);
    mat4_t o = odd2(al);
    for (int i = 0; i < 4; i++)
      for (int j = 0; j < 4; j++) begin
        m[i][j]         = e[i][j];
        m[4 + i][4 + j] = o[i][j];
      end
    return m;
  endfunction

  function automatic mat8_t matmul8(mat8_t l, mat8_t r);
    mat8_t p = '{default: 0};
    for (int i = 0; i < 8; i++)
      for (int j = 0; j < 8; j++)
        for (int k = 0; k < 8; k++)
          p[i][j] += l[i][k] * r[k][j];
    return p;
  endfunction

  // 2 * T_alpha = P * (2 M_alpha) * A.
  function automatic mat8_t t2_of(alpha_vec_t al);
    return matmul8(MAT_P, matmul8(m2_of(al), MAT_A));
  endfunction

  // True if any parameter of the vector is +-1/2 (results are then rounded).
  function automatic bit has_half(alpha_vec_t al);
    alpha_t v [6] = '{al.a1, al.a2, al.a3, al.a4, al.a5, al.a6};
    foreach (v[i]) if (v[i] == A_P_HALF || v[i] == A_M_HALF) return 1'b1;
    return 1'b0;
  endfunction

  // Check one hardware result y against 2*exact. With integer parameters the
  // result must be exact; with halves each of up to nterms rounded products
  // may be off by less than one.
  function automatic bit close_enough(longint y, longint exact2, bit half, int nterms);
    longint d = 2 * y - exact2;
    if (!half) return d == 0;
    return (d < 2 * nterms) && (d > -2 * nterms);
  endfunction

endpackage
