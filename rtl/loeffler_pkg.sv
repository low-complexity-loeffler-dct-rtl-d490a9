// loeffler_pkg -- types and constants shared by the Loeffler-based
// approximate eight-point DCT.
//
// The transform family is T_alpha = P * M_alpha * A: a fixed input butterfly
// A, a multiplicative stage M_alpha whose six multiplicands are replaced by
// parameters alpha_1..alpha_6, and a fixed output permutation P. Each alpha is
// drawn from the set {0, +-1/2, +-1, +-2}, so that every "multiplication" is a
// wire, a negation and at most a one-bit shift. alpha_t encodes one such
// value; alpha_vec_t holds the six of them and is the parameter that selects
// the transform at elaboration time.
//
// The six Pareto-efficient parameter vectors (T1..T6) and the two example
// vectors of the parametrisation (the signed DCT, all ones, and the
// half/one/two example) are provided as constants. T1 is the default of every
// module: it is the smallest of the efficient transforms.
//
// Multiplication by 1/2 is an arithmetic right shift, i.e. it rounds toward
// minus infinity; this rounding is a choice of this design (the efficient
// transforms that carry a shift, T5 and T6, only use left shifts by one).
package loeffler_pkg;

  // One parameter value from {0, +-1/2, +-1, +-2}.
  typedef enum logic [2:0] {
    A_ZERO   = 3'd0,
    A_P_HALF = 3'd1,
    A_M_HALF = 3'd2,
    A_P_ONE  = 3'd3,
    A_M_ONE  = 3'd4,
    A_P_TWO  = 3'd5,
    A_M_TWO  = 3'd6
  } alpha_t;

  // The parameter vector alpha = [alpha_1 ... alpha_6].
  typedef struct packed {
    alpha_t a1;
    alpha_t a2;
    alpha_t a3;
    alpha_t a4;
    alpha_t a5;
    alpha_t a6;
  } alpha_vec_t;

  // Efficient solutions (Pareto set of the multicriteria search).
  localparam alpha_vec_t ALPHA_T1 = '{A_P_ONE, A_P_ONE, A_ZERO,  A_ZERO,  A_ZERO,   A_ZERO};
  localparam alpha_vec_t ALPHA_T2 = '{A_P_ONE, A_P_ONE, A_ZERO,  A_ZERO,  A_P_HALF, A_ZERO};
  localparam alpha_vec_t ALPHA_T3 = '{A_P_ONE, A_P_ONE, A_P_ONE, A_ZERO,  A_ZERO,   A_ZERO};
  localparam alpha_vec_t ALPHA_T4 = '{A_P_ONE, A_P_ONE, A_P_ONE, A_P_ONE, A_P_HALF, A_ZERO};
  localparam alpha_vec_t ALPHA_T5 = '{A_P_ONE, A_P_TWO, A_ZERO,  A_ZERO,  A_P_ONE,  A_ZERO};
  localparam alpha_vec_t ALPHA_T6 = '{A_P_ONE, A_P_TWO, A_P_ONE, A_P_ONE, A_P_ONE,  A_ZERO};

  // Examples of the parametrisation: all ones gives the signed DCT; the
  // second is the printed half/one example, alpha = 1/2 * [1 2 1 1 1 2].
  localparam alpha_vec_t ALPHA_SDCT = '{A_P_ONE, A_P_ONE, A_P_ONE, A_P_ONE, A_P_ONE, A_P_ONE};
  localparam alpha_vec_t ALPHA_EX2  = '{A_P_HALF, A_P_ONE, A_P_HALF, A_P_HALF, A_P_HALF, A_P_ONE};

  // Number of pipeline registers from input to output of the core.
  localparam int unsigned DCT8_LATENCY = 3;

  // Extra bits the datapath carries over the input word: every row of
  // T_alpha has an L1 norm of at most 16 (eight entries of magnitude <= 2),
  // so 4 bits of growth plus one to keep +16 * (-2^(IN_W-1)) representable.
  localparam int unsigned DCT8_GROWTH = 5;

  // Twice the value of a parameter, as an integer (used by testbenches and
  // reference models: 2*alpha is always an integer).
  function automatic int alpha_times2(alpha_t a);
    case (a)
      A_P_HALF: return  1;
      A_M_HALF: return -1;
      A_P_ONE:  return  2;
      A_M_ONE:  return -2;
      A_P_TWO:  return  4;
      A_M_TWO:  return -4;
      default:  return  0;
    endcase
  endfunction

endpackage
