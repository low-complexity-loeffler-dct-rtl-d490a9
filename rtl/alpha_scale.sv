// alpha_scale -- multiply a signed word by one Loeffler parameter value.
//
// The parameter set {0, +-1/2, +-1, +-2} is chosen so that a multiplication
// costs no multiplier: |alpha| = 2 is a left shift by one, |alpha| = 1 is a
// wire, |alpha| = 1/2 is an arithmetic right shift by one and 0 is a
// constant zero; a negative alpha negates the shifted word. The shift by 1/2
// rounds toward minus infinity before the negation, so -1/2 * x equals
// -(x >>> 1); that rounding is this design's choice.
//
// Interface: x and y have the same width W; the caller provides the headroom
// for a factor of two. Purely combinational, zero latency. Every instance
// sets ALPHA; the default (-1, a negation) only matters when the module is
// compiled on its own.
module alpha_scale
  import loeffler_pkg::*;
#(
  parameter int unsigned W     = 13,
  parameter alpha_t      ALPHA = A_M_ONE
) (
  input  logic signed [W-1:0] x,
  output logic signed [W-1:0] y
);

  logic signed [W-1:0] mag;

  always_comb begin
    unique case (ALPHA)
      A_P_HALF, A_M_HALF: mag = x >>> 1;
      A_P_ONE,  A_M_ONE:  mag = x;
      A_P_TWO,  A_M_TWO:  mag = x <<< 1;
      default:            mag = '0;
    endcase
    if (ALPHA == A_M_HALF || ALPHA == A_M_ONE || ALPHA == A_M_TWO)
      y = -mag;
    else
      y = mag;
  end

endmodule
