// loeffler_even -- even part E_alpha of the parametrised Loeffler transform.
//
// Takes the four sums a0..a3 of the input butterfly and returns the four
// rows of E_alpha * a (rows m0..m3 of M_alpha):
//   t0 = a0 + a3, t1 = a1 + a2, t2 = a1 - a2, t3 = a0 - a3
//   m0 = t0 + t1                    (becomes X0)
//   m1 = t0 - t1                    (becomes X4)
//   m2 = alpha2 * t3 + alpha5 * t2  (becomes X2)
//   m3 = alpha5 * t3 - alpha2 * t2  (becomes X6)
// The last two rows are the alpha_2/alpha_5 rotation box of the signal flow
// graph. The structure follows the paper; the rounding of a factor 1/2
// (see alpha_scale) and the word width are this design's choices. An alpha
// of zero leaves a constant operand that synthesis removes, which is how the
// adder count drops for the cheaper transforms.
//
// Purely combinational, zero latency.
module loeffler_even
  import loeffler_pkg::*;
#(
  parameter int unsigned W     = 13,
  parameter alpha_vec_t  ALPHA = ALPHA_T1
) (
  input  logic signed [W-1:0] a [4],
  output logic signed [W-1:0] e [4]
);

  logic signed [W-1:0] t0, t1, t2, t3;
  logic signed [W-1:0] a2_t3, a5_t2, a5_t3, a2_t2;

  assign t0 = a[0] + a[3];
  assign t1 = a[1] + a[2];
  assign t2 = a[1] - a[2];
  assign t3 = a[0] - a[3];

  alpha_scale #(.W(W), .ALPHA(ALPHA.a2)) u_a2_t3 (.x(t3), .y(a2_t3));
  alpha_scale #(.W(W), .ALPHA(ALPHA.a5)) u_a5_t2 (.x(t2), .y(a5_t2));
  alpha_scale #(.W(W), .ALPHA(ALPHA.a5)) u_a5_t3 (.x(t3), .y(a5_t3));
  alpha_scale #(.W(W), .ALPHA(ALPHA.a2)) u_a2_t2 (.x(t2), .y(a2_t2));

  assign e[0] = t0 + t1;
  assign e[1] = t0 - t1;
  assign e[2] = a2_t3 + a5_t2;
  assign e[3] = a5_t3 - a2_t2;

endmodule
