// loeffler_odd -- "Block A": odd part O_alpha of the parametrised Loeffler
// transform.
//
// Takes the four differences b0..b3 (= a4..a7 of the input butterfly, i.e.
// x3-x4, x2-x5, x1-x6, x0-x7) and returns the four rows of O_alpha * b
// (rows m4..m7 of M_alpha):
//   o0 = -alpha1*b0 + alpha3*b1 - alpha4*b2 + alpha6*b3
//   o1 = -alpha4*b0 - alpha1*b1 - alpha6*b2 + alpha3*b3
//   o2 =  alpha3*b0 + alpha6*b1 - alpha1*b2 + alpha4*b3
//   o3 =  alpha6*b0 + alpha4*b1 + alpha3*b2 + alpha1*b3
// As in the signal flow graph, every input fans out to all four outputs,
// scaled by a shift/negate (alpha_scale); each output is a four-term sum.
// Terms whose alpha is zero are constants that synthesis removes, so the
// adder count of Block A is 4 * (number of nonzero odd alphas - 1). At the
// default T1 only alpha1 is nonzero and Block A shrinks to three negations
// and one plain wire (o3 = b3); that is the transform, not an omission.
// The matrix is the paper's; the rounding of 1/2 and the word width are this
// design's choices.
//
// Purely combinational, zero latency.
module loeffler_odd
  import loeffler_pkg::*;
#(
  parameter int unsigned W     = 13,
  parameter alpha_vec_t  ALPHA = ALPHA_T1
) (
  input  logic signed [W-1:0] b [4],
  output logic signed [W-1:0] o [4]
);

  // p1[j] = alpha1 * b[j], p3[j] = alpha3 * b[j], and so on.
  logic signed [W-1:0] p1 [4];
  logic signed [W-1:0] p3 [4];
  logic signed [W-1:0] p4 [4];
  logic signed [W-1:0] p6 [4];

  for (genvar j = 0; j < 4; j++) begin : g_scale
    alpha_scale #(.W(W), .ALPHA(ALPHA.a1)) u_p1 (.x(b[j]), .y(p1[j]));
    alpha_scale #(.W(W), .ALPHA(ALPHA.a3)) u_p3 (.x(b[j]), .y(p3[j]));
    alpha_scale #(.W(W), .ALPHA(ALPHA.a4)) u_p4 (.x(b[j]), .y(p4[j]));
    alpha_scale #(.W(W), .ALPHA(ALPHA.a6)) u_p6 (.x(b[j]), .y(p6[j]));
  end

  assign o[0] = -p1[0] + p3[1] - p4[2] + p6[3];
  assign o[1] = -p4[0] - p1[1] - p6[2] + p3[3];
  assign o[2] =  p3[0] + p6[1] - p1[2] + p4[3];
  assign o[3] =  p6[0] + p4[1] + p3[2] + p1[3];

endmodule
