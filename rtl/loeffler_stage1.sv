// loeffler_stage1 -- input butterfly of the eight-point Loeffler transform.
//
// This is the additive matrix A of the factorisation T = P * M * A, eight
// additions that are the same for every member of the transform family:
//   a[k]   = x[k] + x[7-k]        k = 0..3  (feed the even part)
//   a[4+j] = x[3-j] - x[4+j]      j = 0..3  (feed the odd part, Block A)
// The butterfly itself is the paper's; the common word width W for inputs
// and outputs is this design's choice (the core sign-extends its inputs so
// that no node can overflow).
//
// Purely combinational, zero latency.
module loeffler_stage1 #(
  parameter int unsigned W = 13
) (
  input  logic signed [W-1:0] x [8],
  output logic signed [W-1:0] a [8]
);

  always_comb begin
    for (int k = 0; k < 4; k++) begin
      a[k]     = x[k] + x[7-k];
      a[4 + k] = x[3-k] - x[4+k];
    end
  end

endmodule
