// loeffler_dct8 -- pipelined eight-point Loeffler-based approximate DCT.
//
// Computes X = T_alpha * x with T_alpha = P * M_alpha * A for one vector of
// eight samples per clock cycle:
//   stage 1  input butterfly A (loeffler_stage1), eight additions;
//   stage 2  M_alpha: the even part E_alpha (loeffler_even) on a0..a3 and
//            Block A, the odd part O_alpha (loeffler_odd), on a4..a7;
//   stage 3  output permutation P, pure wiring:
//            X0=m0 X1=m7 X2=m2 X3=m5 X4=m1 X5=m6 X6=m3 X7=m4.
// The parameter ALPHA selects the member of the family at elaboration time;
// the default is the efficient transform T1 = [1 1 0 0 0 0] (14 additions,
// no shifts), and ALPHA_T3, ALPHA_T5, ALPHA_T6 give the other efficient
// transforms that were mapped to hardware. The outputs are the
// low-complexity matrix T_alpha itself; the diagonal scaling that makes it
// orthonormal is left to the quantiser of a codec and is not computed here.
//
// Interface: x[0..7] are signed IN_W-bit samples qualified by in_valid;
// X[0..7] are signed OUT_W = IN_W + 5 bit coefficients qualified by
// out_valid. No sample can overflow: every row of T_alpha has an L1 norm of
// at most 16. There is no back-pressure; a new vector may enter every cycle.
//
// Timing: three register stages (input register, register after stage 1,
// output register), so a vector presented with in_valid in cycle n appears
// with out_valid in cycle n+3. Only the valid bits are reset (active-low
// rst_n, synchronous); data registers load when their valid bit advances.
// An assertion checks the valid pipeline: once out of reset, out_valid is
// in_valid delayed by DCT8_LATENCY clock edges.
// The algorithm and its stages are the paper's; the word width, the
// pipelining, the handshake and the reset are this design's choices.
module loeffler_dct8
  import loeffler_pkg::*;
#(
  parameter int unsigned IN_W  = 8,
  parameter alpha_vec_t  ALPHA = ALPHA_T1,
  localparam int unsigned OUT_W = IN_W + DCT8_GROWTH
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  x [8],
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] X [8]
);

  localparam int unsigned W = OUT_W;

  // The pipeline below has three register stages; the package constant
  // that testbenches and users rely on must agree with it.
  if (DCT8_LATENCY != 3) begin : g_latency_mismatch
    $error("DCT8_LATENCY must equal the number of register stages (3)");
  end

  // Stage registers: s0 = registered input, s1 = registered butterfly.
  logic                vld_s0, vld_s1;
  logic signed [W-1:0] x_s0 [8];
  logic signed [W-1:0] a_comb [8];
  logic signed [W-1:0] a_s1 [8];
  logic signed [W-1:0] e_comb [4];
  logic signed [W-1:0] o_comb [4];
  logic signed [W-1:0] m [8];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      vld_s0    <= 1'b0;
      vld_s1    <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      vld_s0    <= in_valid;
      vld_s1    <= vld_s0;
      out_valid <= vld_s1;
    end
  end

  // Input register, sign-extended to the datapath width.
  always_ff @(posedge clk) begin
    if (in_valid)
      for (int k = 0; k < 8; k++) x_s0[k] <= W'(x[k]);
  end

  // Stage 1: butterfly A.
  loeffler_stage1 #(.W(W)) u_stage1 (.x(x_s0), .a(a_comb));

  always_ff @(posedge clk) begin
    if (vld_s0) a_s1 <= a_comb;
  end

  // Stage 2: even part and Block A.
  loeffler_even #(.W(W), .ALPHA(ALPHA)) u_even (.a(a_s1[0:3]), .e(e_comb));
  loeffler_odd  #(.W(W), .ALPHA(ALPHA)) u_odd  (.b(a_s1[4:7]), .o(o_comb));

  always_comb begin
    for (int k = 0; k < 4; k++) begin
      m[k]     = e_comb[k];
      m[4 + k] = o_comb[k];
    end
  end

  // Stage 3: permutation P into natural coefficient order, then the output
  // register.
  always_ff @(posedge clk) begin
    if (vld_s1) begin
      X[0] <= m[0];
      X[1] <= m[7];
      X[2] <= m[2];
      X[3] <= m[5];
      X[4] <= m[1];
      X[5] <= m[6];
      X[6] <= m[3];
      X[7] <= m[4];
    end
  end

  // Handshake rule: a vector accepted at edge n leaves at edge n+2 (visible
  // to the next stage at n+3), unless a reset intervened.
  a_valid_latency: assert property (
    @(posedge clk) disable iff (!rst_n)
      $past(rst_n, 1) && $past(rst_n, 2) && $past(rst_n, 3)
      |-> out_valid == $past(in_valid, DCT8_LATENCY)
  );

endmodule
