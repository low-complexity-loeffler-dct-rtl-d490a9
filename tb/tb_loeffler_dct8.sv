// tb_loeffler_dct8 -- end-to-end test of the pipelined eight-point
// Loeffler-based approximate DCT.
//
// One core is instantiated per parameter vector: the six efficient
// transforms T1..T6, the signed DCT (all ones), the printed half/one example
// and a vector with negative values of every magnitude. They share one input
// stream with random gaps in in_valid, full-scale corner vectors and a reset
// in the middle of the stream. The reference (loeffler_ref_pkg) multiplies
// out P * M_alpha * A; it is first checked against the two example matrices
// printed for the parametrisation (all-ones and half/one vectors).
//
// Checked: every coefficient of every valid output (exact for integer
// parameters, within the rounding of halved products otherwise), that
// out_valid follows in_valid exactly three clock edges later, that a reset
// drops the vectors in flight, and that each mechanism - every parameter
// vector, left shifts (alpha = +-2), halving (alpha = +-1/2), pipeline
// bubbles, back-to-back vectors, full-scale inputs and the mid-stream reset -
// occurred at least once.
module tb_loeffler_dct8;
  import loeffler_pkg::*;
  import loeffler_ref_pkg::*;

  localparam int unsigned IN_W  = 8;
  localparam int unsigned OUT_W = IN_W + DCT8_GROWTH;
  localparam int NVEC = 20000;
  localparam int NCFG = 9;
  localparam alpha_vec_t CFG [NCFG] = '{
    ALPHA_T1, ALPHA_T2, ALPHA_T3, ALPHA_T4, ALPHA_T5, ALPHA_T6,
    ALPHA_SDCT, ALPHA_EX2,
    alpha_vec_t'{A_M_ONE, A_M_TWO, A_M_HALF, A_P_TWO, A_M_HALF, A_M_TWO}};

  // The two example matrices printed with the parametrisation:
  // T for alpha = all ones, and 2*T for alpha = 1/2 * [1 2 1 1 1 2].
  localparam mat8_t PRINTED_T_ONES = '{
    '{1, 1, 1, 1, 1, 1, 1, 1},
    '{1, 1, 1, 1,-1,-1,-1,-1},
    '{1, 1,-1,-1,-1,-1, 1, 1},
    '{1,-1,-1,-1, 1, 1, 1,-1},
    '{1,-1,-1, 1, 1,-1,-1, 1},
    '{1,-1, 1, 1,-1,-1, 1,-1},
    '{1,-1, 1,-1,-1, 1,-1, 1},
    '{1,-1, 1,-1, 1,-1, 1,-1}};
  localparam mat8_t PRINTED_2T_EX2 = '{
    '{2, 2, 2, 2, 2, 2, 2, 2},
    '{1, 1, 1, 2,-2,-1,-1,-1},
    '{2, 1,-1,-2,-2,-1, 1, 2},
    '{1,-2,-1,-1, 1, 1, 2,-1},
    '{2,-2,-2, 2, 2,-2,-2, 2},
    '{1,-1, 2, 1,-1,-2, 1,-1},
    '{1,-2, 2,-1,-1, 2,-2, 1},
    '{2,-1, 1,-1, 1,-1, 1,-2}};

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;

  logic                    rst_n;
  logic                    in_valid;
  logic signed [IN_W-1:0]  x [8];
  logic                    out_valid [NCFG];
  logic signed [OUT_W-1:0] X_all [NCFG][8];

  for (genvar c = 0; c < NCFG; c++) begin : g_dut
    loeffler_dct8 #(.IN_W(IN_W), .ALPHA(CFG[c])) dut (
      .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .x(x),
      .out_valid(out_valid[c]), .X(X_all[c]));
  end

  initial begin : watchdog
    repeat (2 * NVEC + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // History of what each clock edge sampled, indexed by edge number mod 16.
  int  cyc = 0;
  bit  hv [16];
  int  hx [16][8];
  always @(posedge clk) cyc <= cyc + 1;

  // Mechanism counters.
  int n_cfg_vec [NCFG];
  int n_shift_vec, n_half_vec, n_bubble, n_b2b, n_fullscale, n_reset_drop, n_sent;

  mat8_t t2 [NCFG];

  // True if any parameter of the vector is +-2 (a left shift).
  function automatic bit has_two(alpha_vec_t al);
    alpha_t v [6] = '{al.a1, al.a2, al.a3, al.a4, al.a5, al.a6};
    foreach (v[i]) if (v[i] == A_P_TWO || v[i] == A_M_TWO) return 1'b1;
    return 1'b0;
  endfunction

  task automatic check_outputs(int n);
    bit exp_valid = (n >= 2) && hv[(n - 2) % 16];
    longint exact2;
    for (int c = 0; c < NCFG; c++) begin
      checks++;
      if (out_valid[c] !== exp_valid) begin
        failures++;
        if (failures < 10) $display("edge %0d cfg %0d: out_valid=%0b expected %0b", n, c, out_valid[c], exp_valid);
      end
      if (exp_valid && out_valid[c]) begin
        n_cfg_vec[c]++;
        if (has_two(CFG[c])) n_shift_vec++;
        if (has_half(CFG[c])) n_half_vec++;
        for (int i = 0; i < 8; i++) begin
          exact2 = 0;
          for (int j = 0; j < 8; j++) exact2 += t2[c][i][j] * longint'(hx[(n - 2) % 16][j]);
          checks++;
          // Rows X0, X4 are exact; X2, X6 have two rounded terms; odd rows four.
          if (!close_enough(longint'(X_all[c][i]), exact2, has_half(CFG[c]), 4)) begin
            failures++;
            if (failures < 10)
              $display("edge %0d cfg %0d X%0d: got %0d, exact*2 %0d", n, c, i, X_all[c][i], exact2);
          end
        end
      end
    end
  endtask

  initial begin
    mat8_t t_ones;
    bit prev_valid;
    bit in_flight;
    int kind;

    prev_valid = 1'b0;
    foreach (n_cfg_vec[c]) n_cfg_vec[c] = 0;
    {n_shift_vec, n_half_vec, n_bubble, n_b2b, n_fullscale, n_reset_drop, n_sent} = '0;
    foreach (hv[i]) hv[i] = 1'b0;
    foreach (CFG[c]) t2[c] = t2_of(CFG[c]);

    // Reference model against the printed example matrices.
    t_ones = t2_of(ALPHA_SDCT);
    for (int i = 0; i < 8; i++)
      for (int j = 0; j < 8; j++) begin
        checks += 2;
        if (t_ones[i][j] != 2 * PRINTED_T_ONES[i][j]) failures++;
        if (t2_of(ALPHA_EX2)[i][j] != PRINTED_2T_EX2[i][j]) failures++;
      end
    if (failures != 0) $display("reference model disagrees with printed matrices");

    rst_n    = 1'b0;
    in_valid = 1'b0;
    foreach (x[j]) x[j] = '0;
    repeat (3) @(posedge clk);

    for (int n = 0; n < NVEC; n++) begin
      @(negedge clk);
      check_outputs(cyc);
      in_flight = hv[(cyc - 1) % 16] || hv[cyc % 16];
      // Stimulus for the next edge.
      rst_n = !(n >= NVEC / 2 && n < NVEC / 2 + 2);
      kind  = $urandom_range(0, 99);
      in_valid = (kind < 75);
      if (kind < 5) begin
        foreach (x[j]) x[j] = ($urandom_range(0, 1) != 0) ? -(2 ** (IN_W - 1)) : (2 ** (IN_W - 1)) - 1;
        n_fullscale++;
      end else if (kind < 8) begin
        // The most negative value on every input gives the largest result.
        foreach (x[j]) x[j] = IN_W'(-(2 ** (IN_W - 1)));
        n_fullscale++;
      end else begin
        foreach (x[j]) x[j] = IN_W'($urandom_range(0, 2 ** IN_W - 1));
      end
      if (!rst_n) begin
        if (in_flight) n_reset_drop++;
        hv[(cyc + 1) % 16] = 1'b0;
        hv[cyc % 16]       = 1'b0;
        hv[(cyc - 1) % 16] = 1'b0;
      end else begin
        hv[(cyc + 1) % 16] = in_valid;
        if (in_valid) n_sent++;
        if (in_valid && prev_valid) n_b2b++;
        if (!in_valid && in_flight) n_bubble++;
      end
      foreach (x[j]) hx[(cyc + 1) % 16][j] = int'(x[j]);
      prev_valid = in_valid && rst_n;
    end
    repeat (4) begin
      @(negedge clk);
      check_outputs(cyc);
      in_valid = 1'b0;
      hv[(cyc + 1) % 16] = 1'b0;
    end

    foreach (n_cfg_vec[c]) begin
      $display("configuration %0d: %0d vectors", c, n_cfg_vec[c]);
      if (n_cfg_vec[c] == 0) failures++;
    end
    $display("shifted %0d, halved %0d, bubbles %0d, back-to-back %0d, full-scale %0d, reset drops %0d",
             n_shift_vec, n_half_vec, n_bubble, n_b2b, n_fullscale, n_reset_drop);
    if (n_shift_vec == 0 || n_half_vec == 0 || n_bubble == 0 || n_b2b == 0 ||
        n_fullscale == 0 || n_reset_drop == 0) begin
      failures++;
      $display("a mechanism never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
