// tb_loeffler_metrics -- measures the transform matrix of each efficient
// core from its impulse responses and recomputes the published figures of
// merit from it.
//
// One loeffler_dct8 per efficient parameter vector T1..T6 is driven with
// the eight impulses 4*e_j (the factor 4 keeps every product by 1/2 exact),
// so output vector j divided by 4 is column j of the matrix the hardware
// realises. From that measured matrix T the testbench computes
//   * T*T^T, compared with its closed form: diagonal 8, 2*s1, 2*s0, 2*s1,
//     8, 2*s1, 2*s0, 2*s1 and off-diagonal +-2d, where
//     s0 = 2(a2^2 + a5^2), s1 = a1^2 + a3^2 + a4^2 + a6^2,
//     d = a1(a4 - a3) + a6(a4 + a3);
//   * the deviation from diagonality of T*T^T, compared with
//     1 - 1 / (1 + 32 d^2 / (128 + 8 s0^2 + 16 s1^2));
//   * the orthonormalised matrix C = diag(T*T^T)^(-1/2) * T and from it the
//     total error energy, the MSE against the exact DCT (Markov-1 input,
//     rho = 0.95), the unified coding gain and the transform efficiency,
//     compared with the published values to their printed precision.
// T3 is not orthogonal (d = -1); its published proximity and coding figures
// cannot be obtained from [1 1 1 0 0 0] with this orthonormalisation, so for
// T3 only the structure (T*T^T, deviation, near-orthogonality criterion) is
// checked and its metrics are printed.
module tb_loeffler_metrics;
  import loeffler_pkg::*;

  localparam int unsigned IN_W  = 8;
  localparam int unsigned OUT_W = IN_W + DCT8_GROWTH;
  localparam int NCFG = 6;
  localparam alpha_vec_t CFG [NCFG] = '{ALPHA_T1, ALPHA_T2, ALPHA_T3, ALPHA_T4, ALPHA_T5, ALPHA_T6};
  localparam real PI  = 3.14159265358979323846;
  localparam real RHO = 0.95;

  // Published values: total error energy, MSE, coding gain (dB),
  // transform efficiency (%). Row 2 (T3) is not compared.
  localparam real PUB [NCFG][4] = '{
    '{8.66, 0.059, 7.33, 80.90},
    '{7.73, 0.056, 7.54, 81.99},
    '{1.44, 0.007, 8.30, 89.77},
    '{0.87, 0.006, 8.39, 88.70},
    '{7.73, 0.056, 7.54, 81.99},
    '{0.87, 0.006, 8.39, 88.70}};
  localparam real TOL [4] = '{0.006, 0.0006, 0.006, 0.006};

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
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real t    [NCFG][8][8];   // measured T (row i, column j)
  real ttt  [8][8];
  real chat [8][8];
  real cdct [8][8];
  real r    [8][8];

  function automatic real alpha_real(alpha_t a);
    return real'(alpha_times2(a)) / 2.0;
  endfunction

  function automatic real absr(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  task automatic check_close(string what, int c, real got, real exp_v, real tol);
    checks++;
    if (absr(got - exp_v) > tol) begin
      failures++;
      $display("T%0d %s: got %f, expected %f", c + 1, what, got, exp_v);
    end
  endtask

  initial begin
    real a1, a2, a3, a4, a5, a6, s0, s1, d, dg, fro, dev, dev_formula;
    real eps, mse, cg, eta, acc, sum_abs, tr_abs;
    real diag_exp [8];
    real dm [8][8];
    real rx [8][8];

    // Exact DCT-II and the Markov-1 autocorrelation matrix.
    for (int k = 0; k < 8; k++)
      for (int n = 0; n < 8; n++) begin
        cdct[k][n] = ((k == 0) ? $sqrt(1.0 / 8.0) : 0.5) * $cos(real'((2 * n + 1) * k) * PI / 16.0);
        r[k][n]    = RHO ** real'((k > n) ? k - n : n - k);
      end

    rst_n    = 1'b0;
    in_valid = 1'b0;
    foreach (x[j]) x[j] = '0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;

    // Impulse responses: column j of 4*T.
    for (int j = 0; j < 8; j++) begin
      foreach (x[i]) x[i] = (i == j) ? IN_W'(4) : '0;
      in_valid = 1'b1;
      @(negedge clk);
      in_valid = 1'b0;
      repeat (DCT8_LATENCY - 1) @(negedge clk);
      for (int c = 0; c < NCFG; c++) begin
        checks++;
        if (!out_valid[c]) failures++;
        for (int i = 0; i < 8; i++) t[c][i][j] = real'(X_all[c][i]) / 4.0;
      end
    end

    for (int c = 0; c < NCFG; c++) begin
      a1 = alpha_real(CFG[c].a1); a2 = alpha_real(CFG[c].a2); a3 = alpha_real(CFG[c].a3);
      a4 = alpha_real(CFG[c].a4); a5 = alpha_real(CFG[c].a5); a6 = alpha_real(CFG[c].a6);
      s0 = 2.0 * (a2 * a2 + a5 * a5);
      s1 = a1 * a1 + a3 * a3 + a4 * a4 + a6 * a6;
      d  = a1 * (a4 - a3) + a6 * (a4 + a3);

      for (int i = 0; i < 8; i++)
        for (int j = 0; j < 8; j++) begin
          ttt[i][j] = 0.0;
          for (int k = 0; k < 8; k++) ttt[i][j] += t[c][i][k] * t[c][j][k];
        end

      // Closed form of T*T^T.
      diag_exp = '{8.0, 2.0 * s1, 2.0 * s0, 2.0 * s1, 8.0, 2.0 * s1, 2.0 * s0, 2.0 * s1};
      for (int i = 0; i < 8; i++)
        for (int j = 0; j < 8; j++) begin
          real e;
          if (i == j) e = diag_exp[i];
          else if ((i == 1 && j == 3) || (i == 3 && j == 1)) e = -2.0 * d;
          else if ((i == 1 && j == 5) || (i == 5 && j == 1)) e = 2.0 * d;
          else if ((i == 3 && j == 7) || (i == 7 && j == 3)) e = 2.0 * d;
          else if ((i == 5 && j == 7) || (i == 7 && j == 5)) e = 2.0 * d;
          else e = 0.0;
          check_close($sformatf("T*T^T[%0d][%0d]", i, j), c, ttt[i][j], e, 1e-9);
        end

      // Deviation from diagonality and the near-orthogonality criterion.
      dg = 0.0; fro = 0.0;
      for (int i = 0; i < 8; i++)
        for (int j = 0; j < 8; j++) begin
          fro += ttt[i][j] * ttt[i][j];
          if (i == j) dg += ttt[i][j] * ttt[i][j];
        end
      dev = 1.0 - dg / fro;
      dev_formula = 1.0 - 1.0 / (1.0 + 32.0 * d * d / (128.0 + 8.0 * s0 * s0 + 16.0 * s1 * s1));
      check_close("deviation from diagonality", c, dev, dev_formula, 1e-9);
      checks++;
      if (d != 0.0 && !(d * d <= 1.0 + s0 * s0 / 16.0 + s1 * s1 / 8.0)) begin
        failures++;
        $display("T%0d violates the near-orthogonality criterion", c + 1);
      end
      // Only T3 is non-orthogonal among the efficient transforms.
      checks++;
      if ((d != 0.0) != (c == 2)) begin
        failures++;
        $display("T%0d: orthogonality (d = %f) differs from the published table", c + 1, d);
      end

      // Orthonormalised matrix and the figures of merit.
      for (int i = 0; i < 8; i++)
        for (int j = 0; j < 8; j++) begin
          chat[i][j] = t[c][i][j] / $sqrt(ttt[i][i]);
          dm[i][j]   = cdct[i][j] - chat[i][j];
        end
      eps = 0.0;
      foreach (dm[i, j]) eps += dm[i][j] * dm[i][j];
      eps = PI * eps;
      mse = 0.0;
      for (int i = 0; i < 8; i++)
        for (int k = 0; k < 8; k++)
          for (int l = 0; l < 8; l++) mse += dm[i][k] * r[k][l] * dm[i][l];
      mse = mse / 8.0;
      // Coding gain for an orthonormal matrix (unit-norm basis vectors):
      // 10 log10 prod_k (1 / A_k)^(1/8), A_k = h_k R h_k^T.
      cg = 0.0;
      for (int k = 0; k < 8; k++) begin
        acc = 0.0;
        for (int i = 0; i < 8; i++)
          for (int j = 0; j < 8; j++) acc += chat[k][i] * r[i][j] * chat[k][j];
        cg += -10.0 / 8.0 * $log10(acc);
      end
      for (int i = 0; i < 8; i++)
        for (int j = 0; j < 8; j++) begin
          rx[i][j] = 0.0;
          for (int k = 0; k < 8; k++)
            for (int l = 0; l < 8; l++) rx[i][j] += chat[i][k] * r[k][l] * chat[j][l];
        end
      sum_abs = 0.0; tr_abs = 0.0;
      foreach (rx[i, j]) begin
        sum_abs += absr(rx[i][j]);
        if (i == j) tr_abs += absr(rx[i][j]);
      end
      eta = 100.0 * tr_abs / sum_abs;

      $display("T%0d: d=%0.2f deviation=%0.4f  error energy=%0.3f MSE=%0.4f coding gain=%0.3f dB efficiency=%0.2f%%",
               c + 1, d, dev, eps, mse, cg, eta);
      if (c != 2) begin
        check_close("total error energy", c, eps, PUB[c][0], TOL[0]);
        check_close("MSE", c, mse, PUB[c][1], TOL[1]);
        check_close("coding gain", c, cg, PUB[c][2], TOL[2]);
        check_close("transform efficiency", c, eta, PUB[c][3], TOL[3]);
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
