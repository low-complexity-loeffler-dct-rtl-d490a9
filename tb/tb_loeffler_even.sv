// tb_loeffler_even -- self-checking test of the even part E_alpha.
//
// Instantiates loeffler_even once per parameter vector (the efficient
// transforms T1, T2, T5, T6, the printed half/one example and a vector with
// negative values of every magnitude), drives them all with the same
// directed and random inputs and compares each output row with the matrix
// product computed from 2*matrix in loeffler_ref_pkg. Integer parameter
// vectors must match exactly; vectors holding +-1/2 may differ from the
// exact value by the rounding of each halved product.
module tb_loeffler_even;
  import loeffler_pkg::*;
  import loeffler_ref_pkg::*;

  localparam int unsigned W = 13;
  localparam int NVEC = 2000;
  localparam int NCFG = 6;
  localparam alpha_vec_t CFG [NCFG] = '{
    ALPHA_T1, ALPHA_T2, ALPHA_T5, ALPHA_T6, ALPHA_EX2,
    alpha_vec_t'{A_M_ONE, A_M_TWO, A_M_HALF, A_P_TWO, A_M_HALF, A_M_TWO}};

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;
  int cfg_checks [NCFG];

  logic signed [W-1:0] a [4];
  logic signed [W-1:0] e_all [NCFG][4];

  for (genvar c = 0; c < NCFG; c++) begin : g_dut
    loeffler_even #(.W(W), .ALPHA(CFG[c])) dut (.a(a), .e(e_all[c]));
  end

  initial begin : watchdog
    repeat (NVEC + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply_and_check();
    longint exact2;
    mat4_t m;
    @(posedge clk);
    #1;
    for (int c = 0; c < NCFG; c++) begin
      m = even2(CFG[c]);
      for (int i = 0; i < 4; i++) begin
        exact2 = 0;
        for (int j = 0; j < 4; j++) exact2 += m[i][j] * longint'(a[j]);
        checks++;
        cfg_checks[c]++;
        if (!close_enough(longint'(e_all[c][i]), exact2, has_half(CFG[c]), 2)) begin
          failures++;
          if (failures < 10)
            $display("cfg %0d row %0d: got %0d, exact*2 %0d", c, i, e_all[c][i], exact2);
        end
      end
    end
  endtask

  initial begin
    foreach (cfg_checks[c]) cfg_checks[c] = 0;
    for (int u = 0; u < 4; u++) begin
      foreach (a[j]) a[j] = (j == u) ? 13'sd3 : 13'sd0;
      apply_and_check();
    end
    // Random inputs bounded so that 4 terms of factor 2 cannot overflow W.
    for (int n = 0; n < NVEC; n++) begin
      foreach (a[j]) a[j] = W'($signed($urandom_range(0, 1023)) - 512);
      apply_and_check();
    end
    foreach (cfg_checks[c])
      if (cfg_checks[c] == 0) begin
        failures++;
        $display("configuration %0d never checked", c);
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
