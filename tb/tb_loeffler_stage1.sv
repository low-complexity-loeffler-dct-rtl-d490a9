// tb_loeffler_stage1 -- self-checking test of the input butterfly.
//
// Drives directed and random eight-sample vectors into loeffler_stage1 and
// compares every output with the product of the butterfly matrix A (written
// out as a table in loeffler_ref_pkg) and the input vector.
module tb_loeffler_stage1;
  import loeffler_ref_pkg::*;

  localparam int unsigned W = 13;
  localparam int NVEC = 2000;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;

  logic signed [W-1:0] x [8];
  logic signed [W-1:0] a [8];

  loeffler_stage1 #(.W(W)) dut (.x(x), .a(a));

  initial begin : watchdog
    repeat (NVEC + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply_and_check();
    longint exp_v;
    @(posedge clk);
    #1;
    for (int i = 0; i < 8; i++) begin
      exp_v = 0;
      for (int j = 0; j < 8; j++) exp_v += MAT_A[i][j] * longint'(x[j]);
      checks++;
      if (longint'(a[i]) != exp_v) begin
        failures++;
        if (failures < 10) $display("a[%0d]=%0d expected %0d", i, a[i], exp_v);
      end
    end
  endtask

  initial begin
    // Directed: unit vectors expose each column of A.
    for (int u = 0; u < 8; u++) begin
      foreach (x[j]) x[j] = (j == u) ? 13'sd1 : 13'sd0;
      apply_and_check();
    end
    // Random vectors within half the word range (no overflow possible).
    for (int n = 0; n < NVEC; n++) begin
      foreach (x[j]) x[j] = W'($signed($urandom_range(0, 4095)) - 2048);
      apply_and_check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
