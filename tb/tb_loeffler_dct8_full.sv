// tb_loeffler_dct8_full -- the core at its default parameters (8-bit inputs,
// transform T1) driven with 100,000 random eight-point vectors, the same
// number of random test vectors used to validate the FPGA prototype of the
// transform.
//
// Vectors enter back to back, one per clock. Every output coefficient is
// compared with P * M_alpha * A * x computed in loeffler_ref_pkg for
// alpha = [1 1 0 0 0 0]; the test also checks the three-edge latency, that
// the output stream has no gaps (one vector per cycle) and that all 100,000
// results arrive.
module tb_loeffler_dct8_full;
  import loeffler_pkg::*;
  import loeffler_ref_pkg::*;

  localparam int unsigned IN_W  = 8;
  localparam int unsigned OUT_W = IN_W + DCT8_GROWTH;
  localparam int NVEC = 100000;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;

  logic                    rst_n;
  logic                    in_valid;
  logic signed [IN_W-1:0]  x [8];
  logic                    out_valid;
  logic signed [OUT_W-1:0] X [8];

  loeffler_dct8 dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .x(x),
    .out_valid(out_valid), .X(X));

  initial begin : watchdog
    repeat (NVEC + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int    cyc = 0;
  bit    hv [16];
  int    hx [16][8];
  int    received = 0;
  int    first_in_edge = -1;
  int    first_out_edge = -1;
  mat8_t t2;

  always @(posedge clk) cyc <= cyc + 1;

  task automatic check_outputs(int n);
    bit exp_valid = (n >= 2) && hv[(n - 2) % 16];
    longint exact2;
    checks++;
    if (out_valid != exp_valid) begin
      failures++;
      if (failures < 10) $display("edge %0d: out_valid=%0b expected %0b", n, out_valid, exp_valid);
    end
    if (out_valid) begin
      if (first_out_edge < 0) first_out_edge = n + 1;
      received++;
    end
    if (out_valid && exp_valid) begin
      for (int i = 0; i < 8; i++) begin
        exact2 = 0;
        for (int j = 0; j < 8; j++) exact2 += t2[i][j] * longint'(hx[(n - 2) % 16][j]);
        checks++;
        if (2 * longint'(X[i]) != exact2) begin
          failures++;
          if (failures < 10) $display("edge %0d X%0d: got %0d, expected %0d", n, i, X[i], exact2 / 2);
        end
      end
    end
  endtask

  initial begin
    t2 = t2_of(ALPHA_T1);
    foreach (hv[i]) hv[i] = 1'b0;
    rst_n    = 1'b0;
    in_valid = 1'b0;
    foreach (x[j]) x[j] = '0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;

    for (int n = 0; n < NVEC + 4; n++) begin
      if (n > 0) begin
        @(negedge clk);
        check_outputs(cyc);
      end
      in_valid = (n < NVEC);
      foreach (x[j]) x[j] = IN_W'($urandom_range(0, 2 ** IN_W - 1));
      hv[(cyc + 1) % 16] = in_valid;
      foreach (x[j]) hx[(cyc + 1) % 16][j] = int'(x[j]);
      if (n == 0) first_in_edge = cyc + 1;
    end

    // Latency: edge that samples the first input to the edge at which its
    // result is first available downstream.
    checks++;
    if (first_out_edge - first_in_edge != DCT8_LATENCY) begin
      failures++;
      $display("latency %0d, expected %0d", first_out_edge - first_in_edge, DCT8_LATENCY);
    end
    // Throughput: all vectors arrive, one per cycle.
    checks++;
    if (received != NVEC) begin
      failures++;
      $display("received %0d of %0d vectors", received, NVEC);
    end
    $display("vectors %0d, latency %0d edges", received, first_out_edge - first_in_edge);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
