// tb_hybrid_mpu: self-checking test of the hybrid matrix processing unit.
//
// Runs back-to-back jobs of random inner length K (including K = 1) on an
// MPU of one DSP-style and two bit-plane-style arrays at N = 4, with full-
// range int8 operands (including -128), and compares every output tile
// with C[i][j] = sum_k A[k][i] * B[k][j] computed here. Checks busy while
// a job is in flight.
module tb_hybrid_mpu;
  localparam int N = 4, ND = 1, NL = 2, NA = ND + NL;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  logic in_valid, in_first, in_last, busy, out_valid;
  logic signed [7:0] a_vec [NA][N];
  logic signed [7:0] b_vec [NA][N];
  logic signed [31:0] c_tile [NA][N][N];
  hybrid_mpu #(.N(N), .NA_DSP(ND), .NA_LUT(NL)) dut (.clk, .rst_n, .in_valid, .in_first, .in_last, .a_vec,
                                                     .b_vec, .busy, .out_valid, .c_tile);
  int ref_c [NA][N][N];

  initial begin
    in_valid = 0; in_first = 0; in_last = 0;
    for (int g = 0; g < NA; g++) for (int i = 0; i < N; i++) begin a_vec[g][i] = 0; b_vec[g][i] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int job = 0; job < 200; job++) begin
      automatic int K = (job % 10 == 0) ? 1 : 1 + int'($urandom_range(12));
      automatic int w = 0;
      for (int g = 0; g < NA; g++) for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) ref_c[g][i][j] = 0;
      for (int k = 0; k < K; k++) begin
        in_valid = 1; in_first = (k == 0); in_last = (k == K - 1);
        for (int g = 0; g < NA; g++)
          for (int i = 0; i < N; i++) begin
            a_vec[g][i] = (job % 5 == 0) ? -8'sd128 : 8'($urandom);
            b_vec[g][i] = (job % 7 == 0) ? -8'sd128 : 8'($urandom);
          end
        for (int g = 0; g < NA; g++)
          for (int i = 0; i < N; i++)
            for (int j = 0; j < N; j++) ref_c[g][i][j] += int'(a_vec[g][i]) * int'(b_vec[g][j]);
        @(negedge clk);
      end
      in_valid = 0; in_first = 0; in_last = 0;
      while (!out_valid && w < 50) begin check(busy, "busy while in flight"); @(negedge clk); w++; end
      check(out_valid, "result");
      for (int g = 0; g < NA; g++)
        for (int i = 0; i < N; i++)
          for (int j = 0; j < N; j++)
            check(c_tile[g][i][j] == ref_c[g][i][j],
                  $sformatf("job %0d array %0d c[%0d][%0d] %0d vs %0d", job, g, i, j, c_tile[g][i][j], ref_c[g][i][j]));
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
