// tb_systolic_array: random INT8 matrix products on a small DSP grid and a
// small bit-plane grid, three jobs each, compared with a software matrix
// product; also checks that out_valid comes 2N-2 clock edges after the edge
// that took the last input beat (K + 2N - 1 edges for the whole job).
module tb_systolic_array;
  localparam int N = 4;
  localparam int K = 7;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_first, in_last;
  logic signed [7:0] a_vec [2][N];
  logic signed [7:0] b_vec [2][N];
  logic ov [2];
  logic signed [31:0] c [2][N][N];
  int checks = 0, failures = 0;

  for (genvar g = 0; g < 2; g++) begin : g_dut
    systolic_array #(.N(N), .USE_LUT(g == 1)) dut (
      .clk, .rst_n, .in_valid, .in_first, .in_last,
      .a_vec(a_vec[g]), .b_vec(b_vec[g]), .out_valid(ov[g]), .c(c[g]));
  end

  logic signed [7:0] A [2][N][K];
  logic signed [7:0] B [2][K][N];

  task automatic run_job(input int lenk);
    int cyc;
    for (int g = 0; g < 2; g++)
      for (int i = 0; i < N; i++)
        for (int k = 0; k < K; k++) begin
          A[g][i][k] = 8'($urandom);
          B[g][k][i] = 8'($urandom);
        end
    for (int k = 0; k < lenk; k++) begin
      @(negedge clk);
      in_valid = 1; in_first = (k == 0); in_last = (k == lenk - 1);
      for (int g = 0; g < 2; g++)
        for (int i = 0; i < N; i++) begin
          a_vec[g][i] = A[g][i][k];
          b_vec[g][i] = B[g][k][i];
        end
    end
    @(negedge clk);
    in_valid = 0; in_first = 0; in_last = 0;
    cyc = 0;
    while (!ov[0]) begin
      @(negedge clk);
      cyc++;
    end
    // ov rises 2N-2 edges after the edge that took the last beat
    checks++;
    if (cyc != 2 * N - 2) begin
      failures++;
      $display("latency %0d expected %0d", cyc, 2 * N - 2);
    end
    checks++;
    if (!ov[1]) failures++;
    for (int g = 0; g < 2; g++)
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++) begin
          int ref_v = 0;
          for (int k = 0; k < lenk; k++) ref_v += int'(A[g][i][k]) * int'(B[g][k][j]);
          checks++;
          if (c[g][i][j] != ref_v) begin
            failures++;
            $display("g%0d c[%0d][%0d]=%0d ref %0d", g, i, j, c[g][i][j], ref_v);
          end
        end
  endtask

  initial begin
    in_valid = 0; in_first = 0; in_last = 0;
    for (int g = 0; g < 2; g++) for (int i = 0; i < N; i++) begin a_vec[g][i] = 0; b_vec[g][i] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_job(K);
    run_job(K);
    run_job(3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
