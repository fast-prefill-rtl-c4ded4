// tb_softmax_unit: self-checking test of the score-exponent (softmax
// numerator) unit.
//
// Sends random score vectors with random query / key positions, with and
// without the causal mask, and checks one cycle later that each lane equals
// the reference exponent (floating-point 2^(s>>shift / 16), truncated as the
// unit defines it) or zero where the key position is after the query
// position, and that psum is the sum of the lanes. Runs at N = 8, shift 4.
module tb_softmax_unit;
  localparam int N = 8, SH = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  logic in_valid, causal, out_valid;
  logic [31:0] qpos, kpos0;
  logic signed [31:0] score [N];
  logic [7:0] p [N];
  logic [15:0] psum;
  softmax_unit #(.N(N), .SCORE_SHIFT(SH)) dut (.clk, .rst_n, .in_valid, .causal, .qpos, .kpos0,
                                               .score, .out_valid, .p, .psum);

  function automatic int ref_exp(input longint s);
    longint t = s >>> SH;
    int n, f, m;
    if (t > 47) return 127;
    if (t < -64) return 0;
    n = int'(t >>> 4);
    f = int'(t - (longint'(n) << 4));
    m = int'($floor((2.0 ** (real'(f) / 16.0)) * 32768.0));
    return (m << (n + 4)) >>> 15;
  endfunction

  int n_masked = 0, n_sat = 0;
  initial begin
    in_valid = 0; causal = 0; qpos = 0; kpos0 = 0;
    for (int i = 0; i < N; i++) score[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 4000; it++) begin
      automatic int sum = 0;
      @(negedge clk);
      in_valid = 1;
      causal = 1'($urandom_range(1));
      qpos = $urandom_range(31);
      kpos0 = $urandom_range(31);
      for (int i = 0; i < N; i++) score[i] = int'($urandom_range(2400)) - 1400;
      @(negedge clk);
      in_valid = 0;
      check(out_valid, "out_valid");
      for (int i = 0; i < N; i++) begin
        automatic int e = (causal && kpos0 + i > qpos) ? 0 : ref_exp(score[i]);
        if (causal && kpos0 + i > qpos) n_masked++;
        if (e == 127) n_sat++;
        sum += e;
        check(p[i] == 8'(e), $sformatf("lane %0d score %0d: %0d vs %0d", i, score[i], p[i], e));
      end
      check(psum == 16'(sum), "psum");
    end
    check(n_masked > 0, "masking exercised");
    check(n_sat > 0, "saturation exercised");
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
