// tb_sfu: self-checking test of the special function unit.
//
// Drives random vectors through the three operations with random shifts and
// denominators and compares each lane one cycle later against a reference
// written here: EXP against 2^(x>>shift / 16) computed in floating point and
// truncated to the unit's integer format, NORM against truncating division
// with saturation to int8, SILU against x*sigmoid(x) in floating point with a
// tolerance for the unit's piecewise exponent. Runs at 8 lanes.
module tb_sfu;
  localparam int L = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  logic in_valid, out_valid;
  logic [1:0] op;
  logic [4:0] shift;
  logic signed [31:0] x [L];
  logic signed [31:0] den;
  logic signed [31:0] y [L];
  sfu #(.LANES(L)) dut (.clk, .rst_n, .in_valid, .op, .shift, .x, .den, .out_valid, .y);

  function automatic int ref_exp(input longint s, input int sh);
    longint t = s >>> sh;
    int n, f, m;
    if (t > 47) return 127;
    if (t < -64) return 0;
    n = int'(t >>> 4);
    f = int'(t - (longint'(n) << 4));
    m = int'($floor((2.0 ** (real'(f) / 16.0)) * 32768.0));
    return (m << (n + 4)) >>> 15;
  endfunction

  int n_ops [3];
  initial begin
    in_valid = 0; op = 0; shift = 0; den = 0;
    for (int l = 0; l < L; l++) x[l] = 0;
    n_ops = '{0, 0, 0};
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      automatic int o = int'($urandom_range(2));
      automatic int mode = int'($urandom_range(3));
      @(negedge clk);
      in_valid = 1;
      op = 2'(o);
      shift = 5'($urandom_range(10));
      den = (mode == 0) ? 0 : int'($urandom_range(5000)) - 1000;
      for (int l = 0; l < L; l++)
        x[l] = (mode == 1) ? int'($urandom) : int'($urandom_range(40000)) - 20000;
      @(negedge clk);
      in_valid = 0;
      check(out_valid, "out_valid one cycle after in_valid");
      n_ops[o]++;
      for (int l = 0; l < L; l++) begin
        if (o == 0) begin
          automatic int e = ref_exp(x[l], int'(shift));
          check(y[l] == e, $sformatf("exp x=%0d sh=%0d: %0d vs %0d", x[l], shift, y[l], e));
        end else if (o == 1) begin
          automatic longint e = (den == 0) ? 0 : longint'(x[l]) / longint'(den);
          if (e > 127) e = 127;
          if (e < -128) e = -128;
          check(longint'(y[l]) == e, $sformatf("norm %0d/%0d: %0d vs %0d", x[l], den, y[l], e));
        end else if (x[l] > -2000000 && x[l] < 2000000) begin
          automatic real xr = real'(x[l]) / 256.0;
          automatic real e = 256.0 * xr / (1.0 + $exp(-xr));
          automatic real tol = 3.0 + 0.03 * ((e < 0) ? -e : e);
          check(real'(y[l]) > e - tol && real'(y[l]) < e + tol,
                $sformatf("silu %0d: %0d vs %f", x[l], y[l], e));
        end
      end
    end
    check(n_ops[0] > 0 && n_ops[1] > 0 && n_ops[2] > 0, "all ops exercised");
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
