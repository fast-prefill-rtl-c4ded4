// tb_divergence_eval: self-checking test of the Jensen-Shannon divergence
// evaluator.
//
// For many random block-score pairs (v, w) of random length nb - uniform,
// near-equal, one-hot, disjoint and with zero entries - the testbench
// answers the unit's combinational reads, computes the JSD in bits in
// floating point, and checks: done exactly nb+2 cycles after start; the
// reported JSD within 0.002 bits + 3 %; the pattern (query-aware iff
// JSD < tau^2/ln 2) whenever the reference is more than 10 % away from the
// threshold; and the all-zero estimate case (vertical-slash, JSD all ones).
// Runs at NB = 16 with tau = 0.1.
module tb_divergence_eval;
  localparam int NB = 16;
  localparam int TAU2 = 945;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  logic start, busy, done;
  logic [4:0] nb;
  logic [47:0] v_tot, w_tot;
  logic [3:0] rd_idx;
  logic [31:0] v_in, w_in;
  fp_pkg::pattern_e pattern;
  logic [31:0] jsd_q16;
  int unsigned va [NB], wa [NB];
  assign v_in = va[rd_idx];
  assign w_in = wa[rd_idx];
  divergence_eval #(.NB(NB)) dut (.clk, .rst_n, .start, .nb, .v_tot, .w_tot, .tau2_q16(32'(TAU2)), .rd_idx,
                                  .v_in, .w_in, .busy, .done, .pattern, .jsd_q16);

  int n_qa = 0, n_vs = 0;
  initial begin
    start = 0; nb = NB; v_tot = 0; w_tot = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 600; it++) begin
      automatic int n = 1 + int'($urandom_range(NB - 1));
      automatic int kind = int'($urandom_range(5));
      automatic longint vt = 0, wt = 0;
      automatic real jsd = 0.0, thr = real'(TAU2) / 65536.0;
      automatic int cyc = 0;
      for (int j = 0; j < NB; j++) begin
        automatic int unsigned base = $urandom_range(100000);
        va[j] = (j < n) ? base : 0;
        unique case (kind)
          0: wa[j] = $urandom_range(100000);
          1: wa[j] = base + $urandom_range(base / 8);
          2: begin va[j] = (j == 0) ? 1000 : 0; wa[j] = 50 + $urandom_range(10); end
          3: wa[j] = (j % 2) ? 0 : $urandom_range(500);
          4: wa[j] = 0;
          default: wa[j] = base / 2 + $urandom_range(base / 4 + 1);
        endcase
        if (j >= n) begin va[j] = 0; wa[j] = 0; end
        vt += va[j];
        wt += wa[j];
      end
      if (vt != 0 && wt != 0)
        for (int j = 0; j < n; j++) begin
          automatic real p = real'(va[j]) / real'(vt), q = real'(wa[j]) / real'(wt);
          automatic real m = (p + q) / 2.0;
          if (p > 0) jsd += 0.5 * p * $ln(p / m) / $ln(2.0);
          if (q > 0) jsd += 0.5 * q * $ln(q / m) / $ln(2.0);
        end
      @(negedge clk);
      nb = 5'(n); v_tot = 48'(vt); w_tot = 48'(wt);
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!done && cyc < 100) begin @(negedge clk); cyc++; end
      check(cyc == n + 2, $sformatf("latency %0d for nb %0d", cyc, n));
      if (vt == 0 || wt == 0) begin
        check(pattern == fp_pkg::PAT_VS && jsd_q16 == 32'hFFFF_FFFF, "empty distribution -> vertical-slash");
      end else begin
        automatic real got = real'(jsd_q16) / 65536.0;
        automatic real err = got - jsd;
        if (err < 0) err = -err;
        check(err <= 0.002 + 0.03 * jsd, $sformatf("jsd %f vs %f (kind %0d)", got, jsd, kind));
        if (jsd < thr * 0.9) begin check(pattern == fp_pkg::PAT_QA, $sformatf("qa at jsd %f", jsd)); n_qa++; end
        if (jsd > thr * 1.1) begin check(pattern == fp_pkg::PAT_VS, $sformatf("vs at jsd %f", jsd)); n_vs++; end
      end
    end
    check(n_qa > 0 && n_vs > 0, "both decisions exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
