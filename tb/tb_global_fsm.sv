// tb_global_fsm: self-checking test of the global sequencer.
//
// Models the index generator and the attention unit as done-after-random-
// delay responders and runs several steps, checking the phase order
// (clear, index generation, attention), that each unit is started exactly
// once per step and only after the previous stage finished, that the MPU is
// granted to the attention unit exactly during its phase, that busy covers
// the step, that done pulses once at the end, and that cycles counts the
// cycles of the step.
module tb_global_fsm;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  logic start, busy, done, sau_clr, sigu_start, sigu_done, sau_start, sau_done, grant;
  logic [1:0] phase;
  logic [31:0] cycles;
  global_fsm dut (.clk, .rst_n, .start, .busy, .done, .sau_clr, .sigu_start, .sigu_done, .sau_start,
                  .sau_done, .mpu_grant_sau(grant), .phase, .cycles);

  int n_clr, n_sigu, n_sau, n_done, sigu_left, sau_left, sigu_run, sau_run, step_cyc;
  always @(posedge clk) if (rst_n) begin
    sigu_done <= 0; sau_done <= 0;
    if (busy) step_cyc <= step_cyc + 1;
    if (sau_clr) begin n_clr++; check(n_sigu == 0 && n_sau == 0, "clear first"); end
    if (sigu_start) begin
      n_sigu++; check(n_clr == 1, "index generation after clear");
      sigu_run <= 1; sigu_left <= 1 + $urandom_range(20);
    end
    if (sau_start) begin
      n_sau++; check(n_sigu == 1 && !sigu_run, "attention after index generation finished");
      sau_run <= 1; sau_left <= 1 + $urandom_range(20);
    end
    if (sigu_run) begin
      check(!grant, "MPU with the index generator while it runs");
      if (sigu_left == 1) begin sigu_done <= 1; sigu_run <= 0; end
      sigu_left <= sigu_left - 1;
    end
    if (sau_run) begin
      check(grant, "MPU with the attention unit while it runs");
      if (sau_left == 1) begin sau_done <= 1; sau_run <= 0; end
      sau_left <= sau_left - 1;
    end
    if (done) n_done++;
  end

  initial begin
    start = 0; sigu_done = 0; sau_done = 0; sigu_run = 0; sau_run = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < 20; s++) begin
      n_clr = 0; n_sigu = 0; n_sau = 0; n_done = 0; step_cyc = 0;
      repeat ($urandom_range(3)) @(negedge clk);
      check(!busy && phase == 0, "idle between steps");
      start = 1;
      @(negedge clk);
      start = 0;
      while (!done) begin
        check(busy, "busy during the step");
        @(negedge clk);
      end
      check(n_clr == 1 && n_sigu == 1 && n_sau == 1, "each stage once");
      check(cycles == 32'(step_cyc) - 1 || cycles == 32'(step_cyc), $sformatf("cycles %0d vs %0d", cycles, step_cyc));
      @(negedge clk);
      check(n_done == 1 && !busy, "done once, then idle");
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
