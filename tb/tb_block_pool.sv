// tb_block_pool: self-checking test of the block mean-pooling unit.
//
// Streams random blocks of B int8 rows (with random idle cycles between
// rows), clearing between blocks, and compares every lane of the pooled
// mean against the arithmetic-shift mean computed here. Runs at B = 8, D = 8.
module tb_block_pool;
  localparam int B = 8, D = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  logic clr, in_valid;
  logic [D*8-1:0] in_row;
  logic signed [7:0] mean [D];
  block_pool #(.B(B), .D(D)) dut (.clk, .rst_n, .clr, .in_valid, .in_row, .mean);

  initial begin
    clr = 0; in_valid = 0; in_row = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int blk = 0; blk < 300; blk++) begin
      automatic int sum [D];
      automatic int ext = int'($urandom_range(2));
      for (int c = 0; c < D; c++) sum[c] = 0;
      @(negedge clk);
      clr = 1;
      @(negedge clk);
      clr = 0;
      for (int r = 0; r < B; r++) begin
        while ($urandom_range(3) == 0) @(negedge clk);
        in_valid = 1;
        for (int c = 0; c < D; c++) begin
          automatic int v = (ext == 0) ? 127 - int'($urandom_range(3)) :
                            (ext == 1) ? -128 + int'($urandom_range(3)) : int'($urandom_range(255)) - 128;
          in_row[8*c +: 8] = 8'(v);
          sum[c] += v;
        end
        @(negedge clk);
        in_valid = 0;
      end
      @(negedge clk);
      for (int c = 0; c < D; c++)
        check(mean[c] == 8'(sum[c] >>> 3), $sformatf("blk %0d lane %0d: %0d vs %0d", blk, c, mean[c], sum[c] >>> 3));
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
