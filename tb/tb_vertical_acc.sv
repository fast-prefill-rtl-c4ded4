// tb_vertical_acc: self-checking test of the vertical score accumulator.
//
// Clears the buffer, waits for the sweep, then applies random updates
// (random head, block and N-lane exponent vector, with idle gaps) while a
// reference array here accumulates the same sums; every entry and every head
// total is then compared through the combinational read port. Repeated over
// several rounds so that clear-after-use is exercised. Runs at H = 3, NB = 5,
// N = 4 (non-power-of-two sizes on purpose).
module tb_vertical_acc;
  localparam int H = 3, NB = 5, N = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  logic clr, busy, upd_valid;
  logic [1:0] upd_h, rd_h;
  logic [2:0] upd_j, rd_idx;
  logic [7:0] e [N];
  logic [31:0] rd_data;
  logic [47:0] rd_tot;
  vertical_acc #(.H(H), .NB(NB), .N(N)) dut (.clk, .rst_n, .clr, .busy, .upd_valid, .upd_h, .upd_j, .e,
                                             .rd_h, .rd_idx, .rd_data, .rd_tot);
  longint rv [H][NB];
  longint rt [H];

  initial begin
    clr = 0; upd_valid = 0; upd_h = 0; upd_j = 0; rd_h = 0; rd_idx = 0;
    for (int x = 0; x < N; x++) e[x] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 6; round++) begin
      @(negedge clk);
      clr = 1;
      @(negedge clk);
      clr = 0;
      check(busy, "busy during clear");
      while (busy) @(negedge clk);
      for (int h = 0; h < H; h++) begin
        rt[h] = 0;
        for (int j = 0; j < NB; j++) rv[h][j] = 0;
      end
      for (int u = 0; u < 400; u++) begin
        automatic int h = int'($urandom_range(H - 1));
        automatic int j = int'($urandom_range(NB - 1));
        upd_valid = 1; upd_h = 2'(h); upd_j = 3'(j);
        for (int x = 0; x < N; x++) begin
          e[x] = 8'($urandom_range(127));
          rv[h][j] += e[x];
          rt[h] += e[x];
        end
        @(negedge clk);
        upd_valid = 0;
        if ($urandom_range(3) == 0) @(negedge clk);
      end
      for (int h = 0; h < H; h++) begin
        rd_h = 2'(h);
        for (int j = 0; j < NB; j++) begin
          rd_idx = 3'(j);
          #1;
          check(longint'(rd_data) == rv[h][j], $sformatf("v[%0d][%0d] %0d vs %0d", h, j, rd_data, rv[h][j]));
        end
        check(longint'(rd_tot) == rt[h], $sformatf("tot[%0d]", h));
      end
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
