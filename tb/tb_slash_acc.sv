// tb_slash_acc: self-checking test of the slash (diagonal) score accumulator.
//
// Applies random updates (head, Key block j, query row qi, first key column
// c0 of the N-lane segment and the lane exponents) and keeps a reference
// that bins each lane by its own diagonal: key kk = c0 + x of block j seen
// from query row qi of the last query block lies on block diagonal
// nb-1-j if kk <= qi and nb-2-j otherwise (the latter only if that diagonal
// exists). Every bin and head total is compared after each round, with a
// clear between rounds and a random nb per round. Runs at H = 2, NB = 6,
// N = 4, B = 8.
module tb_slash_acc;
  localparam int H = 2, NB = 6, N = 4, B = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  logic clr, busy, upd_valid;
  logic [3:0] nb;
  logic [0:0] upd_h, rd_h;
  logic [2:0] upd_j, rd_idx;
  logic [2:0] qi, c0;
  logic [7:0] e [N];
  logic [31:0] rd_data;
  logic [47:0] rd_tot;
  slash_acc #(.H(H), .NB(NB), .N(N), .B(B)) dut (.clk, .rst_n, .clr, .busy, .nb, .upd_valid, .upd_h,
                                                 .upd_j, .qi, .c0, .e, .rd_h, .rd_idx, .rd_data, .rd_tot);
  longint rs [H][NB];
  longint rt [H];
  int n_split = 0;

  initial begin
    clr = 0; upd_valid = 0; upd_h = 0; upd_j = 0; rd_h = 0; rd_idx = 0; qi = 0; c0 = 0; nb = NB;
    for (int x = 0; x < N; x++) e[x] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 8; round++) begin
      automatic int nbr = 1 + int'($urandom_range(NB - 1));
      @(negedge clk);
      nb = 4'(nbr);
      clr = 1;
      @(negedge clk);
      clr = 0;
      while (busy) @(negedge clk);
      for (int h = 0; h < H; h++) begin
        rt[h] = 0;
        for (int j = 0; j < NB; j++) rs[h][j] = 0;
      end
      for (int u = 0; u < 300; u++) begin
        automatic int h = int'($urandom_range(H - 1));
        automatic int j = int'($urandom_range(nbr - 1));
        automatic int q = int'($urandom_range(B - 1));
        automatic int c = N * int'($urandom_range(B / N - 1));
        automatic bit lo = 0, hi = 0;
        upd_valid = 1; upd_h = 1'(h); upd_j = 3'(j); qi = 3'(q); c0 = 3'(c);
        for (int x = 0; x < N; x++) begin
          // the diagonal block is causally masked upstream: masked lanes are 0
          e[x] = (j == nbr - 1 && c + x > q) ? 8'd0 : 8'($urandom_range(127));
          rt[h] += e[x];
          if (c + x <= q) begin rs[h][nbr - 1 - j] += e[x]; lo = 1; end
          else if (j <= nbr - 2) begin rs[h][nbr - 2 - j] += e[x]; hi = 1; end
        end
        if (lo && hi) n_split++;
        @(negedge clk);
        upd_valid = 0;
        if ($urandom_range(3) == 0) @(negedge clk);
      end
      for (int h = 0; h < H; h++) begin
        rd_h = 1'(h);
        for (int j = 0; j < nbr; j++) begin
          rd_idx = 3'(j);
          #1;
          check(longint'(rd_data) == rs[h][j], $sformatf("s[%0d][%0d] %0d vs %0d", h, j, rd_data, rs[h][j]));
        end
        check(longint'(rd_tot) == rt[h], $sformatf("tot[%0d] %0d vs %0d", h, rd_tot, rt[h]));
      end
    end
    check(n_split > 0, "segments split across two diagonals");
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
