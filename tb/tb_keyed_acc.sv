// tb_keyed_acc: self-checking test of the keyed partial-output accumulator.
//
// Runs random jobs in random key order (head, query block), each writing
// random N-column slices of random rows and one vector of row sums, the
// way the attention unit does, and keeps a reference buffer in which the
// first job of a key overwrites and later jobs add. After each round every
// row of every key is compared (sums of p*v, row sum, touched bit); clr
// between rounds must make the next first job overwrite stale contents.
// Runs at H = 2, NB = 3, B = 4, D = 8, N = 4.
module tb_keyed_acc;
  localparam int H = 2, NB = 3, B = 4, D = 8, N = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  logic clr, job_begin, wr_valid, l_valid, rd_touched;
  logic [0:0] job_h, rd_h;
  logic [1:0] job_qb, rd_qb, wr_row, rd_row;
  logic [2:0] wr_col0;
  logic signed [31:0] wr_data [N];
  logic [31:0] l_data [B];
  logic signed [31:0] rd_acc [D];
  logic [31:0] rd_l;
  keyed_acc #(.H(H), .NB(NB), .B(B), .D(D), .N(N)) dut (.clk, .rst_n, .clr, .job_begin, .job_h, .job_qb, .wr_valid,
                                                        .wr_row, .wr_col0, .wr_data, .l_valid, .l_data, .rd_h,
                                                        .rd_qb, .rd_row, .rd_acc, .rd_l, .rd_touched);
  int racc [H][NB][B][D];
  int rl [H][NB][B];
  bit tch [H][NB];

  initial begin
    clr = 0; job_begin = 0; wr_valid = 0; l_valid = 0; job_h = 0; job_qb = 0; wr_row = 0; wr_col0 = 0;
    rd_h = 0; rd_qb = 0; rd_row = 0;
    for (int x = 0; x < N; x++) wr_data[x] = 0;
    for (int r = 0; r < B; r++) l_data[r] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 10; round++) begin
      @(negedge clk);
      clr = 1;
      @(negedge clk);
      clr = 0;
      for (int h = 0; h < H; h++) for (int q = 0; q < NB; q++) tch[h][q] = 0;
      for (int job = 0; job < 12; job++) begin
        automatic int h = int'($urandom_range(H - 1)), q = int'($urandom_range(NB - 1));
        automatic bit first = !tch[h][q];
        job_begin = 1; job_h = 1'(h); job_qb = 2'(q);
        @(negedge clk);
        job_begin = 0;
        tch[h][q] = 1;
        if (first)
          for (int r = 0; r < B; r++) begin
            rl[h][q][r] = 0;
            for (int c = 0; c < D; c++) racc[h][q][r][c] = 0;
          end
        // every (row, slice) exactly once per job, as the attention unit does
        for (int r = 0; r < B; r++)
          for (int c0 = 0; c0 < D; c0 += N) begin
            wr_valid = 1; wr_row = 2'(r); wr_col0 = 3'(c0);
            for (int x = 0; x < N; x++) begin
              wr_data[x] = int'($urandom_range(200000)) - 100000;
              racc[h][q][r][c0 + x] += wr_data[x];
            end
            @(negedge clk);
            wr_valid = 0;
            if ($urandom_range(2) == 0) @(negedge clk);
          end
        l_valid = 1;
        for (int r = 0; r < B; r++) begin l_data[r] = $urandom_range(5000); rl[h][q][r] += int'(l_data[r]); end
        @(negedge clk);
        l_valid = 0;
      end
      for (int h = 0; h < H; h++)
        for (int q = 0; q < NB; q++) begin
          rd_h = 1'(h); rd_qb = 2'(q);
          #1;
          check(rd_touched == tch[h][q], "touched bit");
          if (tch[h][q])
            for (int r = 0; r < B; r++) begin
              rd_row = 2'(r);
              #1;
              check(int'(rd_l) == rl[h][q][r], $sformatf("row sum h%0d q%0d r%0d", h, q, r));
              for (int c = 0; c < D; c++)
                check(rd_acc[c] == racc[h][q][r][c], $sformatf("acc h%0d q%0d r%0d c%0d", h, q, r, c));
            end
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
