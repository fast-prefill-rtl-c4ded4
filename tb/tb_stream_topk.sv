// tb_stream_topk: self-checking test of the streaming Top-k / coverage
// selector.
//
// For random score arrays (random length, many ties, zeros, all-zero and
// single-winner cases) and random gamma, the testbench serves the unit's
// combinational reads and compares the emitted index stream with a reference:
// indices sorted by score, highest first, ties in index order, zero scores
// never chosen, at most KMAX kept, cut at the smallest prefix whose sum
// reaches gamma * total. It also checks that done coincides with the last
// output (or comes alone when nothing is chosen), that busy covers the run up to done,
// and that the KMAX limit and an early coverage cut both occurred. Runs at
// NB = 16, KMAX = 5.
module tb_stream_topk;
  localparam int NB = 16, KMAX = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  logic start, busy, out_valid, done;
  logic [4:0] n;
  logic [47:0] total;
  logic [16:0] gamma_q16;
  logic [3:0] rd_idx, out_idx;
  logic [31:0] rd_data;
  int unsigned sc [NB];
  assign rd_data = sc[rd_idx];
  stream_topk #(.NB(NB), .KMAX(KMAX)) dut (.clk, .rst_n, .start, .n, .total, .gamma_q16, .rd_idx, .rd_data,
                                           .busy, .out_valid, .out_idx, .done);

  int n_kmax = 0, n_early = 0, n_empty = 0;
  initial begin
    start = 0; n = 0; total = 0; gamma_q16 = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 1500; it++) begin
      automatic int nn = int'($urandom_range(NB));
      automatic int kind = int'($urandom_range(3));
      automatic longint tot = 0, pre = 0;
      automatic int order [NB];
      automatic int exp_idx [$];
      automatic int got [$];
      automatic int g = (it % 7 == 0) ? 65536 : int'($urandom_range(65536));
      automatic int cand = 0, cyc = 0;
      automatic bit done_seen = 0, last_ok = 1;
      for (int j = 0; j < NB; j++) begin
        sc[j] = (kind == 0) ? $urandom_range(7) : (kind == 1) ? $urandom_range(100000) :
                (kind == 2) ? ((j == 3) ? 5000 : $urandom_range(1)) : 0;
        if (j >= nn) sc[j] = 0;
        tot += sc[j];
        order[j] = j;
      end
      for (int a = 0; a < NB; a++)
        for (int b = 0; b < NB - 1 - a; b++)
          if (sc[order[b+1]] > sc[order[b]]) begin
            automatic int t = order[b]; order[b] = order[b+1]; order[b+1] = t;
          end
      if (tot != 0 && g != 0)
        for (int a = 0; a < NB && cand < KMAX; a++) begin
          if (sc[order[a]] == 0) break;
          exp_idx.push_back(order[a]);
          cand++;
          pre += sc[order[a]];
          if (pre * 65536 >= longint'(g) * tot) break;
        end
      if (exp_idx.size() == KMAX) n_kmax++;
      if (exp_idx.size() > 0 && exp_idx.size() < KMAX && exp_idx.size() < nn) n_early++;
      if (exp_idx.size() == 0) n_empty++;
      @(negedge clk);
      n = 5'(nn); total = 48'(tot); gamma_q16 = 17'(g);
      start = 1;
      @(negedge clk);
      start = 0;
      while (!done_seen && cyc < 200) begin
        #1;
        if (!done) check(busy, "busy until done");
        if (out_valid) got.push_back(int'(out_idx));
        if (done) begin
          done_seen = 1;
          last_ok = (exp_idx.size() == 0) ? !out_valid : out_valid;
        end
        @(negedge clk);
        cyc++;
      end
      check(done_seen, "done");
      check(last_ok, "done with the last output");
      check(got.size() == exp_idx.size(), $sformatf("count %0d vs %0d", got.size(), exp_idx.size()));
      for (int i = 0; i < got.size() && i < exp_idx.size(); i++)
        check(got[i] == exp_idx[i], $sformatf("pos %0d: %0d vs %0d", i, got[i], exp_idx[i]));
    end
    check(n_kmax > 0 && n_early > 0 && n_empty > 0, "KMAX limit, early cut and empty selection exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
