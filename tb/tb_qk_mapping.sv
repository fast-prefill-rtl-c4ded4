// tb_qk_mapping: self-checking test of the Q-K mapping job-list builder.
//
// Each round picks a random nb and, per head, either a query-aware set or
// random vertical and slash sets (at most KMAX each, slash sets overlapping
// the vertical columns on purpose), streams them in, pulses build and waits
// for done. A reference here forms the union of (head, query block, key
// block) pairs and checks: the job count, every bucket's count and offset
// (prefix sum), that each bucket's slice of the job list holds exactly the
// consumers of that bucket, and the remaining-use counters before and after
// random decrements. A second instance with a 6-entry job list receives the
// same stream and must raise overflow when the pairs exceed it. Runs at
// H = 4, HKV = 2, NB = 6, KMAX = 3.
module tb_qk_mapping;
  localparam int H = 4, HKV = 2, NB = 6, KMAX = 3, JOB_MAX = 64, G = H / HKV;
  localparam int NBK = NB * HKV;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  logic clr, in_valid, build, busy, done, overflow, dec_valid;
  logic [3:0] nb;
  logic [1:0] in_h, job_h;
  fp_pkg::sel_kind_e in_kind;
  logic [2:0] in_blk, job_qb;
  logic [3:0] bk_idx, rem_idx, dec_idx;
  logic [6:0] n_jobs, bk_off, bk_cnt, job_idx, rem_val;
  qk_mapping #(.H(H), .HKV(HKV), .NB(NB), .KMAX(KMAX), .JOB_MAX(JOB_MAX)) dut (
    .clk, .rst_n, .clr, .nb, .in_valid, .in_h, .in_kind, .in_blk, .build, .busy, .done, .overflow, .n_jobs,
    .bk_idx, .bk_off, .bk_cnt, .job_idx, .job_h, .job_qb, .rem_idx, .rem_val, .dec_valid, .dec_idx);
  logic s_busy, s_done, s_over;
  logic [2:0] s_n_jobs, s_bk_off, s_bk_cnt, s_rem_val;
  logic [1:0] s_job_h;
  logic [2:0] s_job_qb;
  qk_mapping #(.H(H), .HKV(HKV), .NB(NB), .KMAX(KMAX), .JOB_MAX(6)) u_small (
    .clk, .rst_n, .clr, .nb, .in_valid, .in_h, .in_kind, .in_blk, .build, .busy(s_busy), .done(s_done),
    .overflow(s_over), .n_jobs(s_n_jobs), .bk_idx, .bk_off(s_bk_off), .bk_cnt(s_bk_cnt), .job_idx(3'(job_idx)),
    .job_h(s_job_h), .job_qb(s_job_qb), .rem_idx, .rem_val(s_rem_val), .dec_valid(1'b0), .dec_idx);

  task automatic send(input int h, input fp_pkg::sel_kind_e k, input int b);
    in_valid = 1; in_h = 2'(h); in_kind = k; in_blk = 3'(b);
    @(negedge clk);
    in_valid = 0;
  endtask

  int n_over = 0, n_dup = 0;
  initial begin
    clr = 0; in_valid = 0; build = 0; dec_valid = 0; nb = NB; in_h = 0; in_kind = fp_pkg::SEL_VERT;
    in_blk = 0; bk_idx = 0; rem_idx = 0; dec_idx = 0; job_idx = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 60; round++) begin
      automatic int nbr = 1 + int'($urandom_range(NB - 1));
      automatic bit pr [H][NB][NB];   // [h][qb][kb]
      automatic bit vs [H][NB];
      automatic int cnt [NBK];
      automatic int total = 0, off = 0, cyc = 0;
      for (int h = 0; h < H; h++) for (int a = 0; a < NB; a++) begin
        vs[h][a] = 0;
        for (int b = 0; b < NB; b++) pr[h][a][b] = 0;
      end
      @(negedge clk);
      nb = 4'(nbr);
      clr = 1;
      @(negedge clk);
      clr = 0;
      while (busy) @(negedge clk);
      for (int h = 0; h < H; h++) begin
        automatic int nv = int'($urandom_range(KMAX));
        automatic int ns = int'($urandom_range(KMAX));
        automatic bit qa = ($urandom_range(2) == 0);
        automatic bit taken [NB];
        for (int j = 0; j < NB; j++) taken[j] = 0;
        for (int i = 0; i < nv; i++) begin
          automatic int j = int'($urandom_range(nbr - 1));
          if (taken[j]) continue;
          taken[j] = 1;
          vs[h][j] = 1;
          send(h, qa ? fp_pkg::SEL_QA : fp_pkg::SEL_VERT, j);
          for (int qb = j; qb < nbr; qb++) pr[h][qb][j] = 1;
        end
        if (!qa) begin
          for (int j = 0; j < NB; j++) taken[j] = 0;
          for (int i = 0; i < ns; i++) begin
            automatic int d = int'($urandom_range(nbr - 1));
            if (taken[d]) continue;
            taken[d] = 1;
            send(h, fp_pkg::SEL_SLASH, d);
            for (int qb = d; qb < nbr; qb++) begin
              if (pr[h][qb][qb - d]) n_dup++;
              pr[h][qb][qb - d] = 1;
            end
          end
        end
      end
      for (int b = 0; b < NBK; b++) cnt[b] = 0;
      for (int h = 0; h < H; h++)
        for (int qb = 0; qb < nbr; qb++)
          for (int kb = 0; kb <= qb; kb++)
            if (pr[h][qb][kb]) begin cnt[kb * HKV + h / G]++; total++; end
      build = 1;
      @(negedge clk);
      build = 0;
      while (!done && cyc < 5000) begin @(negedge clk); cyc++; end
      check(done, "build done");
      check(!overflow && int'(n_jobs) == total, $sformatf("n_jobs %0d vs %0d", n_jobs, total));
      if (total > 6) begin check(s_over, "overflow flagged"); n_over++; end
      else check(!s_over, "no overflow");
      for (int b = 0; b < nbr * HKV; b++) begin
        bk_idx = 4'(b);
        rem_idx = 4'(b);
        #1;
        check(int'(bk_cnt) == cnt[b] && int'(bk_off) == off, $sformatf("bucket %0d cnt %0d/%0d off %0d/%0d", b, bk_cnt, cnt[b], bk_off, off));
        check(int'(rem_val) == cnt[b], "remaining-use counter");
        for (int x = off; x < off + cnt[b]; x++) begin
          job_idx = 7'(x);
          #1;
          check(int'(job_h) / G == b % HKV && int'(job_qb) >= b / HKV && pr[job_h][job_qb][b / HKV],
                $sformatf("job %0d (h%0d qb%0d) in bucket %0d", x, job_h, job_qb, b));
          pr[job_h][job_qb][b / HKV] = 0;    // each consumer appears once
        end
        off += cnt[b];
      end
      // decrements
      for (int b = 0; b < nbr * HKV; b++)
        if (cnt[b] > 0) begin
          @(negedge clk);
          dec_valid = 1; dec_idx = 4'(b);
          @(negedge clk);
          dec_valid = 0;
          rem_idx = 4'(b);
          #1;
          check(int'(rem_val) == cnt[b] - 1, "decrement");
        end
    end
    check(n_over > 0 && n_dup > 0, "overflow and vertical/slash overlap exercised");
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
