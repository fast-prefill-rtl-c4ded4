// tb_fast_prefill_top: end-to-end test of the sparse-attention step at a
// reduced size (8-token blocks, d = 8, 4x4 arrays, one DSP and one bit-plane
// array, 4 query heads over 4 KV heads, 4 blocks of context, 2 hot and 1 cold
// cache slots, prefetch window 2).
//
// The Q/K/V tensors are generated so that heads 0-1 see smooth random keys
// (expected query-aware pattern) and heads 2-3 see a key block whose rows
// alternate +20 / -20: its pooled mean is zero while half of its true scores
// saturate, so the pooled estimate disagrees with the true distribution
// (expected vertical-slash pattern). A reference model written here recomputes the whole
// step from the tensors: block scores, Jensen-Shannon divergence, coverage
// selection, the (query block, key block) pairs and the attention output with
// the same integer exponent rule, and the testbench compares the emitted
// indices, patterns and every output row. It also counts the mechanisms of
// the design and fails if one never happened: both patterns, cache hits and
// misses, hot and cold fills, skipped blocks, a full tier, causal masking.
module tb_fast_prefill_top;
  localparam int B = 8, D = 8, N = 4, NA_DSP = 1, NA_LUT = 1, H = 4, HKV = 4, NB = 4;
  localparam int KMAX = 4, JOB_MAX = 128, HOT = 2, COLD = 1, WIN = 2, SHIFT = 4;
  localparam int G = H / HKV;
  localparam int S = NB * B;
  localparam int QB = 0, KB = H * S, VB = KB + HKV * S, ROWS = VB + HKV * S;
  localparam int GAMMA = 39322;     // 0.6
  localparam int TAU2 = 945;        // (0.1)^2 / ln 2 in Q16

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", msg);
    end
  endtask

  // ---------------- DUT ----------------
  logic start, busy, done;
  logic [31:0] cycles;
  logic m_req_valid, m_req_ready, m_rsp_valid;
  logic [31:0] m_req_addr;
  logic [15:0] m_req_len;
  logic [D*8-1:0] m_rsp_data;
  logic out_rd_valid, out_valid;
  logic [1:0] out_h, idx_h, pat_h;
  logic [1:0] out_qb, idx_blk;
  logic [2:0] out_row;
  logic signed [7:0] out_data [D];
  logic idx_valid, pat_valid, job_overflow;
  fp_pkg::sel_kind_e idx_kind;
  fp_pkg::pattern_e pat;
  logic [31:0] n_jobs, n_hit, n_miss, n_fetch_hot, n_fetch_cold, n_skip, n_tier_full;

  fast_prefill_top #(.B(B), .D(D), .N(N), .NA_DSP(NA_DSP), .NA_LUT(NA_LUT), .H(H), .HKV(HKV),
                     .NB(NB), .KMAX(KMAX), .JOB_MAX(JOB_MAX), .HOT(HOT), .COLD(COLD), .WIN(WIN),
                     .SCORE_SHIFT(SHIFT)) dut (
    .clk, .rst_n, .start, .nb(3'(NB)), .q_base(32'(QB)), .k_base(32'(KB)), .v_base(32'(VB)),
    .gamma_q16(17'(GAMMA)), .tau2_q16(32'(TAU2)), .busy, .done, .cycles,
    .m_req_valid, .m_req_ready, .m_req_addr, .m_req_len, .m_rsp_valid, .m_rsp_data,
    .out_rd_valid, .out_h, .out_qb, .out_row, .out_valid, .out_data,
    .idx_valid, .idx_h, .idx_kind, .idx_blk, .pat_valid, .pat_h, .pat,
    .n_jobs, .n_hit, .n_miss, .n_fetch_hot, .n_fetch_cold, .n_skip, .n_tier_full, .job_overflow);

  hbm_model #(.D(D), .ROWS(ROWS), .LAT(3)) u_hbm (
    .clk, .rst_n, .req_valid(m_req_valid), .req_ready(m_req_ready), .req_addr(m_req_addr),
    .req_len(m_req_len), .rsp_valid(m_rsp_valid), .rsp_data(m_rsp_data));

  // ---------------- tensors ----------------
  int Q [H][S][D];
  int K [HKV][S][D];
  int V [HKV][S][D];

  function automatic int expp(input longint s);
    longint t;
    int n, f, m;
    t = s >>> SHIFT;
    if (t > 47) return 127;
    if (t < -64) return 0;
    n = int'(t >>> 4);
    f = int'(t - (longint'(n) << 4));
    m = int'($floor((2.0 ** (real'(f) / 16.0)) * 32768.0));
    return (m << (n + 4)) >>> 15;
  endfunction

  function automatic longint dotqk(input int h, input int qs, input int kv, input int ks);
    longint a = 0;
    for (int c = 0; c < D; c++) a += Q[h][qs][c] * K[kv][ks][c];
    return a;
  endfunction

  // ---------------- captured outputs ----------------
  bit sel_rtl [H][3][NB];
  int pat_rtl [H];
  int npat_rtl;
  always @(posedge clk) begin
    if (idx_valid) sel_rtl[idx_h][int'(idx_kind)][idx_blk] = 1;
    if (pat_valid) begin pat_rtl[pat_h] = int'(pat); npat_rtl++; end
  end

  // ---------------- reference selection ----------------
  function automatic void ref_select(input longint sc [NB], output bit sel [NB]);
    int order [NB];
    longint total = 0, pre = 0;
    int cand = 0;
    for (int j = 0; j < NB; j++) begin sel[j] = 0; order[j] = j; total += sc[j]; end
    for (int a = 0; a < NB; a++)            // stable sort, descending
      for (int b = 0; b < NB - 1 - a; b++)
        if (sc[order[b+1]] > sc[order[b]]) begin
          int t = order[b]; order[b] = order[b+1]; order[b+1] = t;
        end
    if (total == 0) return;
    for (int a = 0; a < NB && cand < KMAX; a++) begin
      if (sc[order[a]] == 0) break;
      sel[order[a]] = 1;
      cand++;
      pre += sc[order[a]];
      if (pre * 65536 >= longint'(GAMMA) * total) break;
    end
  endfunction

  int n_masked;

  initial begin
    longint vs [H][NB], ss [H][NB], qs [H][NB];
    bit selv [NB], sels [NB], selq [NB];
    bit use_pair [H][NB][NB];
    int patc [2];
    int pat_use [H];
    start = 0; out_rd_valid = 0; out_h = 0; out_qb = 0; out_row = 0;
    npat_rtl = 0; n_masked = 0; patc = '{0, 0};
    // first half of the KV heads: smooth random keys; second half: structured
    for (int h = 0; h < H; h++)
      for (int s = 0; s < S; s++)
        for (int c = 0; c < D; c++)
          Q[h][s][c] = (h < H / 2) ? int'($urandom_range(15)) - 8 : int'($urandom_range(15));
    for (int g = 0; g < HKV; g++)
      for (int s = 0; s < S; s++)
        for (int c = 0; c < D; c++) begin
          V[g][s][c] = int'($urandom_range(255)) - 128;
          if (g < HKV / 2) K[g][s][c] = int'($urandom_range(15)) - 8;
          else
            // block 1 alternates +20 / -20 rows (mean 0, scores either
            // saturate or vanish), block 2 is flat +1, blocks 0 and 3 are -20
            unique case (s / B)
              1:       K[g][s][c] = (s % 2 == 0) ? 20 : -20;
              2:       K[g][s][c] = 1;
              default: K[g][s][c] = -20;
            endcase
        end
    for (int h = 0; h < H; h++)
      for (int s = 0; s < S; s++) begin
        automatic logic [D*8-1:0] r;
        for (int c = 0; c < D; c++) r[8*c +: 8] = 8'(Q[h][s][c]);
        u_hbm.mem[QB + h * S + s] = r;
      end
    for (int g = 0; g < HKV; g++)
      for (int s = 0; s < S; s++) begin
        automatic logic [D*8-1:0] rk, rv;
        for (int c = 0; c < D; c++) begin rk[8*c +: 8] = 8'(K[g][s][c]); rv[8*c +: 8] = 8'(V[g][s][c]); end
        u_hbm.mem[KB + g * S + s] = rk;
        u_hbm.mem[VB + g * S + s] = rv;
      end

    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    wait (done);
    @(negedge clk);
    $display("step done in %0d cycles, jobs %0d", cycles, n_jobs);

    // ---- reference index generation ----
    for (int h = 0; h < H; h++) begin
      automatic int kv = h / G;
      automatic int qbar [D], kbar [D];
      automatic real p [NB], q [NB], vt = 0, qt = 0, jsd = 0;
      for (int j = 0; j < NB; j++) begin vs[h][j] = 0; ss[h][j] = 0; end
      for (int c = 0; c < D; c++) begin
        automatic int acc = 0;
        for (int r = 0; r < B; r++) acc += Q[h][(NB - 1) * B + r][c];
        qbar[c] = acc >>> $clog2(B);
      end
      for (int j = 0; j < NB; j++) begin
        automatic longint d = 0;
        for (int c = 0; c < D; c++) begin
          automatic int acc = 0;
          for (int r = 0; r < B; r++) acc += K[kv][j * B + r][c];
          kbar[c] = acc >>> $clog2(B);
          d += qbar[c] * kbar[c];
        end
        qs[h][j] = expp(d);
        for (int r = 0; r < B; r++)
          for (int kk = 0; kk < B; kk++) begin
            automatic int pv;
            if (j == NB - 1 && kk > r) begin pv = 0; n_masked++; end
            else pv = expp(dotqk(h, (NB - 1) * B + r, kv, j * B + kk));
            vs[h][j] += pv;
            if (kk <= r) ss[h][NB - 1 - j] += pv;
            else if (j <= NB - 2) ss[h][NB - 2 - j] += pv;
          end
      end
      for (int j = 0; j < NB; j++) begin vt += real'(vs[h][j]); qt += real'(qs[h][j]); end
      for (int j = 0; j < NB; j++) begin p[j] = real'(vs[h][j]) / vt; q[j] = real'(qs[h][j]) / qt; end
      for (int j = 0; j < NB; j++) begin
        automatic real m = (p[j] + q[j]) / 2.0;
        if (p[j] > 0) jsd += 0.5 * p[j] * $ln(p[j] / m) / $ln(2.0);
        if (q[j] > 0) jsd += 0.5 * q[j] * $ln(q[j] / m) / $ln(2.0);
      end
      begin
        automatic real thr = real'(TAU2) / 65536.0;
        automatic int want = (qt == 0.0) ? 0 : (jsd < thr) ? 1 : 0;
        $display("head %0d: jsd %f bits (threshold %f) -> %s, rtl %s", h, jsd, thr,
                 want ? "query-aware" : "vertical-slash", pat_rtl[h] ? "query-aware" : "vertical-slash");
        if (qt == 0.0 || jsd < thr * 0.9 || jsd > thr * 1.1) check(pat_rtl[h] == want, $sformatf("pattern head %0d", h));
        pat_use[h] = pat_rtl[h];
        patc[pat_rtl[h]]++;
      end
    end
    check(npat_rtl == H, "one pattern per head");

    // ---- reference selection and pairs ----
    for (int h = 0; h < H; h++) begin
      for (int a = 0; a < NB; a++) for (int b = 0; b < NB; b++) use_pair[h][a][b] = 0;
      ref_select(vs[h], selv);
      ref_select(ss[h], sels);
      ref_select(qs[h], selq);
      for (int j = 0; j < NB; j++) begin
        if (pat_use[h] == 1) begin
          check(sel_rtl[h][2][j] == selq[j], $sformatf("qa select h%0d b%0d", h, j));
          check(!sel_rtl[h][0][j] && !sel_rtl[h][1][j], $sformatf("no vs select h%0d", h));
        end else begin
          check(sel_rtl[h][0][j] == selv[j], $sformatf("vertical select h%0d b%0d", h, j));
          check(sel_rtl[h][1][j] == sels[j], $sformatf("slash select h%0d b%0d", h, j));
          check(!sel_rtl[h][2][j], $sformatf("no qa select h%0d", h));
        end
      end
      for (int qb = 0; qb < NB; qb++)
        for (int kb = 0; kb <= qb; kb++) begin
          if (pat_use[h] == 1) use_pair[h][qb][kb] = selq[kb];
          else use_pair[h][qb][kb] = selv[kb] || sels[qb - kb];
        end
    end

    // ---- reference attention and output compare ----
    begin
      automatic int njobs = 0;
      for (int h = 0; h < H; h++)
        for (int qb = 0; qb < NB; qb++) begin
          automatic bit any = 0;
          for (int kb = 0; kb <= qb; kb++) if (use_pair[h][qb][kb]) begin any = 1; njobs++; end
          if (!any) continue;
          for (int r = 0; r < B; r++) begin
            automatic longint acc [D];
            automatic longint l = 0;
            for (int c = 0; c < D; c++) acc[c] = 0;
            for (int kb = 0; kb <= qb; kb++) begin
              if (!use_pair[h][qb][kb]) continue;
              for (int kk = 0; kk < B; kk++) begin
                automatic int pv;
                if (kb == qb && kk > r) pv = 0;
                else pv = expp(dotqk(h, qb * B + r, h / G, kb * B + kk));
                l += pv;
                for (int c = 0; c < D; c++) acc[c] += pv * V[h / G][kb * B + kk][c];
              end
            end
            @(negedge clk);
            out_rd_valid = 1; out_h = 2'(h); out_qb = 2'(qb); out_row = 3'(r);
            @(negedge clk);
            out_rd_valid = 0;
            for (int c = 0; c < D; c++) begin
              automatic longint e = (l == 0) ? 0 : acc[c] / l;
              if (e > 127) e = 127;
              if (e < -128) e = -128;
              check(out_valid && longint'(out_data[c]) == e,
                    $sformatf("out h%0d qb%0d r%0d c%0d: %0d vs %0d", h, qb, r, c, out_data[c], e));
            end
          end
        end
      check(n_jobs == 32'(njobs), $sformatf("job count %0d vs %0d", n_jobs, njobs));
    end

    // ---- mechanisms ----
    $display("patterns: vertical-slash %0d query-aware %0d", patc[0], patc[1]);
    $display("cache: hit %0d miss %0d hot %0d cold %0d skip %0d tier-full %0d, masked %0d",
             n_hit, n_miss, n_fetch_hot, n_fetch_cold, n_skip, n_tier_full, n_masked);
    check(patc[0] > 0, "vertical-slash pattern happened");
    check(patc[1] > 0, "query-aware pattern happened");
    check(n_hit > 0, "cache hit happened");
    check(n_miss > 0, "cache miss happened");
    check(n_fetch_hot > 0, "hot tier fill happened");
    check(n_fetch_cold > 0, "cold tier fill happened");
    check(n_skip > 0, "zero-use block skipped");
    check(n_tier_full > 0, "full tier stalled prefetch");
    check(n_masked > 0, "causal mask applied");
    check(!job_overflow, "no job list overflow");
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
