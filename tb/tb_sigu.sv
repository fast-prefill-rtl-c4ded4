// tb_sigu: self-checking test of the sparse index generator on its own,
// with the hybrid MPU and the memory model attached directly.
//
// Reduced size: 8-token blocks, d = 8, 4x4 arrays, one DSP and one bit-plane
// array, 4 query heads sharing 2 KV heads (grouped-query: heads 0-1 read KV
// head 0, heads 2-3 read KV head 1), 4 blocks of context. KV head 0 holds
// smooth random keys (expected query-aware pattern); KV head 1 holds a block
// whose rows alternate +20 / -20, whose pooled mean is zero while half of its
// true scores saturate (expected vertical-slash pattern). A reference model
// written here recomputes the block scores of the last query block
// (vertical and slash sums of the integer exponent), the pooled query-aware
// estimate, the Jensen-Shannon divergence and the coverage selection, and the
// testbench checks each head's pattern (where the reference is clear of the
// threshold by 10 %), the emitted index sets, one pattern per head, and that
// both patterns and causal masking occurred.
module tb_sigu;
  localparam int B = 8, D = 8, N = 4, NA_DSP = 1, NA_LUT = 1, H = 4, HKV = 2, NB = 4;
  localparam int KMAX = 4, SHIFT = 4, NA = NA_DSP + NA_LUT;
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
  logic m_req_valid, m_req_ready, m_rsp_valid;
  logic [31:0] m_req_addr;
  logic [15:0] m_req_len;
  logic [D*8-1:0] m_rsp_data;
  logic [1:0] idx_h, pat_h, idx_blk;
  logic idx_valid, pat_valid;
  fp_pkg::sel_kind_e idx_kind;
  fp_pkg::pattern_e pat;
  logic [31:0] pat_jsd;
  logic mpu_in_valid, mpu_in_first, mpu_in_last, mpu_busy, mpu_out_valid;
  logic signed [7:0] mpu_a [NA][N];
  logic signed [7:0] mpu_b [NA][N];
  logic signed [31:0] mpu_c [NA][N][N];

  sigu #(.B(B), .D(D), .N(N), .NA(NA), .H(H), .HKV(HKV), .NB(NB), .KMAX(KMAX), .SCORE_SHIFT(SHIFT)) dut (
    .clk, .rst_n, .start, .nb(3'(NB)), .q_base(32'(QB)), .k_base(32'(KB)), .gamma_q16(17'(GAMMA)),
    .tau2_q16(32'(TAU2)), .busy, .done, .req_valid(m_req_valid), .req_ready(m_req_ready),
    .req_addr(m_req_addr), .req_len(m_req_len), .rsp_valid(m_rsp_valid), .rsp_data(m_rsp_data),
    .mpu_in_valid, .mpu_in_first, .mpu_in_last, .mpu_a, .mpu_b, .mpu_out_valid, .mpu_c,
    .idx_valid, .idx_h, .idx_kind, .idx_blk, .pat_valid, .pat_h, .pat, .pat_jsd_q16(pat_jsd));
  hybrid_mpu #(.N(N), .NA_DSP(NA_DSP), .NA_LUT(NA_LUT)) u_mpu (
    .clk, .rst_n, .in_valid(mpu_in_valid), .in_first(mpu_in_first), .in_last(mpu_in_last),
    .a_vec(mpu_a), .b_vec(mpu_b), .busy(mpu_busy), .out_valid(mpu_out_valid), .c_tile(mpu_c));

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
    int patc [2];
    int pat_use [H];
    start = 0;
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
    end

    // ---- mechanisms ----
    $display("patterns: vertical-slash %0d query-aware %0d", patc[0], patc[1]);
    check(patc[0] > 0, "vertical-slash pattern happened");
    check(patc[1] > 0, "query-aware pattern happened");
    check(n_masked > 0, "causal mask applied");
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
