// tb_sau: self-checking test of the sparse attention unit (Q-K mapping,
// liveness-driven KV cache, MPU scheduling, keyed accumulation), with the
// hybrid MPU, a two-client read arbiter and the memory model attached.
//
// Reduced size: 8-token blocks, d = 8, 4x4 arrays, one DSP and one bit-plane
// array, 4 query heads sharing 2 KV heads, 4 blocks of context, 1 hot and 1
// cold cache slot, prefetch window 2. Each of several rounds draws random
// Q/K/V tensors and a random index set per head (query-aware columns, or
// vertical columns plus slash diagonals), streams the indices in, runs the
// unit and compares, for every (head, query block) that has work, every row
// of sum(p*v) and sum(p) with a reference computed here from the union of
// the selected (query block, key block) pairs with the same integer exponent
// and causal mask. The job count is checked per round; over all rounds the
// cache must have hit, missed, filled both tiers, skipped unused blocks and
// stalled on a full tier.
module tb_sau;
  localparam int B = 8, D = 8, N = 4, NA_DSP = 1, NA_LUT = 1, NA = NA_DSP + NA_LUT;
  localparam int H = 4, HKV = 2, NB = 4, KMAX = 4, JOB_MAX = 128, HOT = 1, COLD = 1, WIN = 2, SHIFT = 4;
  localparam int G = H / HKV;
  localparam int S = NB * B;
  localparam int QB = 0, KB = H * S, VB = KB + HKV * S, ROWS = VB + HKV * S;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  logic clr, start, busy, done, overflow;
  logic idx_valid;
  logic [1:0] idx_h, idx_blk, out_h, out_qb;
  logic [2:0] out_row;
  fp_pkg::sel_kind_e idx_kind;
  logic signed [31:0] out_acc [D];
  logic [31:0] out_l;
  logic [31:0] n_jobs, n_hit, n_miss, n_fetch_hot, n_fetch_cold, n_skip, n_tier_full;
  logic c_req_valid [2], c_req_ready [2], c_rsp_valid [2];
  logic [31:0] c_req_addr [2];
  logic [15:0] c_req_len [2];
  logic [D*8-1:0] c_rsp_data, m_rsp_data;
  logic m_req_valid, m_req_ready, m_rsp_valid;
  logic [31:0] m_req_addr;
  logic [15:0] m_req_len;
  logic mpu_in_valid, mpu_in_first, mpu_in_last, mpu_busy, mpu_out_valid;
  logic signed [7:0] mpu_a [NA][N];
  logic signed [7:0] mpu_b [NA][N];
  logic signed [31:0] mpu_c [NA][N][N];

  sau #(.B(B), .D(D), .N(N), .NA(NA), .H(H), .HKV(HKV), .NB(NB), .KMAX(KMAX), .JOB_MAX(JOB_MAX), .HOT(HOT),
        .COLD(COLD), .WIN(WIN), .SCORE_SHIFT(SHIFT)) dut (
    .clk, .rst_n, .clr, .nb(3'(NB)), .q_base(32'(QB)), .k_base(32'(KB)), .v_base(32'(VB)),
    .idx_valid, .idx_h, .idx_kind, .idx_blk, .start, .busy, .done,
    .q_req_valid(c_req_valid[0]), .q_req_ready(c_req_ready[0]), .q_req_addr(c_req_addr[0]),
    .q_req_len(c_req_len[0]), .q_rsp_valid(c_rsp_valid[0]), .q_rsp_data(c_rsp_data),
    .c_req_valid(c_req_valid[1]), .c_req_ready(c_req_ready[1]), .c_req_addr(c_req_addr[1]),
    .c_req_len(c_req_len[1]), .c_rsp_valid(c_rsp_valid[1]), .c_rsp_data(c_rsp_data),
    .mpu_in_valid, .mpu_in_first, .mpu_in_last, .mpu_a, .mpu_b, .mpu_out_valid, .mpu_c,
    .out_h, .out_qb, .out_row, .out_acc, .out_l,
    .n_jobs, .n_hit, .n_miss, .n_fetch_hot, .n_fetch_cold, .n_skip, .n_tier_full, .overflow);
  hybrid_mpu #(.N(N), .NA_DSP(NA_DSP), .NA_LUT(NA_LUT)) u_mpu (
    .clk, .rst_n, .in_valid(mpu_in_valid), .in_first(mpu_in_first), .in_last(mpu_in_last),
    .a_vec(mpu_a), .b_vec(mpu_b), .busy(mpu_busy), .out_valid(mpu_out_valid), .c_tile(mpu_c));
  hbm_rd_arb #(.NC(2), .D(D)) u_arb (
    .clk, .rst_n, .req_valid(c_req_valid), .req_ready(c_req_ready), .req_addr(c_req_addr),
    .req_len(c_req_len), .rsp_valid(c_rsp_valid), .rsp_data(c_rsp_data), .m_req_valid, .m_req_ready,
    .m_req_addr, .m_req_len, .m_rsp_valid, .m_rsp_data);
  hbm_model #(.D(D), .ROWS(ROWS), .LAT(3)) u_hbm (
    .clk, .rst_n, .req_valid(m_req_valid), .req_ready(m_req_ready), .req_addr(m_req_addr),
    .req_len(m_req_len), .rsp_valid(m_rsp_valid), .rsp_data(m_rsp_data));

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

  task automatic send(input int h, input fp_pkg::sel_kind_e k, input int b);
    idx_valid = 1; idx_h = 2'(h); idx_kind = k; idx_blk = 2'(b);
    @(negedge clk);
    idx_valid = 0;
  endtask

  longint tot_hit = 0, tot_miss = 0, tot_hot = 0, tot_cold = 0, tot_skip = 0, tot_full = 0;
  initial begin
    clr = 0; start = 0; idx_valid = 0; idx_h = 0; idx_kind = fp_pkg::SEL_VERT; idx_blk = 0;
    out_h = 0; out_qb = 0; out_row = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 8; round++) begin
      automatic bit pr [H][NB][NB];
      automatic int njobs = 0;
      for (int h = 0; h < H; h++)
        for (int s = 0; s < S; s++)
          for (int c = 0; c < D; c++) Q[h][s][c] = int'($urandom_range(15)) - 8;
      for (int g = 0; g < HKV; g++)
        for (int s = 0; s < S; s++)
          for (int c = 0; c < D; c++) begin
            K[g][s][c] = int'($urandom_range(31)) - 16;
            V[g][s][c] = int'($urandom_range(255)) - 128;
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
      @(negedge clk);
      clr = 1;
      @(negedge clk);
      clr = 0;
      repeat (NB * HKV + 4) @(negedge clk);
      for (int h = 0; h < H; h++) begin
        automatic bit qa = ($urandom_range(1) == 0);
        automatic bit vt [NB], st [NB];
        for (int a = 0; a < NB; a++) begin
          vt[a] = 0; st[a] = 0;
          for (int b = 0; b < NB; b++) pr[h][a][b] = 0;
        end
        for (int i = 0; i < 1 + $urandom_range(2); i++) begin
          automatic int j = int'($urandom_range(NB - 1));
          if (vt[j]) continue;
          vt[j] = 1;
          send(h, qa ? fp_pkg::SEL_QA : fp_pkg::SEL_VERT, j);
          for (int qb = j; qb < NB; qb++) pr[h][qb][j] = 1;
        end
        if (!qa)
          for (int i = 0; i < $urandom_range(2); i++) begin
            automatic int d = int'($urandom_range(NB - 1));
            if (st[d]) continue;
            st[d] = 1;
            send(h, fp_pkg::SEL_SLASH, d);
            for (int qb = d; qb < NB; qb++) pr[h][qb][qb - d] = 1;
          end
      end
      start = 1;
      @(negedge clk);
      start = 0;
      while (!done) @(negedge clk);
      tot_hit += n_hit; tot_miss += n_miss; tot_hot += n_fetch_hot; tot_cold += n_fetch_cold;
      tot_skip += n_skip; tot_full += n_tier_full;
      for (int h = 0; h < H; h++)
        for (int qb = 0; qb < NB; qb++) begin
          automatic bit any = 0;
          for (int kb = 0; kb <= qb; kb++) if (pr[h][qb][kb]) begin any = 1; njobs++; end
          if (!any) continue;
          for (int r = 0; r < B; r++) begin
            automatic longint acc [D];
            automatic longint l = 0;
            for (int c = 0; c < D; c++) acc[c] = 0;
            for (int kb = 0; kb <= qb; kb++) begin
              if (!pr[h][qb][kb]) continue;
              for (int kk = 0; kk < B; kk++) begin
                automatic longint dot = 0;
                automatic int pv;
                for (int c = 0; c < D; c++) dot += Q[h][qb * B + r][c] * K[h / G][kb * B + kk][c];
                pv = (kb == qb && kk > r) ? 0 : expp(dot);
                l += pv;
                for (int c = 0; c < D; c++) acc[c] += pv * V[h / G][kb * B + kk][c];
              end
            end
            out_h = 2'(h); out_qb = 2'(qb); out_row = 3'(r);
            #1;
            check(longint'(out_l) == l, $sformatf("round %0d h%0d qb%0d r%0d sum(p) %0d vs %0d", round, h, qb, r, out_l, l));
            for (int c = 0; c < D; c++)
              check(longint'(out_acc[c]) == acc[c], $sformatf("round %0d h%0d qb%0d r%0d c%0d", round, h, qb, r, c));
          end
        end
      check(n_jobs == 32'(njobs) && !overflow, $sformatf("round %0d jobs %0d vs %0d", round, n_jobs, njobs));
    end
    $display("cache: hit %0d miss %0d hot %0d cold %0d skip %0d tier-full %0d",
             tot_hit, tot_miss, tot_hot, tot_cold, tot_skip, tot_full);
    check(tot_hit > 0, "cache hit happened");
    check(tot_miss > 0, "cache miss happened");
    check(tot_hot > 0, "hot tier fill happened");
    check(tot_cold > 0, "cold tier fill happened");
    check(tot_skip > 0, "unused block skipped");
    check(tot_full > 0, "full tier stalled prefetch");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
