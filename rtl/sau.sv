// sau: Sparse Attention Unit.
//
// Computes sparse attention for one layer from the block indices of the
// index generator, walking the KV blocks in ascending block order (block-
// major schedule) instead of by head or query block:
//  1. The Q-K mapping (qk_mapping) turns the selected indices into a job list
//     bucketed by KV block, with a remaining-use counter per block.
//  2. The dual-tier cache (kv_cache) prefetches the blocks that have remaining
//     uses, a bounded window ahead, into its hot or cold tier.
//  3. The Block Scheduler takes bucket after bucket: it waits until the
//     block is resident (a hit if it already is when asked, a miss
//     otherwise), copies its Key and Value tiles into local tile buffers, and
//     runs every job (h, qb) of the bucket: fetch the B x d query block from
//     HBM, S = Q*K^T on the hybrid MPU (inner dimension d), softmax exponent
//     (causal mask when qb equals the Key block) into an INT8 tile P and row
//     sums, O = P*V on the MPU (inner dimension B), and keyed accumulation of
//     O and the row sums at (h, qb). Each job decrements the block's
//     remaining-use counter; when the bucket is done the block is released
//     from the cache (evict on nil).
// After the last bucket the keyed accumulator holds, per (h, qb, row), the
// sum of p*v over all selected Key blocks and the sum of p, read through the
// out_* port; dividing the two (in the SFU) gives the attention output.
// Memory layout as in the index generator (Q at q_base, K at k_base, V at
// v_base, row s of head or KV head x at base + x*nb*B + s). t_hot = nb/2:
// the paper sets the hot threshold to half the query blocks. The schedule,
// the cache policy and keyed accumulation follow the paper; tile order, the
// deferred normalisation and the handshakes are this design's choice.
module sau #(
  parameter int unsigned B           = fp_pkg::BLK,
  parameter int unsigned D           = fp_pkg::HEAD_DIM,
  parameter int unsigned N           = fp_pkg::ARR_N,
  parameter int unsigned NA          = fp_pkg::NA_DSP + fp_pkg::NA_LUT,
  parameter int unsigned H           = fp_pkg::N_HEADS,
  parameter int unsigned HKV         = fp_pkg::N_KVH,
  parameter int unsigned NB          = fp_pkg::NB_MAX,
  parameter int unsigned KMAX        = fp_pkg::KMAX,
  parameter int unsigned JOB_MAX     = fp_pkg::JOB_MAX,
  parameter int unsigned HOT         = 256,
  parameter int unsigned COLD        = 256,
  parameter int unsigned WIN         = 8,
  parameter int unsigned SCORE_SHIFT = 8,
  parameter int unsigned AW          = 32,
  localparam int unsigned HW  = (H > 1) ? $clog2(H) : 1,
  localparam int unsigned JW  = $clog2(NB),
  localparam int unsigned BW  = $clog2(B),
  localparam int unsigned XW  = $clog2(JOB_MAX + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clr,
  input  logic [JW:0]        nb,
  input  logic [AW-1:0]      q_base,
  input  logic [AW-1:0]      k_base,
  input  logic [AW-1:0]      v_base,
  // selected indices from the index generator
  input  logic               idx_valid,
  input  logic [HW-1:0]      idx_h,
  input  fp_pkg::sel_kind_e  idx_kind,
  input  logic [JW-1:0]      idx_blk,
  input  logic               start,
  output logic               busy,
  output logic               done,
  // HBM read clients: query blocks, KV cache
  output logic               q_req_valid,
  input  logic               q_req_ready,
  output logic [AW-1:0]      q_req_addr,
  output logic [15:0]        q_req_len,
  input  logic               q_rsp_valid,
  input  logic [D*8-1:0]     q_rsp_data,
  output logic               c_req_valid,
  input  logic               c_req_ready,
  output logic [AW-1:0]      c_req_addr,
  output logic [15:0]        c_req_len,
  input  logic               c_rsp_valid,
  input  logic [D*8-1:0]     c_rsp_data,
  // hybrid MPU client
  output logic               mpu_in_valid,
  output logic               mpu_in_first,
  output logic               mpu_in_last,
  output logic signed [7:0]  mpu_a [NA][N],
  output logic signed [7:0]  mpu_b [NA][N],
  input  logic               mpu_out_valid,
  input  logic signed [31:0] mpu_c [NA][N][N],
  // attention output (unnormalised) read port
  input  logic [HW-1:0]      out_h,
  input  logic [JW-1:0]      out_qb,
  input  logic [BW-1:0]      out_row,
  output logic signed [31:0] out_acc [D],
  output logic [31:0]        out_l,
  // statistics
  output logic [31:0]        n_jobs,
  output logic [31:0]        n_hit,
  output logic [31:0]        n_miss,
  output logic [31:0]        n_fetch_hot,
  output logic [31:0]        n_fetch_cold,
  output logic [31:0]        n_skip,
  output logic [31:0]        n_tier_full,
  output logic               overflow
);
  import fp_pkg::*;
  localparam int unsigned NBK = NB * HKV;
  localparam int unsigned BKW = $clog2(NBK);
  localparam int unsigned NS  = HOT + COLD;
  localparam int unsigned SW  = $clog2(NS);
  localparam int unsigned TB  = B / N;
  localparam int unsigned TD  = D / N;
  localparam int unsigned TQ  = TB * TB;                 // tiles of Q*K^T
  localparam int unsigned TP  = TB * TD;                 // tiles of P*V
  localparam int unsigned RQ  = (TQ + NA - 1) / NA;
  localparam int unsigned RP  = (TP + NA - 1) / NA;
  localparam int unsigned RW  = $clog2(((RQ > RP) ? RQ : RP) + 1);
  localparam int unsigned KSW = $clog2(((B > D) ? B : D) + 1);
  localparam int unsigned AIW = $clog2(NA * N);

  typedef enum logic [3:0] {
    S_IDLE, S_MAP, S_BK, S_WANT, S_LDKV, S_JOB, S_QREQ, S_QW, S_FEED, S_MWAIT,
    S_DRAIN, S_FLUSH, S_LSUM
  } state_e;
  state_e state;

  // ---------------- job list ----------------
  logic map_build, map_busy, map_done;
  logic [XW-1:0] map_njobs, bk_off, bk_cnt, e, e_end, rem_val;
  logic [BKW-1:0] bk, rem_idx;
  logic [HW-1:0] jh_rd, jh;
  logic [JW-1:0] jq_rd, jq;
  logic dec_valid;

  qk_mapping #(.H(H), .HKV(HKV), .NB(NB), .KMAX(KMAX), .JOB_MAX(JOB_MAX)) u_map (
    .clk, .rst_n, .clr, .nb,
    .in_valid(idx_valid), .in_h(idx_h), .in_kind(idx_kind), .in_blk(idx_blk),
    .build(map_build), .busy(map_busy), .done(map_done), .overflow, .n_jobs(map_njobs),
    .bk_idx(bk), .bk_off, .bk_cnt, .job_idx(e), .job_h(jh_rd), .job_qb(jq_rd),
    .rem_idx, .rem_val, .dec_valid, .dec_idx(bk));

  // ---------------- cache ----------------
  logic cache_start, pf_done, hit, rel;
  logic [SW-1:0] hit_slot, slot;
  logic [BW-1:0] ld_row;
  logic [D*8-1:0] rd_k, rd_v;

  kv_cache #(.B(B), .D(D), .HKV(HKV), .NB(NB), .HOT(HOT), .COLD(COLD), .WIN(WIN),
             .XW(XW), .AW(AW)) u_cache (
    .clk, .rst_n, .start(cache_start), .nb, .k_base, .v_base,
    .t_hot(XW'(nb >> 1)), .pf_done,
    .rem_idx, .rem_val,
    .req_valid(c_req_valid), .req_ready(c_req_ready), .req_addr(c_req_addr),
    .req_len(c_req_len), .rsp_valid(c_rsp_valid), .rsp_data(c_rsp_data),
    .cur_bucket(bk), .want_bucket(bk), .hit, .hit_slot,
    .rd_slot(slot), .rd_row(ld_row), .rd_k, .rd_v,
    .release_valid(rel), .release_bucket(bk),
    .n_fetch_hot, .n_fetch_cold, .n_skip, .n_tier_full);

  // ---------------- tile buffers ----------------
  logic [D*8-1:0] ktile [B];
  logic [D*8-1:0] vtile [B];
  logic [D*8-1:0] qtile [B];
  logic [7:0]     ptile [B][B];
  logic [31:0]    lpart [B];

  // query block fetch
  logic qf_start, qf_busy, qf_done, qf_wr;
  logic [D*8-1:0] qf_buf [B];
  logic [D*8-1:0] qf_wdata;
  logic [BW:0] qrow;
  logic [AW-1:0] s_rows;
  assign s_rows = AW'(nb) * AW'(B);
  key_block_fetch #(.B(B), .D(D), .AW(AW)) u_qfetch (
    .clk, .rst_n, .start(qf_start),
    .base_addr(q_base + AW'(jh) * s_rows + AW'(jq) * AW'(B)),
    .busy(qf_busy), .done(qf_done),
    .req_valid(q_req_valid), .req_ready(q_req_ready), .req_addr(q_req_addr),
    .req_len(q_req_len), .rsp_valid(q_rsp_valid), .rsp_data(q_rsp_data),
    .kbuf(qf_buf), .wr_valid(qf_wr), .wr_data(qf_wdata));

  // ---------------- MPU feed ----------------
  logic          pv;          // 0: S = Q*K^T, 1: O = P*V
  logic [RW-1:0] rnd;
  logic [KSW-1:0] kstep;
  logic [AIW:0]  dr;
  logic [JW-1:0] kb;
  assign kb = JW'(32'(bk) / HKV);

  always_comb begin
    for (int a = 0; a < NA; a++) begin
      int t;
      t = int'(rnd) * NA + a;
      for (int i = 0; i < N; i++) begin
        mpu_a[a][i] = '0;
        mpu_b[a][i] = '0;
      end
      if (!pv && t < TQ) begin
        for (int i = 0; i < N; i++) begin
          mpu_a[a][i] = qtile[BW'((t / TB) * N + i)][8*(int'(kstep) % D) +: 8];
          mpu_b[a][i] = ktile[BW'((t % TB) * N + i)][8*(int'(kstep) % D) +: 8];
        end
      end else if (pv && t < TP) begin
        for (int i = 0; i < N; i++) begin
          mpu_a[a][i] = ptile[BW'((t / TD) * N + i)][BW'(kstep)];
          mpu_b[a][i] = vtile[BW'(kstep)][8*((t % TD) * N + i) +: 8];
        end
      end
    end
  end
  logic [KSW-1:0] klen;
  assign klen = pv ? KSW'(B) : KSW'(D);
  assign mpu_in_valid = (state == S_FEED);
  assign mpu_in_first = (state == S_FEED) && (kstep == '0);
  assign mpu_in_last  = (state == S_FEED) && (kstep == klen - 1'b1);

  // ---------------- drain ----------------
  int            dr_a, dr_i, dr_t;
  logic          dr_ok;
  logic [BW-1:0] dr_row_i;
  logic [31:0]   dr_col0;
  logic signed [31:0] dr_row [N];
  always_comb begin
    dr_a  = int'(dr) / N;
    dr_i  = int'(dr) % N;
    dr_t  = int'(rnd) * NA + dr_a;
    dr_ok = (state == S_DRAIN) && (pv ? (dr_t < TP) : (dr_t < TQ));
    dr_row_i = pv ? BW'((dr_t / TD) * N + dr_i) : BW'((dr_t / TB) * N + dr_i);
    dr_col0  = pv ? 32'((dr_t % TD) * N) : 32'((dr_t % TB) * N);
    for (int x = 0; x < N; x++) dr_row[x] = mpu_c[AIW'(dr_a)][dr_i][x];
  end

  logic          sm_valid;
  logic [7:0]    sm_p [N];
  logic [15:0]   sm_psum;
  logic [BW-1:0] sm_row;
  logic [31:0]   sm_col0;
  softmax_unit #(.N(N), .SCORE_SHIFT(SCORE_SHIFT)) u_sm (
    .clk, .rst_n, .in_valid(dr_ok && !pv), .causal(jq == kb),
    .qpos(32'(dr_row_i)), .kpos0(dr_col0), .score(dr_row),
    .out_valid(sm_valid), .p(sm_p), .psum(sm_psum));
  always_ff @(posedge clk) begin
    sm_row  <= dr_row_i;
    sm_col0 <= dr_col0;
  end

  // ---------------- keyed accumulator ----------------
  logic job_begin, l_valid;
  keyed_acc #(.H(H), .NB(NB), .B(B), .D(D), .N(N)) u_acc (
    .clk, .rst_n, .clr, .job_begin, .job_h(jh), .job_qb(jq),
    .wr_valid(dr_ok && pv), .wr_row(dr_row_i), .wr_col0($clog2(D)'(dr_col0)), .wr_data(dr_row),
    .l_valid, .l_data(lpart),
    .rd_h(out_h), .rd_qb(out_qb), .rd_row(out_row), .rd_acc(out_acc), .rd_l(out_l),
    .rd_touched());

  assign busy = state != S_IDLE;
  assign rel  = (state == S_JOB) && (e == e_end);   // evict on nil
  assign ld_row = BW'(qrow);

  // ---------------- scheduler ----------------
  logic first_ask;
  logic [BKW:0] nbk_rt;
  assign nbk_rt = (BKW+1)'(nb) * (BKW+1)'(HKV);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      bk <= '0; e <= '0; e_end <= '0; jh <= '0; jq <= '0; slot <= '0;
      pv <= 1'b0; rnd <= '0; kstep <= '0; dr <= '0; qrow <= '0; first_ask <= 1'b0;
      map_build <= 1'b0; cache_start <= 1'b0; qf_start <= 1'b0;
      dec_valid <= 1'b0; job_begin <= 1'b0; l_valid <= 1'b0; done <= 1'b0;
      n_jobs <= '0; n_hit <= '0; n_miss <= '0;
    end else begin
      map_build <= 1'b0; cache_start <= 1'b0; qf_start <= 1'b0;
      dec_valid <= 1'b0; job_begin <= 1'b0; l_valid <= 1'b0; done <= 1'b0;
      if (sm_valid) begin
        for (int x = 0; x < N; x++) ptile[sm_row][BW'(sm_col0 + 32'(x))] <= sm_p[x];
        lpart[sm_row] <= lpart[sm_row] + 32'(sm_psum);
      end
      unique case (state)
        S_IDLE: if (start) begin
          map_build <= 1'b1;
          n_jobs <= '0; n_hit <= '0; n_miss <= '0;
          state <= S_MAP;
        end
        S_MAP: if (map_done) begin
          cache_start <= 1'b1;
          bk <= '0;
          state <= S_BK;
        end
        S_BK: begin
          if ((BKW+1)'(bk) >= nbk_rt || (bk == BKW'(NBK - 1) && bk_cnt == '0)) begin
            done <= 1'b1;
            state <= S_IDLE;
          end else if (bk_cnt == '0) begin
            bk <= bk + 1'b1;
          end else begin
            first_ask <= 1'b1;
            state <= S_WANT;
          end
        end
        S_WANT: begin
          first_ask <= 1'b0;
          if (hit) begin
            if (first_ask) n_hit <= n_hit + 1'b1;
            else           n_miss <= n_miss + 1'b1;
            slot <= hit_slot;
            qrow <= '0;
            state <= S_LDKV;
          end
        end
        S_LDKV: begin
          ktile[ld_row] <= rd_k;
          vtile[ld_row] <= rd_v;
          qrow <= qrow + 1'b1;
          if (qrow == (BW+1)'(B - 1)) begin
            e <= bk_off;
            e_end <= bk_off + bk_cnt;
            state <= S_JOB;
          end
        end
        S_JOB: begin
          if (e == e_end) begin
            if (bk == BKW'(NBK - 1)) begin
              done <= 1'b1;
              state <= S_IDLE;
            end else begin
              bk <= bk + 1'b1;
              state <= S_BK;
            end
          end else begin
            jh <= jh_rd;
            jq <= jq_rd;
            job_begin <= 1'b1;
            qf_start <= 1'b1;
            qrow <= '0;
            for (int r = 0; r < B; r++) lpart[r] <= '0;
            state <= S_QREQ;
          end
        end
        S_QREQ: state <= S_QW;
        S_QW: begin
          if (qf_wr) begin
            qtile[BW'(qrow)] <= qf_wdata;
            qrow <= qrow + 1'b1;
          end
          if (qf_done) begin
            pv <= 1'b0;
            rnd <= '0;
            kstep <= '0;
            state <= S_FEED;
          end
        end
        S_FEED: begin
          kstep <= kstep + 1'b1;
          if (kstep == klen - 1'b1) state <= S_MWAIT;
        end
        S_MWAIT: if (mpu_out_valid) begin
          dr <= '0;
          state <= S_DRAIN;
        end
        S_DRAIN: begin
          dr <= dr + 1'b1;
          if (dr + 1'b1 == (AIW+1)'(NA * N)) state <= S_FLUSH;
        end
        S_FLUSH: begin
          kstep <= '0;
          if (!pv && rnd != RW'(RQ - 1)) begin
            rnd <= rnd + 1'b1;
            state <= S_FEED;
          end else if (!pv) begin
            pv <= 1'b1;
            rnd <= '0;
            state <= S_FEED;
          end else if (rnd != RW'(RP - 1)) begin
            rnd <= rnd + 1'b1;
            state <= S_FEED;
          end else begin
            l_valid <= 1'b1;
            state <= S_LSUM;
          end
        end
        S_LSUM: begin
          dec_valid <= 1'b1;
          n_jobs <= n_jobs + 1'b1;
          e <= e + 1'b1;
          state <= S_JOB;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
