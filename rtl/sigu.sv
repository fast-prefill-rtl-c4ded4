// sigu: Sparse Index Generation Unit.
//
// Produces, for every query head of a layer, the Key-block indices that its
// sparse attention will use, following the Flex-Prefill selection rule, as
// one streaming pass over the Key matrix:
//  1. Q load: the last query block (B rows) of each head is read once into
//     the Q_hat buffer; its block average q_bar is kept per head.
//  2. Key stream: Key blocks j = 0..nb-1 are fetched in increasing order (for
//     each KV head), each exactly once, into the Key Block Buffer while a
//     pooling unit forms k_bar. For each query head of the KV group the hybrid
//     MPU computes the B x B tile Q_hat * K_j^T (as (B/N)^2 array tiles) plus
//     one extra tile holding the pooled product q_bar . k_bar. Each score row
//     segment goes through the softmax exponent (causal mask on the diagonal
//     block) into the Vertical and Slash Accumulators; the pooled product is
//     exponentiated into the Query-Aware score buffer. Nothing of size B x S
//     is stored: only per-block scores of length nb per head.
//  3. Per head, the Divergence Evaluator compares the vertical distribution
//     with the query-aware one and picks the pattern (JSD against tau).
//  4. Per head, the Streaming Top-k / Coverage selector emits the fewest
//     vertical and slash blocks (vertical-slash heads) or query-aware blocks
//     (query-aware heads) reaching gamma of the score mass.
// Output: idx_valid with (idx_h, idx_kind, idx_blk) per selected block, and
// pat_valid with each head's pattern. Memory layout (row = d bytes, one HBM
// beat): Q row s of head h at q_base + h*nb*B + s, K row s of KV head g at
// k_base + g*nb*B + s. The MPU is used in lock-step jobs of up to NA tiles
// with inner dimension d. The pipeline order and the fused accumulate-then-
// select structure follow the paper; pooling only the last query block, one
// Key stream feeding both paths, and the deferred (global) softmax
// normalisation are this design's reading of it.
module sigu #(
  parameter int unsigned B           = fp_pkg::BLK,
  parameter int unsigned D           = fp_pkg::HEAD_DIM,
  parameter int unsigned N           = fp_pkg::ARR_N,
  parameter int unsigned NA          = fp_pkg::NA_DSP + fp_pkg::NA_LUT,
  parameter int unsigned H           = fp_pkg::N_HEADS,
  parameter int unsigned HKV         = fp_pkg::N_KVH,
  parameter int unsigned NB          = fp_pkg::NB_MAX,
  parameter int unsigned KMAX        = fp_pkg::KMAX,
  parameter int unsigned SCORE_SHIFT = 8,
  parameter int unsigned AW          = 32,
  localparam int unsigned HW = (H > 1) ? $clog2(H) : 1,
  localparam int unsigned JW = $clog2(NB)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [JW:0]        nb,
  input  logic [AW-1:0]      q_base,
  input  logic [AW-1:0]      k_base,
  input  logic [16:0]        gamma_q16,
  input  logic [31:0]        tau2_q16,
  output logic               busy,
  output logic               done,
  // HBM read client
  output logic               req_valid,
  input  logic               req_ready,
  output logic [AW-1:0]      req_addr,
  output logic [15:0]        req_len,
  input  logic               rsp_valid,
  input  logic [D*8-1:0]     rsp_data,
  // hybrid MPU client
  output logic               mpu_in_valid,
  output logic               mpu_in_first,
  output logic               mpu_in_last,
  output logic signed [7:0]  mpu_a [NA][N],
  output logic signed [7:0]  mpu_b [NA][N],
  input  logic               mpu_out_valid,
  input  logic signed [31:0] mpu_c [NA][N][N],
  // results
  output logic               idx_valid,
  output logic [HW-1:0]      idx_h,
  output fp_pkg::sel_kind_e  idx_kind,
  output logic [JW-1:0]      idx_blk,
  output logic               pat_valid,
  output logic [HW-1:0]      pat_h,
  output fp_pkg::pattern_e   pat,
  output logic [31:0]        pat_jsd_q16
);
  import fp_pkg::*;
  localparam int unsigned G    = H / HKV;
  localparam int unsigned TB   = B / N;                // array tiles per block edge
  localparam int unsigned T    = TB * TB;              // score tiles per Q_hat*K^T
  localparam int unsigned R    = (T + 1 + NA - 1) / NA; // MPU jobs per (head, block)
  localparam int unsigned DW   = $clog2(D);
  localparam int unsigned BW   = $clog2(B);
  localparam int unsigned GW   = (G > 1) ? $clog2(G) : 1;
  localparam int unsigned KVW  = (HKV > 1) ? $clog2(HKV) : 1;
  localparam int unsigned RW   = (R > 1) ? $clog2(R) : 1;
  localparam int unsigned AIW  = $clog2(NA * N);

  typedef enum logic [3:0] {
    S_IDLE, S_CLR, S_QREQ, S_QWAIT, S_KREQ, S_KWAIT, S_FEED, S_MWAIT, S_DRAIN,
    S_FLUSH, S_DIV, S_DIVW, S_SEL, S_SELW
  } state_e;
  state_e state;

  // ---------------- buffers ----------------
  logic [D*8-1:0]    qbuf [H][B];      // Q_hat, last query block of every head
  logic signed [7:0] qbar [H][D];      // pooled Q_hat
  logic [7:0]        qa   [H][NB];     // query-aware score buffer
  logic [47:0]       qa_tot [H];

  // ---------------- loop counters ----------------
  logic [HW-1:0]  h;          // current query head (Q load, DIV, SEL)
  logic [JW:0]    j;          // key block
  logic [KVW-1:0] kvh;
  logic [GW-1:0]  g;
  logic [RW-1:0]  rnd;
  logic [DW:0]    kstep;
  logic [AIW:0]   dr;         // drain index: array*N + row
  logic [BW:0]    qrow;
  logic [1:0]     sel_src;    // 0 vertical, 1 slash, 2 query-aware
  logic [HW-1:0]  hq;         // head of the current score computation

  assign hq = HW'(32'(kvh) * G + 32'(g));

  // ---------------- fetch units ----------------
  logic qf_start, qf_busy, qf_done, kf_start, kf_busy, kf_done;
  logic qf_req_valid, kf_req_valid;
  logic [AW-1:0] qf_req_addr, kf_req_addr;
  logic [15:0] qf_req_len, kf_req_len;
  logic [D*8-1:0] qf_buf [B];
  logic [D*8-1:0] kbuf [B];
  logic qf_wr, kf_wr;
  logic [D*8-1:0] qf_wdata, kf_wdata;
  logic in_q;
  logic [AW-1:0] s_rows;      // nb * B rows per head

  assign in_q   = (state == S_QREQ) || (state == S_QWAIT);
  assign s_rows = AW'(nb) * AW'(B);

  key_block_fetch #(.B(B), .D(D), .AW(AW)) u_qfetch (
    .clk, .rst_n, .start(qf_start),
    .base_addr(q_base + AW'(h) * s_rows + s_rows - AW'(B)),
    .busy(qf_busy), .done(qf_done),
    .req_valid(qf_req_valid), .req_ready(req_ready & in_q), .req_addr(qf_req_addr),
    .req_len(qf_req_len), .rsp_valid(rsp_valid & in_q), .rsp_data,
    .kbuf(qf_buf), .wr_valid(qf_wr), .wr_data(qf_wdata));

  key_block_fetch #(.B(B), .D(D), .AW(AW)) u_kfetch (
    .clk, .rst_n, .start(kf_start),
    .base_addr(k_base + AW'(kvh) * s_rows + AW'(j) * AW'(B)),
    .busy(kf_busy), .done(kf_done),
    .req_valid(kf_req_valid), .req_ready(req_ready & ~in_q), .req_addr(kf_req_addr),
    .req_len(kf_req_len), .rsp_valid(rsp_valid & ~in_q), .rsp_data,
    .kbuf(kbuf), .wr_valid(kf_wr), .wr_data(kf_wdata));

  assign req_valid = in_q ? qf_req_valid : kf_req_valid;
  assign req_addr  = in_q ? qf_req_addr  : kf_req_addr;
  assign req_len   = in_q ? qf_req_len   : kf_req_len;

  logic signed [7:0] qmean [D];
  logic signed [7:0] kbar  [D];
  block_pool #(.B(B), .D(D)) u_qpool (.clk, .rst_n, .clr(qf_start), .in_valid(qf_wr),
                                      .in_row(qf_wdata), .mean(qmean));
  block_pool #(.B(B), .D(D)) u_kpool (.clk, .rst_n, .clr(kf_start), .in_valid(kf_wr),
                                      .in_row(kf_wdata), .mean(kbar));

  // ---------------- MPU operand feed ----------------
  always_comb begin
    for (int a = 0; a < NA; a++) begin
      int t;
      t = int'(rnd) * NA + a;
      for (int i = 0; i < N; i++) begin
        mpu_a[a][i] = '0;
        mpu_b[a][i] = '0;
      end
      if (t < T) begin
        for (int i = 0; i < N; i++) begin
          mpu_a[a][i] = qbuf[hq][BW'((t / TB) * N + i)][8*kstep[DW-1:0] +: 8];
          mpu_b[a][i] = kbuf[BW'((t % TB) * N + i)][8*kstep[DW-1:0] +: 8];
        end
      end else if (t == T) begin
        mpu_a[a][0] = qbar[hq][kstep[DW-1:0]];
        mpu_b[a][0] = kbar[kstep[DW-1:0]];
      end
    end
  end
  assign mpu_in_valid = (state == S_FEED);
  assign mpu_in_first = (state == S_FEED) && (kstep == 0);
  assign mpu_in_last  = (state == S_FEED) && (kstep == (DW+1)'(D - 1));

  // ---------------- drain: scores -> softmax -> accumulators ----------------
  logic [AIW-1:0] dr_a_i;
  int             dr_t;
  logic [BW-1:0]  dr_qi, dr_c0;
  logic           dr_score;
  logic signed [31:0] dr_row [N];
  always_comb begin
    dr_a_i   = AIW'(dr);
    dr_t     = int'(rnd) * NA + int'(dr_a_i) / N;
    dr_qi    = BW'((dr_t / TB) * N + int'(dr_a_i) % N);
    dr_c0    = BW'((dr_t % TB) * N);
    dr_score = (state == S_DRAIN) && (dr_t < T);
    for (int x = 0; x < N; x++) dr_row[x] = mpu_c[int'(dr_a_i) / N][int'(dr_a_i) % N][x];
  end

  logic          sm_valid;
  logic [7:0]    sm_p [N];
  logic [15:0]   sm_psum;
  logic [BW-1:0] sm_qi, sm_c0;
  softmax_unit #(.N(N), .SCORE_SHIFT(SCORE_SHIFT)) u_sm (
    .clk, .rst_n, .in_valid(dr_score), .causal(j + 1'b1 == nb),
    .qpos(32'(dr_qi)), .kpos0(32'(dr_c0)), .score(dr_row),
    .out_valid(sm_valid), .p(sm_p), .psum(sm_psum));

  always_ff @(posedge clk) begin
    sm_qi <= dr_qi;
    sm_c0 <= dr_c0;
  end

  logic vacc_busy, sacc_busy, acc_clr;
  logic [HW-1:0] rd_h;
  logic [JW-1:0] rd_idx, div_idx, tk_idx;
  logic [31:0] v_rd, s_rd;
  logic [47:0] v_tot, s_tot;

  assign acc_clr = (state == S_IDLE) && start;
  assign rd_h    = h;
  assign rd_idx  = (state == S_DIVW) ? div_idx : tk_idx;

  vertical_acc #(.H(H), .NB(NB), .N(N)) u_vacc (
    .clk, .rst_n, .clr(acc_clr), .busy(vacc_busy),
    .upd_valid(sm_valid), .upd_h(hq), .upd_j(JW'(j)), .e(sm_p),
    .rd_h, .rd_idx, .rd_data(v_rd), .rd_tot(v_tot));

  slash_acc #(.H(H), .NB(NB), .N(N), .B(B)) u_sacc (
    .clk, .rst_n, .clr(acc_clr), .busy(sacc_busy), .nb,
    .upd_valid(sm_valid), .upd_h(hq), .upd_j(JW'(j)), .qi(sm_qi), .c0(sm_c0), .e(sm_p),
    .rd_h, .rd_idx, .rd_data(s_rd), .rd_tot(s_tot));

  // ---------------- divergence and selection ----------------
  logic div_start, div_busy, div_done;
  pattern_e div_pat;
  logic [31:0] div_jsd;
  divergence_eval #(.NB(NB)) u_div (
    .clk, .rst_n, .start(div_start), .nb, .v_tot, .w_tot(qa_tot[h]), .tau2_q16,
    .rd_idx(div_idx), .v_in(v_rd), .w_in(32'(qa[h][div_idx])),
    .busy(div_busy), .done(div_done), .pattern(div_pat), .jsd_q16(div_jsd));

  logic tk_start, tk_busy, tk_out_valid, tk_done;
  logic [JW-1:0] tk_out_idx;
  logic [31:0] tk_data;
  logic [47:0] tk_total;
  always_comb begin
    unique case (sel_src)
      2'd0:    begin tk_data = v_rd; tk_total = v_tot; end
      2'd1:    begin tk_data = s_rd; tk_total = s_tot; end
      default: begin tk_data = 32'(qa[h][tk_idx]); tk_total = qa_tot[h]; end
    endcase
  end
  stream_topk #(.NB(NB), .KMAX(KMAX)) u_topk (
    .clk, .rst_n, .start(tk_start), .n(nb), .total(tk_total), .gamma_q16,
    .rd_idx(tk_idx), .rd_data(tk_data), .busy(tk_busy),
    .out_valid(tk_out_valid), .out_idx(tk_out_idx), .done(tk_done));

  assign idx_valid = tk_out_valid;
  assign idx_h     = h;
  assign idx_blk   = tk_out_idx;
  assign idx_kind  = (sel_src == 2'd0) ? SEL_VERT : (sel_src == 2'd1) ? SEL_SLASH : SEL_QA;

  assign busy = state != S_IDLE;

  // ---------------- control ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      h <= '0; j <= '0; kvh <= '0; g <= '0; rnd <= '0; kstep <= '0; dr <= '0; qrow <= '0;
      sel_src <= '0;
      qf_start <= 1'b0; kf_start <= 1'b0; div_start <= 1'b0; tk_start <= 1'b0;
      done <= 1'b0; pat_valid <= 1'b0; pat_h <= '0; pat <= PAT_VS; pat_jsd_q16 <= '0;
      for (int x = 0; x < H; x++) qa_tot[x] <= '0;
    end else begin
      qf_start <= 1'b0; kf_start <= 1'b0; div_start <= 1'b0; tk_start <= 1'b0;
      done <= 1'b0; pat_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          for (int x = 0; x < H; x++) qa_tot[x] <= '0;
          h <= '0;
          state <= S_CLR;
        end
        S_CLR: if (!vacc_busy && !sacc_busy) begin
          qf_start <= 1'b1;
          qrow <= '0;
          state <= S_QREQ;
        end
        S_QREQ: state <= S_QWAIT;
        S_QWAIT: begin
          if (qf_wr) begin
            qbuf[h][BW'(qrow)] <= qf_wdata;
            qrow <= qrow + 1'b1;
          end
          if (qf_done) begin
            for (int c = 0; c < D; c++) qbar[h][c] <= qmean[c];
            if (h == HW'(H - 1)) begin
              j <= '0; kvh <= '0;
              kf_start <= 1'b1;
              state <= S_KREQ;
            end else begin
              h <= h + 1'b1;
              qf_start <= 1'b1;
              qrow <= '0;
              state <= S_QREQ;
            end
          end
        end
        S_KREQ: state <= S_KWAIT;
        S_KWAIT: if (kf_done) begin
          g <= '0; rnd <= '0; kstep <= '0;
          state <= S_FEED;
        end
        S_FEED: begin
          kstep <= kstep + 1'b1;
          if (kstep == (DW+1)'(D - 1)) state <= S_MWAIT;
        end
        S_MWAIT: if (mpu_out_valid) begin
          dr <= '0;
          state <= S_DRAIN;
        end
        S_DRAIN: begin
          if (dr_t == T) begin
            qa[hq][JW'(j)] <= exp2_p8(mpu_c[int'(dr_a_i) / N][0][0], SCORE_SHIFT);
            qa_tot[hq] <= qa_tot[hq] + 48'(exp2_p8(mpu_c[int'(dr_a_i) / N][0][0], SCORE_SHIFT));
          end
          dr <= dr + (dr_t == T ? (AIW+1)'(N) : (AIW+1)'(1));
          if (dr + (dr_t == T ? (AIW+1)'(N) : (AIW+1)'(1)) >= (AIW+1)'(NA * N)) state <= S_FLUSH;
        end
        S_FLUSH: begin               // last softmax result lands in the accumulators
          kstep <= '0;
          if (rnd != RW'(R - 1)) begin
            rnd <= rnd + 1'b1;
            state <= S_FEED;
          end else if (g != GW'(G - 1)) begin
            rnd <= '0;
            g <= g + 1'b1;
            state <= S_FEED;
          end else if (kvh != KVW'(HKV - 1)) begin
            kvh <= kvh + 1'b1;
            kf_start <= 1'b1;
            state <= S_KREQ;
          end else if (j + 1'b1 != nb) begin
            kvh <= '0;
            j <= j + 1'b1;
            kf_start <= 1'b1;
            state <= S_KREQ;
          end else begin
            h <= '0;
            state <= S_DIV;
          end
        end
        S_DIV: begin
          div_start <= 1'b1;
          state <= S_DIVW;
        end
        S_DIVW: if (div_done) begin
          pat_valid <= 1'b1;
          pat_h <= h;
          pat <= div_pat;
          pat_jsd_q16 <= div_jsd;
          sel_src <= (div_pat == PAT_QA) ? 2'd2 : 2'd0;
          state <= S_SEL;
        end
        S_SEL: begin
          tk_start <= 1'b1;
          state <= S_SELW;
        end
        S_SELW: if (tk_done) begin
          if (sel_src == 2'd0) begin
            sel_src <= 2'd1;
            state <= S_SEL;
          end else if (h != HW'(H - 1)) begin
            h <= h + 1'b1;
            state <= S_DIV;
          end else begin
            done <= 1'b1;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
