// fast_prefill_top: sparse-attention prefill accelerator, one layer step.
//
// Given the Q, K and V tensors of a layer in HBM (written there by the
// projection stage), the accelerator computes dynamic sparse attention for
// all heads:
//   global_fsm  orders the step and grants the shared hybrid MPU;
//   sigu        streams the Key blocks once and emits each head's sparse
//               block indices (vertical-slash or query-aware pattern);
//   sau         turns the indices into a block-major job list, prefetches KV
//               blocks into the liveness-driven hot/cold cache and computes
//               attention with keyed accumulation;
//   hybrid_mpu  six DSP and six bit-plane 32x32 INT8 systolic arrays;
//   sfu         normalises output rows (sum(p*v) / sum(p)) when read;
//   hbm_rd_arb  shares the single HBM read port among the Q_hat/Key fetch of
//               the index generator, the query fetch and the cache.
// Interface: start (with nb blocks of B tokens, tensor base addresses,
// gamma and tau^2 in Q16) -> done. Memory is a burst read port of one d-byte
// row per beat (m_req_*/m_rsp_*); the HBM, its controller and the host are
// outside. After done, out_rd_valid with (out_h, out_qb, out_row) returns the
// INT8 attention output row out_data one cycle later (out_valid). Index and
// pattern streams and the cache statistics are brought out for observation.
// The block structure follows the paper's architecture figure; the single
// memory port and the observation ports are this design's choice.
module fast_prefill_top #(
  parameter int unsigned B           = fp_pkg::BLK,
  parameter int unsigned D           = fp_pkg::HEAD_DIM,
  parameter int unsigned N           = fp_pkg::ARR_N,
  parameter int unsigned NA_DSP      = fp_pkg::NA_DSP,
  parameter int unsigned NA_LUT      = fp_pkg::NA_LUT,
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
  localparam int unsigned NA = NA_DSP + NA_LUT,
  localparam int unsigned HW = (H > 1) ? $clog2(H) : 1,
  localparam int unsigned JW = $clog2(NB),
  localparam int unsigned BW = $clog2(B)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [JW:0]        nb,
  input  logic [AW-1:0]      q_base,
  input  logic [AW-1:0]      k_base,
  input  logic [AW-1:0]      v_base,
  input  logic [16:0]        gamma_q16,
  input  logic [31:0]        tau2_q16,
  output logic               busy,
  output logic               done,
  output logic [31:0]        cycles,
  // HBM read port
  output logic               m_req_valid,
  input  logic               m_req_ready,
  output logic [AW-1:0]      m_req_addr,
  output logic [15:0]        m_req_len,
  input  logic               m_rsp_valid,
  input  logic [D*8-1:0]     m_rsp_data,
  // attention output
  input  logic               out_rd_valid,
  input  logic [HW-1:0]      out_h,
  input  logic [JW-1:0]      out_qb,
  input  logic [BW-1:0]      out_row,
  output logic               out_valid,
  output logic signed [7:0]  out_data [D],
  // observation
  output logic               idx_valid,
  output logic [HW-1:0]      idx_h,
  output fp_pkg::sel_kind_e  idx_kind,
  output logic [JW-1:0]      idx_blk,
  output logic               pat_valid,
  output logic [HW-1:0]      pat_h,
  output fp_pkg::pattern_e   pat,
  output logic [31:0]        n_jobs,
  output logic [31:0]        n_hit,
  output logic [31:0]        n_miss,
  output logic [31:0]        n_fetch_hot,
  output logic [31:0]        n_fetch_cold,
  output logic [31:0]        n_skip,
  output logic [31:0]        n_tier_full,
  output logic               job_overflow
);
  // ---------------- control ----------------
  logic sau_clr, sigu_start, sigu_done, sau_start, sau_done, grant_sau;
  logic [1:0] phase;
  global_fsm u_fsm (
    .clk, .rst_n, .start, .busy, .done, .sau_clr, .sigu_start, .sigu_done,
    .sau_start, .sau_done, .mpu_grant_sau(grant_sau), .phase, .cycles);

  // ---------------- memory arbitration ----------------
  logic           c_req_valid [3];
  logic           c_req_ready [3];
  logic [AW-1:0]  c_req_addr  [3];
  logic [15:0]    c_req_len   [3];
  logic           c_rsp_valid [3];
  logic [D*8-1:0] c_rsp_data;
  hbm_rd_arb #(.NC(3), .D(D), .AW(AW)) u_arb (
    .clk, .rst_n, .req_valid(c_req_valid), .req_ready(c_req_ready),
    .req_addr(c_req_addr), .req_len(c_req_len), .rsp_valid(c_rsp_valid),
    .rsp_data(c_rsp_data), .m_req_valid, .m_req_ready, .m_req_addr, .m_req_len,
    .m_rsp_valid, .m_rsp_data);

  // ---------------- shared MPU ----------------
  logic               g_in_valid, g_in_first, g_in_last, u_in_valid, u_in_first, u_in_last;
  logic signed [7:0]  g_a [NA][N];
  logic signed [7:0]  g_b [NA][N];
  logic signed [7:0]  u_a [NA][N];
  logic signed [7:0]  u_b [NA][N];
  logic               m_in_valid, m_in_first, m_in_last, m_busy, m_out_valid;
  logic signed [7:0]  m_a [NA][N];
  logic signed [7:0]  m_b [NA][N];
  logic signed [31:0] m_c [NA][N][N];

  assign m_in_valid = grant_sau ? u_in_valid : g_in_valid;
  assign m_in_first = grant_sau ? u_in_first : g_in_first;
  assign m_in_last  = grant_sau ? u_in_last  : g_in_last;
  assign m_a        = grant_sau ? u_a : g_a;
  assign m_b        = grant_sau ? u_b : g_b;

  hybrid_mpu #(.N(N), .NA_DSP(NA_DSP), .NA_LUT(NA_LUT)) u_mpu (
    .clk, .rst_n, .in_valid(m_in_valid), .in_first(m_in_first), .in_last(m_in_last),
    .a_vec(m_a), .b_vec(m_b), .busy(m_busy), .out_valid(m_out_valid), .c_tile(m_c));

  // ---------------- index generation ----------------
  logic sigu_busy;
  logic [31:0] pat_jsd;
  sigu #(.B(B), .D(D), .N(N), .NA(NA), .H(H), .HKV(HKV), .NB(NB), .KMAX(KMAX),
         .SCORE_SHIFT(SCORE_SHIFT), .AW(AW)) u_sigu (
    .clk, .rst_n, .start(sigu_start), .nb, .q_base, .k_base, .gamma_q16, .tau2_q16,
    .busy(sigu_busy), .done(sigu_done),
    .req_valid(c_req_valid[0]), .req_ready(c_req_ready[0]), .req_addr(c_req_addr[0]),
    .req_len(c_req_len[0]), .rsp_valid(c_rsp_valid[0]), .rsp_data(c_rsp_data),
    .mpu_in_valid(g_in_valid), .mpu_in_first(g_in_first), .mpu_in_last(g_in_last),
    .mpu_a(g_a), .mpu_b(g_b), .mpu_out_valid(m_out_valid & ~grant_sau), .mpu_c(m_c),
    .idx_valid, .idx_h, .idx_kind, .idx_blk,
    .pat_valid, .pat_h, .pat, .pat_jsd_q16(pat_jsd));

  // ---------------- sparse attention ----------------
  logic sau_busy;
  logic signed [31:0] acc_row [D];
  logic [31:0] acc_l;
  sau #(.B(B), .D(D), .N(N), .NA(NA), .H(H), .HKV(HKV), .NB(NB), .KMAX(KMAX),
        .JOB_MAX(JOB_MAX), .HOT(HOT), .COLD(COLD), .WIN(WIN),
        .SCORE_SHIFT(SCORE_SHIFT), .AW(AW)) u_sau (
    .clk, .rst_n, .clr(sau_clr), .nb, .q_base, .k_base, .v_base,
    .idx_valid, .idx_h, .idx_kind, .idx_blk,
    .start(sau_start), .busy(sau_busy), .done(sau_done),
    .q_req_valid(c_req_valid[1]), .q_req_ready(c_req_ready[1]), .q_req_addr(c_req_addr[1]),
    .q_req_len(c_req_len[1]), .q_rsp_valid(c_rsp_valid[1]), .q_rsp_data(c_rsp_data),
    .c_req_valid(c_req_valid[2]), .c_req_ready(c_req_ready[2]), .c_req_addr(c_req_addr[2]),
    .c_req_len(c_req_len[2]), .c_rsp_valid(c_rsp_valid[2]), .c_rsp_data(c_rsp_data),
    .mpu_in_valid(u_in_valid), .mpu_in_first(u_in_first), .mpu_in_last(u_in_last),
    .mpu_a(u_a), .mpu_b(u_b), .mpu_out_valid(m_out_valid & grant_sau), .mpu_c(m_c),
    .out_h, .out_qb, .out_row, .out_acc(acc_row), .out_l(acc_l),
    .n_jobs, .n_hit, .n_miss, .n_fetch_hot, .n_fetch_cold, .n_skip, .n_tier_full,
    .overflow(job_overflow));

  // ---------------- output normalisation ----------------
  logic signed [31:0] sfu_y [D];
  sfu #(.LANES(D)) u_sfu (
    .clk, .rst_n, .in_valid(out_rd_valid), .op(2'd1), .shift(5'd0),
    .x(acc_row), .den(signed'(acc_l)), .out_valid, .y(sfu_y));
  always_comb
    for (int c = 0; c < D; c++) out_data[c] = 8'(sfu_y[c]);

  // the MPU is never asked to start while it still holds a job
  assert property (@(posedge clk) disable iff (!rst_n) (m_in_valid && m_in_first) |-> !m_busy);
endmodule
