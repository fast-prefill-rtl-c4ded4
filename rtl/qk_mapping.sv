// qk_mapping: Q-K mapping, the job list of the sparse attention unit.
//
// Collects the selected block indices of every head (from the index
// generator) and turns them into a block-major job list: for every KV bucket
// (Key block kb of KV head g, bucket = kb*HKV + g, in ascending order) the
// list of consumers (h, qb) whose sparse attention needs that block.
// Index meaning: a vertical or query-aware index j means Key block j is used
// by every query block qb >= j; a slash index d means qb uses Key block
// qb - d. A slash pair whose Key block is already a vertical column of the
// same head is dropped, giving the union of the two sets. Construction is a
// linear-time bucketisation rather than a sort, in three passes:
//   count : enumerate all (h, qb, kb) pairs, bump the block-use counter cnt[bucket]
//   offset: prefix sums give each bucket's first slot; copies become write pointers
//   fill  : enumerate again and write (h, qb) at the bucket's write pointer.
// Each pass costs one cycle per pair (offset: one per bucket). The block-use
// counters are kept as remaining-use counters rem[]: dec_valid decrements
// one when a job has consumed the block, giving the liveness the KV cache
// evicts on. Read ports are combinational. overflow is set when the pairs
// exceed JOB_MAX (the excess is dropped). The bucketisation, use counter and
// offsets follow the paper; the index-to-pair rule and sizes are this
// design's choice.
module qk_mapping #(
  parameter int unsigned H       = fp_pkg::N_HEADS,
  parameter int unsigned HKV     = fp_pkg::N_KVH,
  parameter int unsigned NB      = fp_pkg::NB_MAX,
  parameter int unsigned KMAX    = fp_pkg::KMAX,
  parameter int unsigned JOB_MAX     = fp_pkg::JOB_MAX,
  localparam int unsigned HW  = (H > 1) ? $clog2(H) : 1,
  localparam int unsigned JW  = $clog2(NB),
  localparam int unsigned NBK = NB * HKV,
  localparam int unsigned BKW = $clog2(NBK),
  localparam int unsigned XW  = $clog2(JOB_MAX + 1),
  localparam int unsigned KW  = $clog2(KMAX + 1),
  localparam int unsigned KIW = $clog2(KMAX)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           clr,
  input  logic [JW:0]    nb,
  // selected indices
  input  logic           in_valid,
  input  logic [HW-1:0]  in_h,
  input  fp_pkg::sel_kind_e in_kind,
  input  logic [JW-1:0]  in_blk,
  // build
  input  logic           build,
  output logic           busy,
  output logic           done,
  output logic           overflow,
  output logic [XW-1:0]  n_jobs,
  // bucket and job read ports
  input  logic [BKW-1:0] bk_idx,
  output logic [XW-1:0]  bk_off,
  output logic [XW-1:0]  bk_cnt,
  input  logic [XW-1:0]  job_idx,
  output logic [HW-1:0]  job_h,
  output logic [JW-1:0]  job_qb,
  // remaining-use counters
  input  logic [BKW-1:0] rem_idx,
  output logic [XW-1:0]  rem_val,
  input  logic           dec_valid,
  input  logic [BKW-1:0] dec_idx
);
  localparam int unsigned G = H / HKV;

  logic [JW-1:0] vlist [H][KMAX];
  logic [JW-1:0] slist [H][KMAX];
  logic [KW-1:0] vcount [H];
  logic [KW-1:0] scount [H];
  logic          vsel  [H][NB];
  logic [XW-1:0] cnt  [NBK];
  logic [XW-1:0] off  [NBK];
  logic [XW-1:0] wptr [NBK];
  logic [XW-1:0] rem  [NBK];
  logic [HW+JW-1:0] jobs [JOB_MAX];

  typedef enum logic [2:0] {P_IDLE, P_ZERO, P_COUNT, P_OFF, P_FILL} phase_e;
  phase_e phase;

  // pair enumerator: head eh, list el (0 vertical, 1 slash), entry ee, query block eq
  logic [HW-1:0] eh;
  logic          el;
  logic [KW-1:0] ee;
  logic [JW:0]   eq;
  logic [BKW:0]  zb;          // bucket sweep index
  logic [XW-1:0] run;

  logic          p_end;       // enumeration finished
  logic          p_valid;     // current (eh, el, ee, eq) is a pair to record
  logic [JW:0]   p_kb;
  logic [BKW-1:0] p_bk;
  logic [JW:0]   p_base;      // first query block of the current entry
  logic          p_entry_ok;

  always_comb begin
    p_end      = (eh == HW'(H - 1)) && el && (ee >= scount[eh]) || (32'(eh) >= H);
    p_entry_ok = el ? (ee < scount[eh]) : (ee < vcount[eh]);
    p_base     = el ? (JW+1)'(slist[eh][KIW'(ee)]) : (JW+1)'(vlist[eh][KIW'(ee)]);
    p_kb       = el ? eq - p_base : p_base;
    p_valid    = p_entry_ok && (eq < nb) && (eq >= p_base) &&
                 !(el && vsel[eh][JW'(p_kb)]);
    p_bk       = BKW'(p_kb) * BKW'(HKV) + BKW'(32'(eh) / G);
  end

  // next enumerator position
  logic [HW-1:0] n_eh;
  logic          n_el;
  logic [KW-1:0] n_ee;
  logic [JW:0]   n_eq;
  always_comb begin
    n_eh = eh; n_el = el; n_ee = ee; n_eq = eq;
    if (p_entry_ok && eq + 1'b1 < nb) begin
      n_eq = eq + 1'b1;
    end else if (p_entry_ok) begin
      n_ee = ee + 1'b1;
      n_eq = el ? (JW+1)'(slist[eh][KIW'(ee + 1'b1)]) : (JW+1)'(vlist[eh][KIW'(ee + 1'b1)]);
    end else if (!el) begin
      n_el = 1'b1;
      n_ee = '0;
      n_eq = (JW+1)'(slist[eh][0]);
    end else begin
      n_eh = eh + 1'b1;
      n_el = 1'b0;
      n_ee = '0;
      n_eq = (JW+1)'(vlist[HW'(eh + 1'b1)][0]);
    end
  end

  assign busy    = phase != P_IDLE;
  assign bk_off  = off[bk_idx];
  assign bk_cnt  = cnt[bk_idx];
  assign job_h   = jobs[$clog2(JOB_MAX)'(job_idx)][HW+JW-1:JW];
  assign job_qb  = jobs[$clog2(JOB_MAX)'(job_idx)][JW-1:0];
  assign rem_val = rem[rem_idx];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase <= P_IDLE;
      done <= 1'b0;
      overflow <= 1'b0;
      n_jobs <= '0;
      eh <= '0; el <= 1'b0; ee <= '0; eq <= '0; zb <= '0; run <= '0;
      for (int h = 0; h < H; h++) begin
        vcount[h] <= '0;
        scount[h] <= '0;
        for (int b = 0; b < NB; b++) vsel[h][b] <= 1'b0;
      end
    end else begin
      done <= 1'b0;
      if (clr) begin
        for (int h = 0; h < H; h++) begin
          vcount[h] <= '0;
          scount[h] <= '0;
          for (int b = 0; b < NB; b++) vsel[h][b] <= 1'b0;
        end
        overflow <= 1'b0;
      end else if (in_valid) begin
        if (in_kind == fp_pkg::SEL_SLASH) begin
          if (scount[in_h] < KW'(KMAX)) begin
            slist[in_h][KIW'(scount[in_h])] <= in_blk;
            scount[in_h] <= scount[in_h] + 1'b1;
          end
        end else if (vcount[in_h] < KW'(KMAX) && !vsel[in_h][in_blk]) begin
          vlist[in_h][KIW'(vcount[in_h])] <= in_blk;
          vcount[in_h] <= vcount[in_h] + 1'b1;
          vsel[in_h][in_blk] <= 1'b1;
        end
      end
      if (dec_valid && rem[dec_idx] != '0) rem[dec_idx] <= rem[dec_idx] - 1'b1;

      unique case (phase)
        P_IDLE: if (build) begin
          zb <= '0;
          phase <= P_ZERO;
        end
        P_ZERO: begin                    // clear the block-use counters
          cnt[BKW'(zb)] <= '0;
          zb <= zb + 1'b1;
          if (zb + 1'b1 == (BKW+1)'(NBK)) begin
            eh <= '0; el <= 1'b0; ee <= '0; eq <= (JW+1)'(vlist[0][0]);
            phase <= P_COUNT;
          end
        end
        P_COUNT: begin
          if (p_end) begin
            zb <= '0;
            run <= '0;
            phase <= P_OFF;
          end else begin
            if (p_valid) cnt[p_bk] <= cnt[p_bk] + 1'b1;
            begin eh <= n_eh; el <= n_el; ee <= n_ee; eq <= n_eq; end
          end
        end
        P_OFF: begin
          off[BKW'(zb)]  <= run;
          wptr[BKW'(zb)] <= run;
          rem[BKW'(zb)]  <= cnt[BKW'(zb)];
          run <= run + cnt[BKW'(zb)];
          zb <= zb + 1'b1;
          if (zb + 1'b1 == (BKW+1)'(NBK)) begin
            n_jobs <= run + cnt[BKW'(zb)];
            eh <= '0; el <= 1'b0; ee <= '0; eq <= (JW+1)'(vlist[0][0]);
            phase <= P_FILL;
          end
        end
        P_FILL: begin
          if (p_end) begin
            done <= 1'b1;
            phase <= P_IDLE;
          end else begin
            if (p_valid) begin
              if (32'(wptr[p_bk]) < JOB_MAX) jobs[XW'(wptr[p_bk])] <= {eh, JW'(eq)};
              else overflow <= 1'b1;
              wptr[p_bk] <= wptr[p_bk] + 1'b1;
            end
            begin eh <= n_eh; el <= n_el; ee <= n_ee; eq <= n_eq; end
          end
        end
        default: phase <= P_IDLE;
      endcase
    end
  end
endmodule
