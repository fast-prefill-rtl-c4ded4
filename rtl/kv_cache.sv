// kv_cache: liveness-driven, dual-tier KV block cache (Cache Control Unit,
// Prefetch Logic, Hot Tier and Cold Tier).
//
// A cache line is one KV bucket: the B Key rows and B Value rows of Key
// block kb of KV head g (bucket = kb*HKV + g). The attention unit consumes
// buckets in ascending order; this unit prefetches ahead of it:
//  * a prefetch pointer walks the buckets in order, at most WIN buckets ahead
//    of the consumer's current bucket (cur_bucket);
//  * it reads the bucket's remaining-use counter (rem_idx / rem_val): a
//    bucket with no remaining use is skipped and never fetched; a bucket
//    whose tag is already present is not fetched again;
//  * otherwise the bucket goes to the hot tier if its use count is at least
//    t_hot, else to the cold tier, and is fetched only if that tier has a free
//    slot, so no live block is ever displaced (the pointer waits instead);
//  * a fetch is two HBM bursts of B rows (Keys, then Values) into the slot.
// The consumer asks for a bucket with want_bucket and gets hit = 1 and the
// slot number once the whole line is loaded; it reads Key and Value rows
// through two combinational row ports, and frees the slot with release when
// the bucket's remaining-use count has reached zero (evict on nil). Tags
// (valid, loaded, bucket) sit in a small table; data in one array of
// (HOT+COLD)*2*B rows (URAM in the FPGA mapping). The policy follows the
// paper; the slot counts, window and strict tier separation are this
// design's choice. Counters: n_fetch_hot, n_fetch_cold, n_skip, n_tier_full
// (cycles the pointer waited for a free slot in its tier).
module kv_cache #(
  parameter int unsigned B    = fp_pkg::BLK,
  parameter int unsigned D    = fp_pkg::HEAD_DIM,
  parameter int unsigned HKV  = fp_pkg::N_KVH,
  parameter int unsigned NB   = fp_pkg::NB_MAX,
  parameter int unsigned HOT  = 256,
  parameter int unsigned COLD = 256,
  parameter int unsigned WIN  = 8,
  parameter int unsigned XW   = 17,
  parameter int unsigned AW   = 32,
  localparam int unsigned NBK = NB * HKV,
  localparam int unsigned BKW = $clog2(NBK),
  localparam int unsigned NS  = HOT + COLD,
  localparam int unsigned SW  = $clog2(NS),
  localparam int unsigned BW  = $clog2(B),
  localparam int unsigned JW  = $clog2(NB)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [JW:0]    nb,
  input  logic [AW-1:0]  k_base,
  input  logic [AW-1:0]  v_base,
  input  logic [XW-1:0]  t_hot,
  output logic           pf_done,
  // remaining-use counters
  output logic [BKW-1:0] rem_idx,
  input  logic [XW-1:0]  rem_val,
  // HBM read client
  output logic           req_valid,
  input  logic           req_ready,
  output logic [AW-1:0]  req_addr,
  output logic [15:0]    req_len,
  input  logic           rsp_valid,
  input  logic [D*8-1:0] rsp_data,
  // consumer
  input  logic [BKW-1:0] cur_bucket,
  input  logic [BKW-1:0] want_bucket,
  output logic           hit,
  output logic [SW-1:0]  hit_slot,
  input  logic [SW-1:0]  rd_slot,
  input  logic [BW-1:0]  rd_row,
  output logic [D*8-1:0] rd_k,
  output logic [D*8-1:0] rd_v,
  input  logic           release_valid,
  input  logic [BKW-1:0] release_bucket,
  // statistics
  output logic [31:0]    n_fetch_hot,
  output logic [31:0]    n_fetch_cold,
  output logic [31:0]    n_skip,
  output logic [31:0]    n_tier_full
);
  logic [D*8-1:0] mem [NS*2*B];
  logic           t_valid  [NS];
  logic           t_loaded [NS];
  logic [BKW-1:0] t_bucket [NS];

  typedef enum logic [2:0] {F_IDLE, F_LOOK, F_REQ, F_DATA, F_DONE} fstate_e;
  fstate_e fs;
  logic [BKW:0]  pf;          // prefetch pointer
  logic [SW-1:0] fslot;
  logic          fisv;        // fetching Values (else Keys)
  logic [BW:0]   frow;
  logic [AW-1:0] s_rows;
  logic [BKW:0]  nbk_rt;

  assign s_rows = AW'(nb) * AW'(B);
  assign nbk_rt = (BKW+1)'(nb) * (BKW+1)'(HKV);
  assign rem_idx = BKW'(pf);

  // tag lookups
  logic          pf_present;
  logic          hot_free_f, cold_free_f;
  logic [SW-1:0] hot_free, cold_free;
  always_comb begin
    pf_present = 1'b0;
    hit = 1'b0;
    hit_slot = '0;
    hot_free_f = 1'b0;
    cold_free_f = 1'b0;
    hot_free = '0;
    cold_free = '0;
    for (int s = 0; s < NS; s++) begin
      if (t_valid[s] && t_bucket[s] == BKW'(pf)) pf_present = 1'b1;
      if (t_valid[s] && t_loaded[s] && t_bucket[s] == want_bucket) begin
        hit = 1'b1;
        hit_slot = SW'(s);
      end
    end
    for (int s = NS - 1; s >= 0; s--) begin
      if (!t_valid[s]) begin
        if (s < HOT) begin hot_free_f = 1'b1; hot_free = SW'(s); end
        else begin cold_free_f = 1'b1; cold_free = SW'(s); end
      end
    end
  end

  logic want_hot;
  assign want_hot = rem_val >= t_hot;

  assign rd_k = mem[(32'(rd_slot) * 2) * B + 32'(rd_row)];
  assign rd_v = mem[(32'(rd_slot) * 2 + 1) * B + 32'(rd_row)];

  assign req_valid = (fs == F_REQ);
  assign req_len   = 16'(B);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fs <= F_IDLE;
      pf <= '0; fslot <= '0; fisv <= 1'b0; frow <= '0; req_addr <= '0;
      pf_done <= 1'b0;
      n_fetch_hot <= '0; n_fetch_cold <= '0; n_skip <= '0; n_tier_full <= '0;
      for (int s = 0; s < NS; s++) begin
        t_valid[s] <= 1'b0; t_loaded[s] <= 1'b0; t_bucket[s] <= '0;
      end
    end else begin
      if (release_valid)
        for (int s = 0; s < NS; s++)
          if (t_valid[s] && t_bucket[s] == release_bucket) begin
            t_valid[s] <= 1'b0;
            t_loaded[s] <= 1'b0;
          end
      unique case (fs)
        F_IDLE: if (start) begin
          pf <= '0;
          pf_done <= 1'b0;
          n_fetch_hot <= '0; n_fetch_cold <= '0; n_skip <= '0; n_tier_full <= '0;
          fs <= F_LOOK;
        end
        F_LOOK: begin
          if (pf >= nbk_rt) begin
            pf_done <= 1'b1;
            fs <= F_IDLE;
          end else if (pf < (BKW+1)'(cur_bucket) + (BKW+1)'(WIN)) begin
            if (rem_val == '0) begin
              n_skip <= n_skip + 1'b1;
              pf <= pf + 1'b1;
            end else if (pf_present) begin
              pf <= pf + 1'b1;
            end else if (want_hot ? hot_free_f : cold_free_f) begin
              fslot <= want_hot ? hot_free : cold_free;
              t_valid[want_hot ? hot_free : cold_free]  <= 1'b1;
              t_loaded[want_hot ? hot_free : cold_free] <= 1'b0;
              t_bucket[want_hot ? hot_free : cold_free] <= BKW'(pf);
              if (want_hot) n_fetch_hot <= n_fetch_hot + 1'b1;
              else          n_fetch_cold <= n_fetch_cold + 1'b1;
              fisv <= 1'b0;
              req_addr <= k_base + AW'(32'(pf) % HKV) * s_rows + AW'(32'(pf) / HKV) * AW'(B);
              fs <= F_REQ;
            end else begin
              n_tier_full <= n_tier_full + 1'b1;
            end
          end
        end
        F_REQ: if (req_ready) begin
          frow <= '0;
          fs <= F_DATA;
        end
        F_DATA: if (rsp_valid) begin
          mem[(32'(fslot) * 2 + 32'(fisv)) * B + 32'(frow)] <= rsp_data;
          frow <= frow + 1'b1;
          if (frow == (BW+1)'(B - 1)) begin
            if (!fisv) begin
              fisv <= 1'b1;
              req_addr <= v_base + AW'(32'(pf) % HKV) * s_rows + AW'(32'(pf) / HKV) * AW'(B);
              fs <= F_REQ;
            end else begin
              t_loaded[fslot] <= 1'b1;
              pf <= pf + 1'b1;
              fs <= F_LOOK;
            end
          end
        end
        default: fs <= F_IDLE;
      endcase
    end
  end
endmodule
