// stream_topk: Streaming Top-k selection / Streaming Coverage Selector.
//
// Selects the fewest blocks whose scores sum to at least gamma of the total
// (the coverage rule of the index generator) without sorting the whole score
// buffer. One sequential pass reads the n scores of a buffer, one per cycle
// through rd_idx / rd_data (combinational read), and inserts each into a
// sorted candidate list of KMAX entries: a bank of comparators finds the
// insertion point and the smaller entries shift down. After the pass, prefix
// sums over the list find the smallest k with prefix(k) * 2^16 >= gamma_q16 *
// total; entries 0..k-1 (largest first) are then emitted one per cycle on
// out_valid/out_idx, and done pulses after the last. If the KMAX candidates do
// not reach the coverage, all KMAX are emitted. Latency n + 2 + k cycles. The
// bounded candidate list, comparator and prefix-adder structure follow the
// paper; KMAX is this design's choice. Zero scores are never selected.
module stream_topk #(
  parameter int unsigned NB   = fp_pkg::NB_MAX,
  parameter int unsigned KMAX = fp_pkg::KMAX,
  localparam int unsigned JW  = $clog2(NB),
  localparam int unsigned KW  = $clog2(KMAX + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [JW:0]   n,
  input  logic [47:0]   total,
  input  logic [16:0]   gamma_q16,
  output logic [JW-1:0] rd_idx,
  input  logic [31:0]   rd_data,
  output logic          busy,
  output logic          out_valid,
  output logic [JW-1:0] out_idx,
  output logic          done
);
  typedef enum logic [1:0] {S_IDLE, S_SCAN, S_CUT, S_EMIT} state_e;
  state_e state;
  logic [31:0]   sc [KMAX];
  logic [JW-1:0] ix [KMAX];
  logic [KW-1:0] cnt, k, e;
  logic [JW:0]   pos;

  assign rd_idx = JW'(pos);
  assign busy   = state != S_IDLE;

  // insertion point: number of held entries not smaller than the new score
  logic [KW-1:0] ins;
  always_comb begin
    ins = '0;
    for (int i = 0; i < KMAX; i++)
      if (KW'(i) < cnt && sc[i] >= rd_data) ins = KW'(i + 1);
  end

  // coverage cut: smallest k whose prefix sum reaches gamma * total
  logic [KW-1:0] kcut;
  always_comb begin
    logic [79:0] pre, goal;
    logic found;
    goal  = 80'(total) * 80'(gamma_q16);
    pre   = '0;
    found = (goal == 0);
    kcut  = '0;
    for (int i = 0; i < KMAX; i++) begin
      if (!found && KW'(i) < cnt) begin
        pre = pre + (80'(sc[i]) << 16);
        kcut = KW'(i + 1);
        if (pre >= goal) found = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cnt <= '0; k <= '0; e <= '0; pos <= '0;
      out_valid <= 1'b0; out_idx <= '0; done <= 1'b0;
      for (int i = 0; i < KMAX; i++) begin sc[i] <= '0; ix[i] <= '0; end
    end else begin
      out_valid <= 1'b0;
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          cnt <= '0;
          pos <= '0;
          state <= (n == 0) ? S_CUT : S_SCAN;
        end
        S_SCAN: begin
          if (rd_data != 0 && ins < KW'(KMAX)) begin
            for (int i = KMAX - 1; i > 0; i--)
              if (KW'(i) > ins) begin sc[i] <= sc[i-1]; ix[i] <= ix[i-1]; end
            sc[ins] <= rd_data;
            ix[ins] <= JW'(pos);
            if (cnt < KW'(KMAX)) cnt <= cnt + 1'b1;
          end
          if (pos + 1'b1 == n) state <= S_CUT;
          pos <= pos + 1'b1;
        end
        S_CUT: begin
          k <= kcut;
          e <= '0;
          if (kcut == 0) begin done <= 1'b1; state <= S_IDLE; end
          else state <= S_EMIT;
        end
        S_EMIT: begin
          out_valid <= 1'b1;
          out_idx <= ix[e];
          e <= e + 1'b1;
          if (e + 1'b1 == k) begin done <= 1'b1; state <= S_IDLE; end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
