// divergence_eval: Divergence Evaluator of the index generator.
//
// Decides a head's sparsity pattern from two block-level distributions over
// the nb Key blocks: p[j] = v[j]/V, the true block-pooled attention of the
// last query block (vertical scores), and q[j] = w[j]/W, the estimate from the
// pooled query and pooled keys (query-aware scores). It computes the
// Jensen-Shannon divergence in bits,
//   JSD = 1/2 sum p log2(2p/(p+q)) + 1/2 sum q log2(2q/(p+q)),
// without dividing per element: with m' = v*W + w*V,
//   A = sum v * (1 + log2 v + log2 W - log2 m'),  Bq = sum w * (1 + log2 w + log2 V - log2 m'),
// and JSD = (A*W + Bq*V) / (2*V*W). The head is query-aware when
// sqrt(JSD_nats) < tau, i.e. JSD_bits < tau^2/ln 2 = tau2_q16 / 2^16, tested as
// A*W + Bq*V < 2*tau2_q16*V*W (logs carry 16 fraction bits). log2 is a
// leading-one detector plus a 17-point table of log2(1+i/16) with linear
// interpolation. One block per cycle: the unit drives rd_idx and reads v_in,
// w_in combinationally in the same cycle; done pulses with pattern and
// jsd_q16 valid after nb+2 cycles. The test and tau = 0.1 follow the paper;
// the fixed-point formulation is this design's own.
module divergence_eval #(
  parameter int unsigned NB = fp_pkg::NB_MAX,
  localparam int unsigned JW = $clog2(NB)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [JW:0]   nb,
  input  logic [47:0]   v_tot,
  input  logic [47:0]   w_tot,
  input  logic [31:0]   tau2_q16,
  output logic [JW-1:0] rd_idx,
  input  logic [31:0]   v_in,
  input  logic [31:0]   w_in,
  output logic          busy,
  output logic          done,
  output fp_pkg::pattern_e pattern,
  output logic [31:0]   jsd_q16
);
  // log2(x) with 16 fraction bits, x > 0
  function automatic logic [31:0] log2_q16(input logic [63:0] x);
    logic [16:0] t [17];
    logic [5:0]  p;
    logic [63:0] xn;
    logic [15:0] f;
    logic [16:0] lo, hi;
    t = '{17'd0, 17'd5732, 17'd11136, 17'd16248, 17'd21098, 17'd25711, 17'd30109,
          17'd34312, 17'd38336, 17'd42196, 17'd45904, 17'd49472, 17'd52911,
          17'd56229, 17'd59434, 17'd62534, 17'd65536};
    p = '0;
    for (int i = 0; i < 64; i++) if (x[i]) p = 6'(i);
    xn = x << (6'd63 - p);
    f  = xn[62:47];
    lo = t[f[15:12]];
    hi = t[5'(f[15:12]) + 5'd1];
    return (32'(p) << 16) + 32'(lo) + 32'((34'(hi - lo) * 34'(f[11:0])) >> 12);
  endfunction

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_FIN} state_e;
  state_e state;
  logic [JW:0] idx;
  logic signed [95:0] acc_a, acc_b;
  logic signed [95:0] term_a, term_b;

  assign rd_idx = JW'(idx);
  assign busy   = state != S_IDLE;

  always_comb begin
    logic [63:0] mp;
    logic signed [47:0] la, lb;
    mp = 64'(v_in) * 64'(w_tot) + 64'(w_in) * 64'(v_tot);
    la = 48'sd65536 + 48'(log2_q16(64'(v_in))) + 48'(log2_q16(64'(w_tot))) - 48'(log2_q16(mp));
    lb = 48'sd65536 + 48'(log2_q16(64'(w_in))) + 48'(log2_q16(64'(v_tot))) - 48'(log2_q16(mp));
    term_a = (v_in != 0) ? 96'(signed'({1'b0, v_in})) * 96'(la) : '0;
    term_b = (w_in != 0) ? 96'(signed'({1'b0, w_in})) * 96'(lb) : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      idx <= '0;
      acc_a <= '0;
      acc_b <= '0;
      done <= 1'b0;
      pattern <= fp_pkg::PAT_VS;
      jsd_q16 <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          idx <= '0;
          acc_a <= '0;
          acc_b <= '0;
          state <= S_RUN;
        end
        S_RUN: begin
          acc_a <= acc_a + term_a;
          acc_b <= acc_b + term_b;
          if (idx + 1'b1 == nb) state <= S_FIN;
          idx <= idx + 1'b1;
        end
        S_FIN: begin
          logic signed [191:0] num, den;
          num = 192'(acc_a) * 192'(signed'({1'b0, w_tot})) + 192'(acc_b) * 192'(signed'({1'b0, v_tot}));
          den = 192'(signed'({1'b0, v_tot})) * 192'(signed'({1'b0, w_tot}));
          if (num < 0) num = '0;   // log-table error can push a near-zero JSD below 0
          if (den == 0) begin
            pattern <= fp_pkg::PAT_VS;
            jsd_q16 <= 32'hFFFF_FFFF;
          end else begin
            pattern <= (num < 192'(2) * 192'(tau2_q16) * den) ? fp_pkg::PAT_QA : fp_pkg::PAT_VS;
            jsd_q16 <= 32'(num / (192'(2) * den));
          end
          done <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
