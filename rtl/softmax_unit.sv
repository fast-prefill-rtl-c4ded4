// softmax_unit: streaming exponent stage of the attention softmax.
//
// Takes one row segment of N INT32 scores (query position qpos, key positions
// kpos0 .. kpos0+N-1), masks keys after the query when causal is set, and
// turns every score into an unnormalised probability p = exp2_p8(score) in
// 0..127, which is a valid INT8 operand for the P*V product. It also gives
// psum, the sum of the N values, which the caller adds into the row's
// softmax denominator. No running maximum is subtracted: scores are scaled by
// 2^-SCORE_SHIFT into a bounded log2 range and the division by the row sum
// happens once, when the attention output is read. That deferral is this
// design's way of doing the paper's streaming softmax. One cycle latency.
module softmax_unit #(
  parameter int unsigned N           = fp_pkg::ARR_N,
  parameter int unsigned SCORE_SHIFT = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic               causal,
  input  logic [31:0]        qpos,
  input  logic [31:0]        kpos0,
  input  logic signed [31:0] score [N],
  output logic               out_valid,
  output logic [7:0]         p [N],
  output logic [15:0]        psum
);
  logic [7:0]  p_c [N];
  logic [15:0] sum_c;

  always_comb begin
    sum_c = '0;
    for (int x = 0; x < N; x++) begin
      if (causal && (kpos0 + 32'(x) > qpos)) p_c[x] = '0;
      else                                    p_c[x] = fp_pkg::exp2_p8(score[x], SCORE_SHIFT);
      sum_c += 16'(p_c[x]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      psum <= '0;
      for (int x = 0; x < N; x++) p[x] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        p <= p_c;
        psum <= sum_c;
      end
    end
  end
endmodule
