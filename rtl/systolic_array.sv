// systolic_array: N x N output-stationary INT8 systolic grid.
//
// Computes C = A * B where the client streams, one inner-dimension step per
// cycle, a column of A (a_vec[i] = A[i][k]) and a row of B (b_vec[j] = B[k][j]).
// Skew registers at the edge delay row i of A by i cycles and column j of B by
// j cycles, so PE(i,j) sees A[i][k] and B[k][j] together at step k + i + j.
// The valid/first/last flags enter with row 0 of A and travel with the A
// operands, so each PE restarts its accumulator on its own "first". The last
// product reaches PE(N-1,N-1) 2N-2 cycles after the last input; out_valid
// pulses one cycle after that, and c holds the tile until the next job's
// "first" reaches each PE. Latency: K + 2N cycles for an inner dimension K.
// USE_LUT picks DSP or bit-plane PEs for the whole grid.
module systolic_array #(
  parameter int unsigned N       = 32,
  parameter bit          USE_LUT = 1'b0
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic               in_first,
  input  logic               in_last,
  input  logic signed [7:0]  a_vec [N],
  input  logic signed [7:0]  b_vec [N],
  output logic               out_valid,
  output logic signed [31:0] c [N][N]
);
  // edge skew outputs: row i of A / column i of B delayed by i cycles
  logic signed [7:0] a_sk [N];
  logic signed [7:0] b_sk [N];
  logic              v_sk [N], f_sk [N], l_sk [N];

  for (genvar i = 0; i < N; i++) begin : g_skew
    if (i == 0) begin : g_0
      assign a_sk[0] = a_vec[0];
      assign b_sk[0] = b_vec[0];
      assign v_sk[0] = in_valid;
      assign f_sk[0] = in_first;
      assign l_sk[0] = in_last;
    end else begin : g_d
      // i-stage delay line for A row i, B column i and the flags
      logic signed [7:0] ra [i];
      logic signed [7:0] rb [i];
      logic              rv [i];
      logic              rf [i];
      logic              rl [i];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int s = 0; s < i; s++) begin
            ra[s] <= '0; rb[s] <= '0; rv[s] <= 1'b0; rf[s] <= 1'b0; rl[s] <= 1'b0;
          end
        end else begin
          ra[0] <= a_vec[i]; rb[0] <= b_vec[i];
          rv[0] <= in_valid; rf[0] <= in_first; rl[0] <= in_last;
          for (int s = 1; s < i; s++) begin
            ra[s] <= ra[s-1]; rb[s] <= rb[s-1];
            rv[s] <= rv[s-1]; rf[s] <= rf[s-1]; rl[s] <= rl[s-1];
          end
        end
      end
      assign a_sk[i] = ra[i-1];
      assign b_sk[i] = rb[i-1];
      assign v_sk[i] = rv[i-1];
      assign f_sk[i] = rf[i-1];
      assign l_sk[i] = rl[i-1];
    end
  end

  // PE interconnect: ah/vh.. flow right, bv flows down
  logic signed [7:0] ah [N][N+1];
  logic              vh [N][N+1], fh [N][N+1], lh [N][N+1];
  logic signed [7:0] bv [N+1][N];

  for (genvar i = 0; i < N; i++) begin : g_row
    assign ah[i][0] = a_sk[i];
    assign vh[i][0] = v_sk[i];
    assign fh[i][0] = f_sk[i];
    assign lh[i][0] = l_sk[i];
    assign bv[0][i] = b_sk[i];
    for (genvar j = 0; j < N; j++) begin : g_col
      logic signed [7:0] b_dn;
      mpu_pe #(.USE_LUT(USE_LUT)) u_pe (
        .clk, .rst_n,
        .a_in(ah[i][j]), .b_in(bv[i][j]),
        .vld_in(vh[i][j]), .first_in(fh[i][j]), .last_in(lh[i][j]),
        .a_out(ah[i][j+1]), .b_out(b_dn),
        .vld_out(vh[i][j+1]), .first_out(fh[i][j+1]), .last_out(lh[i][j+1]),
        .acc(c[i][j]));
      assign bv[i+1][j] = b_dn;
    end
  end

  // the last valid operand leaves PE(N-1,N-1) one cycle after it is accumulated
  assign out_valid = vh[N-1][N] & lh[N-1][N];
endmodule
