// block_pool: block average pooling of Query or Key rows.
//
// clr starts a new block. Each in_valid row (D signed INT8 values, element c
// in bits [8c+7:8c]) is added into D running INT32 sums; mean[c] is the sum
// shifted right arithmetically by log2(B), i.e. the floor of the average of
// the B rows of the block, which stays in INT8 range. The streaming average
// is the paper's; flooring is this design's choice. mean is valid once B
// rows have been added and stays until the next clr.
module block_pool #(
  parameter int unsigned B = fp_pkg::BLK,
  parameter int unsigned D = fp_pkg::HEAD_DIM
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clr,
  input  logic              in_valid,
  input  logic [D*8-1:0]    in_row,
  output logic signed [7:0] mean [D]
);
  localparam int unsigned SH = $clog2(B);
  logic signed [31:0] sum [D];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < D; c++) sum[c] <= '0;
    end else if (clr) begin
      for (int c = 0; c < D; c++) sum[c] <= '0;
    end else if (in_valid) begin
      for (int c = 0; c < D; c++) sum[c] <= sum[c] + 32'(signed'(in_row[8*c +: 8]));
    end
  end

  always_comb
    for (int c = 0; c < D; c++) mean[c] = 8'(sum[c] >>> SH);
endmodule
