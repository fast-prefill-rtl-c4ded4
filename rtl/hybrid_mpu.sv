// hybrid_mpu: Hybrid Matrix Processing Unit.
//
// NA_DSP systolic arrays built on DSP multipliers and NA_LUT arrays built on
// bit-plane (LUT) multipliers, all N x N, INT8 in and INT32 out. The arrays
// run in lock step from one job stream: every cycle of a job the client gives
// each array its own A column and B row for the current inner-dimension step,
// so one job computes up to NA_DSP+NA_LUT independent N x N output tiles.
// Arrays 0..NA_DSP-1 are DSP arrays, the rest bit-plane arrays; both give
// bit-identical results. busy is high from the first input beat until the
// tiles are out (out_valid, one cycle); the client starts the next job only
// after out_valid. Six DSP plus six bit-plane 32x32 arrays are the paper's
// numbers; the lock-step job interface is this design's choice.
module hybrid_mpu #(
  parameter int unsigned N      = fp_pkg::ARR_N,
  parameter int unsigned NA_DSP = fp_pkg::NA_DSP,
  parameter int unsigned NA_LUT = fp_pkg::NA_LUT,
  localparam int unsigned NA    = NA_DSP + NA_LUT
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic               in_first,
  input  logic               in_last,
  input  logic signed [7:0]  a_vec [NA][N],
  input  logic signed [7:0]  b_vec [NA][N],
  output logic               busy,
  output logic               out_valid,
  output logic signed [31:0] c_tile [NA][N][N]
);
  logic [NA-1:0] ov;

  for (genvar g = 0; g < NA; g++) begin : g_arr
    systolic_array #(.N(N), .USE_LUT(g >= NA_DSP)) u_arr (
      .clk, .rst_n,
      .in_valid, .in_first, .in_last,
      .a_vec(a_vec[g]), .b_vec(b_vec[g]),
      .out_valid(ov[g]), .c(c_tile[g]));
  end

  assign out_valid = ov[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                      busy <= 1'b0;
    else if (in_valid && in_first)   busy <= 1'b1;
    else if (out_valid)              busy <= 1'b0;
  end

  // all arrays see the same job stream and must finish together
  assert property (@(posedge clk) disable iff (!rst_n) out_valid |-> (&ov));
endmodule
