// mpu_pe: one processing element of an output-stationary systolic array.
//
// Each cycle the PE registers the A operand (with its valid/first/last flags)
// to its right neighbour and the B operand to the one below, and, when the
// incoming operands are valid, multiplies them in INT8 and accumulates in
// INT32. A valid operand pair tagged "first" restarts the accumulator.
// USE_LUT selects the multiplier: 0 a plain product (mapped to a DSP slice),
// 1 the bit-plane nibble multiplier built from LUTs. INT8 operands and INT32
// accumulation follow the paper; the output-stationary dataflow is this
// design's choice. One cycle latency from operands to accumulator.
module mpu_pe #(
  parameter bit USE_LUT = 1'b0
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic signed [7:0]  a_in,
  input  logic signed [7:0]  b_in,
  input  logic               vld_in,
  input  logic               first_in,
  input  logic               last_in,
  output logic signed [7:0]  a_out,
  output logic signed [7:0]  b_out,
  output logic               vld_out,
  output logic               first_out,
  output logic               last_out,
  output logic signed [31:0] acc
);
  logic signed [15:0] prod;

  if (USE_LUT) begin : g_lut
    bitplane_mul u_mul (.a(a_in), .b(b_in), .p(prod));
  end else begin : g_dsp
    assign prod = a_in * b_in;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_out <= '0; b_out <= '0;
      vld_out <= 1'b0; first_out <= 1'b0; last_out <= 1'b0;
      acc <= '0;
    end else begin
      a_out     <= a_in;
      b_out     <= b_in;
      vld_out   <= vld_in;
      first_out <= first_in;
      last_out  <= last_in;
      if (vld_in) acc <= (first_in ? 32'sd0 : acc) + 32'(prod);
    end
  end
endmodule
