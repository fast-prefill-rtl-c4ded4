// sfu: Special Function Unit, a LANES-wide vector unit shared by the compute
// units.
//
// Operations (op, one result vector per cycle, one cycle latency):
//   SFU_EXP  : y = exp2_p8(x): the table-based exponential of fp_pkg, scaling
//              by 2^-shift, result 0..127.
//   SFU_NORM : y = sat8(x / den), truncated toward zero: the softmax
//              normalisation that turns an accumulated attention row
//              sum(p*v) into sum(p*v)/sum(p). den = 0 gives 0.
//   SFU_SILU : y = x * sigmoid(x) with x and y in Q24.8; sigmoid(x) =
//              1 / (1 + 2^(-x*log2(e))), the power of two taken from the same
//              16-entry table, log2(e) ~ 369/256.
// The paper names softmax, normalisation and SiLU as the SFU's work; the
// table-driven exponential, the integer divider and the formats are this
// design's own.
module sfu #(
  parameter int unsigned LANES = fp_pkg::HEAD_DIM
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic [1:0]         op,
  input  logic [4:0]         shift,
  input  logic signed [31:0] x [LANES],
  input  logic signed [31:0] den,
  output logic               out_valid,
  output logic signed [31:0] y [LANES]
);
  localparam logic [1:0] SFU_EXP = 2'd0, SFU_NORM = 2'd1, SFU_SILU = 2'd2;

  function automatic logic signed [31:0] norm8(input logic signed [31:0] v,
                                               input logic signed [31:0] d);
    logic signed [31:0] q;
    if (d == 0) return '0;
    q = v / d;
    if (q > 32'sd127)  return 32'sd127;
    if (q < -32'sd128) return -32'sd128;
    return q;
  endfunction

  function automatic logic signed [31:0] silu_q8(input logic signed [31:0] v);
    logic signed [47:0] t;      // -x*log2(e), 4 fraction bits
    logic signed [47:0] n;
    logic [63:0] e_q16;         // 2^(t/16) with 16 fraction bits
    logic [63:0] sig_q16;       // sigmoid with 16 fraction bits
    logic signed [63:0] prod;
    t = (-48'(v) * 48'sd369) >>> 12;
    if (t >= 48'sd256) return '0;            // sigmoid below 2^-16
    if (t < -48'sd256) return v;             // sigmoid ~ 1
    n = (t >>> 4) + 48'sd16;                 // 0..31
    e_q16 = (64'(fp_pkg::exp2_frac(t[3:0])) << n[4:0]) >> 15;
    sig_q16 = 64'h1_0000_0000 / (64'h1_0000 + e_q16);
    prod = 64'(v) * $signed({1'b0, sig_q16[62:0]});
    return 32'(prod >>> 16);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int l = 0; l < LANES; l++) y[l] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        for (int l = 0; l < LANES; l++) begin
          unique case (op)
            SFU_EXP:  y[l] <= 32'(fp_pkg::exp2_p8(x[l], 32'(shift)));
            SFU_NORM: y[l] <= norm8(x[l], den);
            SFU_SILU: y[l] <= silu_q8(x[l]);
            default:  y[l] <= '0;
          endcase
        end
      end
    end
  end
endmodule
