// slash_acc: Slash Accumulator with the slash half of the VS score buffer.
//
// A slash score collects attention along diagonals: the score of query
// position q against key position k belongs to diagonal offset q - k. Here the
// offsets are binned by block: bin = floor((q - k) / B). For row qi of the
// last query block (q = (nb-1)*B + qi) and key kk of block j (k = j*B + kk)
// the bin is nb-1-j when kk <= qi and nb-2-j otherwise, so each update of N
// exponentiated scores (keys c0 .. c0+N-1 of block j) adds to at most two
// bins, split at kk = qi. Keys after the query are masked to zero by the
// caller, so for j = nb-1 the second bin gets nothing. tot[h] is the head
// total. clr sweeps the buffer to zero as in vertical_acc. The diagonal
// aggregation is the paper's; the block-wide binning is this design's choice.
module slash_acc #(
  parameter int unsigned H  = fp_pkg::N_HEADS,
  parameter int unsigned NB = fp_pkg::NB_MAX,
  parameter int unsigned N  = fp_pkg::ARR_N,
  parameter int unsigned B  = fp_pkg::BLK,
  localparam int unsigned HW = (H > 1) ? $clog2(H) : 1,
  localparam int unsigned JW = $clog2(NB),
  localparam int unsigned BW = $clog2(B)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  output logic          busy,
  input  logic [JW:0]   nb,
  input  logic          upd_valid,
  input  logic [HW-1:0] upd_h,
  input  logic [JW-1:0] upd_j,
  input  logic [BW-1:0] qi,
  input  logic [BW-1:0] c0,
  input  logic [7:0]    e [N],
  input  logic [HW-1:0] rd_h,
  input  logic [JW-1:0] rd_idx,
  output logic [31:0]   rd_data,
  output logic [47:0]   rd_tot
);
  localparam int unsigned EW = $clog2(H * NB);
  logic [31:0] s   [H * NB];          // entry h*NB + j
  logic [47:0] tot [H];
  logic [EW:0] sweep;
  logic [31:0] seg_lo, seg_hi;          // kk <= qi, kk > qi
  logic [JW:0] bin0, bin1;
  logic [EW-1:0] a0, a1;

  always_comb begin
    seg_lo = '0;
    seg_hi = '0;
    for (int x = 0; x < N; x++) begin
      if (32'(c0) + 32'(x) <= 32'(qi)) seg_lo += 32'(e[x]);
      else                             seg_hi += 32'(e[x]);
    end
    bin0 = nb - 1'b1 - (JW+1)'(upd_j);
    bin1 = nb - 2'd2 - (JW+1)'(upd_j);
    a0   = EW'(upd_h) * EW'(NB) + EW'(JW'(bin0));
    a1   = EW'(upd_h) * EW'(NB) + EW'(JW'(bin1));
  end

  assign busy    = sweep != '0;
  assign rd_data = s[EW'(rd_h) * EW'(NB) + EW'(rd_idx)];
  assign rd_tot  = tot[rd_h];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sweep <= '0;
    else if (clr) sweep <= (EW+1)'(H * NB);
    else if (sweep != '0) sweep <= sweep - 1'b1;
  end

  always_ff @(posedge clk) begin
    if (sweep != '0) begin
      s[EW'(sweep - 1'b1)] <= '0;
      for (int h = 0; h < H; h++) tot[h] <= '0;
    end else if (upd_valid) begin
      s[a0] <= s[a0] + seg_lo;
      if ({1'b0, upd_j} + 2'd2 <= nb && seg_hi != '0) s[a1] <= s[a1] + seg_hi;
      tot[upd_h] <= tot[upd_h] + 48'(seg_lo) + 48'(seg_hi);
    end
  end
endmodule
