// keyed_acc: keyed accumulation of partial attention outputs (Reorder Logic,
// Accumulator and Attention Output buffer).
//
// Because the attention unit walks KV blocks in block order, the partial
// results of one (head h, query block qb) arrive spread over time and mixed
// with those of other query blocks. Instead of reordering them, every partial
// result carries its key (h, qb) and is added at a fixed address: row r of
// (h, qb) lives at ((h*NB + qb)*B + r). job_begin marks the start of a job for
// (h, qb): the first job ever seen for that key since clr overwrites instead
// of adding (a touched bit per key), so the buffer needs no clearing sweep.
// Per job the caller writes N-column slices of output rows (wr_*) and once
// the vector of B softmax row sums (l_*). After the last job the buffer holds
// sum(p*v) and sum(p) for every row, in order, read through a combinational
// row port. The keyed, order-free accumulation follows the paper; the
// addressing and the touched bits are this design's choice.
module keyed_acc #(
  parameter int unsigned H  = fp_pkg::N_HEADS,
  parameter int unsigned NB = fp_pkg::NB_MAX,
  parameter int unsigned B  = fp_pkg::BLK,
  parameter int unsigned D  = fp_pkg::HEAD_DIM,
  parameter int unsigned N  = fp_pkg::ARR_N,
  localparam int unsigned HW = (H > 1) ? $clog2(H) : 1,
  localparam int unsigned JW = $clog2(NB),
  localparam int unsigned BW = $clog2(B),
  localparam int unsigned DW = $clog2(D)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clr,
  input  logic               job_begin,
  input  logic [HW-1:0]      job_h,
  input  logic [JW-1:0]      job_qb,
  input  logic               wr_valid,
  input  logic [BW-1:0]      wr_row,
  input  logic [DW-1:0]      wr_col0,
  input  logic signed [31:0] wr_data [N],
  input  logic               l_valid,
  input  logic [31:0]        l_data [B],
  input  logic [HW-1:0]      rd_h,
  input  logic [JW-1:0]      rd_qb,
  input  logic [BW-1:0]      rd_row,
  output logic signed [31:0] rd_acc [D],
  output logic [31:0]        rd_l,
  output logic               rd_touched
);
  // one memory word per output row (D lanes) and one per key (B row sums),
  // each with a single read-modify-write port
  logic [D*32-1:0]    acc  [H*NB*B];
  logic [B*32-1:0]    lsum [H*NB];
  logic               touched [H][NB];
  logic               init;
  logic [HW-1:0]      kh;
  logic [JW-1:0]      kqb;

  function automatic int unsigned row_addr(input logic [HW-1:0] h, input logic [JW-1:0] qb,
                                           input logic [BW-1:0] r);
    return (32'(h) * NB + 32'(qb)) * B + 32'(r);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init <= 1'b0; kh <= '0; kqb <= '0;
      for (int h = 0; h < H; h++) for (int q = 0; q < NB; q++) touched[h][q] <= 1'b0;
    end else if (clr) begin
      for (int h = 0; h < H; h++) for (int q = 0; q < NB; q++) touched[h][q] <= 1'b0;
    end else if (job_begin) begin
      kh <= job_h;
      kqb <= job_qb;
      init <= !touched[job_h][job_qb];
      touched[job_h][job_qb] <= 1'b1;
    end
  end

  logic [D*32-1:0] acc_old, acc_new;
  logic [B*32-1:0] l_old, l_new;
  int unsigned     wa, la;
  always_comb begin
    wa = row_addr(kh, kqb, wr_row);
    la = 32'(kh) * NB + 32'(kqb);
    acc_old = acc[wa];
    acc_new = acc_old;
    for (int x = 0; x < N; x++)
      acc_new[32 * (32'(wr_col0) + x) +: 32] = (init ? 32'd0 : acc_old[32 * (32'(wr_col0) + x) +: 32]) + wr_data[x];
    l_old = lsum[la];
    for (int r = 0; r < B; r++) l_new[32 * r +: 32] = (init ? 32'd0 : l_old[32 * r +: 32]) + l_data[r];
  end

  always_ff @(posedge clk) begin
    if (wr_valid) acc[wa] <= acc_new;
    if (l_valid)  lsum[la] <= l_new;
  end

  logic [D*32-1:0] rd_word;
  assign rd_word = acc[row_addr(rd_h, rd_qb, rd_row)];
  always_comb for (int c = 0; c < D; c++) rd_acc[c] = rd_word[32 * c +: 32];
  assign rd_l       = lsum[32'(rd_h) * NB + 32'(rd_qb)][32 * 32'(rd_row) +: 32];
  assign rd_touched = touched[rd_h][rd_qb];
endmodule
