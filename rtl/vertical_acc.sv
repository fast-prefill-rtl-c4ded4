// vertical_acc: Vertical Accumulator with the vertical half of the VS score
// buffer.
//
// For head h and Key block j, every update adds the N exponentiated scores of
// one row segment (one query row against N keys of block j) into v[h][j], and
// into the head total tot[h]. Summed over all query rows of the last query
// block and all keys of block j, v[h][j] is the column-wise (vertical) block
// score; tot[h] is the normaliser, so a_v[j] = v[h][j] / tot[h] without ever
// storing the B x S score tensor. Updates are single-cycle read-modify-write.
// clr sweeps the buffer to zero, one entry per cycle (H*NB cycles; the
// buffer is one single-write-port memory), with busy high meanwhile. The read port is combinational. The column-wise
// aggregation is the paper's; the sweep clear and port timing are this
// design's choice.
module vertical_acc #(
  parameter int unsigned H  = fp_pkg::N_HEADS,
  parameter int unsigned NB = fp_pkg::NB_MAX,
  parameter int unsigned N  = fp_pkg::ARR_N,
  localparam int unsigned HW = (H > 1) ? $clog2(H) : 1,
  localparam int unsigned JW = $clog2(NB)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  output logic          busy,
  input  logic          upd_valid,
  input  logic [HW-1:0] upd_h,
  input  logic [JW-1:0] upd_j,
  input  logic [7:0]    e [N],
  input  logic [HW-1:0] rd_h,
  input  logic [JW-1:0] rd_idx,
  output logic [31:0]   rd_data,
  output logic [47:0]   rd_tot
);
  localparam int unsigned EW = $clog2(H * NB);
  logic [31:0] v   [H * NB];          // entry h*NB + j
  logic [47:0] tot [H];
  logic [EW:0] sweep;
  logic [31:0] seg;

  always_comb begin
    seg = '0;
    for (int x = 0; x < N; x++) seg += 32'(e[x]);
  end

  assign busy    = sweep != '0;
  assign rd_data = v[EW'(rd_h) * EW'(NB) + EW'(rd_idx)];
  assign rd_tot  = tot[rd_h];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sweep <= '0;
    else if (clr) sweep <= (EW+1)'(H * NB);
    else if (sweep != '0) sweep <= sweep - 1'b1;
  end

  always_ff @(posedge clk) begin
    if (sweep != '0) begin
      v[EW'(sweep - 1'b1)] <= '0;
      for (int h = 0; h < H; h++) tot[h] <= '0;
    end else if (upd_valid) begin
      v[EW'(upd_h) * EW'(NB) + EW'(upd_j)] <= v[EW'(upd_h) * EW'(NB) + EW'(upd_j)] + seg;
      tot[upd_h]      <= tot[upd_h] + 48'(seg);
    end
  end
endmodule
