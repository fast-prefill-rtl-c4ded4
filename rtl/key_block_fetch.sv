// key_block_fetch: Key Block Fetch Unit with its on-chip Key Block Buffer.
//
// On start it issues one read burst of B rows (one d-byte Key row per beat)
// from base_addr, the start of a B x d Key block in HBM, and writes the
// returned rows in order into the B-row buffer kbuf. Every written row is
// also shown on wr_valid/wr_data so that a pooling unit can average the block
// as it streams in. done pulses one cycle after the last row is written.
// The caller fetches blocks in increasing order, so consecutive requests form
// long sequential bursts, as the paper intends. Request handshake: req_valid
// is held until req_ready; responses have no back-pressure. Burst length B and
// one row per beat are this design's choice.
module key_block_fetch #(
  parameter int unsigned B  = fp_pkg::BLK,
  parameter int unsigned D  = fp_pkg::HEAD_DIM,
  parameter int unsigned AW = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [AW-1:0]     base_addr,
  output logic              busy,
  output logic              done,
  // HBM read client
  output logic              req_valid,
  input  logic              req_ready,
  output logic [AW-1:0]     req_addr,
  output logic [15:0]       req_len,
  input  logic              rsp_valid,
  input  logic [D*8-1:0]    rsp_data,
  // buffer contents and write stream
  output logic [D*8-1:0]    kbuf [B],
  output logic              wr_valid,
  output logic [D*8-1:0]    wr_data
);
  typedef enum logic [1:0] {S_IDLE, S_REQ, S_DATA} state_e;
  state_e state;
  logic [$clog2(B+1)-1:0] row;

  assign busy      = (state != S_IDLE);
  assign req_valid = (state == S_REQ);
  assign req_len   = 16'(B);
  assign wr_valid  = (state == S_DATA) && rsp_valid;
  assign wr_data   = rsp_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      row <= '0;
      req_addr <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          req_addr <= base_addr;
          row <= '0;
          state <= S_REQ;
        end
        S_REQ: if (req_ready) state <= S_DATA;
        S_DATA: if (rsp_valid) begin
          row <= row + 1'b1;
          if (row == ($bits(row))'(B - 1)) begin
            state <= S_IDLE;
            done <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // buffer (URAM in the FPGA mapping); not reset, written before it is read
  always_ff @(posedge clk) begin
    if (state == S_DATA && rsp_valid) kbuf[row[$clog2(B)-1:0]] <= rsp_data;
  end
endmodule
