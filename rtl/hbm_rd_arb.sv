// hbm_rd_arb: read-burst arbiter in front of the HBM port (the accelerator's
// side of the AXI network).
//
// NC clients each present a burst request (req_valid, row address, length in
// beats). The arbiter grants one client at a time, round robin starting after
// the last winner, forwards its request to the memory port, and routes the
// len response beats that follow back to that client only; then it
// arbitrates again. One burst is in flight at a time, responses return in
// order and have no back-pressure. A client's req_ready pulses in the cycle
// its request is accepted downstream. The paper only draws an AXI network;
// this arbiter is this design's minimal stand-in for it.
module hbm_rd_arb #(
  parameter int unsigned NC = 3,
  parameter int unsigned D  = fp_pkg::HEAD_DIM,
  parameter int unsigned AW = 32,
  localparam int unsigned CW = (NC > 1) ? $clog2(NC) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           req_valid [NC],
  output logic           req_ready [NC],
  input  logic [AW-1:0]  req_addr  [NC],
  input  logic [15:0]    req_len   [NC],
  output logic           rsp_valid [NC],
  output logic [D*8-1:0] rsp_data,
  output logic           m_req_valid,
  input  logic           m_req_ready,
  output logic [AW-1:0]  m_req_addr,
  output logic [15:0]    m_req_len,
  input  logic           m_rsp_valid,
  input  logic [D*8-1:0] m_rsp_data
);
  typedef enum logic [1:0] {A_IDLE, A_REQ, A_DATA} state_e;
  state_e state;
  logic [CW-1:0] gnt, last;
  logic [15:0]   left;

  // round-robin pick
  logic          any;
  logic [CW-1:0] pick;
  always_comb begin
    any  = 1'b0;
    pick = '0;
    for (int k = NC; k >= 1; k--) begin
      int c;
      c = (int'(last) + k) % NC;
      if (req_valid[c]) begin
        any = 1'b1;
        pick = CW'(c);
      end
    end
  end

  assign m_req_valid = (state == A_REQ);
  assign m_req_addr  = req_addr[gnt];
  assign m_req_len   = req_len[gnt];
  assign rsp_data    = m_rsp_data;
  always_comb
    for (int c = 0; c < NC; c++) begin
      req_ready[c] = (state == A_REQ) && (gnt == CW'(c)) && m_req_ready;
      rsp_valid[c] = (state == A_DATA) && (gnt == CW'(c)) && m_rsp_valid;
    end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= A_IDLE;
      gnt <= '0;
      last <= CW'(NC - 1);
      left <= '0;
    end else begin
      unique case (state)
        A_IDLE: if (any) begin
          gnt <= pick;
          last <= pick;
          state <= A_REQ;
        end
        A_REQ: if (m_req_ready) begin
          left <= req_len[gnt];
          state <= (req_len[gnt] == 0) ? A_IDLE : A_DATA;
        end
        A_DATA: if (m_rsp_valid) begin
          left <= left - 1'b1;
          if (left == 16'd1) state <= A_IDLE;
        end
        default: state <= A_IDLE;
      endcase
    end
  end

  // the granted client keeps its request up until it is accepted
  assert property (@(posedge clk) disable iff (!rst_n)
                   (state == A_REQ) |-> req_valid[gnt]);
endmodule
