// hbm_model: behavioural model of the off-chip memory behind the read port,
// for simulation only. A burst request (row address, length) is accepted
// when the model is idle; after LAT cycles the rows are returned one per
// cycle. Rows are D bytes wide. The array is public so a testbench can fill it.
module hbm_model #(
  parameter int unsigned D     = 8,
  parameter int unsigned ROWS  = 1024,
  parameter int unsigned LAT   = 4,
  parameter int unsigned AW    = 32
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           req_valid,
  output logic           req_ready,
  input  logic [AW-1:0]  req_addr,
  input  logic [15:0]    req_len,
  output logic           rsp_valid,
  output logic [D*8-1:0] rsp_data
);
  logic [D*8-1:0] mem [ROWS];
  logic [AW-1:0] addr;
  logic [15:0]   left;
  int            wait_c;
  int            bursts;

  assign req_ready = (left == 0) && (wait_c == 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      left <= '0; wait_c <= 0; addr <= '0; rsp_valid <= 1'b0; rsp_data <= '0; bursts <= 0;
    end else begin
      rsp_valid <= 1'b0;
      if (req_valid && req_ready) begin
        addr <= req_addr;
        left <= req_len;
        wait_c <= LAT;
        bursts <= bursts + 1;
      end else if (wait_c > 0) begin
        wait_c <= wait_c - 1;
      end else if (left != 0) begin
        rsp_valid <= 1'b1;
        rsp_data <= (addr < ROWS) ? mem[addr] : '0;
        addr <= addr + 1'b1;
        left <= left - 1'b1;
      end
    end
  end
endmodule
