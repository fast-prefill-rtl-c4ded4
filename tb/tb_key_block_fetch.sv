// tb_key_block_fetch: self-checking test of the block fetch engine.
//
// Connects the engine to the behavioural memory model with a random
// latency and a request port that is randomly not ready, starts fetches of
// random blocks, and checks the burst request (address, length B), that the
// write strobe delivers the B rows in order, that the on-chip buffer holds
// the block after done, and that done pulses exactly one cycle after the
// last row. Runs at B = 8, D = 4.
module tb_key_block_fetch;
  localparam int B = 8, D = 4, ROWS = 256;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  logic start, busy, done, req_valid, req_ready, m_ready, rsp_valid, wr_valid, stall;
  logic [31:0] base_addr, req_addr;
  logic [15:0] req_len;
  logic [D*8-1:0] rsp_data, wr_data;
  logic [D*8-1:0] kbuf [B];
  key_block_fetch #(.B(B), .D(D)) dut (.clk, .rst_n, .start, .base_addr, .busy, .done, .req_valid,
                                       .req_ready, .req_addr, .req_len, .rsp_valid, .rsp_data, .kbuf,
                                       .wr_valid, .wr_data);
  assign req_ready = m_ready && !stall;
  hbm_model #(.D(D), .ROWS(ROWS), .LAT(2)) u_mem (.clk, .rst_n, .req_valid(req_valid && !stall),
                                                  .req_ready(m_ready), .req_addr, .req_len, .rsp_valid,
                                                  .rsp_data);
  always @(negedge clk) stall <= ($urandom_range(2) == 0);

  int wr_cnt, last_wr_cyc, cyc;
  logic [31:0] cur_base;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (wr_valid) begin
      check(wr_data == u_mem.mem[cur_base + 32'(wr_cnt)], $sformatf("row %0d data", wr_cnt));
      wr_cnt <= wr_cnt + 1;
      last_wr_cyc <= cyc;
    end
    if (req_valid && req_ready)
      check(req_addr == cur_base && req_len == 16'(B), "burst request");
    if (done) check(cyc == last_wr_cyc + 1, "done one cycle after the last row");
  end

  initial begin
    start = 0; base_addr = 0; cyc = 0; wr_cnt = 0; last_wr_cyc = 0; cur_base = 0;
    for (int r = 0; r < ROWS; r++) u_mem.mem[r] = D*8'($urandom);
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 100; it++) begin
      @(negedge clk);
      cur_base = $urandom_range(ROWS - B);
      base_addr = cur_base;
      wr_cnt = 0;
      start = 1;
      @(negedge clk);
      start = 0;
      check(busy, "busy after start");
      while (!done) @(negedge clk);
      check(wr_cnt == B, $sformatf("rows written %0d", wr_cnt));
      for (int r = 0; r < B; r++) check(kbuf[r] == u_mem.mem[cur_base + 32'(r)], $sformatf("kbuf %0d", r));
      @(negedge clk);
      check(!busy, "idle after done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
