// tb_hbm_rd_arb: self-checking test of the shared memory read arbiter.
//
// Three client models issue random bursts (random address, length 1-6,
// random think time; each client waits for its whole burst before its next
// request) through the arbiter to the behavioural memory model. Each client
// checks that it receives exactly its own rows in order and never a row of
// another burst; the testbench also checks that only one burst is in flight,
// that every client is served, and that round-robin grants no client twice
// while another is waiting.
module tb_hbm_rd_arb;
  localparam int NC = 3, D = 4, ROWS = 256;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  logic req_valid [NC], req_ready [NC], rsp_valid [NC];
  logic [31:0] req_addr [NC];
  logic [15:0] req_len [NC];
  logic [D*8-1:0] rsp_data, m_rsp_data;
  logic m_req_valid, m_req_ready, m_rsp_valid;
  logic [31:0] m_req_addr;
  logic [15:0] m_req_len;
  hbm_rd_arb #(.NC(NC), .D(D)) dut (.clk, .rst_n, .req_valid, .req_ready, .req_addr, .req_len, .rsp_valid,
                                    .rsp_data, .m_req_valid, .m_req_ready, .m_req_addr, .m_req_len,
                                    .m_rsp_valid, .m_rsp_data);
  hbm_model #(.D(D), .ROWS(ROWS), .LAT(3)) u_mem (.clk, .rst_n, .req_valid(m_req_valid), .req_ready(m_req_ready),
                                                  .req_addr(m_req_addr), .req_len(m_req_len),
                                                  .rsp_valid(m_rsp_valid), .rsp_data(m_rsp_data));

  int served [NC];
  int got [NC];
  int in_flight;
  int last_gnt = -1;
  bit waited_since [NC];

  for (genvar c = 0; c < NC; c++) begin : g_cli
    initial begin
      req_valid[c] = 0; req_addr[c] = 0; req_len[c] = 0; served[c] = 0;
      wait (rst_n);
      for (int b = 0; b < 40; b++) begin
        automatic int len = 1 + int'($urandom_range(5));
        automatic int a = int'($urandom_range(ROWS - 8));
        repeat ($urandom_range(4)) @(negedge clk);
        req_valid[c] = 1; req_addr[c] = 32'(a); req_len[c] = 16'(len);
        @(posedge clk);
        while (!req_ready[c]) @(posedge clk);
        @(negedge clk);
        req_valid[c] = 0;
        got[c] = 0;
        while (got[c] < len) begin
          @(posedge clk);
          if (rsp_valid[c]) begin
            check(rsp_data == u_mem.mem[a + got[c]], $sformatf("client %0d row %0d", c, got[c]));
            got[c]++;
          end
        end
        served[c]++;
      end
    end
  end

  int ndone;
  always @(posedge clk) if (rst_n) begin
    automatic int nv = 0;
    for (int c = 0; c < NC; c++) nv += rsp_valid[c];
    check(nv <= 1, "one response owner at a time");
    if (m_rsp_valid) check(nv == 1, "every response is routed");
    for (int c = 0; c < NC; c++)
      if (req_ready[c]) begin
        // round robin: if another client was waiting, the same client must not win twice in a row
        if (c == last_gnt)
          for (int o = 0; o < NC; o++)
            if (o != c) check(!waited_since[o], "round-robin fairness");
        last_gnt = c;
        for (int o = 0; o < NC; o++) waited_since[o] = 0;
      end
    for (int c = 0; c < NC; c++) if (req_valid[c] && !req_ready[c]) waited_since[c] = 1;
  end

  initial begin
    for (int c = 0; c < NC; c++) waited_since[c] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (served[0] == 40 && served[1] == 40 && served[2] == 40);
    check(u_mem.bursts == 120, "all bursts issued once");
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
