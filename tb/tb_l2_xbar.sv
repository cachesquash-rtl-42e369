// tb_l2_xbar: self-checking test of the L1-to-L2 crossbar.
//
// Four sources offer requests, cancellations and write-backs at once. Checked:
// every message comes out exactly once with the source number written into
// id[15:8] and the rest unchanged; grants rotate round-robin (the order of
// sources with all four requesting is 0,1,2,3); a request and a cancellation
// pass in the same cycle; back-pressure holds the winner; responses reach only
// the source named in their id, with that byte cleared.
module tb_l2_xbar;
  import cs_pkg::*;

  localparam int unsigned NSRC = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic    s_req_valid [NSRC], s_req_ready [NSRC], s_cancel_valid [NSRC], s_cancel_ready [NSRC];
  logic    s_wb_valid [NSRC], s_wb_ready [NSRC], s_resp_valid [NSRC];
  req_t    s_req [NSRC];
  cancel_t s_cancel [NSRC];
  wb_t     s_wb [NSRC];
  resp_t   s_resp [NSRC];
  logic    m_req_valid, m_req_ready, m_cancel_valid, m_cancel_ready, m_wb_valid, m_wb_ready;
  logic    m_resp_valid;
  req_t    m_req;
  cancel_t m_cancel;
  wb_t     m_wb;
  resp_t   m_resp;

  l2_xbar #(.NSRC(NSRC)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  req_t    got_req [$];
  cancel_t got_can [$];
  wb_t     got_wb  [$];
  int      both_same_cycle = 0;
  always @(posedge clk) if (rst_n) begin
    if (m_req_valid && m_req_ready) got_req.push_back(m_req);
    if (m_cancel_valid && m_cancel_ready) got_can.push_back(m_cancel);
    if (m_wb_valid && m_wb_ready) got_wb.push_back(m_wb);
    if (m_req_valid && m_req_ready && m_cancel_valid && m_cancel_ready) both_same_cycle++;
  end

  // each source drops its valid once its message was taken
  always @(posedge clk) if (rst_n)
    for (int s = 0; s < NSRC; s++) begin
      if (s_req_ready[s])    s_req_valid[s]    <= 1'b0;
      if (s_cancel_ready[s]) s_cancel_valid[s] <= 1'b0;
      if (s_wb_ready[s])     s_wb_valid[s]     <= 1'b0;
    end

  initial begin : watchdog
    repeat (1000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    m_req_ready = 1; m_cancel_ready = 1; m_wb_ready = 1; m_resp_valid = 0; m_resp = '0;
    for (int s = 0; s < NSRC; s++) begin
      s_req_valid[s] = 0; s_cancel_valid[s] = 0; s_wb_valid[s] = 0;
      s_req[s] = '0; s_cancel[s] = '0; s_wb[s] = '0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk); #1;

    // hold the request channel for two cycles, then release
    m_req_ready = 0;
    for (int s = 0; s < NSRC; s++) begin
      s_req[s]    = '{op: OP_LOAD, addr: 32'h1000 * (s + 1), id: msg_id_t'(s + 2), wdata: '0, wmask: '0};
      s_cancel[s] = '{addr: 32'h40 * (s + 1), id: msg_id_t'(s + 7)};
      s_wb[s]     = '{blk: blk_t'(100 + s), line: {16{32'(s)}}};
      s_req_valid[s] = 1; s_cancel_valid[s] = 1; s_wb_valid[s] = 1;
    end
    #1;
    check(m_req_valid && m_req.addr == 32'h1000 && !s_req_ready[0], "held winner: source 0");
    @(posedge clk); @(posedge clk); #1;
    check(got_req.size() == 0, "nothing taken while not ready");
    m_req_ready = 1;
    repeat (6) @(posedge clk);
    #1;

    check(got_req.size() == NSRC && got_can.size() == NSRC && got_wb.size() == NSRC,
          "every message passed once");
    for (int k = 0; k < NSRC && k < got_req.size(); k++) begin
      check(got_req[k].addr == 32'h1000 * (k + 1) && got_req[k].id == msg_id_t'({8'(k), 8'(k + 2)}),
            $sformatf("request %0d in round-robin order with source in id", k));
      check(got_can[k].addr == 32'h40 * (k + 1) && got_can[k].id == msg_id_t'({8'(k), 8'(k + 7)}),
            $sformatf("cancellation %0d in order with source in id", k));
      check(got_wb[k].blk == blk_t'(100 + k) && got_wb[k].line == {16{32'(k)}},
            $sformatf("write-back %0d unchanged", k));
    end
    check(both_same_cycle > 0, "request and cancellation in the same cycle");

    // round-robin continues after the last winner: sources 2 and 0 ask, 0 wins (pointer at 0)
    s_req_valid[2] = 1; s_req_valid[0] = 1;
    #1;
    check(s_req_ready[0] && !s_req_ready[2], "pointer after source 3 wraps to 0");
    @(posedge clk); #1;
    check(s_req_ready[2], "then source 2");
    @(posedge clk); #1;

    // responses
    m_resp = '{addr: 32'h3000, id: 16'h0205, line: '1};
    m_resp_valid = 1;
    #1;
    check(s_resp_valid[2] && !s_resp_valid[0] && !s_resp_valid[1] && !s_resp_valid[3],
          "response routed to source 2 only");
    check(s_resp[2].id == 16'h0005 && s_resp[2].addr == 32'h3000, "source byte cleared");
    m_resp.id = 16'h0301;
    #1;
    check(s_resp_valid[3] && !s_resp_valid[2] && s_resp[3].id == 16'h0001, "response to source 3");
    m_resp_valid = 0;
    #1;
    check(!s_resp_valid[3], "no response when none is offered");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
