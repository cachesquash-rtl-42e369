// tb_cs_cache: self-checking test of one cache level, run as an upper-level
// cache (forwards cancellations) and as a last-level cache (does not).
//
// The testbench plays both neighbours: it sends requests and cancellations
// from above and answers the cache's miss requests by hand from below, so the
// order of response and cancellation is chosen per case. Expected values are
// worked out here from the addresses and the scenario, not read from the DUT.
// Cases: miss then hit with the hit latency checked; the best case of the
// paper (cancellation reaches the cache before the response: forwarded, the
// late response is dropped, a second access misses again); coalesced targets
// where only one is cancelled; a cancellation with no matching MSHR; a
// cancellation that withdraws a request still held in the output register;
// stall when all MSHRs are busy; a store, then eviction with write-back of the
// stored data; and at the LLC a cancellation that is not forwarded.
module tb_cs_cache;
  import cs_pkg::*;

  localparam int unsigned LAT   = 3;
  localparam int unsigned NMSHR = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL @%0d: %s", cyc, what);
    end
  endtask

  // ------------------------------------------------------------------
  // two DUTs of the same size: g_dut[0] with IS_LLC=0, g_dut[1] with IS_LLC=1
  // ------------------------------------------------------------------
  logic    up_req_valid [2], up_req_ready [2], up_can_valid [2], up_can_ready [2];
  req_t    up_req [2];
  cancel_t up_can [2];
  logic    up_resp_valid [2];
  resp_t   up_resp [2];
  logic    dn_req_valid [2], dn_req_ready [2], dn_can_valid [2], dn_wb_valid [2];
  req_t    dn_req [2];
  cancel_t dn_can [2];
  wb_t     dn_wb [2];
  logic    dn_resp_valid [2];
  resp_t   dn_resp [2];
  logic    init_done [2];
  cache_ev_t ev [2];

  for (genvar i = 0; i < 2; i++) begin : g_dut
    cs_cache #(.SIZE_BYTES(1024), .WAYS(2), .LAT(LAT), .NMSHR(NMSHR), .NTGT(2),
               .IS_LLC(i == 1)) dut (
      .clk, .rst_n,
      .up_req_valid(up_req_valid[i]), .up_req_ready(up_req_ready[i]), .up_req(up_req[i]),
      .up_cancel_valid(up_can_valid[i]), .up_cancel_ready(up_can_ready[i]),
      .up_cancel(up_can[i]),
      .up_wb_valid(1'b0), .up_wb_ready(), .up_wb('0),
      .up_resp_valid(up_resp_valid[i]), .up_resp(up_resp[i]),
      .dn_req_valid(dn_req_valid[i]), .dn_req_ready(dn_req_ready[i]), .dn_req(dn_req[i]),
      .dn_cancel_valid(dn_can_valid[i]), .dn_cancel_ready(1'b1), .dn_cancel(dn_can[i]),
      .dn_wb_valid(dn_wb_valid[i]), .dn_wb_ready(1'b1), .dn_wb(dn_wb[i]),
      .dn_resp_valid(dn_resp_valid[i]), .dn_resp(dn_resp[i]),
      .init_done(init_done[i]), .ev(ev[i])
    );
  end

  // ------------------------------------------------------------------
  // monitors
  // ------------------------------------------------------------------
  req_t    got_dn_req [2][$];
  cancel_t got_dn_can [2][$];
  wb_t     got_dn_wb  [2][$];
  resp_t   got_resp   [2][$];
  int      resp_cyc   [2][$];
  int      n_discard [2], n_nomatch [2], n_unsent [2], n_llc [2], n_stall [2], n_coal [2];

  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < 2; i++) begin
      if (dn_req_valid[i] && dn_req_ready[i]) got_dn_req[i].push_back(dn_req[i]);
      if (dn_can_valid[i]) got_dn_can[i].push_back(dn_can[i]);
      if (dn_wb_valid[i]) got_dn_wb[i].push_back(dn_wb[i]);
      if (up_resp_valid[i]) begin
        got_resp[i].push_back(up_resp[i]);
        resp_cyc[i].push_back(cyc);
      end
      n_discard[i] += int'(ev[i].resp_discard);
      n_nomatch[i] += int'(ev[i].cancel_nomatch);
      n_unsent[i]  += int'(ev[i].cancel_unsent);
      n_llc[i]     += int'(ev[i].cancel_llc);
      n_stall[i]   += int'(ev[i].stall);
      n_coal[i]    += int'(ev[i].coalesce);
    end
  end

  // ------------------------------------------------------------------
  // drivers
  // ------------------------------------------------------------------
  function automatic line_t pattern(addr_t a);
    line_t l;
    for (int w = 0; w < WORDS; w++) l[w*WORD_W +: WORD_W] = {a, 32'(w) ^ 32'hc0de_0000};
    return l;
  endfunction

  // send a request; returns the cycle in which it was accepted
  task automatic send_req(int i, op_e op, addr_t a, int id, output int acc,
                          input word_t wd = '0, input logic [7:0] wm = '0);
    up_req[i] = '{op: op, addr: a, id: msg_id_t'(id), wdata: wd, wmask: wm};
    up_req_valid[i] = 1'b1;
    do @(posedge clk); while (!up_req_ready[i]);
    acc = cyc;
    #1 up_req_valid[i] = 1'b0;
  endtask

  task automatic send_cancel(int i, addr_t a, int id);
    up_can[i] = '{addr: a, id: msg_id_t'(id)};
    up_can_valid[i] = 1'b1;
    do @(posedge clk); while (!up_can_ready[i]);
    #1 up_can_valid[i] = 1'b0;
  endtask

  // answer the miss request r from below
  task automatic respond(int i, req_t r);
    dn_resp[i] = '{addr: r.addr, id: r.id, line: pattern(r.addr)};
    dn_resp_valid[i] = 1'b1;
    @(posedge clk);
    #1 dn_resp_valid[i] = 1'b0;
  endtask

  task automatic idle(int n);
    repeat (n) @(posedge clk);
    #1;
  endtask

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam addr_t A = 32'h0000_1040, B = 32'h0000_2080, C = 32'h0000_30c0,
                    D = 32'h0000_4100, E = 32'h0000_5140;
  // 1024 B, 2 ways, 64 B lines: 8 sets; set = addr[8:6]
  localparam addr_t A2 = A + 32'h200, A3 = A + 32'h400;   // same set as A

  initial begin
    int acc, n0;
    req_t r;
    for (int i = 0; i < 2; i++) begin
      up_req_valid[i] = 0; up_can_valid[i] = 0; dn_resp_valid[i] = 0;
      dn_req_ready[i] = 1; up_req[i] = '0; up_can[i] = '0; dn_resp[i] = '0;
      n_discard[i] = 0; n_nomatch[i] = 0; n_unsent[i] = 0; n_llc[i] = 0;
      n_stall[i] = 0; n_coal[i] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (init_done[0] && init_done[1]);
    idle(1);

    // ---- 1. miss, response, then hit with latency LAT ----
    send_req(0, OP_LOAD, A + 8, 1, acc);
    idle(LAT + 2);
    check(got_dn_req[0].size() == 1, "miss sent downstream");
    r = got_dn_req[0].pop_front();
    check(r.addr == {A[31:6], 6'd0} && r.op == OP_LOAD, "miss request is the block of A");
    respond(0, r);
    idle(3);
    check(got_resp[0].size() == 1, "miss answered");
    if (got_resp[0].size() == 1) begin
      check(got_resp[0][0].id == 1 && got_resp[0][0].line == pattern({A[31:6], 6'd0}),
            "response carries id 1 and the line of A");
      void'(got_resp[0].pop_front()); void'(resp_cyc[0].pop_front());
    end
    send_req(0, OP_LOAD, A, 2, acc);
    idle(LAT + 2);
    check(got_resp[0].size() == 1 && got_dn_req[0].size() == 0, "second access hits");
    if (resp_cyc[0].size() == 1)
      check(resp_cyc[0][0] - acc == LAT, $sformatf("hit latency %0d, expected %0d",
                                                   resp_cyc[0][0] - acc, LAT));
    got_resp[0].delete(); resp_cyc[0].delete();

    // ---- 2. best case: cancellation before the response ----
    send_req(0, OP_LOAD, B, 3, acc);
    idle(LAT + 2);
    r = got_dn_req[0].pop_front();
    send_cancel(0, B, 3);
    idle(LAT + 2);
    check(got_dn_can[0].size() == 1, "cancellation forwarded (MSHR empty)");
    if (got_dn_can[0].size() == 1)
      check(got_dn_can[0][0].addr == r.addr && got_dn_can[0][0].id == r.id,
            "forwarded cancellation names the block and MSHR of the miss");
    got_dn_can[0].delete();
    n0 = n_discard[0];
    respond(0, r);
    idle(2);
    check(n_discard[0] == n0 + 1, "late response dropped by CheckMSHR");
    check(got_resp[0].size() == 0, "no response for the cancelled load");
    send_req(0, OP_LOAD, B, 4, acc);
    idle(LAT + 2);
    check(got_dn_req[0].size() == 1, "B not cached: misses again");
    if (got_dn_req[0].size() == 1) respond(0, got_dn_req[0].pop_front());
    idle(3);
    got_resp[0].delete(); resp_cyc[0].delete();

    // ---- 3. two targets, one cancelled ----
    send_req(0, OP_LOAD, C, 5, acc);
    send_req(0, OP_LOAD, C + 16, 6, acc);
    idle(LAT + 2);
    check(got_dn_req[0].size() == 1 && n_coal[0] == 1, "one miss for two loads");
    send_cancel(0, C, 5);
    idle(LAT + 2);
    check(got_dn_can[0].size() == 0, "no forward while a target remains");
    respond(0, got_dn_req[0].pop_front());
    idle(3);
    check(got_resp[0].size() == 1 && got_resp[0][0].id == 6, "only the remaining target answered");
    got_resp[0].delete(); resp_cyc[0].delete();

    // ---- 4. cancellation with no MSHR (request already answered) ----
    n0 = n_nomatch[0];
    send_cancel(0, C, 6);
    idle(LAT + 2);
    check(n_nomatch[0] == n0 + 1 && got_dn_can[0].size() == 0, "unmatched cancellation dropped");

    // ---- 5. withdraw a request that has not left ----
    dn_req_ready[0] = 1'b0;
    send_req(0, OP_LOAD, D, 7, acc);
    idle(LAT + 1);
    check(dn_req_valid[0], "miss request waiting in output register");
    send_cancel(0, D, 7);
    idle(LAT + 1);
    check(n_unsent[0] == 1 && !dn_req_valid[0], "request withdrawn");
    dn_req_ready[0] = 1'b1;
    idle(2);
    check(got_dn_req[0].size() == 0 && got_dn_can[0].size() == 0, "nothing sent for D");

    // ---- 6. stall with all MSHRs busy ----
    n0 = n_stall[0];
    send_req(0, OP_LOAD, E, 8, acc);
    send_req(0, OP_LOAD, E + 32'h1000, 9, acc);
    fork
      send_req(0, OP_LOAD, E + 32'h2000, 10, acc);
      begin
        idle(LAT + 6);
        check(n_stall[0] > n0 && got_dn_req[0].size() == 2, "third miss stalls");
        respond(0, got_dn_req[0].pop_front());
      end
    join
    idle(LAT + 4);
    check(got_dn_req[0].size() == 2, "third miss proceeds after a fill");
    while (got_dn_req[0].size() > 0) respond(0, got_dn_req[0].pop_front());
    idle(6);
    got_resp[0].delete(); resp_cyc[0].delete();

    // ---- 7. store hit, then eviction writes the stored word back ----
    send_req(0, OP_STORE, A + 16, 11, acc, 64'h1122_3344_5566_7788, 8'hff);
    idle(LAT + 2);
    check(got_resp[0].size() == 1 && got_resp[0][0].id == 11, "store acknowledged (hit)");
    got_resp[0].delete(); resp_cyc[0].delete();
    send_req(0, OP_LOAD, A2, 12, acc);
    idle(LAT + 2);
    respond(0, got_dn_req[0].pop_front());
    idle(3);
    send_req(0, OP_LOAD, A3, 13, acc);
    idle(LAT + 2);
    respond(0, got_dn_req[0].pop_front());
    idle(3);
    check(got_dn_wb[0].size() == 1, "dirty victim written back");
    if (got_dn_wb[0].size() == 1)
      check(got_dn_wb[0][0].blk == A[31:6] &&
            got_dn_wb[0][0].line[2*WORD_W +: WORD_W] == 64'h1122_3344_5566_7788 &&
            got_dn_wb[0][0].line[1*WORD_W +: WORD_W] == pattern(A)[1*WORD_W +: WORD_W],
            "write-back holds the stored word and the rest of the line");

    // ---- 8. LLC: cancellation kept, response dropped ----
    send_req(1, OP_LOAD, B, 20, acc);
    idle(LAT + 2);
    r = got_dn_req[1].pop_front();
    send_cancel(1, B, 20);
    idle(LAT + 2);
    check(n_llc[1] == 1 && got_dn_can[1].size() == 0, "LLC does not forward to memory");
    respond(1, r);
    idle(2);
    check(n_discard[1] == 1 && got_resp[1].size() == 0, "LLC drops the memory response");
    send_req(1, OP_LOAD, B, 21, acc);
    idle(LAT + 2);
    check(got_dn_req[1].size() == 1, "LLC unchanged: misses again");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
