// tb_spec_req_tracker: self-checking test of the core-side request tracker.
//
// The testbench acts as the core and as the L1. Checked: ids and word
// selection of a normal load; on a squash, cancellations for exactly the
// squashed outstanding loads (not older loads, not stores), with the address
// and id of each; a response that arrives after its request was cancelled is
// dropped; a response that arrives before the cancellation could leave is
// dropped and no cancellation is sent; a request hit by the squash in the
// cycle it is offered is never sent; back-pressure when all entries are busy.
module tb_spec_req_tracker;
  import cs_pkg::*;

  localparam int unsigned NENT = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic       core_req_valid, core_req_ready, squash_valid, core_resp_valid;
  core_req_t  core_req;
  seq_t       squash_seq;
  core_resp_t core_resp;
  logic       l1_req_valid, l1_req_ready, l1_cancel_valid, l1_cancel_ready, l1_resp_valid;
  req_t       l1_req;
  cancel_t    l1_cancel;
  resp_t      l1_resp;
  logic       ev_cancel_sent, ev_resp_dropped;

  spec_req_tracker #(.NENT(NENT)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  req_t       got_req [$];
  cancel_t    got_can [$];
  core_resp_t got_resp [$];
  int         n_drop = 0;
  always @(posedge clk) if (rst_n) begin
    if (l1_req_valid && l1_req_ready) got_req.push_back(l1_req);
    if (l1_cancel_valid && l1_cancel_ready) got_can.push_back(l1_cancel);
    if (core_resp_valid) got_resp.push_back(core_resp);
    n_drop += int'(ev_resp_dropped);
  end

  function automatic line_t pattern(addr_t a);
    line_t l;
    for (int w = 0; w < WORDS; w++) l[w*WORD_W +: WORD_W] = {a ^ 32'h5a5a_0000, 32'(w)};
    return l;
  endfunction

  task automatic issue(op_e op, addr_t a, int seq);
    core_req = '{op: op, addr: a, seq: seq_t'(seq), wdata: '0, wmask: '0};
    core_req_valid = 1'b1;
    do @(posedge clk); while (!core_req_ready);
    #1 core_req_valid = 1'b0;
  endtask

  task automatic squash(int seq);
    squash_seq = seq_t'(seq);
    squash_valid = 1'b1;
    @(posedge clk);
    #1 squash_valid = 1'b0;
  endtask

  task automatic respond(req_t r);
    l1_resp = '{addr: r.addr, id: r.id, line: pattern({r.addr[31:6], 6'd0})};
    l1_resp_valid = 1'b1;
    @(posedge clk);
    #1 l1_resp_valid = 1'b0;
  endtask

  task automatic idle(int n);
    repeat (n) @(posedge clk);
    #1;
  endtask

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req_t r20, r21, r22, r19, r30;
    core_req_valid = 0; squash_valid = 0; squash_seq = '0; core_req = '0;
    l1_req_ready = 1; l1_cancel_ready = 1; l1_resp_valid = 0; l1_resp = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    idle(1);

    // ---- normal load ----
    issue(OP_LOAD, 32'h0000_1018, 10);          // word 3 of block 0x1000
    idle(1);
    check(got_req.size() == 1 && got_req[0].addr == 32'h1018 && got_req[0].op == OP_LOAD,
          "load passed to L1");
    check(got_req[0].id[7:0] == 8'h04, "id = {gen 1, entry 0}");
    respond(got_req.pop_front());
    idle(1);
    check(got_resp.size() == 1 && got_resp[0].seq == 10 &&
          got_resp[0].data == pattern(32'h1000)[3*WORD_W +: WORD_W], "load data word 3");
    got_resp.delete();

    // ---- squash cancels exactly the younger outstanding loads ----
    issue(OP_STORE, 32'h0000_2000, 19);
    issue(OP_LOAD,  32'h0000_3000, 20);
    issue(OP_LOAD,  32'h0000_4008, 21);
    issue(OP_LOAD,  32'h0000_5010, 22);
    idle(1);
    r19 = got_req.pop_front(); r20 = got_req.pop_front();
    r21 = got_req.pop_front(); r22 = got_req.pop_front();
    squash(21);
    idle(3);
    check(got_can.size() == 2, "two cancellations (21, 22)");
    if (got_can.size() == 2) begin
      check(got_can[0].addr == r21.addr && got_can[0].id == r21.id, "cancel of 21");
      check(got_can[1].addr == r22.addr && got_can[1].id == r22.id, "cancel of 22");
    end
    got_can.delete();
    respond(r21);                      // in flight before the cancellation took effect
    idle(1);
    check(got_resp.size() == 0 && n_drop == 1, "late response of cancelled 21 dropped");
    respond(r20);
    respond(r19);
    idle(1);
    check(got_resp.size() == 2 && got_resp[0].seq == 20 && got_resp[1].seq == 19,
          "older load and store still answered");
    got_resp.delete();

    // ---- response arrives before the cancellation leaves ----
    l1_cancel_ready = 1'b0;
    issue(OP_FETCH, 32'h0000_6000, 30);
    idle(1);
    r30 = got_req.pop_front();
    squash(30);
    idle(1);
    check(l1_cancel_valid, "cancellation waiting");
    respond(r30);
    idle(1);
    check(!l1_cancel_valid, "response came first: nothing left to cancel");
    l1_cancel_ready = 1'b1;
    idle(2);
    check(got_can.size() == 0 && got_resp.size() == 0 && n_drop == 2, "fetch 30 dropped, no cancel");

    // ---- squashed in the cycle it is offered ----
    core_req = '{op: OP_LOAD, addr: 32'h7000, seq: 16'd40, wdata: '0, wmask: '0};
    core_req_valid = 1'b1; squash_seq = 16'd40; squash_valid = 1'b1;
    #1;
    check(!l1_req_valid && core_req_ready, "squashed request consumed, not sent");
    @(posedge clk); #1;
    core_req_valid = 1'b0; squash_valid = 1'b0;
    idle(2);
    check(got_req.size() == 0 && got_can.size() == 0, "nothing sent for 40");

    // ---- all entries busy ----
    issue(OP_LOAD, 32'h8000, 50);
    issue(OP_LOAD, 32'h8040, 51);
    issue(OP_LOAD, 32'h8080, 52);
    issue(OP_LOAD, 32'h80c0, 53);
    core_req = '{op: OP_LOAD, addr: 32'h8100, seq: 16'd54, wdata: '0, wmask: '0};
    core_req_valid = 1'b1;
    #1;
    check(!core_req_ready && !l1_req_valid, "full: back-pressure");
    @(posedge clk); #1;
    respond(got_req[1]);
    @(posedge clk); #1;
    core_req_valid = 1'b0;
    idle(1);
    check(got_req.size() == 5 && got_req[4].addr == 32'h8100, "freed entry reused");
    check(got_resp.size() == 1 && got_resp[0].seq == 51, "response of 51");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
