// tb_mshr_file: self-checking test of the MSHR file.
//
// Directed sequence, checked against values written out by hand: allocation,
// coalescing up to a full target list, MatchMSHR, removal of a cancelled
// target from the middle of the list (order of the rest kept), removal of the
// last target freeing the MSHR, CheckMSHR before and after a cancellation and
// after the MSHR is reused for another block, fill and one-by-one draining,
// and exhaustion of all MSHRs. Operations are applied between clock edges and
// the combinational outputs are checked before the edge that applies them.
module tb_mshr_file;
  import cs_pkg::*;

  localparam int unsigned NMSHR = 4;
  localparam int unsigned NTGT  = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  blk_t      match_blk, chk_blk, op_blk;
  logic      match_hit, match_filled, match_tgt_full, chk_ok, rm_found, rm_empty;
  logic      free_avail, drain_avail;
  logic [1:0] match_idx, chk_idx, free_idx, drain_idx, op_idx;
  logic [2:0] n_pending;
  target_t   chk_tgt [NTGT];
  logic [NTGT-1:0] chk_tvalid;
  target_t   drain_tgt, op_tgt;
  line_t     drain_line, op_line;
  blk_t      drain_blk;
  mshr_op_e  op;
  msg_id_t   op_id;

  mshr_file #(.NMSHR(NMSHR), .NTGT(NTGT)) dut (.*);

  int checks = 0, failures = 0;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic target_t tgt(int id);
    target_t t;
    t = '0;
    t.op = OP_LOAD;
    t.id = msg_id_t'(id);
    t.woff = WOFF_W'(id);
    return t;
  endfunction

  // apply one operation at the next rising edge
  task automatic do_op(mshr_op_e o, int idx, blk_t b, int id, line_t l = '0);
    op = o; op_idx = 2'(idx); op_blk = b; op_tgt = tgt(id); op_id = msg_id_t'(id);
    op_line = l;
    @(posedge clk); #1;
    op = MOP_NONE;
  endtask

  localparam blk_t A = 26'h0001234, B = 26'h0005678, C = 26'h0009abc;
  line_t L;

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    op = MOP_NONE; op_idx = '0; op_blk = '0; op_tgt = '0; op_id = '0; op_line = '0;
    match_blk = '0; chk_blk = '0; chk_idx = '0;
    L = {16{32'hdead_beef}};
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    #1;

    // empty after reset
    check(free_avail && free_idx == 0, "free after reset");
    check(n_pending == 0, "no pending after reset");
    match_blk = A; #1;
    check(!match_hit, "no match after reset");

    // allocate A with target 1, coalesce 2, 3, 4
    do_op(MOP_ALLOC, free_idx, A, 1);
    check(match_hit && match_idx == 0 && !match_filled, "MatchMSHR finds A");
    check(free_idx == 1 && n_pending == 1, "next free 1");
    do_op(MOP_ADD, 0, A, 2);
    do_op(MOP_ADD, 0, A, 3);
    check(!match_tgt_full, "three targets, not full");
    do_op(MOP_ADD, 0, A, 4);
    check(match_tgt_full, "four targets, full");

    // cancel target 2 (middle): order 1,3,4 kept, MSHR not empty
    op_idx = 0; op_id = 2; #1;
    check(rm_found && !rm_empty, "remove 2: found, not empty");
    do_op(MOP_REMOVE, 0, A, 2);
    chk_idx = 0; chk_blk = A; #1;
    check(chk_tvalid == 4'b0111, "three targets left");
    check(chk_tgt[0].id == 1 && chk_tgt[1].id == 3 && chk_tgt[2].id == 4, "order 1,3,4");
    check(chk_ok, "CheckMSHR ok for A at 0");
    chk_blk = B; #1;
    check(!chk_ok, "CheckMSHR rejects wrong block");
    chk_idx = 1; chk_blk = A; #1;
    check(!chk_ok, "CheckMSHR rejects free MSHR");

    // cancel an id that is not there
    op_idx = 0; op_id = 7; #1;
    check(!rm_found, "remove unknown id: not found");

    // B: allocate and cancel its only target -> freed
    do_op(MOP_ALLOC, free_idx, B, 9);
    match_blk = B; #1;
    check(match_hit && match_idx == 1, "B at 1");
    op_idx = 1; op_id = 9; #1;
    check(rm_found && rm_empty, "remove 9: empty");
    do_op(MOP_REMOVE, 1, B, 9);
    #1;
    check(!match_hit, "B freed by cancellation");
    chk_idx = 1; chk_blk = B; #1;
    check(!chk_ok, "CheckMSHR fails for cancelled B");
    check(n_pending == 1 && free_idx == 1, "MSHR 1 free again");

    // reuse MSHR 1 for C: a late response for B must still fail the check
    do_op(MOP_ALLOC, free_idx, C, 5);
    chk_idx = 1; chk_blk = B; #1;
    check(!chk_ok, "CheckMSHR fails for B after reuse by C");
    chk_blk = C; #1;
    check(chk_ok, "CheckMSHR ok for C");

    // fill A and drain 1, 3, 4
    check(!drain_avail, "nothing to drain before fill");
    do_op(MOP_FILL, 0, A, 0, L);
    check(drain_avail && drain_idx == 0 && drain_tgt.id == 1 && drain_line == L &&
          drain_blk == A, "drain A target 1");
    chk_idx = 0; chk_blk = A; #1;
    check(!chk_ok, "CheckMSHR rejects a second response for a filled MSHR");
    check(n_pending == 1, "pending counts only unfilled");
    do_op(MOP_POP, 0, A, 0);
    check(drain_tgt.id == 3, "drain target 3");
    do_op(MOP_POP, 0, A, 0);
    check(drain_tgt.id == 4, "drain target 4");
    do_op(MOP_POP, 0, A, 0);
    check(!drain_avail, "drained");
    match_blk = A; #1;
    check(!match_hit, "A freed after draining");

    // exhaust: C holds 1; allocate the other three
    do_op(MOP_ALLOC, free_idx, 26'h100, 11);
    do_op(MOP_ALLOC, free_idx, 26'h200, 12);
    do_op(MOP_ALLOC, free_idx, 26'h300, 13);
    check(!free_avail && n_pending == 4, "all MSHRs in use");
    match_blk = 26'h200; #1;
    check(match_hit && match_idx == 2, "MatchMSHR among four");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
