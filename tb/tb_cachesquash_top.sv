// tb_cachesquash_top: end-to-end test of the cache hierarchy with two cores.
//
// Caches are made small (L1s 1 kB, L2 2 kB per core, 8 L2 MSHRs) so that
// evictions, write-backs and MSHR stalls happen; latencies keep their
// default values (L1I 1, L1D 2, L2 20 cycles); memory answers after 100.
//
// Part 1 replays the three cases of a speculative "transmit" load on core 0
// and measures, like a Flush+Reload receiver, how long a later reload of the
// same address takes:
//   best case    - squashed early: cancellations reach L1 and L2 before the
//                  memory response, the reload misses all the way to memory;
//   intermediate - squashed so late that the L2 already got the line but the
//                  L1 had not: the reload hits in L2 but not in L1;
//   worst case   - squashed after the data came back: nothing to cancel, the
//                  reload hits in L1.
// The squash delay for the intermediate case is searched, a new address per
// try. Further directed steps make two cores miss on one block (coalescing
// in the L2) and make a squashed miss be withdrawn while it still waits in
// its L1 behind a full L2. Part 2 runs random loads, stores and fetches with
// random squashes on both cores. Every delivered load is checked against a reference copy of
// memory kept here (stores update it when acknowledged); no squashed load may
// deliver data after its squash. Each mechanism of the design is counted and
// counts a failure if it never happened.
module tb_cachesquash_top;
  import cs_pkg::*;

  localparam int unsigned NC      = 2;
  localparam int unsigned L1D_LAT = 2;
  localparam int unsigned MEM_LAT = 100;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic       fetch_req_valid [NC], fetch_req_ready [NC], fetch_sq_valid [NC], fetch_resp_valid [NC];
  core_req_t  fetch_req [NC];
  seq_t       fetch_sq_seq [NC];
  core_resp_t fetch_resp [NC];
  logic       lsu_req_valid [NC], lsu_req_ready [NC], lsu_sq_valid [NC], lsu_resp_valid [NC];
  core_req_t  lsu_req [NC];
  seq_t       lsu_sq_seq [NC];
  core_resp_t lsu_resp [NC];
  logic       mem_req_valid, mem_req_ready, mem_wb_valid, mem_wb_ready, mem_resp_valid;
  req_t       mem_req;
  wb_t        mem_wb;
  resp_t      mem_resp;
  logic       init_done;
  cache_ev_t  ev_l1i [NC], ev_l1d [NC], ev_l2;
  logic       ev_trk_cancel [2*NC], ev_trk_drop [2*NC];
  int         n_mem_reads, n_mem_wbs;

  cachesquash_top #(
    .NCORES(NC), .L1I_SIZE(1024), .L1D_SIZE(1024), .L2_SIZE_CORE(2048), .L2_NMSHR(8)
  ) dut (
    .clk, .rst_n,
    .fetch_req_valid, .fetch_req_ready, .fetch_req,
    .fetch_squash_valid(fetch_sq_valid), .fetch_squash_seq(fetch_sq_seq),
    .fetch_resp_valid, .fetch_resp,
    .lsu_req_valid, .lsu_req_ready, .lsu_req,
    .lsu_squash_valid(lsu_sq_valid), .lsu_squash_seq(lsu_sq_seq),
    .lsu_resp_valid, .lsu_resp,
    .mem_req_valid, .mem_req_ready, .mem_req, .mem_wb_valid, .mem_wb_ready, .mem_wb,
    .mem_resp_valid, .mem_resp,
    .init_done, .ev_l1i, .ev_l1d, .ev_l2, .ev_trk_cancel, .ev_trk_drop
  );

  mem_model #(.MEM_LAT(MEM_LAT)) u_mem (
    .clk, .rst_n,
    .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req(mem_req),
    .wb_valid(mem_wb_valid), .wb_ready(mem_wb_ready), .wb(mem_wb),
    .resp_valid(mem_resp_valid), .resp(mem_resp),
    .n_reads(n_mem_reads), .n_wbs(n_mem_wbs)
  );

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL @%0d: %s", cyc, what);
    end
  endtask

  // ------------------------------------------------------------------
  // reference memory (word granularity) and memory's initial contents
  // ------------------------------------------------------------------
  word_t refmem [addr_t];
  function automatic word_t init_word(addr_t a);
    blk_t b;
    b = a[ADDR_W-1:OFF_W];
    return {8'hA5, 24'(b), 29'(b), a[OFF_W-1:3]};
  endfunction
  function automatic word_t ref_word(addr_t a);
    addr_t w;
    w = {a[ADDR_W-1:3], 3'b000};
    return refmem.exists(w) ? refmem[w] : init_word(w);
  endfunction

  // ------------------------------------------------------------------
  // event counters
  // ------------------------------------------------------------------
  typedef enum int {
    M_L1_HIT, M_L1_MISS, M_L1_COALESCE, M_L1_STALL, M_L1_FILL, M_L1_DISCARD,
    M_L1_CAN_REMOVE, M_L1_CAN_NOMATCH, M_L1_CAN_FWD, M_L1_CAN_UNSENT, M_L1_WB,
    M_L2_HIT, M_L2_MISS, M_L2_COALESCE, M_L2_STALL, M_L2_DISCARD, M_L2_CAN_REMOVE,
    M_L2_CAN_LLC, M_L2_WB, M_TRK_CANCEL, M_TRK_DROP, M_FETCH_CANCEL,
    M_BEST, M_INTERMEDIATE, M_WORST, M_N
  } mech_e;
  int mech [M_N];

  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < NC; c++) begin
      cache_ev_t e [2];
      e[0] = ev_l1i[c];
      e[1] = ev_l1d[c];
      for (int k = 0; k < 2; k++) begin
        mech[M_L1_HIT]         += int'(e[k].hit);
        mech[M_L1_MISS]        += int'(e[k].miss_alloc);
        mech[M_L1_COALESCE]    += int'(e[k].coalesce);
        mech[M_L1_STALL]       += int'(e[k].stall);
        mech[M_L1_FILL]        += int'(e[k].fill);
        mech[M_L1_DISCARD]     += int'(e[k].resp_discard);
        mech[M_L1_CAN_REMOVE]  += int'(e[k].cancel_remove);
        mech[M_L1_CAN_NOMATCH] += int'(e[k].cancel_nomatch);
        mech[M_L1_CAN_FWD]     += int'(e[k].cancel_fwd);
        mech[M_L1_CAN_UNSENT]  += int'(e[k].cancel_unsent);
        mech[M_L1_WB]          += int'(e[k].writeback);
      end
      mech[M_FETCH_CANCEL] += int'(ev_trk_cancel[2*c]);
    end
    for (int s = 0; s < 2*NC; s++) begin
      mech[M_TRK_CANCEL] += int'(ev_trk_cancel[s]);
      mech[M_TRK_DROP]   += int'(ev_trk_drop[s]);
    end
    mech[M_L2_HIT]        += int'(ev_l2.hit);
    mech[M_L2_MISS]       += int'(ev_l2.miss_alloc);
    mech[M_L2_COALESCE]   += int'(ev_l2.coalesce);
    mech[M_L2_STALL]      += int'(ev_l2.stall);
    mech[M_L2_DISCARD]    += int'(ev_l2.resp_discard);
    mech[M_L2_CAN_REMOVE] += int'(ev_l2.cancel_remove);
    mech[M_L2_CAN_LLC]    += int'(ev_l2.cancel_llc);
    mech[M_L2_WB]         += int'(ev_l2.writeback);
  end

  // ------------------------------------------------------------------
  // responses, by side (0 fetch, 1 LSU), core and sequence number
  // ------------------------------------------------------------------
  word_t  got_data [2][NC][seq_t];
  longint got_cyc  [2][NC][seq_t];
  longint sq_cyc   [2][NC][seq_t];     // squash cycle of each squashed request

  always @(posedge clk) if (rst_n)
    for (int c = 0; c < NC; c++) begin
      if (fetch_resp_valid[c]) begin
        got_data[0][c][fetch_resp[c].seq] = fetch_resp[c].data;
        got_cyc[0][c][fetch_resp[c].seq]  = cyc;
      end
      if (lsu_resp_valid[c]) begin
        got_data[1][c][lsu_resp[c].seq] = lsu_resp[c].data;
        got_cyc[1][c][lsu_resp[c].seq]  = cyc;
      end
    end

  seq_t next_seq [2][NC];

  // issue one request; returns its sequence number and the acceptance cycle
  task automatic issue(int side, int c, op_e op, addr_t a, output seq_t seq,
                       output longint t, input word_t wd = '0);
    seq = next_seq[side][c];
    next_seq[side][c] = next_seq[side][c] + 1'b1;
    if (side == 0) begin
      fetch_req[c] = '{op: op, addr: a, seq: seq, wdata: wd, wmask: '0};
      fetch_req_valid[c] = 1'b1;
      do @(posedge clk); while (!fetch_req_ready[c]);
      t = cyc;
      #1 fetch_req_valid[c] = 1'b0;
    end else begin
      lsu_req[c] = '{op: op, addr: a, seq: seq, wdata: wd, wmask: (op == OP_STORE) ? 8'hff : 8'h00};
      lsu_req_valid[c] = 1'b1;
      do @(posedge clk); while (!lsu_req_ready[c]);
      t = cyc;
      #1 lsu_req_valid[c] = 1'b0;
    end
  endtask

  task automatic squash(int side, int c, seq_t seq);
    if (side == 0) begin
      fetch_sq_seq[c] = seq; fetch_sq_valid[c] = 1'b1;
    end else begin
      lsu_sq_seq[c] = seq; lsu_sq_valid[c] = 1'b1;
    end
    @(posedge clk);
    sq_cyc[side][c][seq] = cyc;
    #1;
    fetch_sq_valid[c] = 1'b0;
    lsu_sq_valid[c]   = 1'b0;
  endtask

  task automatic wait_resp(int side, int c, seq_t seq, output word_t d, output longint t);
    int n;
    n = 0;
    while (!got_cyc[side][c].exists(seq) && n < 5000) begin
      @(posedge clk);
      n++;
    end
    #1;
    check(got_cyc[side][c].exists(seq), $sformatf("response for side %0d core %0d seq %0d", side, c, seq));
    d = got_data[side][c].exists(seq) ? got_data[side][c][seq] : '0;
    t = got_cyc[side][c].exists(seq) ? got_cyc[side][c][seq] : 0;
  endtask

  // a blocking, non-speculative load; returns its latency
  task automatic load_lat(int c, addr_t a, output longint lat);
    seq_t s;
    longint t0, t1;
    word_t d;
    issue(1, c, OP_LOAD, a, s, t0);
    wait_resp(1, c, s, d, t1);
    check(d == ref_word(a), $sformatf("load %h data %h expected %h", a, d, ref_word(a)));
    lat = t1 - t0;
  endtask

  task automatic idle(int n);
    repeat (n) @(posedge clk);
    #1;
  endtask

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------------
  // random traffic of one side of one core
  // ------------------------------------------------------------------
  localparam addr_t SHARED = 32'h0040_0000;   // read-only data, 8 kB
  localparam addr_t CODE   = 32'h0080_0000;   // instructions, 8 kB
  function automatic addr_t priv_base(int c);
    return 32'h0100_0000 + 32'(c) * 32'h0001_0000;   // per-core data, 4 kB used
  endfunction

  task automatic random_side(int side, int c, int rounds);
    for (int r = 0; r < rounds; r++) begin
      int     n, k;
      seq_t   s [4];
      addr_t  a [4];
      longint t;
      bit     do_sq;
      n = 1 + int'($urandom_range(3));
      for (int i = 0; i < n; i++) begin
        if (side == 0)
          a[i] = CODE + 32'($urandom_range(8191)) & ~32'h7;
        else if ($urandom_range(1) == 0)
          a[i] = SHARED + 32'($urandom_range(8191)) & ~32'h7;
        else
          a[i] = priv_base(c) + 32'($urandom_range(4095)) & ~32'h7;
        // sometimes the same block twice in one burst
        if (i > 0 && $urandom_range(3) == 0) a[i] = a[i-1] ^ 32'h8;
        issue(side, c, (side == 0) ? OP_FETCH : OP_LOAD, a[i], s[i], t);
      end
      do_sq = $urandom_range(1) == 1;
      k = int'($urandom_range(n - 1));
      if (do_sq) begin
        idle(int'($urandom_range(140)));
        squash(side, c, s[k]);
      end
      idle(MEM_LAT * 3);
      for (int i = 0; i < n; i++) begin
        bit sq;
        sq = do_sq && i >= k;
        if (!sq) begin
          word_t  d;
          longint t1;
          wait_resp(side, c, s[i], d, t1);
          check(d == ref_word(a[i]), $sformatf("core %0d side %0d %h: %h expected %h",
                                                c, side, a[i], d, ref_word(a[i])));
        end else if (got_cyc[side][c].exists(s[i])) begin
          check(got_cyc[side][c][s[i]] < sq_cyc[side][c][s[k]],
                "no data delivered after the squash");
        end
      end
      // a store to this core's private data, now that nothing is outstanding
      if (side == 1 && $urandom_range(2) == 0) begin
        addr_t  sa;
        word_t  sd, d;
        seq_t   ss;
        longint t1;
        sa = priv_base(c) + 32'($urandom_range(4095)) & ~32'h7;
        sd = {$urandom, $urandom};
        issue(1, c, OP_STORE, sa, ss, t, sd);
        wait_resp(1, c, ss, d, t1);
        refmem[sa] = sd;
      end
    end
  endtask

  // ------------------------------------------------------------------
  // main
  // ------------------------------------------------------------------
  initial begin
    longint lat_miss, lat_hit, lat, t0;
    seq_t   s;
    word_t  d;
    int     cancels_before;
    for (int c = 0; c < NC; c++) begin
      fetch_req_valid[c] = 0; fetch_sq_valid[c] = 0; fetch_req[c] = '0; fetch_sq_seq[c] = '0;
      lsu_req_valid[c] = 0; lsu_sq_valid[c] = 0; lsu_req[c] = '0; lsu_sq_seq[c] = '0;
      next_seq[0][c] = '0; next_seq[1][c] = '0;
    end
    for (int m = 0; m < M_N; m++) mech[m] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (init_done);
    idle(1);

    // ---------------- part 1: transmit load, three cases ----------------
    load_lat(0, 32'h0200_0000, lat_miss);
    load_lat(0, 32'h0200_0000, lat_hit);
    $display("miss latency %0d, L1D hit latency %0d", lat_miss, lat_hit);
    check(lat_hit == L1D_LAT, "L1D hit latency is the L1D latency");
    check(lat_miss > MEM_LAT + 20 && lat_miss < MEM_LAT + 60, "miss latency covers L1, L2 and memory");

    // best case: squash 3 cycles after the transmit load was accepted
    issue(1, 0, OP_LOAD, 32'h0200_1000, s, t0);
    idle(3);
    squash(1, 0, s);
    idle(MEM_LAT * 3);
    check(!got_cyc[1][0].exists(s), "squashed transmit load returns nothing");
    load_lat(0, 32'h0200_1000, lat);
    $display("best case: reload latency %0d", lat);
    if (lat >= lat_miss - 2) mech[M_BEST]++;
    check(lat >= lat_miss - 2, "best case: L1 and L2 unchanged, reload goes to memory");

    // intermediate: search the squash delay
    for (int dly = int'(lat_miss) - 4; dly > 4 && mech[M_INTERMEDIATE] == 0; dly -= 3) begin
      addr_t a;
      a = 32'h0300_0000 + 32'(dly) * 32'h40;
      issue(1, 0, OP_LOAD, a, s, t0);
      idle(dly);
      squash(1, 0, s);
      idle(MEM_LAT * 3);
      load_lat(0, a, lat);
      if (lat > L1D_LAT && lat < lat_miss - 40) begin
        mech[M_INTERMEDIATE]++;
        $display("intermediate case at squash delay %0d: reload latency %0d (L2 hit)", dly, lat);
      end
    end

    // worst case: squash after the data came back
    cancels_before = mech[M_TRK_CANCEL];
    issue(1, 0, OP_LOAD, 32'h0200_2000, s, t0);
    wait_resp(1, 0, s, d, lat);
    squash(1, 0, s);
    idle(20);
    check(mech[M_TRK_CANCEL] == cancels_before, "worst case: nothing left to cancel");
    load_lat(0, 32'h0200_2000, lat);
    if (lat == L1D_LAT) mech[M_WORST]++;
    check(lat == L1D_LAT, "worst case: line already in L1");

    // both cores miss on the same block at once: one L2 MSHR, two targets
    fork
      begin longint l0; load_lat(0, SHARED + 32'h1f00, l0); end
      begin longint l1; load_lat(1, SHARED + 32'h1f08, l1); end
    join
    check(mech[M_L2_COALESCE] > 0, "second core's miss joins the first one's L2 MSHR");

    // withdraw: core 1 fills all 8 L2 MSHRs, so core 0's second miss waits in
    // its L1's output register when its squash arrives
    begin
      seq_t   sa, sb, s1 [8];
      longint t;
      word_t  dd;
      for (int i = 0; i < 4; i++) begin
        issue(1, 1, OP_LOAD,  32'h0500_0000 + 32'(i) * 32'h40, s1[i], t);
        issue(0, 1, OP_FETCH, 32'h0510_0000 + 32'(i) * 32'h40, s1[4+i], t);
      end
      idle(25);
      issue(1, 0, OP_LOAD, 32'h0520_0000, sa, t);
      idle(30);
      issue(1, 0, OP_LOAD, 32'h0520_0040, sb, t);
      idle(4);
      squash(1, 0, sb);
      idle(MEM_LAT * 4);
      check(mech[M_L1_CAN_UNSENT] > 0, "squashed miss withdrawn before leaving the L1");
      wait_resp(1, 0, sa, dd, t);
      check(dd == ref_word(32'h0520_0000), "older load still answered");
      for (int i = 0; i < 4; i++) begin
        wait_resp(1, 1, s1[i], dd, t);
        wait_resp(0, 1, s1[4+i], dd, t);
      end
    end

    // ---------------- part 2: random traffic on all cores ----------------
    for (int c = 0; c < NC; c++)
      for (int side = 0; side < 2; side++)
        fork
          automatic int cc = c, ss = side;
          random_side(ss, cc, 60);
        join_none
    wait fork;

    // ---------------- mechanisms ----------------
    for (int m = 0; m < M_N; m++) begin
      mech_e me;
      me = mech_e'(m);
      $display("%-18s %0d", me.name(), mech[m]);
      check(mech[m] > 0, $sformatf("mechanism %s happened", me.name()));
    end
    $display("memory reads %0d, memory write-backs %0d", n_mem_reads, n_mem_wbs);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
