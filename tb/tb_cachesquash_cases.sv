// tb_cachesquash_cases: transmit-load experiments in the two case-study
// configurations, counting cache changes.
//
// Two copies of the hierarchy run side by side, each with 2 cores:
//   C1: 32 kB L1I/L1D, 512 kB shared L2 (256 kB per core), associativity
//       8/8/16, latencies 4/4/14 cycles; memory 150 cycles (about 50 ns of
//       DDR4 at 3 GHz, an estimate of this testbench).
//   C2: the same sizes with latencies 80/80/80; at 0.1 GHz memory answers in
//       5 cycles, so a response from memory beats any cancellation to the L2.
// An experiment is 32 attacks. In each, core 0 issues a transmit load to a
// probe block of its own (probe + 4096*i, never touched before) and squashes
// it W cycles later, as the end of the speculation window. Right after, the
// block is loaded again and the reload latency tells which caches the squashed
// load changed: an L1 hit means L1 and L2 changed, an L2 hit means only the
// L2 changed. Reference latencies of an L1 hit, an L2 hit and a memory access
// are measured first in each configuration (the L2-hit case by a load of core
// 1 followed by the same load on core 0).
//
// The change metric for K = 2 levels is
//   CC = (2*N1 + 1*N2) / (Ntotal * (1 + 2)),
// N1 and N2 counting attacks that changed L1 and L2.
// Checked:
//   * C1 with a short window (W = 10): every cancellation reaches L1 and L2
//     before memory answers, so N1 = N2 = 0 and CC = 0.
//   * C2 with the same window: the L2 is changed by every attack, the L1 by
//     none, so N1 = 0, N2 = 32, CC = 1/3.
//   * C1 with a window longer than a memory access: nothing is left to cancel,
//     N1 = N2 = 32 and CC = 1.
module tb_cachesquash_cases;
  import cs_pkg::*;

  localparam int unsigned NC     = 2;
  localparam int unsigned NATK   = 32;
  localparam int unsigned MEMLAT [2] = '{150, 5};

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic       fetch_req_valid [2][NC], fetch_req_ready [2][NC], fetch_sq_valid [2][NC];
  logic       fetch_resp_valid [2][NC];
  core_req_t  fetch_req [2][NC];
  seq_t       fetch_sq_seq [2][NC];
  core_resp_t fetch_resp [2][NC];
  logic       lsu_req_valid [2][NC], lsu_req_ready [2][NC], lsu_sq_valid [2][NC], lsu_resp_valid [2][NC];
  core_req_t  lsu_req [2][NC];
  seq_t       lsu_sq_seq [2][NC];
  core_resp_t lsu_resp [2][NC];
  logic       mem_req_valid [2], mem_req_ready [2], mem_wb_valid [2], mem_wb_ready [2];
  logic       mem_resp_valid [2], init_done [2];
  req_t       mem_req [2];
  wb_t        mem_wb [2];
  resp_t      mem_resp [2];
  cache_ev_t  ev_l1i [2][NC], ev_l1d [2][NC], ev_l2 [2];
  logic       ev_trk_cancel [2][2*NC], ev_trk_drop [2][2*NC];
  int         n_mem_reads [2], n_mem_wbs [2];

  for (genvar k = 0; k < 2; k++) begin : g_cfg
    localparam int unsigned L1LAT = (k == 0) ? 4 : 80;
    localparam int unsigned L2LAT = (k == 0) ? 14 : 80;
    cachesquash_top #(
      .NCORES(NC), .L1I_SIZE(32768), .L1I_WAYS(8), .L1I_LAT(L1LAT),
      .L1D_SIZE(32768), .L1D_WAYS(8), .L1D_LAT(L1LAT),
      .L2_SIZE_CORE(262144), .L2_WAYS(16), .L2_LAT(L2LAT)
    ) dut (
      .clk, .rst_n,
      .fetch_req_valid(fetch_req_valid[k]), .fetch_req_ready(fetch_req_ready[k]),
      .fetch_req(fetch_req[k]), .fetch_squash_valid(fetch_sq_valid[k]),
      .fetch_squash_seq(fetch_sq_seq[k]), .fetch_resp_valid(fetch_resp_valid[k]),
      .fetch_resp(fetch_resp[k]),
      .lsu_req_valid(lsu_req_valid[k]), .lsu_req_ready(lsu_req_ready[k]), .lsu_req(lsu_req[k]),
      .lsu_squash_valid(lsu_sq_valid[k]), .lsu_squash_seq(lsu_sq_seq[k]),
      .lsu_resp_valid(lsu_resp_valid[k]), .lsu_resp(lsu_resp[k]),
      .mem_req_valid(mem_req_valid[k]), .mem_req_ready(mem_req_ready[k]), .mem_req(mem_req[k]),
      .mem_wb_valid(mem_wb_valid[k]), .mem_wb_ready(mem_wb_ready[k]), .mem_wb(mem_wb[k]),
      .mem_resp_valid(mem_resp_valid[k]), .mem_resp(mem_resp[k]),
      .init_done(init_done[k]), .ev_l1i(ev_l1i[k]), .ev_l1d(ev_l1d[k]), .ev_l2(ev_l2[k]),
      .ev_trk_cancel(ev_trk_cancel[k]), .ev_trk_drop(ev_trk_drop[k])
    );
    mem_model #(.MEM_LAT(MEMLAT[k])) u_mem (
      .clk, .rst_n,
      .req_valid(mem_req_valid[k]), .req_ready(mem_req_ready[k]), .req(mem_req[k]),
      .wb_valid(mem_wb_valid[k]), .wb_ready(mem_wb_ready[k]), .wb(mem_wb[k]),
      .resp_valid(mem_resp_valid[k]), .resp(mem_resp[k]),
      .n_reads(n_mem_reads[k]), .n_wbs(n_mem_wbs[k])
    );
  end

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL @%0d: %s", cyc, what);
    end
  endtask

  function automatic word_t init_word(addr_t a);
    blk_t b;
    b = a[ADDR_W-1:OFF_W];
    return {8'hA5, 24'(b), 29'(b), a[OFF_W-1:3]};
  endfunction

  longint got_cyc  [2][NC][seq_t];
  word_t  got_data [2][NC][seq_t];
  always @(posedge clk) if (rst_n)
    for (int k = 0; k < 2; k++)
      for (int c = 0; c < NC; c++)
        if (lsu_resp_valid[k][c]) begin
          got_cyc[k][c][lsu_resp[k][c].seq]  = cyc;
          got_data[k][c][lsu_resp[k][c].seq] = lsu_resp[k][c].data;
        end

  seq_t next_seq [2][NC];

  task automatic issue(int k, int c, addr_t a, output seq_t s, output longint t);
    s = next_seq[k][c];
    next_seq[k][c] = next_seq[k][c] + 1'b1;
    lsu_req[k][c] = '{op: OP_LOAD, addr: a, seq: s, wdata: '0, wmask: '0};
    lsu_req_valid[k][c] = 1'b1;
    do @(posedge clk); while (!lsu_req_ready[k][c]);
    t = cyc;
    #1 lsu_req_valid[k][c] = 1'b0;
  endtask

  task automatic load_lat(int k, int c, addr_t a, output longint lat);
    seq_t s;
    longint t0;
    int n;
    issue(k, c, a, s, t0);
    n = 0;
    while (!got_cyc[k][c].exists(s) && n < 3000) begin
      @(posedge clk);
      n++;
    end
    #1;
    check(got_cyc[k][c].exists(s) && got_data[k][c][s] == init_word(a),
          $sformatf("config %0d load %h answered with its data", k, a));
    lat = got_cyc[k][c].exists(s) ? got_cyc[k][c][s] - t0 : 0;
  endtask

  longint lat_l1 [2], lat_l2 [2], lat_mem [2];

  // 0 no change, 1 L2 only, 2 L1 and L2
  function automatic int level_changed(int k, longint lat);
    longint d1, d2, dm;
    d1 = (lat > lat_l1[k]) ? lat - lat_l1[k] : lat_l1[k] - lat;
    d2 = (lat > lat_l2[k]) ? lat - lat_l2[k] : lat_l2[k] - lat;
    dm = (lat > lat_mem[k]) ? lat - lat_mem[k] : lat_mem[k] - lat;
    if (d1 <= d2 && d1 <= dm) return 2;
    if (d2 <= dm) return 1;
    return 0;
  endfunction

  // one experiment: NATK attacks with window w; returns N1 and N2
  task automatic experiment(int k, int w, addr_t probe, output int n1, output int n2);
    n1 = 0; n2 = 0;
    for (int i = 0; i < NATK; i++) begin
      addr_t  a;
      seq_t   s;
      longint t0, lat;
      int     lv;
      a = probe + 32'(i) * 32'h1000;
      issue(k, 0, a, s, t0);
      repeat (w) @(posedge clk);
      #1;
      lsu_sq_seq[k][0] = s; lsu_sq_valid[k][0] = 1'b1;
      @(posedge clk);
      #1 lsu_sq_valid[k][0] = 1'b0;
      repeat (2 * int'(lat_mem[k])) @(posedge clk);
      #1;
      load_lat(k, 0, a, lat);
      lv = level_changed(k, lat);
      if (lv == 2) begin n1++; n2++; end
      else if (lv == 1) n2++;
    end
  endtask

  function automatic real cc(int n1, int n2);
    return real'(2 * n1 + n2) / real'(NATK * 3);
  endfunction

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic calibrate(int k);
    longint l;
    load_lat(k, 0, 32'h0100_0000, lat_mem[k]);
    load_lat(k, 0, 32'h0100_0008, lat_l1[k]);
    load_lat(k, 1, 32'h0100_1000, l);
    load_lat(k, 0, 32'h0100_1000, lat_l2[k]);
    $display("config C%0d: L1 hit %0d, L2 hit %0d, memory %0d cycles", k + 1, lat_l1[k], lat_l2[k],
             lat_mem[k]);
    check(lat_l1[k] < lat_l2[k] && lat_l2[k] < lat_mem[k], "latencies ordered");
  endtask

  initial begin
    int n1 [3], n2 [3];
    for (int k = 0; k < 2; k++)
      for (int c = 0; c < NC; c++) begin
        fetch_req_valid[k][c] = 0; fetch_sq_valid[k][c] = 0; fetch_req[k][c] = '0;
        fetch_sq_seq[k][c] = '0; lsu_req_valid[k][c] = 0; lsu_sq_valid[k][c] = 0;
        lsu_req[k][c] = '0; lsu_sq_seq[k][c] = '0; next_seq[k][c] = '0;
      end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (init_done[0] && init_done[1]);
    @(posedge clk);
    #1;
    fork
      begin
        calibrate(0);
        experiment(0, 10, 32'h0200_0000, n1[0], n2[0]);
        experiment(0, int'(lat_mem[0]) + 10, 32'h0400_0000, n1[2], n2[2]);
      end
      begin
        calibrate(1);
        experiment(1, 10, 32'h0200_0000, n1[1], n2[1]);
      end
    join
    $display("C1, window 10:            N1=%0d N2=%0d Ntotal=%0d CC=%0.3f", n1[0], n2[0], NATK, cc(n1[0], n2[0]));
    $display("C2, window 10:            N1=%0d N2=%0d Ntotal=%0d CC=%0.3f", n1[1], n2[1], NATK, cc(n1[1], n2[1]));
    $display("C1, window past response: N1=%0d N2=%0d Ntotal=%0d CC=%0.3f", n1[2], n2[2], NATK, cc(n1[2], n2[2]));
    check(n1[0] == 0 && n2[0] == 0, "C1: cancellations beat memory, no cache changed");
    check(n1[1] == 0 && n2[1] == NATK, "C2: L2 changed by every attack, L1 by none");
    check(n1[2] == NATK && n2[2] == NATK, "C1, long window: every attack changed L1 and L2");
    check(cc(n1[1], n2[1]) > 0.33 && cc(n1[1], n2[1]) < 0.34, "C2: CC = 1/3");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
