// tb_cachesquash_full: the cache hierarchy at its default, full size.
//
// The top is instantiated without parameter overrides: 4 cores, 32 kB L1I and
// 64 kB L1D (2-way, 1 and 2 cycles), 8 MB shared L2 (8-way, 20 cycles). After
// the tag sweep of reset (one set per cycle, 16384 sets in the L2) each core
// does one short sequence on its own addresses:
//   a load that misses everywhere (latency L1D + L2 + memory), its reload
//   (L1D hit, exactly 2 cycles), a fetch miss and fetch hit (L1I, exactly 1
//   cycle), and a transmit load squashed 3 cycles after it was accepted (best
//   case: its reload must go all the way to memory again).
// Core 0 also does a store and reads it back. Memory answers after 100
// cycles. Cancellations must be seen leaving every core's L1D and stopping at
// the L2.
module tb_cachesquash_full;
  import cs_pkg::*;

  localparam int unsigned NC      = 4;
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

  cachesquash_top dut (
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

  function automatic word_t init_word(addr_t a);
    blk_t b;
    b = a[ADDR_W-1:OFF_W];
    return {8'hA5, 24'(b), 29'(b), a[OFF_W-1:3]};
  endfunction

  int n_fwd [NC];
  int n_llc;
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < NC; c++) n_fwd[c] += int'(ev_l1d[c].cancel_fwd);
    n_llc += int'(ev_l2.cancel_llc);
  end

  word_t  got_data [2][NC][seq_t];
  longint got_cyc  [2][NC][seq_t];
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

  task automatic wait_resp(int side, int c, seq_t seq, output word_t d, output longint t);
    int n;
    n = 0;
    while (!got_cyc[side][c].exists(seq) && n < 2000) begin
      @(posedge clk);
      n++;
    end
    #1;
    check(got_cyc[side][c].exists(seq), $sformatf("response for side %0d core %0d seq %0d", side, c, seq));
    d = got_data[side][c].exists(seq) ? got_data[side][c][seq] : '0;
    t = got_cyc[side][c].exists(seq) ? got_cyc[side][c][seq] : 0;
  endtask

  // blocking access; returns data and latency
  task automatic access(int side, int c, op_e op, addr_t a, output word_t d, output longint lat,
                        input word_t wd = '0);
    seq_t s;
    longint t0, t1;
    issue(side, c, op, a, s, t0, wd);
    wait_resp(side, c, s, d, t1);
    lat = t1 - t0;
  endtask

  task automatic core_seq(int c);
    addr_t  base;
    word_t  d;
    longint lat_miss, lat, t0;
    seq_t   s;
    base = 32'h1000_0000 + 32'(c) * 32'h0010_0000;
    access(1, c, OP_LOAD, base + 32'h18, d, lat_miss);
    check(d == init_word(base + 32'h18), $sformatf("core %0d miss data", c));
    check(lat_miss > MEM_LAT + 22 && lat_miss < MEM_LAT + 60, $sformatf("core %0d miss latency %0d", c, lat_miss));
    access(1, c, OP_LOAD, base + 32'h20, d, lat);
    check(d == init_word(base + 32'h20) && lat == 2, $sformatf("core %0d L1D hit in 2 cycles (%0d)", c, lat));
    access(0, c, OP_FETCH, base + 32'h8000, d, lat);
    check(d == init_word(base + 32'h8000), $sformatf("core %0d fetch miss data", c));
    access(0, c, OP_FETCH, base + 32'h8008, d, lat);
    check(d == init_word(base + 32'h8008) && lat == 1, $sformatf("core %0d L1I hit in 1 cycle (%0d)", c, lat));
    // best case
    issue(1, c, OP_LOAD, base + 32'h4000, s, t0);
    repeat (3) @(posedge clk);
    #1;
    lsu_sq_seq[c] = s; lsu_sq_valid[c] = 1'b1;
    @(posedge clk);
    #1 lsu_sq_valid[c] = 1'b0;
    repeat (3 * MEM_LAT) @(posedge clk);
    #1;
    check(!got_cyc[1][c].exists(s), $sformatf("core %0d squashed load returns nothing", c));
    access(1, c, OP_LOAD, base + 32'h4000, d, lat);
    check(d == init_word(base + 32'h4000) && lat > MEM_LAT + 22,
          $sformatf("core %0d best case: reload from memory (%0d)", c, lat));
    if (c == 0) begin
      access(1, c, OP_STORE, base + 32'h28, d, lat, 64'h0123_4567_89ab_cdef);
      access(1, c, OP_LOAD, base + 32'h28, d, lat);
      check(d == 64'h0123_4567_89ab_cdef && lat == 2, "store then load hit");
    end
  endtask

  initial begin : watchdog
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t_init;
    for (int c = 0; c < NC; c++) begin
      fetch_req_valid[c] = 0; fetch_sq_valid[c] = 0; fetch_req[c] = '0; fetch_sq_seq[c] = '0;
      lsu_req_valid[c] = 0; lsu_sq_valid[c] = 0; lsu_req[c] = '0; lsu_sq_seq[c] = '0;
      next_seq[0][c] = '0; next_seq[1][c] = '0;
      n_fwd[c] = 0;
    end
    n_llc = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (init_done);
    t_init = cyc;
    $display("tag sweep done after %0d cycles", t_init);
    check(t_init >= 16384 && t_init < 16400, "one L2 set per cycle: 16384 sets");
    @(posedge clk);
    #1;
    for (int c = 0; c < NC; c++)
      fork
        automatic int cc = c;
        core_seq(cc);
      join_none
    wait fork;
    for (int c = 0; c < NC; c++)
      check(n_fwd[c] > 0, $sformatf("core %0d L1D forwarded a cancellation", c));
    check(n_llc >= NC, "L2 stopped the cancellations");
    check(n_mem_wbs == 0, "no write-backs in this short run");
    $display("memory reads %0d, cancellations stopped at L2 %0d", n_mem_reads, n_llc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
