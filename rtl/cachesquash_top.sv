// cachesquash_top: the speculation-aware cache hierarchy of an NCORES-core
// system, from the cores' memory ports down to the memory port.
//
// Per core: instruction fetch -> spec_req_tracker -> private L1I, and the
// load-store unit -> spec_req_tracker -> private L1D. All L1s meet in l2_xbar
// and share one L2, the last-level cache, whose size grows with the core
// count (2 MB per core). The L2 talks to memory over an ordinary request /
// write-back / response port with no cancellation channel: memory is not
// changed, and the L2 drops the responses of requests that were cancelled.
//
// A squash from a core's fetch unit or LSU starts cancellations at that
// core's tracker; each cache that is left with an empty MSHR passes the
// cancellation on, down to the L2, which stops it.
//
// Interface: the cores' sides are arrays indexed by core (fetch_* and lsu_*:
// request with sequence number, squash with sequence number, response).
// Source numbers at the crossbar are 2*core for the L1I and 2*core+1 for the
// L1D. ev_* are per-cycle event strobes of each cache and tracker.
// Defaults follow the performance-evaluation system of the paper (L1I 32 kB,
// L1D 64 kB, 2-way, latencies 1 and 2 cycles; L2 2 MB per core, 8-way,
// 20 cycles; 4 cores). MSHR counts, targets per MSHR and tracker depth are
// not given there and are this design's choices.
module cachesquash_top
  import cs_pkg::*;
#(
  parameter int unsigned NCORES       = 4,
  parameter int unsigned L1I_SIZE     = 32 * 1024,
  parameter int unsigned L1I_WAYS     = 2,
  parameter int unsigned L1I_LAT      = 1,
  parameter int unsigned L1D_SIZE     = 64 * 1024,
  parameter int unsigned L1D_WAYS     = 2,
  parameter int unsigned L1D_LAT      = 2,
  parameter int unsigned L2_SIZE_CORE = 2 * 1024 * 1024,
  parameter int unsigned L2_WAYS      = 8,
  parameter int unsigned L2_LAT       = 20,
  parameter int unsigned L1_NMSHR     = 4,
  parameter int unsigned L2_NMSHR     = 16,
  parameter int unsigned NTGT         = 4,
  parameter int unsigned TRK_NENT     = 8
) (
  input  logic       clk,
  input  logic       rst_n,

  // instruction fetch, per core
  input  logic       fetch_req_valid  [NCORES],
  output logic       fetch_req_ready  [NCORES],
  input  core_req_t  fetch_req        [NCORES],
  input  logic       fetch_squash_valid [NCORES],
  input  seq_t       fetch_squash_seq [NCORES],
  output logic       fetch_resp_valid [NCORES],
  output core_resp_t fetch_resp       [NCORES],

  // load-store unit, per core
  input  logic       lsu_req_valid    [NCORES],
  output logic       lsu_req_ready    [NCORES],
  input  core_req_t  lsu_req          [NCORES],
  input  logic       lsu_squash_valid [NCORES],
  input  seq_t       lsu_squash_seq   [NCORES],
  output logic       lsu_resp_valid   [NCORES],
  output core_resp_t lsu_resp         [NCORES],

  // memory port
  output logic       mem_req_valid,
  input  logic       mem_req_ready,
  output req_t       mem_req,
  output logic       mem_wb_valid,
  input  logic       mem_wb_ready,
  output wb_t        mem_wb,
  input  logic       mem_resp_valid,
  input  resp_t      mem_resp,

  output logic       init_done,
  output cache_ev_t  ev_l1i [NCORES],
  output cache_ev_t  ev_l1d [NCORES],
  output cache_ev_t  ev_l2,
  output logic       ev_trk_cancel [2*NCORES],
  output logic       ev_trk_drop   [2*NCORES]
);

  localparam int unsigned NSRC = 2 * NCORES;

  // L1 <-> crossbar
  logic    x_req_valid [NSRC], x_req_ready [NSRC];
  req_t    x_req       [NSRC];
  logic    x_can_valid [NSRC], x_can_ready [NSRC];
  cancel_t x_can       [NSRC];
  logic    x_wb_valid  [NSRC], x_wb_ready  [NSRC];
  wb_t     x_wb        [NSRC];
  logic    x_resp_valid[NSRC];
  resp_t   x_resp      [NSRC];
  logic    l1_init     [NSRC];

  for (genvar c = 0; c < NCORES; c++) begin : g_core
    for (genvar k = 0; k < 2; k++) begin : g_side   // k = 0: fetch / L1I, 1: LSU / L1D
      localparam int unsigned S = 2 * c + k;

      logic    t_req_valid, t_req_ready, t_can_valid, t_can_ready, t_resp_valid;
      req_t    t_req;
      cancel_t t_can;
      resp_t   t_resp;
      logic    c_req_valid, c_req_ready, c_sq_valid, c_resp_valid;
      core_req_t  c_req;
      seq_t       c_sq_seq;
      core_resp_t c_resp;
      cache_ev_t  ev;

      if (k == 0) begin : g_fetch_io
        assign c_req_valid         = fetch_req_valid[c];
        assign c_req               = fetch_req[c];
        assign c_sq_valid          = fetch_squash_valid[c];
        assign c_sq_seq            = fetch_squash_seq[c];
        assign fetch_req_ready[c]  = c_req_ready;
        assign fetch_resp_valid[c] = c_resp_valid;
        assign fetch_resp[c]       = c_resp;
        assign ev_l1i[c]           = ev;
      end else begin : g_lsu_io
        assign c_req_valid       = lsu_req_valid[c];
        assign c_req             = lsu_req[c];
        assign c_sq_valid        = lsu_squash_valid[c];
        assign c_sq_seq          = lsu_squash_seq[c];
        assign lsu_req_ready[c]  = c_req_ready;
        assign lsu_resp_valid[c] = c_resp_valid;
        assign lsu_resp[c]       = c_resp;
        assign ev_l1d[c]         = ev;
      end

      spec_req_tracker #(.NENT(TRK_NENT)) u_trk (
        .clk, .rst_n,
        .core_req_valid(c_req_valid), .core_req_ready(c_req_ready), .core_req(c_req),
        .squash_valid(c_sq_valid), .squash_seq(c_sq_seq),
        .core_resp_valid(c_resp_valid), .core_resp(c_resp),
        .l1_req_valid(t_req_valid), .l1_req_ready(t_req_ready), .l1_req(t_req),
        .l1_cancel_valid(t_can_valid), .l1_cancel_ready(t_can_ready), .l1_cancel(t_can),
        .l1_resp_valid(t_resp_valid), .l1_resp(t_resp),
        .ev_cancel_sent(ev_trk_cancel[S]), .ev_resp_dropped(ev_trk_drop[S])
      );

      cs_cache #(
        .SIZE_BYTES(k == 0 ? L1I_SIZE : L1D_SIZE),
        .WAYS      (k == 0 ? L1I_WAYS : L1D_WAYS),
        .LAT       (k == 0 ? L1I_LAT  : L1D_LAT),
        .NMSHR     (L1_NMSHR),
        .NTGT      (NTGT),
        .IS_LLC    (1'b0)
      ) u_l1 (
        .clk, .rst_n,
        .up_req_valid(t_req_valid), .up_req_ready(t_req_ready), .up_req(t_req),
        .up_cancel_valid(t_can_valid), .up_cancel_ready(t_can_ready), .up_cancel(t_can),
        .up_wb_valid(1'b0), .up_wb_ready(), .up_wb('0),
        .up_resp_valid(t_resp_valid), .up_resp(t_resp),
        .dn_req_valid(x_req_valid[S]), .dn_req_ready(x_req_ready[S]), .dn_req(x_req[S]),
        .dn_cancel_valid(x_can_valid[S]), .dn_cancel_ready(x_can_ready[S]),
        .dn_cancel(x_can[S]),
        .dn_wb_valid(x_wb_valid[S]), .dn_wb_ready(x_wb_ready[S]), .dn_wb(x_wb[S]),
        .dn_resp_valid(x_resp_valid[S]), .dn_resp(x_resp[S]),
        .init_done(l1_init[S]), .ev(ev)
      );
    end
  end

  // crossbar <-> L2
  logic    l2_req_valid, l2_req_ready, l2_can_valid, l2_can_ready;
  logic    l2_wb_valid, l2_wb_ready, l2_resp_valid, l2_init;
  req_t    l2_req;
  cancel_t l2_can;
  wb_t     l2_wb;
  resp_t   l2_resp;

  l2_xbar #(.NSRC(NSRC)) u_xbar (
    .clk, .rst_n,
    .s_req_valid(x_req_valid), .s_req_ready(x_req_ready), .s_req(x_req),
    .s_cancel_valid(x_can_valid), .s_cancel_ready(x_can_ready), .s_cancel(x_can),
    .s_wb_valid(x_wb_valid), .s_wb_ready(x_wb_ready), .s_wb(x_wb),
    .s_resp_valid(x_resp_valid), .s_resp(x_resp),
    .m_req_valid(l2_req_valid), .m_req_ready(l2_req_ready), .m_req(l2_req),
    .m_cancel_valid(l2_can_valid), .m_cancel_ready(l2_can_ready), .m_cancel(l2_can),
    .m_wb_valid(l2_wb_valid), .m_wb_ready(l2_wb_ready), .m_wb(l2_wb),
    .m_resp_valid(l2_resp_valid), .m_resp(l2_resp)
  );

  // the L2 is the LLC: its cancellation output is never used (memory has none)
  logic    l2_dn_can_valid;
  cancel_t l2_dn_can;

  cs_cache #(
    .SIZE_BYTES(L2_SIZE_CORE * NCORES),
    .WAYS      (L2_WAYS),
    .LAT       (L2_LAT),
    .NMSHR     (L2_NMSHR),
    .NTGT      (NTGT),
    .IS_LLC    (1'b1)
  ) u_l2 (
    .clk, .rst_n,
    .up_req_valid(l2_req_valid), .up_req_ready(l2_req_ready), .up_req(l2_req),
    .up_cancel_valid(l2_can_valid), .up_cancel_ready(l2_can_ready), .up_cancel(l2_can),
    .up_wb_valid(l2_wb_valid), .up_wb_ready(l2_wb_ready), .up_wb(l2_wb),
    .up_resp_valid(l2_resp_valid), .up_resp(l2_resp),
    .dn_req_valid(mem_req_valid), .dn_req_ready(mem_req_ready), .dn_req(mem_req),
    .dn_cancel_valid(l2_dn_can_valid), .dn_cancel_ready(1'b1), .dn_cancel(l2_dn_can),
    .dn_wb_valid(mem_wb_valid), .dn_wb_ready(mem_wb_ready), .dn_wb(mem_wb),
    .dn_resp_valid(mem_resp_valid), .dn_resp(mem_resp),
    .init_done(l2_init), .ev(ev_l2)
  );

  a_llc_no_cancel: assert property (@(posedge clk) disable iff (!rst_n) !l2_dn_can_valid);

  always_comb begin
    init_done = l2_init;
    for (int s = 0; s < NSRC; s++) init_done = init_done && l1_init[s];
  end

endmodule
