// cs_cache: one level of a speculation-aware (cancellation-handling) cache.
//
// The same module serves as private L1 instruction cache, private L1 data
// cache and shared last-level L2 cache. It is a set-associative, write-back,
// write-allocate cache with 64-byte lines and an MSHR file (mshr_file). What
// makes it speculation-aware is how it treats two inputs:
//
//   Cancellation (from upstream): MatchMSHR looks for an MSHR holding the
//     cancelled block. No match: the request already hit or was already served,
//     so the cancellation is dropped. Match: the cancelled target is removed. If
//     that leaves the MSHR empty, the MSHR is freed and the cancellation is
//     forwarded downstream (with this cache's MSHR index as id). An LLC
//     (IS_LLC=1) never forwards: memory does not understand cancellations, so
//     its response still arrives later and is dropped by CheckMSHR. If the
//     freed MSHR's own miss request has not yet left the output register, the
//     request is withdrawn instead of sending a cancellation behind it.
//   Response (from downstream): CheckMSHR compares the MSHR named by the
//     response id with the response address. Only a response whose MSHR is
//     still waiting for that block fills the cache; any other is dropped, so a
//     cancelled miss leaves tags, data and replacement state untouched. The
//     victim is chosen, and a dirty victim written back, only at fill time.
//
// Timing. Requests, cancellations and incoming write-backs enter together
// through an input pipeline of LAT stages (the access latency; a cancellation
// takes the same latency as a request). The head of the pipeline is processed
// in one cycle, one action per cycle in the priority order
//   fill > answer a target of a filled MSHR > cancellation > write-back > request.
// A hit answers LAT cycles after the request was accepted; the response output
// is combinational from the head and has no back-pressure. The pipeline stalls
// as a whole (all three *_ready low) while its head cannot proceed: no free
// MSHR, a full target list, a busy output register. Fills are never stalled.
// After reset the tag array is cleared one set per cycle; inputs are not
// accepted until then.
//
// What follows the paper: the cancellation/response flow chart, MatchMSHR and
// CheckMSHR in the same cycle, not forwarding from the LLC, victim handling at
// fill time, sizes and latencies (set from the top). This design's own choices:
// the pipeline and priority order, replacement (first invalid way, otherwise a
// per-set round-robin pointer), the write-back queue sized to the MSHR count,
// store misses fetched downstream as reads, a miss held back while a
// write-back of the same block is still queued, write-backs that miss in the
// LLC passed on to memory without allocation, and no coherence protocol.
module cs_cache
  import cs_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 32768,
  parameter int unsigned WAYS       = 2,
  parameter int unsigned LAT        = 1,
  parameter int unsigned NMSHR      = 4,
  parameter int unsigned NTGT       = 4,
  parameter bit          IS_LLC     = 1'b0
) (
  input  logic    clk,
  input  logic    rst_n,

  // upstream (towards the core)
  input  logic    up_req_valid,
  output logic    up_req_ready,
  input  req_t    up_req,
  input  logic    up_cancel_valid,
  output logic    up_cancel_ready,
  input  cancel_t up_cancel,
  input  logic    up_wb_valid,
  output logic    up_wb_ready,
  input  wb_t     up_wb,
  output logic    up_resp_valid,
  output resp_t   up_resp,

  // downstream (towards memory)
  output logic    dn_req_valid,
  input  logic    dn_req_ready,
  output req_t    dn_req,
  output logic    dn_cancel_valid,
  input  logic    dn_cancel_ready,
  output cancel_t dn_cancel,
  output logic    dn_wb_valid,
  input  logic    dn_wb_ready,
  output wb_t     dn_wb,
  input  logic    dn_resp_valid,
  input  resp_t   dn_resp,

  output logic      init_done,
  output cache_ev_t ev
);

  localparam int unsigned NSETS = SIZE_BYTES / (LINE_BYTES * WAYS);
  localparam int unsigned SET_W = (NSETS > 1) ? $clog2(NSETS) : 1;
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned TAG_W = BLK_W - SET_W;
  localparam int unsigned IDX_W = (NMSHR > 1) ? $clog2(NMSHR) : 1;
  localparam int unsigned CNT_W = $clog2(NMSHR + 1);
  localparam int unsigned WBQ   = NMSHR;              // write-back queue depth
  localparam int unsigned WBQ_W = (WBQ > 1) ? $clog2(WBQ) : 1;

  typedef struct packed {
    logic             valid;
    logic             dirty;
    logic [TAG_W-1:0] tag;
  } tag_ent_t;
  typedef tag_ent_t [WAYS-1:0] tag_row_t;

  typedef struct packed {
    logic    req_v;
    req_t    req;
    logic    can_v;
    cancel_t can;
    logic    wb_v;
    wb_t     wb;
  } slot_t;

  function automatic logic [SET_W-1:0] set_of(blk_t b);
    return SET_W'(b);
  endfunction
  function automatic logic [TAG_W-1:0] tag_of(blk_t b);
    return b[BLK_W-1 -: TAG_W];
  endfunction
  function automatic blk_t blk_of(addr_t a);
    return a[ADDR_W-1:OFF_W];
  endfunction
  function automatic addr_t addr_of(blk_t b);
    return {b, {OFF_W{1'b0}}};
  endfunction

  // ---------------- arrays ----------------
  tag_row_t         tagmem [NSETS];
  logic [WAY_W-1:0] rrmem  [NSETS];
  line_t            datamem[NSETS*WAYS];

  // ---------------- init sweep ----------------
  logic [SET_W:0] init_cnt_q;
  assign init_done = (init_cnt_q == (SET_W+1)'(NSETS));

  // ---------------- input pipeline ----------------
  slot_t pipe_q [LAT];
  slot_t head, in_slot, head_next;
  logic  advance;

  assign in_slot = '{req_v: up_req_valid, req: up_req,
                     can_v: up_cancel_valid, can: up_cancel,
                     wb_v: up_wb_valid, wb: up_wb};
  assign head = pipe_q[LAT-1];

  assign up_req_ready    = advance;
  assign up_cancel_ready = advance;
  assign up_wb_ready     = advance;

  // ---------------- output registers ----------------
  logic    dn_req_v_q, dn_can_v_q;
  req_t    dn_req_q;
  cancel_t dn_can_q;
  assign dn_req_valid    = dn_req_v_q;
  assign dn_req          = dn_req_q;
  assign dn_cancel_valid = dn_can_v_q;
  assign dn_cancel       = dn_can_q;

  wb_t              wbq_q [WBQ];
  logic [WBQ_W-1:0] wbq_rd_q, wbq_wr_q;
  logic [CNT_W-1:0] wbq_cnt_q;
  assign dn_wb_valid = wbq_cnt_q != '0;
  assign dn_wb       = wbq_q[wbq_rd_q];

  // ---------------- MSHR file ----------------
  logic             m_match_hit, m_match_filled, m_match_full;
  logic [IDX_W-1:0] m_match_idx, m_free_idx, m_drain_idx, m_chk_idx, m_op_idx;
  logic             m_chk_ok, m_rm_found, m_rm_empty, m_free_avail, m_drain_avail;
  logic [CNT_W-1:0] m_pending;
  target_t          m_chk_tgt [NTGT];
  logic [NTGT-1:0]  m_chk_tvalid;
  target_t          m_drain_tgt, m_op_tgt;
  line_t            m_drain_line, m_op_line;
  blk_t             m_drain_blk, m_match_blk, m_chk_blk;
  mshr_op_e         m_op;
  msg_id_t          m_op_id;

  mshr_file #(.NMSHR(NMSHR), .NTGT(NTGT)) u_mshr (
    .clk, .rst_n,
    .match_blk(m_match_blk), .match_hit(m_match_hit), .match_idx(m_match_idx),
    .match_filled(m_match_filled), .match_tgt_full(m_match_full),
    .chk_idx(m_chk_idx), .chk_blk(m_chk_blk), .chk_ok(m_chk_ok),
    .rm_found(m_rm_found), .rm_empty(m_rm_empty),
    .free_avail(m_free_avail), .free_idx(m_free_idx), .n_pending(m_pending),
    .chk_tgt(m_chk_tgt), .chk_tvalid(m_chk_tvalid),
    .drain_avail(m_drain_avail), .drain_idx(m_drain_idx), .drain_tgt(m_drain_tgt),
    .drain_line(m_drain_line), .drain_blk(m_drain_blk),
    .op(m_op), .op_idx(m_op_idx), .op_blk(m_match_blk), .op_tgt(m_op_tgt),
    .op_id(m_op_id), .op_line(m_op_line)
  );

  // ---------------- look-up ----------------
  typedef enum logic [2:0] {A_NONE, A_FILL, A_DRAIN, A_CANCEL, A_WB, A_REQ} act_e;
  act_e act;

  blk_t             fill_blk, lk_blk;
  logic [SET_W-1:0] rd_set;
  tag_row_t         rd_row;
  logic [WAY_W-1:0] rd_rr;
  logic             lk_hit;
  logic [WAY_W-1:0] lk_way, vic_way;
  logic             vic_inv;
  line_t            lk_line, vic_line;

  assign fill_blk = blk_of(dn_resp.addr);

  always_comb begin
    if (dn_resp_valid)                  act = A_FILL;
    else if (m_drain_avail)             act = A_DRAIN;
    else if (head.can_v)                act = A_CANCEL;
    else if (head.wb_v)                 act = A_WB;
    else if (head.req_v)                act = A_REQ;
    else                                act = A_NONE;
    if (!init_done)                     act = A_NONE;
  end

  always_comb begin
    unique case (act)
      A_CANCEL: lk_blk = blk_of(head.can.addr);
      A_WB:     lk_blk = head.wb.blk;
      default:  lk_blk = blk_of(head.req.addr);
    endcase
  end

  assign rd_set = (act == A_FILL) ? set_of(fill_blk) : set_of(lk_blk);
  assign rd_row = tagmem[rd_set];
  assign rd_rr  = rrmem[rd_set];

  always_comb begin
    lk_hit  = 1'b0;
    lk_way  = '0;
    vic_inv = 1'b0;
    vic_way = rd_rr;
    for (int w = 0; w < WAYS; w++) begin
      if (rd_row[w].valid && rd_row[w].tag == tag_of(lk_blk) && !lk_hit) begin
        lk_hit = 1'b1;
        lk_way = WAY_W'(w);
      end
    end
    for (int w = WAYS-1; w >= 0; w--)
      if (!rd_row[w].valid) begin
        vic_inv = 1'b1;
        vic_way = WAY_W'(w);
      end
  end
  assign lk_line  = datamem[{rd_set, lk_way}];
  assign vic_line = datamem[{rd_set, vic_way}];

  // stores waiting in the filling MSHR are merged into the line, oldest first
  line_t fill_line;
  logic  fill_dirty;
  always_comb begin
    fill_line  = dn_resp.line;
    fill_dirty = 1'b0;
    for (int t = 0; t < NTGT; t++)
      if (m_chk_tvalid[t] && m_chk_tgt[t].op == OP_STORE) begin
        fill_line  = merge_word(fill_line, m_chk_tgt[t].woff, m_chk_tgt[t].wdata,
                                m_chk_tgt[t].wmask);
        fill_dirty = 1'b1;
      end
  end

  // ---------------- one action per cycle ----------------
  logic     head_can_done, head_wb_done, head_req_done;
  logic     wbq_push;
  wb_t      wbq_in;
  logic     load_dn_req, kill_dn_req, load_dn_can;
  req_t     dn_req_new;
  cancel_t  dn_can_new;
  logic     tag_we, data_we, rr_we;
  tag_row_t tag_wrow;
  line_t    data_wline;
  logic [WAY_W-1:0] data_wway;
  logic [WAY_W-1:0] rr_wval;
  logic     room;           // space for one more miss or forwarded write-back
  logic     dn_req_free, dn_can_free;

  assign room        = (32'(m_pending) + 32'(wbq_cnt_q)) < WBQ;

  // a miss must not overtake a write-back of the same block still queued here
  logic wbq_has_blk;
  always_comb begin
    wbq_has_blk = 1'b0;
    for (int q = 0; q < WBQ; q++)
      if (32'((32'(q) + WBQ - 32'(wbq_rd_q)) % WBQ) < 32'(wbq_cnt_q) && wbq_q[q].blk == lk_blk)
        wbq_has_blk = 1'b1;
  end
  assign dn_req_free = !dn_req_v_q || dn_req_ready;
  assign dn_can_free = !dn_can_v_q || dn_cancel_ready;
  assign m_chk_idx   = IDX_W'(dn_resp.id);
  assign m_chk_blk   = fill_blk;

  always_comb begin
    ev            = '0;
    head_can_done = 1'b0;
    head_wb_done  = 1'b0;
    head_req_done = 1'b0;
    wbq_push      = 1'b0;
    wbq_in        = '0;
    load_dn_req   = 1'b0;
    kill_dn_req   = 1'b0;
    load_dn_can   = 1'b0;
    dn_req_new    = '0;
    dn_can_new    = '0;
    tag_we        = 1'b0;
    tag_wrow      = rd_row;
    data_we       = 1'b0;
    data_wway     = lk_way;
    data_wline    = lk_line;
    rr_we         = 1'b0;
    rr_wval       = rd_rr;
    up_resp_valid = 1'b0;
    up_resp       = '0;
    m_op          = MOP_NONE;
    m_op_idx      = m_match_idx;
    m_op_tgt      = '0;
    m_op_id       = head.can.id;
    m_op_line     = fill_line;
    m_match_blk   = lk_blk;

    unique case (act)
      // ---- response from downstream: CheckMSHR ----
      A_FILL: begin
        m_op_idx = m_chk_idx;
        if (m_chk_ok) begin
          ev.fill   = 1'b1;
          m_op      = MOP_FILL;
          // evict the victim now that the response is here
          if (!vic_inv && rd_row[vic_way].dirty) begin
            wbq_push      = 1'b1;
            wbq_in.blk    = {rd_row[vic_way].tag, rd_set};
            wbq_in.line   = vic_line;
            ev.writeback  = 1'b1;
          end
          tag_we                  = 1'b1;
          tag_wrow[vic_way].valid = 1'b1;
          tag_wrow[vic_way].dirty = fill_dirty;
          tag_wrow[vic_way].tag   = tag_of(fill_blk);
          data_we    = 1'b1;
          data_wway  = vic_way;
          data_wline = fill_line;
          if (!vic_inv) begin
            rr_we   = 1'b1;
            rr_wval = (vic_way == WAY_W'(WAYS-1)) ? '0 : vic_way + 1'b1;
          end
        end else begin
          ev.resp_discard = 1'b1;   // stale: its request was cancelled
        end
      end

      // ---- answer one target of a filled MSHR ----
      A_DRAIN: begin
        m_op          = MOP_POP;
        m_op_idx      = m_drain_idx;
        up_resp_valid = 1'b1;
        up_resp.addr  = addr_of(m_drain_blk);
        up_resp.id    = m_drain_tgt.id;
        up_resp.line  = m_drain_line;
      end

      // ---- cancellation: MatchMSHR, remove, forward if empty ----
      A_CANCEL: begin
        m_op_idx = m_match_idx;
        m_op_id  = head.can.id;
        if (!m_match_hit || !m_rm_found) begin
          ev.cancel_nomatch = 1'b1;
          head_can_done     = 1'b1;
        end else if (!m_rm_empty || m_match_filled) begin
          ev.cancel_remove = 1'b1;
          m_op             = MOP_REMOVE;
          head_can_done    = 1'b1;
        end else if (IS_LLC) begin
          ev.cancel_remove = 1'b1;
          ev.cancel_llc    = 1'b1;
          m_op             = MOP_REMOVE;
          head_can_done    = 1'b1;
        end else if (dn_req_v_q && !dn_req_ready && IDX_W'(dn_req_q.id) == m_match_idx) begin
          ev.cancel_remove = 1'b1;
          ev.cancel_unsent = 1'b1;
          kill_dn_req      = 1'b1;
          m_op             = MOP_REMOVE;
          head_can_done    = 1'b1;
        end else if (dn_can_free) begin
          ev.cancel_remove = 1'b1;
          ev.cancel_fwd    = 1'b1;
          load_dn_can      = 1'b1;
          dn_can_new.addr  = addr_of(lk_blk);
          dn_can_new.id    = msg_id_t'(m_match_idx);
          m_op             = MOP_REMOVE;
          head_can_done    = 1'b1;
        end else begin
          ev.stall = 1'b1;
        end
      end

      // ---- write-back from upstream ----
      A_WB: begin
        if (lk_hit) begin
          tag_we                 = 1'b1;
          tag_wrow[lk_way].dirty = 1'b1;
          data_we                = 1'b1;
          data_wway              = lk_way;
          data_wline             = head.wb.line;
          head_wb_done           = 1'b1;
        end else if (room) begin
          wbq_push     = 1'b1;
          wbq_in       = head.wb;
          ev.writeback = 1'b1;
          head_wb_done = 1'b1;
        end else begin
          ev.stall = 1'b1;
        end
      end

      // ---- request from upstream ----
      A_REQ: begin
        m_op_tgt.op    = head.req.op;
        m_op_tgt.id    = head.req.id;
        m_op_tgt.woff  = head.req.addr[OFF_W-1 -: WOFF_W];
        m_op_tgt.wdata = head.req.wdata;
        m_op_tgt.wmask = head.req.wmask;
        if (lk_hit) begin
          ev.hit        = 1'b1;
          head_req_done = 1'b1;
          up_resp_valid = 1'b1;
          up_resp.addr  = head.req.addr;
          up_resp.id    = head.req.id;
          up_resp.line  = lk_line;
          if (head.req.op == OP_STORE) begin
            tag_we                 = 1'b1;
            tag_wrow[lk_way].dirty = 1'b1;
            data_we                = 1'b1;
            data_wway              = lk_way;
            data_wline             = merge_word(lk_line, m_op_tgt.woff,
                                                head.req.wdata, head.req.wmask);
            up_resp.line           = data_wline;
          end
        end else if (m_match_hit) begin
          if (!m_match_filled && !m_match_full) begin
            ev.coalesce   = 1'b1;
            m_op          = MOP_ADD;
            m_op_idx      = m_match_idx;
            head_req_done = 1'b1;
          end else begin
            ev.stall = 1'b1;
          end
        end else if (m_free_avail && room && dn_req_free && !wbq_has_blk) begin
          ev.miss_alloc   = 1'b1;
          m_op            = MOP_ALLOC;
          m_op_idx        = m_free_idx;
          head_req_done   = 1'b1;
          load_dn_req     = 1'b1;
          dn_req_new.op   = (head.req.op == OP_STORE) ? OP_LOAD : head.req.op;
          dn_req_new.addr = addr_of(lk_blk);
          dn_req_new.id   = msg_id_t'(m_free_idx);
        end else begin
          ev.stall = 1'b1;
        end
      end
      default: ;
    endcase
  end

  // the head is finished when nothing is left in it after this cycle
  always_comb begin
    head_next = head;
    if (head_can_done) head_next.can_v = 1'b0;
    if (head_wb_done)  head_next.wb_v  = 1'b0;
    if (head_req_done) head_next.req_v = 1'b0;
  end
  assign advance = init_done && !head_next.can_v && !head_next.wb_v && !head_next.req_v;

  // ---------------- sequential ----------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int s = 0; s < LAT; s++) begin
        pipe_q[s].req_v <= 1'b0;
        pipe_q[s].can_v <= 1'b0;
        pipe_q[s].wb_v  <= 1'b0;
      end
    end else if (advance) begin
      pipe_q[0] <= in_slot;
      for (int s = 1; s < LAT; s++) pipe_q[s] <= pipe_q[s-1];
    end else begin
      pipe_q[LAT-1] <= head_next;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      dn_req_v_q <= 1'b0;
      dn_can_v_q <= 1'b0;
      wbq_cnt_q  <= '0;
      wbq_rd_q   <= '0;
      wbq_wr_q   <= '0;
      init_cnt_q <= '0;
    end else begin
      if (!init_done) init_cnt_q <= init_cnt_q + 1'b1;

      if (load_dn_req) begin
        dn_req_v_q <= 1'b1;
        dn_req_q   <= dn_req_new;
      end else if (kill_dn_req || dn_req_ready) begin
        dn_req_v_q <= 1'b0;
      end

      if (load_dn_can) begin
        dn_can_v_q <= 1'b1;
        dn_can_q   <= dn_can_new;
      end else if (dn_cancel_ready) begin
        dn_can_v_q <= 1'b0;
      end

      if (wbq_push) begin
        wbq_q[wbq_wr_q] <= wbq_in;
        wbq_wr_q        <= (wbq_wr_q == WBQ_W'(WBQ-1)) ? '0 : wbq_wr_q + 1'b1;
      end
      if (dn_wb_valid && dn_wb_ready)
        wbq_rd_q <= (wbq_rd_q == WBQ_W'(WBQ-1)) ? '0 : wbq_rd_q + 1'b1;
      wbq_cnt_q <= wbq_cnt_q + CNT_W'(wbq_push) - CNT_W'(dn_wb_valid && dn_wb_ready);
    end
  end

  // arrays: the init sweep clears one set per cycle
  always_ff @(posedge clk) begin
    if (!init_done) begin
      tagmem[init_cnt_q[SET_W-1:0]] <= '0;
      rrmem[init_cnt_q[SET_W-1:0]]  <= '0;
    end else begin
      if (tag_we) tagmem[rd_set] <= tag_wrow;
      if (rr_we)  rrmem[rd_set]  <= rr_wval;
    end
    if (init_done && data_we) datamem[{rd_set, data_wway}] <= data_wline;
  end

  // ---------------- rules ----------------
  a_wbq_room: assert property (@(posedge clk) disable iff (!rst_n)
    wbq_push |-> (wbq_cnt_q < CNT_W'(WBQ)) || (dn_wb_valid && dn_wb_ready));
  a_req_hold: assert property (@(posedge clk) disable iff (!rst_n)
    dn_req_valid && !dn_req_ready && !kill_dn_req |=> dn_req_valid && $stable(dn_req));
  a_can_hold: assert property (@(posedge clk) disable iff (!rst_n)
    dn_cancel_valid && !dn_cancel_ready |=> dn_cancel_valid && $stable(dn_cancel));

endmodule
