// spec_req_tracker: the core-side half of cancellation. It sits between a
// requester of the core (the load-store unit, or instruction fetch) and that
// requester's L1 cache and remembers every memory request that is still
// waiting for its response.
//
// When the core squashes (squash_valid, squash_seq), every outstanding load or
// fetch whose sequence number is the same as or younger than squash_seq is
// marked for cancellation, and one cancellation per cycle is sent to the L1
// (address and the request's id), oldest entry number first. The entry is
// freed when its cancellation is accepted. A response that arrives for a
// squashed request before its cancellation leaves is dropped (then nothing
// is outstanding any more and no cancellation is sent). Stores reach the cache
// only after commit and are never cancelled.
//
// Request ids are {generation, entry}: the generation count advances each
// time an entry is reused, so a response that was already in flight when its
// request was cancelled cannot be mistaken for the response to a later
// request in the same entry; such stale responses are dropped.
//
// Timing: a request passes to the L1 in the cycle it is accepted (no
// register); a request the squash hits in that very cycle is dropped without
// being sent. Responses are delivered to the core in the cycle they arrive.
// The paper gives the behaviour (on squash, cancel any outstanding request of
// the squashed instructions); the entry table, the generation count and the
// one-cancellation-per-cycle order are this design's choices.
module spec_req_tracker
  import cs_pkg::*;
#(
  parameter int unsigned NENT  = 8,     // outstanding requests
  parameter int unsigned GEN_W = 2
) (
  input  logic       clk,
  input  logic       rst_n,

  // core side
  input  logic       core_req_valid,
  output logic       core_req_ready,
  input  core_req_t  core_req,
  input  logic       squash_valid,
  input  seq_t       squash_seq,
  output logic       core_resp_valid,
  output core_resp_t core_resp,

  // L1 side
  output logic       l1_req_valid,
  input  logic       l1_req_ready,
  output req_t       l1_req,
  output logic       l1_cancel_valid,
  input  logic       l1_cancel_ready,
  output cancel_t    l1_cancel,
  input  logic       l1_resp_valid,
  input  resp_t      l1_resp,

  output logic       ev_cancel_sent,   // a cancellation left for the L1
  output logic       ev_resp_dropped   // response for a squashed or stale request
);

  localparam int unsigned IDX_W = (NENT > 1) ? $clog2(NENT) : 1;

  typedef enum logic [1:0] {E_FREE, E_OUT, E_CANCEL} ent_state_e;

  ent_state_e        st_q   [NENT];
  logic [GEN_W-1:0]  gen_q  [NENT];
  seq_t              seq_q  [NENT];
  addr_t             addr_q [NENT];
  op_e               op_q   [NENT];

  // ---------------- allocation ----------------
  logic             free_avail, new_squashed;
  logic [IDX_W-1:0] free_idx;
  always_comb begin
    free_avail = 1'b0;
    free_idx   = '0;
    for (int i = NENT-1; i >= 0; i--)
      if (st_q[i] == E_FREE) begin
        free_avail = 1'b1;
        free_idx   = IDX_W'(i);
      end
  end

  assign new_squashed   = squash_valid && core_req.op != OP_STORE &&
                          seq_younger_eq(core_req.seq, squash_seq);
  assign l1_req_valid   = core_req_valid && free_avail && !new_squashed;
  assign core_req_ready = free_avail && (l1_req_ready || new_squashed);

  always_comb begin
    l1_req       = '0;
    l1_req.op    = core_req.op;
    l1_req.addr  = core_req.addr;
    l1_req.id    = msg_id_t'({gen_q[free_idx] + 1'b1, free_idx});
    l1_req.wdata = core_req.wdata;
    l1_req.wmask = core_req.wmask;
  end
  logic issue;
  assign issue = l1_req_valid && l1_req_ready;

  // ---------------- cancellation ----------------
  logic             can_avail;
  logic [IDX_W-1:0] can_idx;
  always_comb begin
    can_avail = 1'b0;
    can_idx   = '0;
    for (int i = NENT-1; i >= 0; i--)
      if (st_q[i] == E_CANCEL) begin
        can_avail = 1'b1;
        can_idx   = IDX_W'(i);
      end
  end
  assign l1_cancel_valid = can_avail;
  assign l1_cancel.addr  = addr_q[can_idx];
  assign l1_cancel.id    = msg_id_t'({gen_q[can_idx], can_idx});
  assign ev_cancel_sent  = l1_cancel_valid && l1_cancel_ready;

  // ---------------- responses ----------------
  logic [IDX_W-1:0] r_idx;
  logic [GEN_W-1:0] r_gen;
  logic             r_live, r_squash_now;
  assign r_idx        = l1_resp.id[IDX_W-1:0];
  assign r_gen        = l1_resp.id[IDX_W +: GEN_W];
  assign r_live       = l1_resp_valid && st_q[r_idx] != E_FREE && gen_q[r_idx] == r_gen;
  assign r_squash_now = squash_valid && op_q[r_idx] != OP_STORE &&
                        seq_younger_eq(seq_q[r_idx], squash_seq);

  assign core_resp_valid = r_live && st_q[r_idx] == E_OUT && !r_squash_now;
  assign core_resp.seq   = seq_q[r_idx];
  assign core_resp.data  = l1_resp.line[addr_q[r_idx][OFF_W-1 -: WOFF_W]*WORD_W +: WORD_W];
  assign ev_resp_dropped = l1_resp_valid && !core_resp_valid;

  // ---------------- state ----------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < NENT; i++) begin
        st_q[i]  <= E_FREE;
        gen_q[i] <= '0;
      end
    end else begin
      // squash: outstanding loads and fetches of squashed instructions
      if (squash_valid)
        for (int i = 0; i < NENT; i++)
          if (st_q[i] == E_OUT && op_q[i] != OP_STORE &&
              seq_younger_eq(seq_q[i], squash_seq))
            st_q[i] <= E_CANCEL;
      if (ev_cancel_sent)
        st_q[can_idx] <= E_FREE;
      if (r_live)
        st_q[r_idx] <= E_FREE;
      if (issue) begin
        st_q[free_idx]   <= E_OUT;
        gen_q[free_idx]  <= gen_q[free_idx] + 1'b1;
        seq_q[free_idx]  <= core_req.seq;
        addr_q[free_idx] <= core_req.addr;
        op_q[free_idx]   <= core_req.op;
      end
    end
  end

  // the id must fit below the source field the crossbar adds
  if (IDX_W + GEN_W > SRC_SHIFT) begin : g_id_check
    $error("spec_req_tracker: entry id does not fit in %0d bits", SRC_SHIFT);
  end

endmodule
