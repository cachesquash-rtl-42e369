// cs_pkg: shared types and constants of the speculation-aware cache hierarchy.
//
// Every level of the hierarchy talks over the same three message kinds: a
// request (read or store, travelling towards memory), a response (a whole cache
// line, travelling towards the core) and a cancellation (travelling towards
// memory, naming a request that was squashed). Dirty victims travel as
// write-backs on a channel of their own. Lines are 64 bytes, as in the
// evaluated system; the core-side word is 64 bits. Physical addresses are
// 32-bit byte addresses (the width is this design's choice).
//
// The id field of a message names the requester at the level that issued it:
// at the core side it is the tracker's entry number (with a generation count),
// between L1 and L2 it is {source port, L1 MSHR index}, and between L2 and
// memory it is the L2 MSHR index. A response copies the id of its request,
// which is how CheckMSHR finds the MSHR a response belongs to.
package cs_pkg;

  localparam int unsigned ADDR_W     = 32;           // physical byte address
  localparam int unsigned LINE_BYTES = 64;           // cache line (block) size
  localparam int unsigned OFF_W      = $clog2(LINE_BYTES);
  localparam int unsigned BLK_W      = ADDR_W - OFF_W; // block address width
  localparam int unsigned LINE_W     = LINE_BYTES * 8;
  localparam int unsigned WORD_W     = 64;           // core access width
  localparam int unsigned WORDS      = LINE_W / WORD_W;
  localparam int unsigned WOFF_W     = $clog2(WORDS);
  localparam int unsigned ID_W       = 16;           // message id
  localparam int unsigned SRC_SHIFT  = 8;            // id[15:8] = crossbar source

  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [BLK_W-1:0]  blk_t;
  typedef logic [LINE_W-1:0] line_t;
  typedef logic [WORD_W-1:0] word_t;
  typedef logic [ID_W-1:0]   msg_id_t;

  typedef enum logic [1:0] {
    OP_LOAD  = 2'd0,   // speculative data read (cancellable)
    OP_FETCH = 2'd1,   // speculative instruction fetch (cancellable)
    OP_STORE = 2'd2    // committed store (never cancelled)
  } op_e;

  typedef struct packed {
    op_e                  op;
    addr_t                addr;
    msg_id_t              id;
    word_t                wdata;
    logic [WORD_W/8-1:0]  wmask;
  } req_t;

  typedef struct packed {
    addr_t   addr;
    msg_id_t id;
    line_t   line;
  } resp_t;

  typedef struct packed {
    addr_t   addr;
    msg_id_t id;
  } cancel_t;

  typedef struct packed {
    blk_t  blk;
    line_t line;
  } wb_t;

  // Core-side request, named by the instruction's sequence number.
  localparam int unsigned SEQ_W = 16;
  typedef logic [SEQ_W-1:0] seq_t;

  typedef struct packed {
    op_e                  op;
    addr_t                addr;
    seq_t                 seq;
    word_t                wdata;
    logic [WORD_W/8-1:0]  wmask;
  } core_req_t;

  typedef struct packed {
    seq_t  seq;
    word_t data;
  } core_resp_t;

  // True when sequence number s is the same as or younger than ref
  // (sequence numbers wrap; ages differ by less than half the range).
  function automatic logic seq_younger_eq(seq_t s, seq_t ref_seq);
    seq_t d;
    d = s - ref_seq;
    return !d[SEQ_W-1];
  endfunction

  // One MSHR target: a request waiting for the block.
  typedef struct packed {
    op_e                  op;
    msg_id_t              id;
    logic [WOFF_W-1:0]    woff;
    word_t                wdata;
    logic [WORD_W/8-1:0]  wmask;
  } target_t;

  // Operation applied to the MSHR file in one cycle.
  typedef enum logic [2:0] {
    MOP_NONE   = 3'd0,
    MOP_ALLOC  = 3'd1,   // allocate MSHR op_idx for op_blk with first target op_tgt
    MOP_ADD    = 3'd2,   // append target op_tgt to MSHR op_idx
    MOP_REMOVE = 3'd3,   // remove the target with id op_id from MSHR op_idx
    MOP_FILL   = 3'd4,   // response arrived for MSHR op_idx with line op_line
    MOP_POP    = 3'd5    // oldest target of filled MSHR op_idx has been answered
  } mshr_op_e;

  // Per-cycle event strobes of one cache, used to count what happened.
  typedef struct packed {
    logic hit;            // request hit in the cache
    logic miss_alloc;     // miss allocated a new MSHR
    logic coalesce;       // miss added as a target to a matching MSHR
    logic stall;          // head request could not proceed (no MSHR / target slot / output)
    logic fill;           // response passed CheckMSHR and filled the cache
    logic resp_discard;   // response failed CheckMSHR and was dropped
    logic cancel_remove;  // cancellation removed a target from an MSHR
    logic cancel_nomatch; // cancellation found no MSHR / target and was dropped
    logic cancel_fwd;     // MSHR emptied, cancellation sent downstream
    logic cancel_llc;     // MSHR emptied at the LLC, request to memory left running
    logic cancel_unsent;  // MSHR emptied before its request left; request withdrawn
    logic writeback;      // dirty victim (or forwarded write-back) sent downstream
  } cache_ev_t;

  // Byte-masked merge of a word into a line.
  function automatic line_t merge_word(line_t l, logic [WOFF_W-1:0] woff,
                                       word_t d, logic [WORD_W/8-1:0] m);
    line_t r;
    r = l;
    for (int b = 0; b < WORD_W/8; b++)
      if (m[b]) r[woff*WORD_W + b*8 +: 8] = d[b*8 +: 8];
    return r;
  endfunction

endpackage
