// l2_xbar: the interconnect between the private L1 caches and the shared L2.
//
// Each L1 (source s) has three channels towards the L2 - requests,
// cancellations and write-backs - and receives responses. Requests,
// cancellations and write-backs are arbitrated independently, each with its
// own round-robin pointer, so a cancellation never waits behind a request of
// another cache and a response can travel up while a cancellation travels
// down. On the way down the source number is written into the upper byte of
// the message id (id[15:8] = s, id[7:0] = the L1's MSHR index); on the way up
// the response is sent to the source named there and that byte is cleared,
// so every L1 sees its own MSHR index again.
//
// Timing: combinational. A channel's grant follows from its valid inputs and
// the L2's ready in the same cycle; the round-robin pointer moves past the
// granted source after each transfer. Responses have no back-pressure.
// Most output bits are inputs routed through a multiplexer or, for the
// response line, wired to every source at once (only valid differs); the
// upper id byte of each response is constant zero by design.
// The paper only requires that the bus have separate channels so that
// cancellations and responses can cross; the arbitration is this design's.
module l2_xbar
  import cs_pkg::*;
#(
  parameter int unsigned NSRC = 8
) (
  input  logic    clk,
  input  logic    rst_n,

  input  logic    s_req_valid    [NSRC],
  output logic    s_req_ready    [NSRC],
  input  req_t    s_req          [NSRC],
  input  logic    s_cancel_valid [NSRC],
  output logic    s_cancel_ready [NSRC],
  input  cancel_t s_cancel       [NSRC],
  input  logic    s_wb_valid     [NSRC],
  output logic    s_wb_ready     [NSRC],
  input  wb_t     s_wb           [NSRC],
  output logic    s_resp_valid   [NSRC],
  output resp_t   s_resp         [NSRC],

  output logic    m_req_valid,
  input  logic    m_req_ready,
  output req_t    m_req,
  output logic    m_cancel_valid,
  input  logic    m_cancel_ready,
  output cancel_t m_cancel,
  output logic    m_wb_valid,
  input  logic    m_wb_ready,
  output wb_t     m_wb,
  input  logic    m_resp_valid,
  input  resp_t   m_resp
);

  localparam int unsigned SRC_W = (NSRC > 1) ? $clog2(NSRC) : 1;

  if (NSRC > (1 << (ID_W - SRC_SHIFT))) begin : g_src_check
    $error("l2_xbar: too many sources for the id field");
  end

  // round-robin pick: first valid source at or after ptr
  function automatic logic [SRC_W:0] rr_pick(logic [NSRC-1:0] v, logic [SRC_W-1:0] ptr);
    logic [SRC_W:0] r;
    r = '0;
    for (int k = NSRC-1; k >= 0; k--) begin
      int unsigned s;
      s = (int'(ptr) + k) % NSRC;
      if (v[s]) r = {1'b1, SRC_W'(s)};
    end
    return r;
  endfunction

  logic [NSRC-1:0]  req_v, can_v, wb_v;
  logic [SRC_W:0]   req_g, can_g, wb_g;
  logic [SRC_W-1:0] req_ptr_q, can_ptr_q, wb_ptr_q;

  always_comb
    for (int s = 0; s < NSRC; s++) begin
      req_v[s] = s_req_valid[s];
      can_v[s] = s_cancel_valid[s];
      wb_v[s]  = s_wb_valid[s];
    end

  assign req_g = rr_pick(req_v, req_ptr_q);
  assign can_g = rr_pick(can_v, can_ptr_q);
  assign wb_g  = rr_pick(wb_v,  wb_ptr_q);

  always_comb begin
    m_req_valid    = req_g[SRC_W];
    m_req          = s_req[req_g[SRC_W-1:0]];
    m_req.id       = {8'(req_g[SRC_W-1:0]), s_req[req_g[SRC_W-1:0]].id[SRC_SHIFT-1:0]};
    m_cancel_valid = can_g[SRC_W];
    m_cancel       = s_cancel[can_g[SRC_W-1:0]];
    m_cancel.id    = {8'(can_g[SRC_W-1:0]), s_cancel[can_g[SRC_W-1:0]].id[SRC_SHIFT-1:0]};
    m_wb_valid     = wb_g[SRC_W];
    m_wb           = s_wb[wb_g[SRC_W-1:0]];
    for (int s = 0; s < NSRC; s++) begin
      s_req_ready[s]    = m_req_ready    && req_g[SRC_W] && req_g[SRC_W-1:0] == SRC_W'(s);
      s_cancel_ready[s] = m_cancel_ready && can_g[SRC_W] && can_g[SRC_W-1:0] == SRC_W'(s);
      s_wb_ready[s]     = m_wb_ready     && wb_g[SRC_W]  && wb_g[SRC_W-1:0]  == SRC_W'(s);
      s_resp_valid[s]   = m_resp_valid && m_resp.id[ID_W-1:SRC_SHIFT] == 8'(s);
      s_resp[s]         = m_resp;
      s_resp[s].id      = {8'h00, m_resp.id[SRC_SHIFT-1:0]};
    end
  end

  function automatic logic [SRC_W-1:0] next_src(logic [SRC_W-1:0] s);
    return (s == SRC_W'(NSRC-1)) ? '0 : s + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      req_ptr_q <= '0;
      can_ptr_q <= '0;
      wb_ptr_q  <= '0;
    end else begin
      if (m_req_valid && m_req_ready)       req_ptr_q <= next_src(req_g[SRC_W-1:0]);
      if (m_cancel_valid && m_cancel_ready) can_ptr_q <= next_src(can_g[SRC_W-1:0]);
      if (m_wb_valid && m_wb_ready)         wb_ptr_q  <= next_src(wb_g[SRC_W-1:0]);
    end
  end

endmodule
