// mem_model: behavioural model of main memory behind the last-level cache.
// Not part of the design: memory is an unchanged external part. It accepts a
// read request or a write-back every cycle, answers reads in order after a
// fixed latency with the id of the request copied into the response, and knows
// nothing of cancellations. A block never written holds pattern(block), a
// value computed from its address; written blocks are kept in an associative
// array. Counts reads and write-backs for the testbench.
module mem_model
  import cs_pkg::*;
#(
  parameter int unsigned MEM_LAT = 100
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  req_valid,
  output logic  req_ready,
  input  req_t  req,
  input  logic  wb_valid,
  output logic  wb_ready,
  input  wb_t   wb,
  output logic  resp_valid,
  output resp_t resp,
  output int    n_reads,
  output int    n_wbs
);

  line_t store [blk_t];

  function automatic line_t pattern(blk_t b);
    line_t l;
    for (int w = 0; w < WORDS; w++)
      l[w*WORD_W +: WORD_W] = {8'hA5, 24'(b), 29'(b), 3'(w)};
    return l;
  endfunction

  function automatic line_t read_blk(blk_t b);
    if (store.exists(b)) return store[b];
    return pattern(b);
  endfunction

  typedef struct {
    longint due;
    req_t   r;
  } pend_t;
  pend_t  q [$];
  longint now;

  assign req_ready = 1'b1;
  assign wb_ready  = 1'b1;

  always @(posedge clk) begin
    if (!rst_n) begin
      now        <= 0;
      resp_valid <= 1'b0;
      n_reads    <= 0;
      n_wbs      <= 0;
      q.delete();
    end else begin
      now <= now + 1;
      if (wb_valid) begin
        store[wb.blk] = wb.line;
        n_wbs <= n_wbs + 1;
      end
      if (req_valid) begin
        q.push_back('{due: now + MEM_LAT, r: req});
        n_reads <= n_reads + 1;
      end
      resp_valid <= 1'b0;
      if (q.size() > 0 && q[0].due <= now) begin
        resp_valid <= 1'b1;
        resp.addr  <= q[0].r.addr;
        resp.id    <= q[0].r.id;
        resp.line  <= read_blk(q[0].r.addr[ADDR_W-1:OFF_W]);
        void'(q.pop_front());
      end
    end
  end

endmodule
