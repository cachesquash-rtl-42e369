// mshr_file: the miss status holding registers of one cache, with the two
// searches a speculation-aware cache needs.
//
// Each MSHR owns one block address and keeps, in arrival order, up to NTGT
// targets (the requests waiting for that block). A miss to a block that
// already has an MSHR is added to it as a target; otherwise a free MSHR is
// allocated. Two look-ups run combinationally every cycle:
//   * MatchMSHR (match_*): searches all MSHRs for a block address. It serves
//     both incoming misses and incoming cancellations.
//   * CheckMSHR (chk_*):   given the MSHR index copied into a response and the
//     response's block address, says whether that MSHR is still allocated to
//     that block. A response that fails the check belongs to a cancelled
//     request whose MSHR was freed (and maybe reused) and must be dropped.
// Removing a cancelled target reports whether the MSHR became empty; an empty
// MSHR is freed at once and the cache then forwards the cancellation.
//
// After a response passes CheckMSHR the MSHR is marked filled and keeps the
// line, so its targets can be answered one per cycle (op_pop); it is freed
// when its last target is popped or cancelled.
//
// Interface: one operation per cycle on op/op_idx/op_*; all outputs are
// combinational views of the registered state, updates take effect at the next
// clock edge. The paper describes MatchMSHR, target removal, the empty test and
// CheckMSHR; the target ordering, the fill buffer and the one-operation-per-
// cycle interface are this design's choices.
module mshr_file
  import cs_pkg::*;
#(
  parameter int unsigned NMSHR = 4,
  parameter int unsigned NTGT  = 4,
  localparam int unsigned IDX_W = (NMSHR > 1) ? $clog2(NMSHR) : 1,
  localparam int unsigned CNT_W = $clog2(NMSHR + 1)
) (
  input  logic             clk,
  input  logic             rst_n,

  // MatchMSHR
  input  blk_t             match_blk,
  output logic             match_hit,
  output logic [IDX_W-1:0] match_idx,
  output logic             match_filled,
  output logic             match_tgt_full,

  // CheckMSHR
  input  logic [IDX_W-1:0] chk_idx,
  input  blk_t             chk_blk,
  output logic             chk_ok,

  // target removal look-up on op_idx for op_id (valid with op == MOP_REMOVE)
  output logic             rm_found,
  output logic             rm_empty,

  // free MSHR and occupancy
  output logic             free_avail,
  output logic [IDX_W-1:0] free_idx,
  output logic [CNT_W-1:0] n_pending,     // allocated and not yet filled

  // targets of MSHR chk_idx (for merging stores at fill time)
  output target_t          chk_tgt   [NTGT],
  output logic [NTGT-1:0]  chk_tvalid,

  // oldest target of the lowest-numbered filled MSHR
  output logic             drain_avail,
  output logic [IDX_W-1:0] drain_idx,
  output target_t          drain_tgt,
  output line_t            drain_line,
  output blk_t             drain_blk,

  // operation
  input  mshr_op_e         op,
  input  logic [IDX_W-1:0] op_idx,
  input  blk_t             op_blk,
  input  target_t          op_tgt,
  input  msg_id_t          op_id,
  input  line_t            op_line
);

  logic [NMSHR-1:0]  valid_q, filled_q;
  blk_t              blk_q    [NMSHR];
  target_t           tgt_q    [NMSHR][NTGT];
  logic [NTGT-1:0]   tvalid_q [NMSHR];
  line_t             line_q   [NMSHR];

  // ---------------- MatchMSHR ----------------
  always_comb begin
    match_hit      = 1'b0;
    match_idx      = '0;
    for (int i = 0; i < NMSHR; i++)
      if (valid_q[i] && blk_q[i] == match_blk && !match_hit) begin
        match_hit = 1'b1;
        match_idx = IDX_W'(i);
      end
    match_filled   = filled_q[match_idx];
    match_tgt_full = tvalid_q[match_idx][NTGT-1];
  end

  // ---------------- CheckMSHR ----------------
  assign chk_ok     = valid_q[chk_idx] && !filled_q[chk_idx] && blk_q[chk_idx] == chk_blk;
  assign chk_tgt    = tgt_q[chk_idx];
  assign chk_tvalid = tvalid_q[chk_idx];

  // ---------------- free MSHR / occupancy ----------------
  always_comb begin
    free_avail = 1'b0;
    free_idx   = '0;
    n_pending  = '0;
    for (int i = NMSHR-1; i >= 0; i--)
      if (!valid_q[i]) begin
        free_avail = 1'b1;
        free_idx   = IDX_W'(i);
      end
    for (int i = 0; i < NMSHR; i++)
      if (valid_q[i] && !filled_q[i]) n_pending = n_pending + 1'b1;
  end

  // ---------------- drain ----------------
  always_comb begin
    drain_avail = 1'b0;
    drain_idx   = '0;
    for (int i = NMSHR-1; i >= 0; i--)
      if (valid_q[i] && filled_q[i]) begin
        drain_avail = 1'b1;
        drain_idx   = IDX_W'(i);
      end
    drain_tgt  = tgt_q[drain_idx][0];
    drain_line = line_q[drain_idx];
    drain_blk  = blk_q[drain_idx];
  end

  // ---------------- target removal look-up ----------------
  logic [$clog2(NTGT+1)-1:0] rm_pos;
  always_comb begin
    rm_found = 1'b0;
    rm_pos   = '0;
    for (int t = 0; t < NTGT; t++)
      if (tvalid_q[op_idx][t] && tgt_q[op_idx][t].id == op_id && !rm_found) begin
        rm_found = 1'b1;
        rm_pos   = ($clog2(NTGT+1))'(t);
      end
    // empty after removal: the removed target was the only one
    rm_empty = rm_found && ($countones(tvalid_q[op_idx]) == 1);
  end

  // ---------------- state update ----------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      valid_q  <= '0;
      filled_q <= '0;
      for (int i = 0; i < NMSHR; i++) tvalid_q[i] <= '0;
    end else begin
      unique case (op)
        MOP_ALLOC: begin
          valid_q[op_idx]     <= 1'b1;
          filled_q[op_idx]    <= 1'b0;
          blk_q[op_idx]       <= op_blk;
          tgt_q[op_idx][0]    <= op_tgt;
          tvalid_q[op_idx]    <= NTGT'(1);
        end
        MOP_ADD: begin
          // targets are kept packed from slot 0: append at the first free slot
          for (int t = 0; t < NTGT; t++)
            if (!tvalid_q[op_idx][t] && (t == 0 || tvalid_q[op_idx][t-1])) begin
              tgt_q[op_idx][t]    <= op_tgt;
              tvalid_q[op_idx][t] <= 1'b1;
            end
        end
        MOP_REMOVE: begin
          if (rm_found) begin
            for (int t = 0; t < NTGT; t++)
              if (t >= int'(rm_pos)) begin
                if (t < NTGT-1) begin
                  tgt_q[op_idx][t]    <= tgt_q[op_idx][t+1];
                  tvalid_q[op_idx][t] <= tvalid_q[op_idx][t+1];
                end else
                  tvalid_q[op_idx][t] <= 1'b0;
              end
            if (rm_empty) begin
              valid_q[op_idx]  <= 1'b0;
              filled_q[op_idx] <= 1'b0;
            end
          end
        end
        MOP_FILL: begin
          filled_q[op_idx] <= 1'b1;
          line_q[op_idx]   <= op_line;
        end
        MOP_POP: begin
          for (int t = 0; t < NTGT-1; t++) begin
            tgt_q[op_idx][t]    <= tgt_q[op_idx][t+1];
            tvalid_q[op_idx][t] <= tvalid_q[op_idx][t+1];
          end
          tvalid_q[op_idx][NTGT-1] <= 1'b0;
          if ($countones(tvalid_q[op_idx]) == 1) begin
            valid_q[op_idx]  <= 1'b0;
            filled_q[op_idx] <= 1'b0;
          end
        end
        default: ;
      endcase
    end
  end

  // An operation must name an MSHR in the right state.
  a_alloc_free: assert property (@(posedge clk) disable iff (!rst_n)
    op == MOP_ALLOC |-> !valid_q[op_idx]);
  a_add_room: assert property (@(posedge clk) disable iff (!rst_n)
    op == MOP_ADD |-> valid_q[op_idx] && !tvalid_q[op_idx][NTGT-1]);
  a_fill_pending: assert property (@(posedge clk) disable iff (!rst_n)
    op == MOP_FILL |-> valid_q[op_idx] && !filled_q[op_idx]);
  a_pop_filled: assert property (@(posedge clk) disable iff (!rst_n)
    op == MOP_POP |-> valid_q[op_idx] && filled_q[op_idx]);

endmodule
