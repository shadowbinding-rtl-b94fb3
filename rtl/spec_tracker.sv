// spec_tracker: decides, per load, when it stops being speculative, and
// broadcasts the loads that do.
//
// Only control shadows (unresolved older branches) and data shadows (older
// stores whose address is not yet known, so a store-to-load forwarding error
// is still possible) are tracked. Each load-queue entry keeps
//   * a branch mask: the unresolved branches older than the load. A branch
//     resolution clears its bit in every entry (the host core's squash
//     mechanism already holds these masks);
//   * a store-dependence mask: the store-queue entries older than the load. A
//     load is free of data shadows once every one of these stores has its
//     address and has therefore been checked against the load;
//   * an error bit, set when the host reports a forwarding error for the load;
//     such a load never becomes non-speculative and waits for its flush.
// Shadows resolve in order, so the visibility point is a pointer (ns_ptr) that
// walks from the oldest speculative load towards the tail, passing a load
// whose two masks are empty. It passes at most MEM_WIDTH loads per cycle: each
// passed load is broadcast on one of MEM_WIDTH lanes the next cycle, the limit
// of parallel broadcasts being the memory width of the core.
//
// Interface: loads and stores are allocated in program order at dispatch, up
// to CORE_WIDTH per cycle (alloc_*); the assigned indices come back
// combinationally (alloc_ldq_idx / alloc_stq_idx). Store address generation
// (sta_*), commits (ld_commit / st_commit counts), branch resolution
// (br_resolve_mask) and flushes (rollback_*: new tails taken from the branch
// snapshot or from the flushed load) come from the host core.
// Timing: all state is registered; a shadow resolved in cycle t lets ns_ptr
// move at the edge ending cycle t+1 (one cycle to see the cleared mask), and
// the broadcast (bcast_*) and the ld_nonspec bit are visible in the cycle
// after the pointer moved past the load.
// The masks and the in-order pointer are this design's choice of mechanism;
// the text asks only for a way to tell whether a load could still be squashed
// by a branch or by a forwarding error.
module spec_tracker
  import sb_pkg::*;
#(
  parameter int unsigned CORE_WIDTH  = 4,
  parameter int unsigned MEM_WIDTH   = 2,
  parameter int unsigned STQ_ENTRIES = 32,
  parameter int unsigned MAX_BR      = 20
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // dispatch, program order within the group
  input  logic [CORE_WIDTH-1:0]        alloc_ld,
  input  logic [CORE_WIDTH-1:0]        alloc_st,
  input  logic [CORE_WIDTH-1:0][MAX_BR-1:0] alloc_br_mask,
  output ldq_idx_t [CORE_WIDTH-1:0]    alloc_ldq_idx,
  output logic [CORE_WIDTH-1:0][$clog2(STQ_ENTRIES)-1:0] alloc_stq_idx,
  output logic                         ldq_full,
  output logic                         stq_full,
  // store address generated (and checked against younger loads)
  input  logic [MEM_WIDTH-1:0]         sta_valid,
  input  logic [MEM_WIDTH-1:0][$clog2(STQ_ENTRIES)-1:0] sta_idx,
  // forwarding error reported by the load-store unit
  input  logic                         fwd_err_valid,
  input  ldq_idx_t                     fwd_err_idx,
  // commit
  input  logic [$clog2(CORE_WIDTH+1)-1:0] ld_commit,
  input  logic [$clog2(CORE_WIDTH+1)-1:0] st_commit,
  // branch resolution: bits cleared in every mask
  input  logic [MAX_BR-1:0]            br_resolve_mask,
  // flush: queues cut back to these tails
  input  logic                         rollback_valid,
  input  ldq_ptr_t                     rollback_ldq_tail,
  input  logic [$clog2(STQ_ENTRIES):0] rollback_stq_tail,
  // state
  output ldq_ptr_t                     ldq_head,
  output ldq_ptr_t                     ldq_tail,
  output ldq_ptr_t                     ns_ptr,
  output ldq_vec_t                     ldq_valid,
  output ldq_vec_t                     ld_nonspec,
  // YRoT / delayed-broadcast lanes: loads that just became non-speculative
  output logic [MEM_WIDTH-1:0]         bcast_valid,
  output ldq_idx_t [MEM_WIDTH-1:0]     bcast_idx
);

  localparam int unsigned STQ_W = $clog2(STQ_ENTRIES);
  typedef logic [STQ_W-1:0] stq_idx_t;
  typedef logic [STQ_W:0]   stq_ptr_t;

  // load queue
  logic [LDQ_ENTRIES-1:0]                  lv_q;
  logic [LDQ_ENTRIES-1:0][MAX_BR-1:0]      lbr_q;
  logic [LDQ_ENTRIES-1:0][STQ_ENTRIES-1:0] ldep_q;
  logic [LDQ_ENTRIES-1:0]                  lerr_q;
  ldq_ptr_t lhead_q, ltail_q, ns_q;
  // store queue (only what shadow tracking needs)
  logic [STQ_ENTRIES-1:0] sv_q, saddr_q;
  stq_ptr_t shead_q, stail_q;

  logic [MEM_WIDTH-1:0] bv_q;
  ldq_idx_t [MEM_WIDTH-1:0] bi_q;

  // ---------------- allocation (combinational index assignment)
  ldq_ptr_t lt_n;
  stq_ptr_t st_n;
  logic [CORE_WIDTH-1:0][STQ_ENTRIES-1:0] new_dep;
  logic [STQ_ENTRIES-1:0] unres_now;

  assign unres_now = sv_q & ~saddr_q;

  always_comb begin
    logic [STQ_ENTRIES-1:0] dep;
    lt_n = ltail_q;
    st_n = stail_q;
    dep  = unres_now;
    for (int i = 0; i < CORE_WIDTH; i++) begin
      alloc_ldq_idx[i] = lt_n[LDQ_IDX_W-1:0];
      alloc_stq_idx[i] = st_n[STQ_W-1:0];
      new_dep[i]       = dep;
      if (alloc_ld[i]) lt_n = ldq_ptr_t'(lt_n + 1'b1);
      if (alloc_st[i]) begin
        dep[st_n[STQ_W-1:0]] = 1'b1;
        st_n = stq_ptr_t'(st_n + 1'b1);
      end
    end
  end

  assign ldq_full = (ldq_ptr_t'(ltail_q - lhead_q) > ldq_ptr_t'(LDQ_ENTRIES - CORE_WIDTH));
  assign stq_full = ((STQ_W+1)'(stail_q - shead_q) > (STQ_W+1)'(STQ_ENTRIES - CORE_WIDTH));

  // ---------------- visibility point
  // A load is shadow-free when no older branch is unresolved, no older store
  // lacks its address and no forwarding error was seen.
  logic [LDQ_ENTRIES-1:0] free_vec;
  always_comb begin
    for (int e = 0; e < LDQ_ENTRIES; e++)
      free_vec[e] = lv_q[e] && (lbr_q[e] == '0) && ((ldep_q[e] & unres_now) == '0) && !lerr_q[e];
  end

  ldq_ptr_t ns_n;
  logic [MEM_WIDTH-1:0] bv_n;
  ldq_idx_t [MEM_WIDTH-1:0] bi_n;
  always_comb begin
    logic go;
    ns_n = ns_q;
    go   = 1'b1;
    bv_n = '0;
    bi_n = '0;
    for (int k = 0; k < MEM_WIDTH; k++) begin
      if (go && (ns_n != ltail_q) && free_vec[ns_n[LDQ_IDX_W-1:0]]) begin
        bv_n[k] = 1'b1;
        bi_n[k] = ns_n[LDQ_IDX_W-1:0];
        ns_n    = ldq_ptr_t'(ns_n + 1'b1);
      end else begin
        go = 1'b0;
      end
    end
  end

  // ---------------- state update
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      lv_q    <= '0;
      lbr_q   <= '0;
      ldep_q  <= '0;
      lerr_q  <= '0;
      lhead_q <= '0;
      ltail_q <= '0;
      ns_q    <= '0;
      sv_q    <= '0;
      saddr_q <= '0;
      shead_q <= '0;
      stail_q <= '0;
      bv_q    <= '0;
      bi_q    <= '0;
    end else begin
      ldq_ptr_t lh;
      stq_ptr_t sh;
      // shadows resolving
      for (int e = 0; e < LDQ_ENTRIES; e++) lbr_q[e] <= lbr_q[e] & ~br_resolve_mask;
      for (int m = 0; m < MEM_WIDTH; m++)
        if (sta_valid[m]) saddr_q[sta_idx[m]] <= 1'b1;
      if (fwd_err_valid) lerr_q[fwd_err_idx] <= 1'b1;

      // visibility point and its broadcast
      ns_q <= ns_n;
      bv_q <= bv_n;
      bi_q <= bi_n;

      // commit
      lh = lhead_q;
      for (int i = 0; i < CORE_WIDTH; i++)
        if (i < int'(ld_commit)) begin
          lv_q[lh[LDQ_IDX_W-1:0]] <= 1'b0;
          lh = ldq_ptr_t'(lh + 1'b1);
        end
      lhead_q <= lh;
      sh = shead_q;
      for (int i = 0; i < CORE_WIDTH; i++)
        if (i < int'(st_commit)) begin
          sv_q[sh[STQ_W-1:0]] <= 1'b0;
          for (int e = 0; e < LDQ_ENTRIES; e++) ldep_q[e][sh[STQ_W-1:0]] <= 1'b0;
          sh = stq_ptr_t'(sh + 1'b1);
        end
      shead_q <= sh;

      if (rollback_valid) begin
        // drop everything from the new tail up to the old one
        for (int e = 0; e < LDQ_ENTRIES; e++)
          if ({1'b0, ldq_idx_t'(ldq_idx_t'(e) - rollback_ldq_tail[LDQ_IDX_W-1:0])} <
              ldq_ptr_t'(ltail_q - rollback_ldq_tail))
            lv_q[e] <= 1'b0;
        for (int s = 0; s < STQ_ENTRIES; s++)
          if ({1'b0, stq_idx_t'(stq_idx_t'(s) - rollback_stq_tail[STQ_W-1:0])} <
              stq_ptr_t'(stail_q - rollback_stq_tail))
            sv_q[s] <= 1'b0;
        ltail_q <= rollback_ldq_tail;
        stail_q <= rollback_stq_tail;
      end else begin
        for (int i = 0; i < CORE_WIDTH; i++) begin
          if (alloc_ld[i]) begin
            lv_q[alloc_ldq_idx[i]]   <= 1'b1;
            lbr_q[alloc_ldq_idx[i]]  <= alloc_br_mask[i] & ~br_resolve_mask;
            ldep_q[alloc_ldq_idx[i]] <= new_dep[i];
            lerr_q[alloc_ldq_idx[i]] <= 1'b0;
          end
          if (alloc_st[i]) begin
            sv_q[alloc_stq_idx[i]]    <= 1'b1;
            saddr_q[alloc_stq_idx[i]] <= 1'b0;
          end
        end
        ltail_q <= lt_n;
        stail_q <= st_n;
      end
    end
  end

  assign ldq_head    = lhead_q;
  assign ldq_tail    = ltail_q;
  assign ns_ptr      = ns_q;
  assign ldq_valid   = lv_q;
  assign bcast_valid = bv_q;
  assign bcast_idx   = bi_q;

  // non-speculative: valid and already passed by the visibility point
  always_comb begin
    for (int e = 0; e < LDQ_ENTRIES; e++)
      ld_nonspec[e] = lv_q[e] &&
        ({1'b0, ldq_idx_t'(ldq_idx_t'(e) - lhead_q[LDQ_IDX_W-1:0])} < ldq_ptr_t'(ns_q - lhead_q));
  end

  // the visibility point never passes the tail nor falls behind the head
  a_ns_window: assert property (@(posedge clk) disable iff (!rst_n)
    ldq_ptr_t'(ns_q - lhead_q) <= ldq_ptr_t'(ltail_q - lhead_q));
  // a flush never removes a load that is already non-speculative
  a_rollback_spec: assert property (@(posedge clk) disable iff (!rst_n)
    rollback_valid |-> ldq_ptr_t'(rollback_ldq_tail - lhead_q) >= ldq_ptr_t'(ns_q - lhead_q));

endmodule
