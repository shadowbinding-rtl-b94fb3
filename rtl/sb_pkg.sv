// sb_pkg: types and helper functions shared by the speculation tracker, the
// two taint-tracking (STT) front ends and the NDA broadcast unit.
//
// A youngest-root-of-taint (YRoT) names the speculative load an instruction's
// data depends on. It is encoded as a load-queue index plus a valid bit; an
// invalid YRoT means "untainted". Two YRoTs are ordered by their distance from
// the load-queue head, so the "<" comparators of the taint logic become a
// modular subtraction and a compare. Load-queue pointers that must tell a full
// queue from an empty one carry one extra wrap bit (ldq_ptr_t).
//
// The load-queue size is fixed here because the YRoT type depends on it. 32
// entries is the Mega BOOM load queue; the text being followed gives no size.
package sb_pkg;

  localparam int unsigned LDQ_ENTRIES = 32;
  localparam int unsigned LDQ_IDX_W   = $clog2(LDQ_ENTRIES);

  typedef logic [LDQ_IDX_W-1:0] ldq_idx_t;
  typedef logic [LDQ_IDX_W:0]   ldq_ptr_t;   // index plus wrap bit
  typedef logic [LDQ_ENTRIES-1:0] ldq_vec_t;

  typedef struct packed {
    logic     valid;  // 1: tainted by the load at idx
    ldq_idx_t idx;    // load-queue index of the root load
  } yrot_t;

  localparam yrot_t YROT_NONE = '0;

  // Distance of a load-queue index from the head (0 = oldest in flight).
  function automatic ldq_idx_t ldq_age(ldq_idx_t idx, ldq_idx_t head);
    return ldq_idx_t'(idx - head);
  endfunction

  // 1 when a is strictly younger than b. An untainted YRoT is older than any
  // tainted one, so the youngest of a set is the root to wait for.
  function automatic logic yrot_younger(yrot_t a, yrot_t b, ldq_idx_t head);
    if (!a.valid) return 1'b0;
    if (!b.valid) return 1'b1;
    return ldq_age(a.idx, head) > ldq_age(b.idx, head);
  endfunction

  // The youngest of two YRoTs (one "<" comparator and its mux); two
  // untainted inputs give the canonical YROT_NONE.
  function automatic yrot_t yrot_max(yrot_t a, yrot_t b, ldq_idx_t head);
    if (!a.valid && !b.valid) return YROT_NONE;
    return yrot_younger(b, a, head) ? b : a;
  endfunction

  // Drop a YRoT whose root load is named in a set of loads that have just
  // become non-speculative (the YRoT broadcast of this cycle).
  function automatic yrot_t yrot_filter(yrot_t y, ldq_vec_t safe_vec);
    return (y.valid && safe_vec[y.idx]) ? YROT_NONE : y;
  endfunction

  // Life-span check: a YRoT can only still be a live taint when its root lies
  // between the oldest speculative load (ns) and the youngest load (tail - 1).
  function automatic logic yrot_live(yrot_t y, ldq_ptr_t ns, ldq_ptr_t tail);
    ldq_idx_t d;
    ldq_ptr_t occ;
    d   = ldq_idx_t'(y.idx - ns[LDQ_IDX_W-1:0]);
    occ = ldq_ptr_t'(tail - ns);
    return y.valid && ({1'b0, d} < occ);
  endfunction

endpackage
