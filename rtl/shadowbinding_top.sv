// shadowbinding_top: the secure-speculation additions of an out-of-order core,
// all three schemes side by side around one shared speculation tracker.
//
//   spec_tracker          load/store queue shadow state, visibility point and
//                         the broadcast of loads becoming non-speculative
//   stt_rename_taint      STT-Rename: taint RAT, same-cycle YRoT chain and
//                         YRoT checkpoints; its YRoT goes with each dispatched
//                         transmitter into an issue queue taint field
//                         (u_rename_iq, an iq_taint_mask)
//   stt_issue_taint_unit  STT-Issue: physical-register taint table at issue,
//                         nop for tainted transmitters, back-propagation of
//                         the YRoT into its own issue queue taint field
//                         (u_issue_iq)
//   nda_load_broadcast    NDA: load data written at once, wakeup broadcast
//                         delayed until the load is non-speculative
//
// The host core (decode, register renaming, wakeup/select, execution units,
// load-store unit, ROB) is outside this block: its signals are the ports. A
// core uses one of the three scheme groups; all three are present here so one
// instruction stream can be played through each of them and compared.
//
// The dispatch group (grp_*) allocates load/store-queue entries and, in the
// same cycle, is renamed by the STT-Rename taint logic, which therefore sees
// the load-queue index of every load it renames. Branch mispredictions
// (mispredict_*) cut the queues back and restore the YRoT checkpoint; a full
// flush (flush_valid, with the cut-back tails on rollback_*) is used for
// forwarding errors. The tracker's broadcast lanes (yrot_bcast_*) drive both
// STT schemes and the NDA unit reads its non-speculative vector.
//
// Defaults are the largest ("Mega") core of the evaluation: 4-wide, 2 memory
// ports. The remaining sizes (load/store queue 32, 128 physical registers, 40
// issue-queue entries, 20 branch tags, 4 issue slots) are that core's usual
// values, not given in the text.
module shadowbinding_top
  import sb_pkg::*;
#(
  parameter int unsigned CORE_WIDTH  = 4,
  parameter int unsigned MEM_WIDTH   = 2,
  parameter int unsigned ISSUE_WIDTH = 4,
  parameter int unsigned NUM_AREGS   = 32,
  parameter int unsigned NUM_PREGS   = 128,
  parameter int unsigned IQ_ENTRIES  = 40,
  parameter int unsigned MAX_BR      = 20,
  parameter int unsigned STQ_ENTRIES = 32,
  parameter int unsigned XLEN        = 64,
  localparam int unsigned AW = $clog2(NUM_AREGS),
  localparam int unsigned PW = $clog2(NUM_PREGS),
  localparam int unsigned QW = $clog2(IQ_ENTRIES),
  localparam int unsigned BW = $clog2(MAX_BR),
  localparam int unsigned SW = $clog2(STQ_ENTRIES)
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  // ---- dispatch / rename group, slot 0 oldest
  input  logic [CORE_WIDTH-1:0]                 grp_valid,
  input  logic [CORE_WIDTH-1:0]                 grp_is_load,
  input  logic [CORE_WIDTH-1:0]                 grp_is_store,
  input  logic [CORE_WIDTH-1:0]                 grp_is_br,
  input  logic [CORE_WIDTH-1:0][BW-1:0]         grp_br_tag,
  input  logic [CORE_WIDTH-1:0][MAX_BR-1:0]     grp_br_mask,
  input  logic [CORE_WIDTH-1:0][AW-1:0]         grp_rs1,
  input  logic [CORE_WIDTH-1:0][AW-1:0]         grp_rs2,
  input  logic [CORE_WIDTH-1:0][AW-1:0]         grp_rd,
  input  logic [CORE_WIDTH-1:0]                 grp_rd_wen,
  input  logic [CORE_WIDTH-1:0]                 grp_transmitter,
  input  logic [CORE_WIDTH-1:0][QW-1:0]         grp_iq_slot,
  output ldq_idx_t [CORE_WIDTH-1:0]             grp_ldq_idx,
  output logic [CORE_WIDTH-1:0][SW-1:0]         grp_stq_idx,
  output yrot_t [CORE_WIDTH-1:0]                grp_yrot,
  output logic  [CORE_WIDTH-1:0]                grp_bypassed,
  output logic                                  ldq_full,
  output logic                                  stq_full,
  // ---- load-store unit and commit
  input  logic [MEM_WIDTH-1:0]                  sta_valid,
  input  logic [MEM_WIDTH-1:0][SW-1:0]          sta_idx,
  input  logic                                  fwd_err_valid,
  input  ldq_idx_t                              fwd_err_idx,
  input  logic [$clog2(CORE_WIDTH+1)-1:0]       ld_commit,
  input  logic [$clog2(CORE_WIDTH+1)-1:0]       st_commit,
  // ---- branches and flushes
  input  logic [MAX_BR-1:0]                     br_resolve_mask,
  input  logic                                  mispredict_valid,
  input  logic [BW-1:0]                         mispredict_tag,
  input  logic                                  flush_valid,
  input  ldq_ptr_t                              rollback_ldq_tail,
  input  logic [SW:0]                           rollback_stq_tail,
  // ---- STT-Rename issue queue
  input  logic [IQ_ENTRIES-1:0]                 rq_ready_in,
  input  logic [IQ_ENTRIES-1:0]                 rq_entry_free,
  output logic [IQ_ENTRIES-1:0]                 rq_ready_out,
  // ---- STT-Issue: selected micro-ops and issue queue
  input  logic [ISSUE_WIDTH-1:0]                iss_valid,
  input  logic [ISSUE_WIDTH-1:0][PW-1:0]        iss_prs1,
  input  logic [ISSUE_WIDTH-1:0]                iss_rs1_used,
  input  logic [ISSUE_WIDTH-1:0][PW-1:0]        iss_prs2,
  input  logic [ISSUE_WIDTH-1:0]                iss_rs2_used,
  input  logic [ISSUE_WIDTH-1:0][PW-1:0]        iss_pdst,
  input  logic [ISSUE_WIDTH-1:0]                iss_pdst_wen,
  input  logic [ISSUE_WIDTH-1:0]                iss_is_load,
  input  ldq_idx_t [ISSUE_WIDTH-1:0]            iss_ldq_idx,
  input  logic [ISSUE_WIDTH-1:0]                iss_transmitter,
  input  logic [ISSUE_WIDTH-1:0][QW-1:0]        iss_iq_slot,
  output logic [ISSUE_WIDTH-1:0]                iss_exec_valid,
  output yrot_t [ISSUE_WIDTH-1:0]               iss_yrot,
  input  logic [IQ_ENTRIES-1:0]                 iq_ready_in,
  input  logic [IQ_ENTRIES-1:0]                 iq_entry_free,
  output logic [IQ_ENTRIES-1:0]                 iq_ready_out,
  // ---- NDA: load completion, data write, wakeup broadcast
  input  logic [MEM_WIDTH-1:0]                  cmp_valid,
  input  ldq_idx_t [MEM_WIDTH-1:0]              cmp_ldq_idx,
  input  logic [MEM_WIDTH-1:0][PW-1:0]          cmp_pdst,
  input  logic [MEM_WIDTH-1:0][XLEN-1:0]        cmp_data,
  output logic [MEM_WIDTH-1:0]                  wb_valid,
  output logic [MEM_WIDTH-1:0][PW-1:0]          wb_pdst,
  output logic [MEM_WIDTH-1:0][XLEN-1:0]        wb_data,
  output logic [MEM_WIDTH-1:0]                  bc_valid,
  output logic [MEM_WIDTH-1:0][PW-1:0]          bc_pdst,
  output logic                                  bc_delayed_any,
  // ---- speculation state
  output logic [MEM_WIDTH-1:0]                  yrot_bcast_valid,
  output ldq_idx_t [MEM_WIDTH-1:0]              yrot_bcast_idx,
  output ldq_ptr_t                              ns_ptr,
  output ldq_vec_t                              ld_nonspec,
  output logic [$clog2(NUM_AREGS+1)-1:0]        rename_tainted_regs
);

  ldq_ptr_t ldq_head, ldq_tail, win_tail;
  ldq_vec_t ldq_valid;
  logic     rollback;

  assign rollback = mispredict_valid || flush_valid;

  logic [CORE_WIDTH-1:0] alloc_ld, alloc_st;
  assign alloc_ld = grp_valid & grp_is_load & {CORE_WIDTH{!rollback}};
  assign alloc_st = grp_valid & grp_is_store & {CORE_WIDTH{!rollback}};

  spec_tracker #(
    .CORE_WIDTH(CORE_WIDTH), .MEM_WIDTH(MEM_WIDTH),
    .STQ_ENTRIES(STQ_ENTRIES), .MAX_BR(MAX_BR)
  ) u_tracker (
    .clk, .rst_n,
    .alloc_ld, .alloc_st,
    .alloc_br_mask     (grp_br_mask),
    .alloc_ldq_idx     (grp_ldq_idx),
    .alloc_stq_idx     (grp_stq_idx),
    .ldq_full, .stq_full,
    .sta_valid, .sta_idx,
    .fwd_err_valid, .fwd_err_idx,
    .ld_commit, .st_commit,
    .br_resolve_mask,
    .rollback_valid    (rollback),
    .rollback_ldq_tail, .rollback_stq_tail,
    .ldq_head, .ldq_tail, .ns_ptr, .ldq_valid, .ld_nonspec,
    .bcast_valid       (yrot_bcast_valid),
    .bcast_idx         (yrot_bcast_idx)
  );

  // life span of roots seen by a checkpoint restore: up to the cut-back tail
  assign win_tail = rollback ? rollback_ldq_tail : ldq_tail;

  // ---------------- STT-Rename
  stt_rename_taint #(
    .CORE_WIDTH(CORE_WIDTH), .NUM_AREGS(NUM_AREGS),
    .MAX_BR(MAX_BR), .MEM_WIDTH(MEM_WIDTH)
  ) u_stt_rename (
    .clk, .rst_n,
    .ren_valid     (grp_valid & {CORE_WIDTH{!rollback}}),
    .ren_rs1       (grp_rs1),
    .ren_rs2       (grp_rs2),
    .ren_rd        (grp_rd),
    .ren_rd_wen    (grp_rd_wen),
    .ren_is_load   (grp_is_load),
    .ren_ldq_idx   (grp_ldq_idx),
    .ren_is_br     (grp_is_br),
    .ren_br_tag    (grp_br_tag),
    .ren_yrot      (grp_yrot),
    .ren_bypassed  (grp_bypassed),
    .ldq_head      (ldq_head[LDQ_IDX_W-1:0]),
    .ldq_tail      (win_tail),
    .ns_ptr,
    .bcast_valid   (yrot_bcast_valid),
    .bcast_idx     (yrot_bcast_idx),
    .restore_valid (mispredict_valid),
    .restore_tag   (mispredict_tag),
    .flush_valid   (flush_valid && !mispredict_valid),
    .tainted_regs  (rename_tainted_regs)
  );

  // transmitters enter the STT-Rename issue queue with their YRoT
  logic [CORE_WIDTH-1:0] rq_set;
  always_comb
    for (int i = 0; i < CORE_WIDTH; i++)
      rq_set[i] = grp_valid[i] && !rollback && grp_transmitter[i] && grp_yrot[i].valid;

  iq_taint_mask #(
    .IQ_ENTRIES(IQ_ENTRIES), .SET_PORTS(CORE_WIDTH), .MEM_WIDTH(MEM_WIDTH)
  ) u_rename_iq (
    .clk, .rst_n,
    .set_valid   (rq_set),
    .set_slot    (grp_iq_slot),
    .set_yrot    (grp_yrot),
    .entry_free  (rq_entry_free),
    .bcast_valid (yrot_bcast_valid),
    .bcast_idx   (yrot_bcast_idx),
    .ready_in    (rq_ready_in),
    .ready_out   (rq_ready_out),
    .tainted     ()
  );

  // ---------------- STT-Issue
  logic  [ISSUE_WIDTH-1:0]         bp_valid;
  logic  [ISSUE_WIDTH-1:0][QW-1:0] bp_iq_slot;
  yrot_t [ISSUE_WIDTH-1:0]         bp_yrot;

  stt_issue_taint_unit #(
    .ISSUE_WIDTH(ISSUE_WIDTH), .NUM_PREGS(NUM_PREGS),
    .IQ_ENTRIES(IQ_ENTRIES), .MEM_WIDTH(MEM_WIDTH)
  ) u_stt_issue (
    .clk, .rst_n,
    .iss_valid, .iss_prs1, .iss_rs1_used, .iss_prs2, .iss_rs2_used,
    .iss_pdst, .iss_pdst_wen, .iss_is_load, .iss_ldq_idx,
    .iss_transmitter, .iss_iq_slot,
    .exec_valid  (iss_exec_valid),
    .iss_yrot,
    .bp_valid, .bp_iq_slot, .bp_yrot,
    .ldq_head    (ldq_head[LDQ_IDX_W-1:0]),
    .bcast_valid (yrot_bcast_valid),
    .bcast_idx   (yrot_bcast_idx)
  );

  iq_taint_mask #(
    .IQ_ENTRIES(IQ_ENTRIES), .SET_PORTS(ISSUE_WIDTH), .MEM_WIDTH(MEM_WIDTH)
  ) u_issue_iq (
    .clk, .rst_n,
    .set_valid   (bp_valid),
    .set_slot    (bp_iq_slot),
    .set_yrot    (bp_yrot),
    .entry_free  (iq_entry_free),
    .bcast_valid (yrot_bcast_valid),
    .bcast_idx   (yrot_bcast_idx),
    .ready_in    (iq_ready_in),
    .ready_out   (iq_ready_out),
    .tainted     ()
  );

  // ---------------- NDA
  nda_load_broadcast #(
    .MEM_WIDTH(MEM_WIDTH), .NUM_PREGS(NUM_PREGS), .XLEN(XLEN)
  ) u_nda (
    .clk, .rst_n,
    .cmp_valid, .cmp_ldq_idx, .cmp_pdst, .cmp_data,
    .ldq_head    (ldq_head[LDQ_IDX_W-1:0]),
    .ldq_valid, .ld_nonspec,
    .wb_valid, .wb_pdst, .wb_data,
    .bc_valid, .bc_pdst, .bc_delayed_any,
    .parked_count ()
  );

endmodule
