// stt_issue_taint_unit: STT taint tracking at instruction issue (STT-Issue).
//
// Tainting is deferred until an instruction has been woken up and selected,
// so wakeup and select are unchanged. For each of ISSUE_WIDTH selected
// micro-ops the unit
//   1. reads the taints of the physical source registers it actually uses
//      from a table of one YRoT per physical register, and takes the youngest
//      as the micro-op's YRoT;
//   2. writes the destination entry: a load roots the taint at itself, any
//      other micro-op writes its YRoT (an untainted result clears the entry,
//      overwriting whatever a previous owner of the register left there);
//   3. if the micro-op is a transmitter and its YRoT is valid, replaces it by
//      a no-operation (exec_valid = 0, the issue slot is lost) and sends the
//      YRoT back to the micro-op's issue-queue entry (bp_*), where it masks the
//      ready signal until the root load is broadcast as non-speculative.
// Micro-ops issued together cannot depend on each other, so the per-slot
// computations are independent: one comparator level per slot, no chain.
// Entries rooted at a load broadcast as non-speculative are cleared; the
// broadcast of the current cycle is applied to reads and writes as well. No
// checkpoint is needed: a physical register is rewritten by its next producer
// before any consumer reads it.
//
// A store that issues only one half (address or data) presents only that
// operand (rs1_used / rs2_used), so an untainted address can issue while the
// data operand is tainted.
//
// Timing: exec_valid, iss_yrot and bp_* are combinational from the iss_*
// inputs; the table updates at the clock edge and is read by micro-ops issued
// in the following cycle (a dependent micro-op cannot issue earlier).
// The steps and the back-propagation follow the text; the table encoding and
// the per-operand "used" inputs are this design's.
module stt_issue_taint_unit
  import sb_pkg::*;
#(
  parameter int unsigned ISSUE_WIDTH = 4,
  parameter int unsigned NUM_PREGS   = 128,
  parameter int unsigned IQ_ENTRIES  = 40,
  parameter int unsigned MEM_WIDTH   = 2
) (
  input  logic                                          clk,
  input  logic                                          rst_n,
  // selected micro-ops
  input  logic [ISSUE_WIDTH-1:0]                        iss_valid,
  input  logic [ISSUE_WIDTH-1:0][$clog2(NUM_PREGS)-1:0] iss_prs1,
  input  logic [ISSUE_WIDTH-1:0]                        iss_rs1_used,
  input  logic [ISSUE_WIDTH-1:0][$clog2(NUM_PREGS)-1:0] iss_prs2,
  input  logic [ISSUE_WIDTH-1:0]                        iss_rs2_used,
  input  logic [ISSUE_WIDTH-1:0][$clog2(NUM_PREGS)-1:0] iss_pdst,
  input  logic [ISSUE_WIDTH-1:0]                        iss_pdst_wen,
  input  logic [ISSUE_WIDTH-1:0]                        iss_is_load,
  input  ldq_idx_t [ISSUE_WIDTH-1:0]                    iss_ldq_idx,
  input  logic [ISSUE_WIDTH-1:0]                        iss_transmitter,
  input  logic [ISSUE_WIDTH-1:0][$clog2(IQ_ENTRIES)-1:0] iss_iq_slot,
  // to execute: 0 where a tainted transmitter was turned into a nop
  output logic [ISSUE_WIDTH-1:0]                        exec_valid,
  output yrot_t [ISSUE_WIDTH-1:0]                       iss_yrot,
  // back-propagation of the YRoT to the issue-queue entry
  output logic [ISSUE_WIDTH-1:0]                        bp_valid,
  output logic [ISSUE_WIDTH-1:0][$clog2(IQ_ENTRIES)-1:0] bp_iq_slot,
  output yrot_t [ISSUE_WIDTH-1:0]                       bp_yrot,
  // speculation state
  input  ldq_idx_t                                      ldq_head,
  input  logic [MEM_WIDTH-1:0]                          bcast_valid,
  input  ldq_idx_t [MEM_WIDTH-1:0]                      bcast_idx
);

  yrot_t [NUM_PREGS-1:0] taint_q;

  ldq_vec_t safe_vec;
  always_comb begin
    safe_vec = '0;
    for (int m = 0; m < MEM_WIDTH; m++)
      if (bcast_valid[m]) safe_vec[bcast_idx[m]] = 1'b1;
  end

  yrot_t [ISSUE_WIDTH-1:0] wr_val;
  always_comb begin
    yrot_t t1, t2;
    for (int i = 0; i < ISSUE_WIDTH; i++) begin
      t1 = iss_rs1_used[i] ? yrot_filter(taint_q[iss_prs1[i]], safe_vec) : YROT_NONE;
      t2 = iss_rs2_used[i] ? yrot_filter(taint_q[iss_prs2[i]], safe_vec) : YROT_NONE;
      iss_yrot[i]   = iss_valid[i] ? yrot_max(t1, t2, ldq_head) : YROT_NONE;
      exec_valid[i] = iss_valid[i] && !(iss_transmitter[i] && iss_yrot[i].valid);
      bp_valid[i]   = iss_valid[i] && iss_transmitter[i] && iss_yrot[i].valid;
      bp_iq_slot[i] = iss_iq_slot[i];
      bp_yrot[i]    = iss_yrot[i];
      wr_val[i]     = iss_is_load[i] ? yrot_t'{valid: 1'b1, idx: iss_ldq_idx[i]}
                                     : iss_yrot[i];
      wr_val[i]     = yrot_filter(wr_val[i], safe_vec);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      taint_q <= '0;
    end else begin
      for (int p = 0; p < NUM_PREGS; p++)
        taint_q[p] <= yrot_filter(taint_q[p], safe_vec);
      for (int i = 0; i < ISSUE_WIDTH; i++)
        if (iss_valid[i] && iss_pdst_wen[i]) taint_q[iss_pdst[i]] <= wr_val[i];
    end
  end

  // micro-ops issued together write distinct destination registers
  for (genvar i = 0; i < ISSUE_WIDTH; i++) begin : g_chk
    for (genvar j = i + 1; j < ISSUE_WIDTH; j++) begin : g_pair
      a_pdst_distinct: assert property (@(posedge clk) disable iff (!rst_n)
        !(iss_valid[i] && iss_pdst_wen[i] && iss_valid[j] && iss_pdst_wen[j] &&
          iss_pdst[i] == iss_pdst[j]));
    end
  end

endmodule
