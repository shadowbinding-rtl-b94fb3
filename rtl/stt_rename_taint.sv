// stt_rename_taint: STT taint tracking in the rename stage (STT-Rename).
//
// A taint RAT holds one YRoT per architectural register. Each cycle a rename
// group of up to CORE_WIDTH instructions reads the YRoTs of its sources,
// yrot_rename_chain resolves same-group dependencies, and the destination
// YRoTs are written back in program order, all in the same cycle so the next
// group sees up-to-date taints. The instruction YRoT (ren_yrot) goes with the
// instruction to the issue queue, where a transmitter waits for it.
//
// Loads becoming non-speculative are broadcast on MEM_WIDTH lanes; every RAT
// entry rooted at a broadcast load is cleared, and the same-cycle broadcast is
// also applied to values read or written this cycle.
//
// Checkpoints: every branch in the group (ren_is_br with its tag) snapshots the
// taint RAT as it stands after the instructions up to and including the
// branch. On a misprediction (restore_valid) the snapshot of that branch is
// copied back, but an entry survives only if its root is still inside the
// life span of possible roots, between the oldest speculative load (ns_ptr)
// and the youngest load (ldq_tail); roots that became non-speculative after
// the snapshot was taken are dropped.
//
// A full pipeline flush (flush_valid, e.g. after a store-to-load forwarding
// error) applies the same life-span check to the current RAT, so taints rooted
// at squashed loads do not outlive them. During a restore or flush, ldq_tail
// must already be the tail after the squash.
//
// Timing: reads and the chain are combinational from the ren_* inputs; the
// RAT and checkpoints update at the clock edge. A restore takes priority over a
// rename group in the same cycle (that group is younger and being squashed).
// The RAT, the chain, checkpointing and the life-span check follow the text;
// the entry encoding and the broadcast-clear of RAT entries are this design's.
module stt_rename_taint
  import sb_pkg::*;
#(
  parameter int unsigned CORE_WIDTH = 4,
  parameter int unsigned NUM_AREGS  = 32,
  parameter int unsigned MAX_BR     = 20,
  parameter int unsigned MEM_WIDTH  = 2
) (
  input  logic                                     clk,
  input  logic                                     rst_n,
  // rename group
  input  logic [CORE_WIDTH-1:0]                    ren_valid,
  input  logic [CORE_WIDTH-1:0][$clog2(NUM_AREGS)-1:0] ren_rs1,
  input  logic [CORE_WIDTH-1:0][$clog2(NUM_AREGS)-1:0] ren_rs2,
  input  logic [CORE_WIDTH-1:0][$clog2(NUM_AREGS)-1:0] ren_rd,
  input  logic [CORE_WIDTH-1:0]                    ren_rd_wen,
  input  logic [CORE_WIDTH-1:0]                    ren_is_load,
  input  ldq_idx_t [CORE_WIDTH-1:0]                ren_ldq_idx,
  input  logic [CORE_WIDTH-1:0]                    ren_is_br,
  input  logic [CORE_WIDTH-1:0][$clog2(MAX_BR)-1:0] ren_br_tag,
  output yrot_t [CORE_WIDTH-1:0]                   ren_yrot,
  output logic  [CORE_WIDTH-1:0]                   ren_bypassed,
  // speculation state
  input  ldq_idx_t                                 ldq_head,
  input  ldq_ptr_t                                 ldq_tail,
  input  ldq_ptr_t                                 ns_ptr,
  input  logic [MEM_WIDTH-1:0]                     bcast_valid,
  input  ldq_idx_t [MEM_WIDTH-1:0]                 bcast_idx,
  // misprediction
  input  logic                                     restore_valid,
  input  logic [$clog2(MAX_BR)-1:0]                restore_tag,
  // full pipeline flush: keep only live entries of the current RAT
  input  logic                                     flush_valid,
  // taint count, for observation
  output logic [$clog2(NUM_AREGS+1)-1:0]           tainted_regs
);

  localparam int unsigned AREG_W = $clog2(NUM_AREGS);

  yrot_t [NUM_AREGS-1:0] rat_q;
  yrot_t [MAX_BR-1:0][NUM_AREGS-1:0] ckpt_q;

  ldq_vec_t safe_vec;
  always_comb begin
    safe_vec = '0;
    for (int m = 0; m < MEM_WIDTH; m++)
      if (bcast_valid[m]) safe_vec[bcast_idx[m]] = 1'b1;
  end

  // RAT read, with this cycle's broadcast applied
  yrot_t [CORE_WIDTH-1:0] rd1, rd2, dst;
  always_comb begin
    for (int i = 0; i < CORE_WIDTH; i++) begin
      rd1[i] = yrot_filter(rat_q[ren_rs1[i]], safe_vec);
      rd2[i] = yrot_filter(rat_q[ren_rs2[i]], safe_vec);
    end
  end

  yrot_rename_chain #(.CORE_WIDTH(CORE_WIDTH), .AREG_W(AREG_W)) u_chain (
    .valid    (ren_valid),
    .rs1      (ren_rs1),
    .rs2      (ren_rs2),
    .rd       (ren_rd),
    .rd_wen   (ren_rd_wen),
    .is_load  (ren_is_load),
    .ldq_idx  (ren_ldq_idx),
    .rat_rs1  (rd1),
    .rat_rs2  (rd2),
    .ldq_head (ldq_head),
    .yrot     (ren_yrot),
    .dst_yrot (dst),
    .bypassed (ren_bypassed)
  );

  // RAT image after each slot of the group (checkpoint sources)
  yrot_t [CORE_WIDTH:0][NUM_AREGS-1:0] img;
  always_comb begin
    yrot_t [NUM_AREGS-1:0] cur;
    for (int a = 0; a < NUM_AREGS; a++) cur[a] = yrot_filter(rat_q[a], safe_vec);
    img[0] = cur;
    for (int i = 0; i < CORE_WIDTH; i++) begin
      if (ren_valid[i] && ren_rd_wen[i] && ren_rd[i] != '0)
        cur[ren_rd[i]] = yrot_filter(dst[i], safe_vec);
      img[i+1] = cur;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rat_q  <= '0;
      ckpt_q <= '0;
    end else if (restore_valid) begin
      for (int a = 0; a < NUM_AREGS; a++)
        rat_q[a] <= yrot_live(ckpt_q[restore_tag][a], ns_ptr, ldq_tail) ?
                    ckpt_q[restore_tag][a] : YROT_NONE;
    end else if (flush_valid) begin
      for (int a = 0; a < NUM_AREGS; a++)
        rat_q[a] <= yrot_live(rat_q[a], ns_ptr, ldq_tail) ? rat_q[a] : YROT_NONE;
    end else begin
      rat_q <= img[CORE_WIDTH];
      for (int i = 0; i < CORE_WIDTH; i++)
        if (ren_valid[i] && ren_is_br[i]) ckpt_q[ren_br_tag[i]] <= img[i+1];
    end
  end

  always_comb begin
    tainted_regs = '0;
    for (int a = 0; a < NUM_AREGS; a++)
      tainted_regs = tainted_regs + ($clog2(NUM_AREGS+1))'(rat_q[a].valid);
  end

endmodule
