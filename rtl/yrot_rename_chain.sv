// yrot_rename_chain: the youngest-root-of-taint (YRoT) computation of a
// CORE_WIDTH-wide rename group, STT-Rename style.
//
// Each instruction takes the YRoTs of its two source registers as read from
// the taint RAT, then corrects them for same-cycle dependencies: if an older
// instruction of the same group writes the source register, its freshly
// computed destination YRoT replaces the RAT value (the youngest such writer
// wins, one equality comparator per older instruction and source). The
// instruction's own YRoT is the younger of its two corrected sources (one "<"
// comparator). Its destination YRoT is that value, except for a load, whose
// destination is rooted at the load itself.
//
// Slot i's sources depend on slot i-1's result, so the chain of comparators
// and muxes grows linearly with the group width and must settle within the
// rename cycle: this is the long path of the STT-Rename design, kept here as
// pure combinational logic so its depth is visible.
//
// Interface: all inputs are per slot, slot 0 oldest; rd_wen must be 0 for x0.
// Outputs are combinational. bypassed[0] is always 0 (slot 0 has no older
// slot); it is kept so the flag vector is indexed by slot. The structure (RAT read, per-source equality
// compare with each older rd, mux, then a compare of the two sources) follows
// the three-wide drawing in the text, generalised to CORE_WIDTH.
module yrot_rename_chain
  import sb_pkg::*;
#(
  parameter int unsigned CORE_WIDTH = 4,
  parameter int unsigned AREG_W     = 5
) (
  input  logic [CORE_WIDTH-1:0]              valid,
  input  logic [CORE_WIDTH-1:0][AREG_W-1:0]  rs1,
  input  logic [CORE_WIDTH-1:0][AREG_W-1:0]  rs2,
  input  logic [CORE_WIDTH-1:0][AREG_W-1:0]  rd,
  input  logic [CORE_WIDTH-1:0]              rd_wen,
  input  logic [CORE_WIDTH-1:0]              is_load,
  input  ldq_idx_t [CORE_WIDTH-1:0]          ldq_idx,
  input  yrot_t [CORE_WIDTH-1:0]             rat_rs1,   // RAT read for rs1
  input  yrot_t [CORE_WIDTH-1:0]             rat_rs2,   // RAT read for rs2
  input  ldq_idx_t                           ldq_head,  // age reference
  output yrot_t [CORE_WIDTH-1:0]             yrot,      // instruction YRoT
  output yrot_t [CORE_WIDTH-1:0]             dst_yrot,  // written to RAT[rd]
  output logic  [CORE_WIDTH-1:0]             bypassed   // a source came from an older slot
);

  always_comb begin
    yrot_t s1, s2;
    yrot_t [CORE_WIDTH-1:0] d;
    d = '0;
    for (int i = 0; i < CORE_WIDTH; i++) begin
      s1 = rat_rs1[i];
      s2 = rat_rs2[i];
      bypassed[i] = 1'b0;
      for (int j = 0; j < i; j++) begin
        if (valid[j] && rd_wen[j] && rd[j] != '0) begin
          if (rd[j] == rs1[i]) begin s1 = d[j]; bypassed[i] = valid[i]; end
          if (rd[j] == rs2[i]) begin s2 = d[j]; bypassed[i] = valid[i]; end
        end
      end
      yrot[i]     = valid[i] ? yrot_max(s1, s2, ldq_head) : YROT_NONE;
      d[i]        = is_load[i] ? yrot_t'{valid: 1'b1, idx: ldq_idx[i]} : yrot[i];
    end
    dst_yrot = d;
  end

endmodule
