// nda_load_broadcast: split data write and wakeup broadcast for loads (NDA).
//
// In an unprotected core a completing load writes its data and broadcasts its
// destination register as ready on one shared bus. Under NDA a load may not
// pass its value on while it is speculative, so the two are decoupled: on
// completion the data is always written to the register file at once (wb_*),
// but the wakeup broadcast (bc_*) of the destination register is sent only
// when the load is non-speculative. A speculative load's register index is
// parked in a per-load-queue-entry table and broadcast once the visibility
// point has passed the load (ld_nonspec). Because writeback and broadcast now
// name different registers in the same cycle, the unit has MEM_WIDTH
// writeback lanes and MEM_WIDTH separate broadcast lanes.
//
// Broadcast arbitration, up to MEM_WIDTH per cycle: completions of loads that
// are already non-speculative go first, in port order, so an unshadowed load
// wakes its consumers with no added delay; the remaining lanes take parked
// loads that have become non-speculative, oldest first. A candidate that finds
// no free lane is parked and retried. Parked loads that leave the load queue
// (squash) are dropped. No speculative wakeup on a predicted cache hit is
// provided: consumers are woken only by bc_*.
//
// The wb_* lanes are the completion inputs passed on unchanged (the register
// file write itself is the host core's); the unit's logic is on bc_*.
//
// Timing: wb_* and bc_* are combinational from the completion inputs and the
// parked table; the table updates at the clock edge. The decoupling, the
// delay until non-speculative and the lane limit follow the text; the
// arbitration order is this design's choice.
module nda_load_broadcast
  import sb_pkg::*;
#(
  parameter int unsigned MEM_WIDTH = 2,
  parameter int unsigned NUM_PREGS = 128,
  parameter int unsigned XLEN      = 64
) (
  input  logic                                        clk,
  input  logic                                        rst_n,
  // load completion from the memory pipelines
  input  logic [MEM_WIDTH-1:0]                        cmp_valid,
  input  ldq_idx_t [MEM_WIDTH-1:0]                    cmp_ldq_idx,
  input  logic [MEM_WIDTH-1:0][$clog2(NUM_PREGS)-1:0] cmp_pdst,
  input  logic [MEM_WIDTH-1:0][XLEN-1:0]              cmp_data,
  // speculation state
  input  ldq_idx_t                                    ldq_head,
  input  ldq_vec_t                                    ldq_valid,
  input  ldq_vec_t                                    ld_nonspec,
  // data write to the register file
  output logic [MEM_WIDTH-1:0]                        wb_valid,
  output logic [MEM_WIDTH-1:0][$clog2(NUM_PREGS)-1:0] wb_pdst,
  output logic [MEM_WIDTH-1:0][XLEN-1:0]              wb_data,
  // wakeup broadcast to rename and the issue slots
  output logic [MEM_WIDTH-1:0]                        bc_valid,
  output logic [MEM_WIDTH-1:0][$clog2(NUM_PREGS)-1:0] bc_pdst,
  output logic                                        bc_delayed_any, // a lane carried a parked load
  output logic [$clog2(LDQ_ENTRIES+1)-1:0]            parked_count
);

  localparam int unsigned PW = $clog2(NUM_PREGS);

  logic     [LDQ_ENTRIES-1:0]         park_q;
  logic     [LDQ_ENTRIES-1:0][PW-1:0] ppdst_q;

  assign wb_valid = cmp_valid;
  assign wb_pdst  = cmp_pdst;
  assign wb_data  = cmp_data;

  logic [MEM_WIDTH-1:0]   direct_sel;   // completion broadcast this cycle
  logic [LDQ_ENTRIES-1:0] park_sel;     // parked entry broadcast this cycle
  always_comb begin
    int unsigned used;
    ldq_idx_t e;
    used           = 0;
    direct_sel     = '0;
    park_sel       = '0;
    bc_valid       = '0;
    bc_pdst        = '0;
    bc_delayed_any = 1'b0;
    for (int m = 0; m < MEM_WIDTH; m++) begin
      if (cmp_valid[m] && ld_nonspec[cmp_ldq_idx[m]] && used < MEM_WIDTH) begin
        direct_sel[m] = 1'b1;
        bc_valid[used] = 1'b1;
        bc_pdst[used]  = cmp_pdst[m];
        used++;
      end
    end
    for (int k = 0; k < LDQ_ENTRIES; k++) begin
      e = ldq_idx_t'(ldq_head + ldq_idx_t'(k));
      if (park_q[e] && ldq_valid[e] && ld_nonspec[e] && used < MEM_WIDTH) begin
        park_sel[e]    = 1'b1;
        bc_valid[used] = 1'b1;
        bc_pdst[used]  = ppdst_q[e];
        bc_delayed_any = 1'b1;
        used++;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      park_q  <= '0;
      ppdst_q <= '0;
    end else begin
      park_q <= park_q & ldq_valid & ~park_sel;
      for (int m = 0; m < MEM_WIDTH; m++)
        if (cmp_valid[m] && !direct_sel[m]) begin
          park_q[cmp_ldq_idx[m]]  <= 1'b1;
          ppdst_q[cmp_ldq_idx[m]] <= cmp_pdst[m];
        end
    end
  end

  always_comb begin
    parked_count = '0;
    for (int k = 0; k < LDQ_ENTRIES; k++)
      parked_count = parked_count + ($clog2(LDQ_ENTRIES+1))'(park_q[k]);
  end

  // a load completes only while it is in the load queue
  for (genvar m = 0; m < MEM_WIDTH; m++) begin : g_chk
    a_cmp_valid_entry: assert property (@(posedge clk) disable iff (!rst_n)
      cmp_valid[m] |-> ldq_valid[cmp_ldq_idx[m]]);
  end

endmodule
