// tb_shadowbinding_top: one short instruction sequence played through the
// whole block at its default size (4-wide rename, 2 memory ports), checking
// all three schemes against hand-computed values and counting how often each
// mechanism happened. Every mechanism must occur at least once.
//
//   group A:  b0: BR           (checkpoint 0)
//             L0: LD  r1,[r2]  under b0
//                 ADD r3,r1,r4 tainted by L0 through a same-cycle bypass
//             L1: LD  r5,[r3]  transmitter tainted by L0 (bypass of a bypass)
//   group B:  S0: ST  [r6],r7  address not known yet
//             L2: LD  r8,[r9]  under b0 and behind S0
//             b1: BR           (checkpoint 1)
//                 ADD r10,r8,r1  YRoT = L2, the younger of L2 and L0
// STT-Issue sees the same code with physical registers p1..p5; NDA sees the
// completions of L0 and L1.
module tb_shadowbinding_top;
  import sb_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // ports at default sizes
  logic [3:0] grp_valid, grp_is_load, grp_is_store, grp_is_br, grp_rd_wen, grp_transmitter, grp_bypassed;
  logic [3:0][4:0] grp_br_tag, grp_rs1, grp_rs2, grp_rd;
  logic [3:0][19:0] grp_br_mask;
  logic [3:0][5:0] grp_iq_slot;
  ldq_idx_t [3:0] grp_ldq_idx;
  logic [3:0][4:0] grp_stq_idx;
  yrot_t [3:0] grp_yrot;
  logic ldq_full, stq_full;
  logic [1:0] sta_valid;
  logic [1:0][4:0] sta_idx;
  logic fwd_err_valid;
  ldq_idx_t fwd_err_idx;
  logic [2:0] ld_commit, st_commit;
  logic [19:0] br_resolve_mask;
  logic mispredict_valid, flush_valid;
  logic [4:0] mispredict_tag;
  ldq_ptr_t rollback_ldq_tail;
  logic [5:0] rollback_stq_tail;
  logic [39:0] rq_ready_in, rq_entry_free, rq_ready_out, iq_ready_in, iq_entry_free, iq_ready_out;
  logic [3:0] iss_valid, iss_rs1_used, iss_rs2_used, iss_pdst_wen, iss_is_load, iss_transmitter, iss_exec_valid;
  logic [3:0][6:0] iss_prs1, iss_prs2, iss_pdst;
  ldq_idx_t [3:0] iss_ldq_idx;
  logic [3:0][5:0] iss_iq_slot;
  yrot_t [3:0] iss_yrot;
  logic [1:0] cmp_valid, wb_valid, bc_valid;
  ldq_idx_t [1:0] cmp_ldq_idx;
  logic [1:0][6:0] cmp_pdst, wb_pdst, bc_pdst;
  logic [1:0][63:0] cmp_data, wb_data;
  logic bc_delayed_any;
  logic [1:0] yrot_bcast_valid;
  ldq_idx_t [1:0] yrot_bcast_idx;
  ldq_ptr_t ns_ptr;
  ldq_vec_t ld_nonspec;
  logic [5:0] rename_tainted_regs;

  shadowbinding_top dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("%0t FAIL %s", $time, what); end
  endtask

  // mechanism counters
  int n_bypass, n_rq_mask, n_rq_release, n_restore_drop, n_nop_bp, n_iq_release,
      n_nda_delayed, n_nda_immediate, n_lanes_full, n_cshadow_hold, n_dshadow_hold,
      n_fwd_err_hold, n_flush, n_commit;

  always @(posedge clk) if (rst_n) begin
    if (yrot_bcast_valid == 2'b11) n_lanes_full++;
    if (bc_delayed_any) n_nda_delayed++;
  end

  task automatic idle();
    grp_valid = '0; grp_is_load = '0; grp_is_store = '0; grp_is_br = '0; grp_br_tag = '0;
    grp_br_mask = '0; grp_rs1 = '0; grp_rs2 = '0; grp_rd = '0; grp_rd_wen = '0;
    grp_transmitter = '0; grp_iq_slot = '0;
    sta_valid = '0; sta_idx = '0; fwd_err_valid = 0; fwd_err_idx = '0; ld_commit = '0; st_commit = '0;
    br_resolve_mask = '0; mispredict_valid = 0; mispredict_tag = '0; flush_valid = 0;
    rollback_ldq_tail = '0; rollback_stq_tail = '0;
    rq_entry_free = '0; iq_entry_free = '0;
    iss_valid = '0; iss_prs1 = '0; iss_prs2 = '0; iss_rs1_used = '0; iss_rs2_used = '0;
    iss_pdst = '0; iss_pdst_wen = '0; iss_is_load = '0; iss_ldq_idx = '0; iss_transmitter = '0;
    iss_iq_slot = '0; cmp_valid = '0; cmp_ldq_idx = '0; cmp_pdst = '0; cmp_data = '0;
  endtask
  task automatic step(); @(posedge clk); #1; idle(); endtask

  task automatic uop(int s, bit ld, bit st, bit br, int tag, logic [19:0] mask,
                     int rs1, int rs2, int rd, bit tx, int slot);
    grp_valid[s] = 1; grp_is_load[s] = ld; grp_is_store[s] = st; grp_is_br[s] = br;
    grp_br_tag[s] = 5'(tag); grp_br_mask[s] = mask; grp_rs1[s] = 5'(rs1); grp_rs2[s] = 5'(rs2);
    grp_rd[s] = 5'(rd); grp_rd_wen[s] = rd != 0; grp_transmitter[s] = tx; grp_iq_slot[s] = 6'(slot);
  endtask

  task automatic issue(int s, int p1, bit u1, int p2, bit u2, int pd, bit ld, int li, bit tx, int slot);
    iss_valid[s] = 1; iss_prs1[s] = 7'(p1); iss_rs1_used[s] = u1; iss_prs2[s] = 7'(p2);
    iss_rs2_used[s] = u2; iss_pdst[s] = 7'(pd); iss_pdst_wen[s] = pd != 0; iss_is_load[s] = ld;
    iss_ldq_idx[s] = ldq_idx_t'(li); iss_transmitter[s] = tx; iss_iq_slot[s] = 6'(slot);
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam yrot_t Y_L0 = '{valid: 1'b1, idx: 5'd0};
  localparam yrot_t Y_L2 = '{valid: 1'b1, idx: 5'd2};

  initial begin
    {n_bypass, n_rq_mask, n_rq_release, n_restore_drop, n_nop_bp, n_iq_release, n_nda_delayed,
     n_nda_immediate, n_lanes_full, n_cshadow_hold, n_dshadow_hold, n_fwd_err_hold, n_flush, n_commit} = '0;
    idle();
    rq_ready_in = '1; iq_ready_in = '1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    #1;
    // ---------------- group A
    uop(0, 0, 0, 1, 0, 20'h0, 0, 0, 0, 1, 0);         // b0
    uop(1, 1, 0, 0, 0, 20'h1, 2, 0, 1, 1, 1);         // L0: ld r1,[r2]
    uop(2, 0, 0, 0, 0, 20'h1, 1, 4, 3, 0, 2);         // add r3,r1,r4
    uop(3, 1, 0, 0, 0, 20'h1, 3, 0, 5, 1, 3);         // L1: ld r5,[r3]
    #1;
    chk(grp_ldq_idx[1] == 0 && grp_ldq_idx[3] == 1, "load indices of group A");
    chk(grp_yrot[1] == YROT_NONE && grp_yrot[2] == Y_L0 && grp_yrot[3] == Y_L0, "STT-Rename YRoTs of group A");
    if (grp_bypassed[2] && grp_bypassed[3]) n_bypass++;
    chk(grp_bypassed == 4'b1100, "same-cycle dependencies found");
    step();
    chk(rename_tainted_regs == 3, "r1, r3, r5 tainted");
    chk(!rq_ready_out[3] && rq_ready_out[2] && rq_ready_out[1], "tainted transmitter L1 masked in the STT-Rename queue");
    if (!rq_ready_out[3]) n_rq_mask++;
    // ---------------- group B
    uop(0, 0, 1, 0, 0, 20'h1, 6, 7, 0, 1, 4);         // S0
    uop(1, 1, 0, 0, 0, 20'h1, 9, 0, 8, 1, 5);         // L2: ld r8,[r9]
    uop(2, 0, 0, 1, 1, 20'h1, 0, 0, 0, 1, 6);         // b1
    uop(3, 0, 0, 0, 0, 20'h3, 8, 1, 10, 0, 7);        // add r10,r8,r1
    #1;
    chk(grp_ldq_idx[1] == 2 && grp_stq_idx[0] == 0, "indices of group B");
    chk(grp_yrot[3] == Y_L2, "youngest root of r8 (L2) and r1 (L0) is L2");
    // ---------------- STT-Issue: L0 issues, untainted
    step();
    chk(rename_tainted_regs == 5, "r1, r3, r5, r8, r10 tainted");
    issue(0, 2, 1, 0, 0, 1, 1, 0, 1, 1);              // L0: p1 <- [p2]
    #1 chk(iss_exec_valid[0] && iss_yrot[0] == YROT_NONE, "L0 executes");
    step();
    issue(0, 1, 1, 4, 1, 3, 0, 0, 0, 2);              // add p3 <- p1, p4
    #1 chk(iss_exec_valid[0] && iss_yrot[0] == Y_L0, "tainted non-transmitter executes");
    step();
    issue(0, 3, 1, 0, 0, 5, 1, 1, 1, 3);              // L1: p5 <- [p3]
    cmp_valid[0] = 1; cmp_ldq_idx[0] = 5'd0; cmp_pdst[0] = 7'd1; cmp_data[0] = 64'hdead_beef;
    #1;
    chk(!iss_exec_valid[0] && iss_yrot[0] == Y_L0, "tainted transmitter becomes a nop");
    if (!iss_exec_valid[0]) n_nop_bp++;
    chk(wb_valid[0] && wb_pdst[0] == 1 && wb_data[0] == 64'hdead_beef, "NDA writes L0 data at once");
    chk(bc_valid == 0, "NDA holds the broadcast of speculative L0");
    step();
    chk(!iq_ready_out[3], "back-propagated YRoT masks issue-queue entry 3");
    // ---------------- shadows hold
    repeat (3) begin
      chk(yrot_bcast_valid == 0 && ns_ptr == 0, "C-shadow of b0 holds L0..L2");
      if (yrot_bcast_valid == 0) n_cshadow_hold++;
      step();
    end
    br_resolve_mask = 20'h1;                           // b0 resolves correctly
    step();
    step();
    chk(yrot_bcast_valid == 2'b11 && yrot_bcast_idx[0] == 0 && yrot_bcast_idx[1] == 1,
        "L0 and L1 broadcast together on both lanes");
    chk(rq_ready_out[3] && iq_ready_out[3], "both issue queues release entry 3 on the broadcast");
    if (rq_ready_out[3]) n_rq_release++;
    if (iq_ready_out[3]) n_iq_release++;
    chk(bc_valid[0] && bc_pdst[0] == 1 && bc_delayed_any, "NDA broadcasts p1 once L0 is non-speculative");
    step();
    chk(rename_tainted_regs == 2, "only r8 and r10 (rooted at L2) remain tainted");
    // L2 is held by S0 (no address) although its branch resolved
    repeat (2) begin
      chk(ns_ptr == 2 && !ld_nonspec[2], "D-shadow of S0 holds L2");
      if (!ld_nonspec[2]) n_dshadow_hold++;
      step();
    end
    // L1 completes: already non-speculative, broadcast at once
    cmp_valid[1] = 1; cmp_ldq_idx[1] = 5'd1; cmp_pdst[1] = 7'd5; cmp_data[1] = 64'h1234;
    #1;
    chk(bc_valid[0] && bc_pdst[0] == 5 && !bc_delayed_any, "NDA broadcasts non-speculative L1 immediately");
    if (bc_valid[0] && !bc_delayed_any) n_nda_immediate++;
    step();
    // ---------------- b1 mispredicted: restore checkpoint 1
    mispredict_valid = 1; mispredict_tag = 5'd1; br_resolve_mask = 20'h2;
    rollback_ldq_tail = 6'd3; rollback_stq_tail = 6'd1;
    step();
    // checkpoint 1 held r1, r3 (L0), r5 (L1), r8 (L2); L0 and L1 are past the visibility point
    chk(rename_tainted_regs == 1, "restore keeps only r8, drops roots no longer speculative");
    if (rename_tainted_regs == 1) n_restore_drop++;
    // S0 gets its address: L2 becomes non-speculative
    sta_valid[0] = 1; sta_idx[0] = 5'd0;
    step();
    step();
    chk(yrot_bcast_valid[0] && yrot_bcast_idx[0] == 2, "L2 broadcast after its store address");
    step();
    chk(rename_tainted_regs == 0, "no taints left");
    // ---------------- forwarding error on a new load behind a new store
    uop(0, 0, 1, 0, 0, 20'h0, 6, 7, 0, 1, 8);         // S1
    uop(1, 1, 0, 0, 0, 20'h0, 9, 0, 11, 1, 9);        // L3: ld r11,[r9]
    #1 chk(grp_ldq_idx[1] == 3, "L3 index");
    step();
    sta_valid[0] = 1; sta_idx[0] = 5'd1; fwd_err_valid = 1; fwd_err_idx = 5'd3;
    step();
    repeat (3) begin
      chk(!ld_nonspec[3] && ns_ptr == 3, "forwarding error keeps L3 speculative");
      if (!ld_nonspec[3]) n_fwd_err_hold++;
      step();
    end
    flush_valid = 1; rollback_ldq_tail = 6'd3; rollback_stq_tail = 6'd2;
    step();
    chk(!dut.ldq_valid[3] && rename_tainted_regs == 0, "flush removes L3 and its taint");
    if (!dut.ldq_valid[3]) n_flush++;
    // ---------------- commit L0..L2, S0, S1
    ld_commit = 3'd3; st_commit = 3'd2;
    step();
    chk(ld_nonspec == '0 && !ldq_full && !stq_full, "queues drained");
    if (ld_nonspec == '0) n_commit++;

    // every mechanism must have happened
    begin
      int n [14];
      string nm [14];
      n = '{n_bypass, n_rq_mask, n_rq_release, n_restore_drop, n_nop_bp, n_iq_release, n_nda_delayed,
            n_nda_immediate, n_lanes_full, n_cshadow_hold, n_dshadow_hold, n_fwd_err_hold, n_flush, n_commit};
      nm = '{"same-cycle bypass", "rename-queue mask", "rename-queue release", "restore drop",
             "issue nop + back-propagation", "issue-queue release", "NDA delayed broadcast",
             "NDA immediate broadcast", "both broadcast lanes used", "C-shadow hold", "D-shadow hold",
             "forwarding-error hold", "flush", "commit"};
      for (int i = 0; i < 14; i++) begin
        $display("mechanism %-30s %0d", nm[i], n[i]);
        chk(n[i] > 0, {"mechanism never seen: ", nm[i]});
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
