// sb_cfg_run: random instruction stream through shadowbinding_top at one core
// size, used by tb_shadowbinding_configs.
//
// The testbench plays a simple in-order-issue core around the block. Each
// cycle it dispatches up to CW random instructions (ALU, load, store, branch)
// on registers r1..r7, resolves random branches (always correctly predicted),
// generates random store addresses, completes random loads, issues in program
// order through STT-Issue and commits. Its own ground truth is: a load is
// speculative while any older branch is unresolved or any older store lacks
// its address; a value's root is the youngest load in its dataflow. Checked:
//   * STT-Rename: a value whose root is speculative has a valid YRoT naming
//     that root; a valid YRoT always names the true root;
//   * STT-Issue: a transmitter whose root is speculative never executes; a
//     non-transmitter always executes;
//   * NDA: every wakeup names a completed load that is non-speculative, each
//     load is woken once, and after the drain every load has been woken;
//   * tracker: no load is reported non-speculative while it truly is not,
//     and at most MW loads become non-speculative per cycle.
module sb_cfg_run #(
  parameter int CW      = 4,
  parameter int MW      = 2,
  parameter int N_INSTR = 2000
) (
  input  logic clk,
  input  logic start,
  output logic done,
  output int   checks,
  output int   failures,
  output int   n_nop,
  output int   n_delayed,
  output int   n_bcast,
  output int   n_misp,
  output int   n_flush
);
  import sb_pkg::*;

  logic rst_n;
  logic [CW-1:0] grp_valid, grp_is_load, grp_is_store, grp_is_br, grp_rd_wen, grp_transmitter, grp_bypassed;
  logic [CW-1:0][4:0] grp_br_tag, grp_rs1, grp_rs2, grp_rd;
  logic [CW-1:0][19:0] grp_br_mask;
  logic [CW-1:0][5:0] grp_iq_slot;
  ldq_idx_t [CW-1:0] grp_ldq_idx;
  logic [CW-1:0][4:0] grp_stq_idx;
  yrot_t [CW-1:0] grp_yrot;
  logic ldq_full, stq_full;
  logic [MW-1:0] sta_valid;
  logic [MW-1:0][4:0] sta_idx;
  logic fwd_err_valid;
  ldq_idx_t fwd_err_idx;
  logic [$clog2(CW+1)-1:0] ld_commit, st_commit;
  logic [19:0] br_resolve_mask;
  logic mispredict_valid, flush_valid;
  logic [4:0] mispredict_tag;
  ldq_ptr_t rollback_ldq_tail;
  logic [5:0] rollback_stq_tail;
  logic [39:0] rq_ready_in, rq_entry_free, rq_ready_out, iq_ready_in, iq_entry_free, iq_ready_out;
  logic [CW-1:0] iss_valid, iss_rs1_used, iss_rs2_used, iss_pdst_wen, iss_is_load, iss_transmitter, iss_exec_valid;
  logic [CW-1:0][6:0] iss_prs1, iss_prs2, iss_pdst;
  ldq_idx_t [CW-1:0] iss_ldq_idx;
  logic [CW-1:0][5:0] iss_iq_slot;
  yrot_t [CW-1:0] iss_yrot;
  logic [MW-1:0] cmp_valid, wb_valid, bc_valid;
  ldq_idx_t [MW-1:0] cmp_ldq_idx;
  logic [MW-1:0][6:0] cmp_pdst, wb_pdst, bc_pdst;
  logic [MW-1:0][63:0] cmp_data, wb_data;
  logic bc_delayed_any;
  logic [MW-1:0] yrot_bcast_valid;
  ldq_idx_t [MW-1:0] yrot_bcast_idx;
  ldq_ptr_t ns_ptr;
  ldq_vec_t ld_nonspec;
  logic [5:0] rename_tainted_regs;

  shadowbinding_top #(.CORE_WIDTH(CW), .MEM_WIDTH(MW), .ISSUE_WIDTH(CW)) dut (.*);

  // ---------------- instruction records, indexed by sequence number
  typedef enum logic [1:0] {K_ALU, K_LD, K_ST, K_BR} kind_e;
  kind_e kind [N_INSTR];
  int rd [N_INSTR], rs1 [N_INSTR], rs2 [N_INSTR], root [N_INSTR], lq [N_INSTR], sq [N_INSTR];
  int tag [N_INSTR], psrc1 [N_INSTR], psrc2 [N_INSTR];
  bit resolved [N_INSTR], addressed [N_INSTR], completed [N_INSTR], woken [N_INSTR];
  int reg_root [8], reg_prod [8];
  int snap_root [N_INSTR][8], snap_prod [N_INSTR][8];  // register view after each branch
  int lqp [N_INSTR], sqp [N_INSTR];                     // queue pointers with wrap bit
  int ld_tail_ptr, st_tail_ptr;
  int ld_of_lq [32], st_of_sq [32];
  bit tag_busy [20];
  int err_seq;                                          // load with a forwarding error, or -1
  int n_disp, n_iss, ld_head_seq_q [$], st_head_seq_q [$];

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 8) $display("[CW=%0d] %0t FAIL %s", CW, $time, what); end
  endtask

  // truth: oldest unresolved branch / oldest store without address
  function automatic int oldest_unres_br();
    for (int s = 0; s < n_disp; s++) if (kind[s] == K_BR && !resolved[s]) return s;
    return n_disp;
  endfunction
  function automatic int oldest_unaddr_st();
    for (int s = 0; s < n_disp; s++) if (kind[s] == K_ST && !addressed[s]) return s;
    return n_disp;
  endfunction
  function automatic bit truly_nonspec(int s);
    return s < oldest_unres_br() && s < oldest_unaddr_st() && (err_seq < 0 || s < err_seq);
  endfunction
  function automatic bit is_tx(int s);
    return kind[s] != K_ALU;
  endfunction

  task automatic idle();
    grp_valid = '0; grp_is_load = '0; grp_is_store = '0; grp_is_br = '0; grp_br_tag = '0;
    grp_br_mask = '0; grp_rs1 = '0; grp_rs2 = '0; grp_rd = '0; grp_rd_wen = '0;
    grp_transmitter = '0; grp_iq_slot = '0;
    sta_valid = '0; sta_idx = '0; fwd_err_valid = 0; fwd_err_idx = '0; ld_commit = '0; st_commit = '0;
    br_resolve_mask = '0; mispredict_valid = 0; mispredict_tag = '0; flush_valid = 0;
    rollback_ldq_tail = '0; rollback_stq_tail = '0;
    rq_entry_free = '1; iq_entry_free = '1; rq_ready_in = '0; iq_ready_in = '0;
    iss_valid = '0; iss_prs1 = '0; iss_prs2 = '0; iss_rs1_used = '0; iss_rs2_used = '0;
    iss_pdst = '0; iss_pdst_wen = '0; iss_is_load = '0; iss_ldq_idx = '0; iss_transmitter = '0;
    iss_iq_slot = '0; cmp_valid = '0; cmp_ldq_idx = '0; cmp_pdst = '0; cmp_data = '0;
  endtask

  // one cycle of stimulus; draining stops new dispatch and resolves everything
  task automatic cycle(bit drain);
    int ubr, n;
    bit misp;
    logic [19:0] live_mask, freed;
    idle();
    ubr = oldest_unres_br();
    freed = '0;
    misp = 0;
    // ---- now and then a branch turns out mispredicted: squash what follows it
    if (!drain && ubr < n_disp && $urandom_range(0, 24) == 0) begin
      int b = ubr;
      for (int q = ubr + 1; q < n_disp; q++)
        if (kind[q] == K_BR && !resolved[q] && $urandom_range(0, 1) == 0) b = q;
      misp = 1; n_misp++;
      resolved[b] = 1; freed[tag[b]] = 1'b1;
      mispredict_valid = 1'b1; mispredict_tag = 5'(tag[b]);
      for (int q = b + 1; q < n_disp; q++) if (kind[q] == K_BR && !resolved[q]) freed[tag[q]] = 1'b1;
      while (ld_head_seq_q.size() > 0 && ld_head_seq_q[$] > b) begin
        ld_tail_ptr = lqp[ld_head_seq_q[$]]; void'(ld_head_seq_q.pop_back());
      end
      while (st_head_seq_q.size() > 0 && st_head_seq_q[$] > b) begin
        st_tail_ptr = sqp[st_head_seq_q[$]]; void'(st_head_seq_q.pop_back());
      end
      rollback_ldq_tail = ldq_ptr_t'(ld_tail_ptr);
      rollback_stq_tail = 6'(st_tail_ptr);
      for (int r = 0; r < 8; r++) begin reg_root[r] = snap_root[b][r]; reg_prod[r] = snap_prod[b][r]; end
      n_disp = b + 1;
      if (n_iss > n_disp) n_iss = n_disp;
      if (err_seq > b) err_seq = -1;
    end
    // ---- a load with a forwarding error, once it is the oldest, flushes itself
    // and everything younger
    else if (err_seq >= 0 && ld_head_seq_q.size() > 0 && ld_head_seq_q[0] == err_seq &&
             ubr > err_seq && oldest_unaddr_st() > err_seq && (drain || $urandom_range(0, 2) == 0)) begin
      int b = err_seq;
      misp = 1; n_flush++;
      flush_valid = 1'b1;
      for (int q = b; q < n_disp; q++) if (kind[q] == K_BR && !resolved[q]) freed[tag[q]] = 1'b1;
      while (ld_head_seq_q.size() > 0 && ld_head_seq_q[$] >= b) begin
        ld_tail_ptr = lqp[ld_head_seq_q[$]]; void'(ld_head_seq_q.pop_back());
      end
      while (st_head_seq_q.size() > 0 && st_head_seq_q[$] >= b) begin
        st_tail_ptr = sqp[st_head_seq_q[$]]; void'(st_head_seq_q.pop_back());
      end
      rollback_ldq_tail = ldq_ptr_t'(ld_tail_ptr);
      rollback_stq_tail = 6'(st_tail_ptr);
      for (int r = 0; r < 8; r++) begin reg_root[r] = snap_root[b][r]; reg_prod[r] = snap_prod[b][r]; end
      n_disp = b;
      if (n_iss > n_disp) n_iss = n_disp;
      err_seq = -1;
    end
    // ---- resolve branches (random, any order) and store addresses
    for (int s = 0; s < n_disp && !misp; s++) begin
      if (kind[s] == K_BR && !resolved[s] && (drain || $urandom_range(0, 5) == 0)) begin
        resolved[s] = 1; br_resolve_mask[tag[s]] = 1'b1; freed[tag[s]] = 1'b1;
      end
    end
    n = 0;
    for (int s = 0; s < n_disp && n < MW; s++) begin
      if (kind[s] == K_ST && !addressed[s] && (drain || $urandom_range(0, 4) == 0)) begin
        addressed[s] = 1; sta_valid[n] = 1'b1; sta_idx[n] = 5'(sq[s]); n++;
      end
    end
    // ---- a load under a data shadow finds it took stale data
    if (!misp && !drain && err_seq < 0 && $urandom_range(0, 29) == 0) begin
      int ust = oldest_unaddr_st();
      for (int q = n_disp - 1; q > ust; q--)
        if (kind[q] == K_LD && err_seq < 0 && $urandom_range(0, 2) == 0) err_seq = q;
      if (err_seq >= 0) begin fwd_err_valid = 1'b1; fwd_err_idx = ldq_idx_t'(lq[err_seq]); end
    end
    // ---- load completions (any dispatched load, random order)
    n = 0;
    for (int s = 0; s < n_disp && n < MW; s++) begin
      if (kind[s] == K_LD && !completed[s] && (drain || $urandom_range(0, 3) == 0)) begin
        completed[s] = 1; cmp_valid[n] = 1'b1; cmp_ldq_idx[n] = ldq_idx_t'(lq[s]);
        cmp_pdst[n] = 7'(s % 128); cmp_data[n] = 64'(s); n++;
      end
    end
    // ---- STT-Issue, program order, no same-group dependence
    n = 0;
    begin
      int first = n_iss;
      while (n < CW && n_iss < n_disp) begin
        int s = n_iss;
        bit dep = 0;
        for (int q = first; q < s; q++) if (psrc1[s] == q || psrc2[s] == q) dep = 1;
        if (dep) break;
        iss_valid[n] = 1'b1;
        iss_prs1[n] = 7'(psrc1[s] < 0 ? 0 : psrc1[s] % 128); iss_rs1_used[n] = psrc1[s] >= 0;
        iss_prs2[n] = 7'(psrc2[s] < 0 ? 0 : psrc2[s] % 128); iss_rs2_used[n] = psrc2[s] >= 0;
        iss_pdst[n] = 7'(s % 128); iss_pdst_wen[n] = kind[s] == K_LD || kind[s] == K_ALU;
        iss_is_load[n] = kind[s] == K_LD; iss_ldq_idx[n] = ldq_idx_t'(lq[s] < 0 ? 0 : lq[s]);
        iss_transmitter[n] = is_tx(s); iss_iq_slot[n] = 6'(s % 40);
        n++; n_iss++;
      end
    end
    // ---- dispatch
    live_mask = '0;
    for (int s = 0; s < n_disp; s++) if (kind[s] == K_BR && !resolved[s]) live_mask[tag[s]] = 1'b1;
    if (!drain && !misp && n_disp + CW <= N_INSTR && ld_head_seq_q.size() + CW <= 28 &&
        st_head_seq_q.size() + CW <= 28 && n_disp - n_iss < 60 &&
        (ld_head_seq_q.size() == 0 || n_disp - ld_head_seq_q[0] < 100) &&
        (st_head_seq_q.size() == 0 || n_disp - st_head_seq_q[0] < 100)) begin
      for (int i = 0; i < CW; i++) begin
        int s = n_disp;
        int k = $urandom_range(0, 9);
        int t = -1;
        kind[s] = k < 4 ? K_ALU : k < 7 ? K_LD : k < 8 ? K_ST : K_BR;
        if (kind[s] == K_BR) begin
          for (int g = 0; g < 20; g++) if (!tag_busy[g] && !freed[g] && t < 0) t = g;
          if (t < 0) kind[s] = K_ALU;
        end
        rs1[s] = $urandom_range(1, 7); rs2[s] = $urandom_range(0, 7);
        rd[s]  = (kind[s] == K_ALU || kind[s] == K_LD) ? $urandom_range(1, 7) : 0;
        if (kind[s] == K_LD) rs2[s] = 0;
        // truth: youngest root of the sources
        root[s] = reg_root[rs1[s]];
        if (rs2[s] != 0 && reg_root[rs2[s]] > root[s]) root[s] = reg_root[rs2[s]];
        psrc1[s] = reg_prod[rs1[s]];
        psrc2[s] = rs2[s] != 0 ? reg_prod[rs2[s]] : -1;
        if (psrc1[s] >= 0 && s - psrc1[s] > 110) psrc1[s] = -1;   // physical register recycled
        if (psrc2[s] >= 0 && s - psrc2[s] > 110) psrc2[s] = -1;
        for (int r = 0; r < 8; r++) begin snap_root[s][r] = reg_root[r]; snap_prod[s][r] = reg_prod[r]; end
        if (rd[s] != 0) begin
          reg_root[rd[s]] = kind[s] == K_LD ? s : root[s];
          reg_prod[rd[s]] = s;
        end
        resolved[s] = 0; addressed[s] = 0; completed[s] = 0; woken[s] = 0; lq[s] = -1; sq[s] = -1;
        grp_valid[i] = 1'b1; grp_rs1[i] = 5'(rs1[s]); grp_rs2[i] = 5'(rs2[s]); grp_rd[i] = 5'(rd[s]);
        grp_rd_wen[i] = rd[s] != 0; grp_transmitter[i] = is_tx(s); grp_iq_slot[i] = 6'(s % 40);
        grp_br_mask[i] = live_mask;
        grp_is_load[i] = kind[s] == K_LD; grp_is_store[i] = kind[s] == K_ST; grp_is_br[i] = kind[s] == K_BR;
        if (kind[s] == K_BR) begin
          tag[s] = t; tag_busy[t] = 1; grp_br_tag[i] = 5'(t); live_mask[t] = 1'b1;
        end
        if (kind[s] == K_LD) begin lqp[s] = ld_tail_ptr; ld_tail_ptr = (ld_tail_ptr + 1) % 64; end
        if (kind[s] == K_ST) begin sqp[s] = st_tail_ptr; st_tail_ptr = (st_tail_ptr + 1) % 64; end
        n_disp++;
      end
      #1;
      for (int i = 0; i < CW; i++) begin
        int s = n_disp - CW + i;
        if (kind[s] == K_LD) begin lq[s] = int'(grp_ldq_idx[i]); ld_head_seq_q.push_back(s); end
        if (kind[s] == K_ST) begin sq[s] = int'(grp_stq_idx[i]); st_head_seq_q.push_back(s); end
        // STT-Rename: YRoT against the truth
        if (root[s] >= 0 && !truly_nonspec(root[s]))
          chk(grp_yrot[i].valid && int'(grp_yrot[i].idx) == lq[root[s]],
              $sformatf("rename: seq %0d root %0d speculative but YRoT %p", s, root[s], grp_yrot[i]));
        if (grp_yrot[i].valid)
          chk(root[s] >= 0 && int'(grp_yrot[i].idx) == lq[root[s]],
              $sformatf("rename: seq %0d YRoT %p but root %0d", s, grp_yrot[i], root[s]));
      end
    end
    #1;
    // ---- STT-Issue checks
    for (int i = 0; i < CW; i++) begin
      if (!iss_valid[i]) continue;
      begin
        int s = n_iss - n + i;
        if (!is_tx(s)) chk(iss_exec_valid[i], "issue: non-transmitter blocked");
        else if (root[s] >= 0 && !truly_nonspec(root[s]))
          chk(!iss_exec_valid[i], $sformatf("issue: tainted transmitter seq %0d executed", s));
        if (is_tx(s) && !iss_exec_valid[i]) n_nop++;
      end
    end
    // ---- tracker and NDA checks
    for (int s = 0; s < n_disp; s++)
      if (kind[s] == K_LD && lq[s] >= 0 && !truly_nonspec(s) && ld_nonspec[lq[s]] &&
          ld_head_seq_q.size() > 0 && s >= ld_head_seq_q[0])
        chk(0, $sformatf("tracker: seq %0d reported non-speculative too early", s));
    for (int l = 0; l < MW; l++) begin
      if (!bc_valid[l]) continue;
      n_bcast++;
      begin
        int hit = -1;
        foreach (ld_head_seq_q[q]) begin
          int s = ld_head_seq_q[q];
          if (hit < 0 && completed[s] && !woken[s] && int'(bc_pdst[l]) == s % 128) hit = s;
        end
        chk(hit >= 0 && truly_nonspec(hit), $sformatf("NDA: wakeup of p%0d not allowed", bc_pdst[l]));
        if (hit >= 0) woken[hit] = 1;
      end
    end
    if (bc_delayed_any) n_delayed++;
    // ---- commit: loads once non-speculative, completed and woken; stores once addressed
    n = 0;
    while (n < CW && ld_head_seq_q.size() > 0 && truly_nonspec(ld_head_seq_q[0]) &&
           woken[ld_head_seq_q[0]] && ld_nonspec[lq[ld_head_seq_q[0]]]) begin
      void'(ld_head_seq_q.pop_front()); n++;
    end
    ld_commit = ($clog2(CW+1))'(n);
    n = 0;
    while (n < CW && st_head_seq_q.size() > 0 && addressed[st_head_seq_q[0]] &&
           st_head_seq_q[0] < ubr) begin
      void'(st_head_seq_q.pop_front()); n++;
    end
    st_commit = ($clog2(CW+1))'(n);
    @(posedge clk);
    for (int g = 0; g < 20; g++) if (freed[g]) tag_busy[g] = 0;
    #1;
  endtask

  initial begin
    done = 0; checks = 0; failures = 0; n_nop = 0; n_delayed = 0; n_bcast = 0; n_misp = 0; n_flush = 0; err_seq = -1;
    ld_tail_ptr = 0; st_tail_ptr = 0;
    rst_n = 0; n_disp = 0; n_iss = 0;
    foreach (reg_root[r]) begin reg_root[r] = -1; reg_prod[r] = -1; end
    foreach (tag_busy[g]) tag_busy[g] = 0;
    idle();
    wait (start);
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    while (n_disp + CW <= N_INSTR) cycle(0);
    repeat (120) cycle(1);
    // drain: every load woken, no taint left
    chk(rename_tainted_regs == 0, $sformatf("taints left after drain: %0d", rename_tainted_regs));
    begin
      int missing;
      missing = 0;
      for (int s = 0; s < n_disp; s++) if (kind[s] == K_LD && !woken[s]) missing++;
      chk(missing == 0, $sformatf("%0d loads never woken", missing));
    end
    chk(n_nop > 0 && n_delayed > 0 && n_bcast > 0 && n_misp > 0 && n_flush > 0, "coverage");
    done = 1;
  end
endmodule
