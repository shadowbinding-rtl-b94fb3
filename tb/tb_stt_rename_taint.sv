// tb_stt_rename_taint: random rename groups, YRoT broadcasts, checkpoints and
// restores against a reference model of the taint RAT.
// The model renames sequentially on an array copy, keeps one RAT copy per
// branch tag, and on a restore keeps only roots inside [ns, tail). The load
// queue state (head, visibility point, tail) is driven directly.
module tb_stt_rename_taint;
  import sb_pkg::*;
  localparam int W = 4, NB = 8, M = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [W-1:0] ren_valid, ren_rd_wen, ren_is_load, ren_is_br, ren_bypassed;
  logic [W-1:0][4:0] ren_rs1, ren_rs2, ren_rd;
  ldq_idx_t [W-1:0] ren_ldq_idx;
  logic [W-1:0][2:0] ren_br_tag;
  yrot_t [W-1:0] ren_yrot;
  ldq_idx_t head;
  ldq_ptr_t tail, ns;
  logic [M-1:0] bcast_valid;
  ldq_idx_t [M-1:0] bcast_idx;
  logic restore_valid, flush_valid;
  logic [2:0] restore_tag;
  logic [5:0] tainted_regs;

  stt_rename_taint #(.CORE_WIDTH(W), .NUM_AREGS(32), .MAX_BR(NB), .MEM_WIDTH(M)) dut (
    .clk, .rst_n, .ren_valid, .ren_rs1, .ren_rs2, .ren_rd, .ren_rd_wen, .ren_is_load,
    .ren_ldq_idx, .ren_is_br, .ren_br_tag, .ren_yrot, .ren_bypassed,
    .ldq_head(head), .ldq_tail(tail), .ns_ptr(ns), .bcast_valid, .bcast_idx,
    .restore_valid, .restore_tag, .flush_valid, .tainted_regs);

  int checks = 0, failures = 0;
  yrot_t rat [32];
  yrot_t ck [NB][32];

  function automatic yrot_t youngest(yrot_t a, yrot_t b, ldq_idx_t h);
    if (!a.valid && !b.valid) return YROT_NONE;
    if (!a.valid) return b;
    if (!b.valid) return a;
    return (((int'(b.idx) - int'(h) + 32) % 32) > ((int'(a.idx) - int'(h) + 32) % 32)) ? b : a;
  endfunction
  function automatic yrot_t clr(yrot_t y);
    for (int m = 0; m < M; m++) if (bcast_valid[m] && y.valid && y.idx == bcast_idx[m]) return YROT_NONE;
    return y;
  endfunction
  function automatic bit live(yrot_t y);
    int d = (int'(y.idx) - int'(ns[4:0]) + 32) % 32;
    int o = (int'(tail) - int'(ns) + 64) % 64;
    return y.valid && d < o;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    yrot_t lr [32];
    yrot_t ey, ed;
    int nrest = 0, nbyp = 0, ndrop = 0, nflush = 0;
    ren_valid = '0; restore_valid = 0; flush_valid = 0; bcast_valid = '0;
    ren_rs1 = '0; ren_rs2 = '0; ren_rd = '0; ren_rd_wen = '0; ren_is_load = '0; ren_is_br = '0;
    ren_ldq_idx = '0; ren_br_tag = '0; bcast_idx = '0; restore_tag = '0;
    head = '0; ns = '0; tail = '0;
    foreach (rat[a]) rat[a] = YROT_NONE;
    foreach (ck[b, a]) ck[b][a] = YROT_NONE;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 4000; it++) begin
      @(negedge clk);
      // random but consistent queue state: head <= ns <= tail
      head = ldq_idx_t'($urandom_range(0, 31));
      ns   = ldq_ptr_t'({1'b0, head} + ldq_ptr_t'($urandom_range(0, 12)));
      tail = ldq_ptr_t'(ns + ldq_ptr_t'($urandom_range(0, 16)));
      for (int m = 0; m < M; m++) begin
        bcast_valid[m] = $urandom_range(0, 2) == 0;
        bcast_idx[m]   = ldq_idx_t'($urandom_range(0, 31));
      end
      restore_valid = $urandom_range(0, 15) == 0;
      flush_valid   = !restore_valid && $urandom_range(0, 40) == 0;
      restore_tag   = 3'($urandom_range(0, NB-1));
      for (int i = 0; i < W; i++) begin
        ren_valid[i]   = $urandom_range(0, 5) != 0;
        ren_rs1[i]     = 5'($urandom_range(0, 9));
        ren_rs2[i]     = 5'($urandom_range(0, 9));
        ren_rd[i]      = 5'($urandom_range(1, 9));
        ren_rd_wen[i]  = $urandom_range(0, 4) != 0;
        ren_is_load[i] = $urandom_range(0, 3) == 0;
        ren_ldq_idx[i] = ldq_idx_t'($urandom_range(0, 31));
        ren_is_br[i]   = $urandom_range(0, 5) == 0;
        ren_br_tag[i]  = 3'($urandom_range(0, NB-1));
      end
      // a load being renamed is at the queue tail, never on a broadcast lane
      for (int m = 0; m < M; m++)
        for (int i = 0; i < W; i++)
          if (ren_valid[i] && ren_is_load[i] && ren_ldq_idx[i] == bcast_idx[m]) bcast_valid[m] = 1'b0;
      #1;
      // model
      foreach (lr[a]) lr[a] = clr(rat[a]);
      for (int i = 0; i < W; i++) begin
        if (!ren_valid[i]) continue;
        ey = youngest(lr[ren_rs1[i]], lr[ren_rs2[i]], head);
        ed = ren_is_load[i] ? yrot_t'{valid: 1'b1, idx: ren_ldq_idx[i]} : ey;
        if (!restore_valid && !flush_valid) begin
          checks++;
          if (ren_yrot[i] !== ey) begin
            failures++;
            if (failures < 10) $display("it=%0d slot=%0d yrot %p exp %p", it, i, ren_yrot[i], ey);
          end
          if (ren_bypassed[i]) nbyp++;
        end
        if (ren_rd_wen[i]) lr[ren_rd[i]] = clr(ed);
        if (ren_is_br[i] && !restore_valid && !flush_valid) ck[ren_br_tag[i]] = lr;
      end
      if (restore_valid) begin
        nrest++;
        foreach (rat[a]) begin
          if (ck[restore_tag][a].valid && !live(ck[restore_tag][a])) ndrop++;
          rat[a] = live(ck[restore_tag][a]) ? ck[restore_tag][a] : YROT_NONE;
        end
      end else if (flush_valid) begin
        nflush++;
        foreach (rat[a]) rat[a] = live(rat[a]) ? rat[a] : YROT_NONE;
      end else begin
        rat = lr;
      end
      @(posedge clk);
      #1;
      // compare the whole RAT through the taint count and a probe read
      begin
        int cnt;
        cnt = 0;
        foreach (rat[a]) if (rat[a].valid) cnt++;
        checks++;
        if (tainted_regs != 6'(cnt)) begin
          failures++;
          if (failures < 10) $display("it=%0d tainted %0d exp %0d", it, tainted_regs, cnt);
        end
      end
    end
    checks++;
    if (nrest == 0 || nbyp == 0 || ndrop == 0 || nflush == 0) begin
      failures++;
      $display("coverage: restores=%0d bypasses=%0d dropped=%0d flushes=%0d", nrest, nbyp, ndrop, nflush);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
