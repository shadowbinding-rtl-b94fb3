// tb_yrot_rename_chain: random rename groups against a sequential model.
// The model renames the group one instruction at a time on a private copy of
// the taint RAT (no bypass logic at all), which is what the parallel chain must
// reproduce. YRoT order is the distance from a random load-queue head.
module tb_yrot_rename_chain;
  import sb_pkg::*;
  localparam int W = 4;
  logic [W-1:0] valid, rd_wen, is_load, bypassed;
  logic [W-1:0][4:0] rs1, rs2, rd;
  ldq_idx_t [W-1:0] ldq_idx;
  yrot_t [W-1:0] rat_rs1, rat_rs2, yrot, dst_yrot;
  ldq_idx_t head;
  int checks = 0, failures = 0;

  yrot_rename_chain #(.CORE_WIDTH(W)) dut (.valid, .rs1, .rs2, .rd, .rd_wen, .is_load, .ldq_idx,
    .rat_rs1, .rat_rs2, .ldq_head(head), .yrot, .dst_yrot, .bypassed);

  yrot_t rat [32];

  function automatic yrot_t youngest(yrot_t a, yrot_t b, ldq_idx_t h);
    int da, db;
    if (!a.valid && !b.valid) return YROT_NONE;
    if (!a.valid) return b;
    if (!b.valid) return a;
    da = (int'(a.idx) - int'(h) + 32) % 32;
    db = (int'(b.idx) - int'(h) + 32) % 32;
    return (db > da) ? b : a;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    yrot_t lr [32];
    yrot_t e1, e2, ey, ed;
    int nbyp = 0;
    for (int it = 0; it < 3000; it++) begin
      head = ldq_idx_t'($urandom);
      for (int a = 0; a < 32; a++) begin
        rat[a].valid = (a != 0) && ($urandom_range(0, 2) == 0);
        rat[a].idx   = ldq_idx_t'($urandom);
      end
      for (int i = 0; i < W; i++) begin
        valid[i]   = $urandom_range(0, 7) != 0;
        rs1[i]     = 5'($urandom_range(0, 7));   // small register range: many dependencies
        rs2[i]     = 5'($urandom_range(0, 7));
        rd[i]      = 5'($urandom_range(1, 7));
        rd_wen[i]  = $urandom_range(0, 3) != 0;
        is_load[i] = $urandom_range(0, 2) == 0;
        ldq_idx[i] = ldq_idx_t'($urandom);
        rat_rs1[i] = rat[rs1[i]];
        rat_rs2[i] = rat[rs2[i]];
      end
      #1;
      lr = rat;
      for (int i = 0; i < W; i++) begin
        if (!valid[i]) continue;
        ey = youngest(lr[rs1[i]], lr[rs2[i]], head);
        ed = is_load[i] ? yrot_t'{valid: 1'b1, idx: ldq_idx[i]} : ey;
        checks++;
        if (yrot[i] !== ey || dst_yrot[i] !== ed) begin
          failures++;
          if (failures < 10) $display("mismatch it=%0d slot=%0d got %p/%p exp %p/%p", it, i, yrot[i], dst_yrot[i], ey, ed);
        end
        if (bypassed[i]) nbyp++;
        if (rd_wen[i]) lr[rd[i]] = ed;
      end
      // one hand-made case: load in slot 0, dependent chain through slots 1..3
    end
    head = 5'd3;
    valid = '1; rd_wen = '1; is_load = 4'b0001;
    rs1 = '{5'd3, 5'd2, 5'd1, 5'd9};  rs2 = '0; rd = '{5'd4, 5'd3, 5'd2, 5'd1};
    ldq_idx = '{5'd0, 5'd0, 5'd0, 5'd7};
    for (int i = 0; i < W; i++) begin rat_rs1[i] = YROT_NONE; rat_rs2[i] = YROT_NONE; end
    #1;
    checks++;
    if (yrot[3] !== yrot_t'{valid: 1'b1, idx: 5'd7} || dst_yrot[3] !== yrot_t'{valid: 1'b1, idx: 5'd7}) begin
      failures++; $display("chain case wrong: %p", yrot[3]);
    end
    checks++;
    if (nbyp == 0) begin failures++; $display("no same-cycle dependency exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
