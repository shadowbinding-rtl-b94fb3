// tb_stt_issue_taint_unit: random issue groups against a model of the
// physical-register taint table. Checks per micro-op the computed YRoT, the
// nop decision for tainted transmitters, the back-propagated issue-queue slot
// and YRoT, and the table contents seen by later micro-ops. Destination
// registers within a group are kept distinct (the unit asserts it).
module tb_stt_issue_taint_unit;
  import sb_pkg::*;
  localparam int W = 4, NP = 32, NQ = 16, M = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [W-1:0] iss_valid, iss_rs1_used, iss_rs2_used, iss_pdst_wen, iss_is_load, iss_transmitter;
  logic [W-1:0][4:0] iss_prs1, iss_prs2, iss_pdst;
  ldq_idx_t [W-1:0] iss_ldq_idx;
  logic [W-1:0][3:0] iss_iq_slot, bp_iq_slot;
  logic [W-1:0] exec_valid, bp_valid;
  yrot_t [W-1:0] iss_yrot, bp_yrot;
  ldq_idx_t head;
  logic [M-1:0] bcast_valid;
  ldq_idx_t [M-1:0] bcast_idx;

  stt_issue_taint_unit #(.ISSUE_WIDTH(W), .NUM_PREGS(NP), .IQ_ENTRIES(NQ), .MEM_WIDTH(M)) dut (
    .clk, .rst_n, .iss_valid, .iss_prs1, .iss_rs1_used, .iss_prs2, .iss_rs2_used, .iss_pdst,
    .iss_pdst_wen, .iss_is_load, .iss_ldq_idx, .iss_transmitter, .iss_iq_slot,
    .exec_valid, .iss_yrot, .bp_valid, .bp_iq_slot, .bp_yrot,
    .ldq_head(head), .bcast_valid, .bcast_idx);

  int checks = 0, failures = 0;
  yrot_t tt [NP];

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
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("%0t %s", $time, what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    yrot_t nt [NP];
    yrot_t a, b, y;
    int nnop = 0, nexec_tainted = 0;
    iss_valid = '0; bcast_valid = '0; head = '0;
    iss_prs1 = '0; iss_prs2 = '0; iss_pdst = '0; iss_rs1_used = '0; iss_rs2_used = '0;
    iss_pdst_wen = '0; iss_is_load = '0; iss_ldq_idx = '0; iss_transmitter = '0; iss_iq_slot = '0;
    bcast_idx = '0;
    foreach (tt[p]) tt[p] = YROT_NONE;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 5000; it++) begin
      @(negedge clk);
      head = ldq_idx_t'($urandom_range(0, 3));
      for (int m = 0; m < M; m++) begin
        bcast_valid[m] = $urandom_range(0, 2) == 0;
        bcast_idx[m]   = ldq_idx_t'($urandom_range(0, 15));
      end
      for (int i = 0; i < W; i++) begin
        iss_valid[i]       = $urandom_range(0, 4) != 0;
        iss_prs1[i]        = 5'($urandom_range(0, NP-1));
        iss_prs2[i]        = 5'($urandom_range(0, NP-1));
        iss_rs1_used[i]    = $urandom_range(0, 4) != 0;
        iss_rs2_used[i]    = $urandom_range(0, 2) != 0;
        iss_pdst[i]        = 5'(i * 8 + $urandom_range(0, 7));   // distinct within a group
        iss_pdst_wen[i]    = $urandom_range(0, 3) != 0;
        iss_is_load[i]     = $urandom_range(0, 3) == 0;
        iss_ldq_idx[i]     = ldq_idx_t'($urandom_range(0, 15));
        iss_transmitter[i] = iss_is_load[i] || ($urandom_range(0, 2) == 0);
        iss_iq_slot[i]     = 4'($urandom_range(0, NQ-1));
      end
      // a load issuing now is still in flight, not on a broadcast lane
      for (int m = 0; m < M; m++)
        for (int i = 0; i < W; i++)
          if (iss_valid[i] && iss_is_load[i] && iss_ldq_idx[i] == bcast_idx[m]) bcast_valid[m] = 1'b0;
      #1;
      foreach (nt[p]) nt[p] = clr(tt[p]);
      for (int i = 0; i < W; i++) begin
        if (!iss_valid[i]) begin
          chk(!exec_valid[i] && !bp_valid[i], "idle slot active");
          continue;
        end
        a = iss_rs1_used[i] ? clr(tt[iss_prs1[i]]) : YROT_NONE;
        b = iss_rs2_used[i] ? clr(tt[iss_prs2[i]]) : YROT_NONE;
        y = youngest(a, b, head);
        chk(iss_yrot[i] === y, $sformatf("slot %0d yrot %p exp %p", i, iss_yrot[i], y));
        chk(exec_valid[i] == !(iss_transmitter[i] && y.valid), $sformatf("slot %0d exec", i));
        chk(bp_valid[i] == (iss_transmitter[i] && y.valid), $sformatf("slot %0d bp", i));
        if (bp_valid[i]) begin
          chk(bp_iq_slot[i] == iss_iq_slot[i] && bp_yrot[i] === y, "bp payload");
          nnop++;
        end
        if (!iss_transmitter[i] && y.valid && exec_valid[i]) nexec_tainted++;
        if (iss_pdst_wen[i])
          nt[iss_pdst[i]] = iss_is_load[i] ? yrot_t'{valid: 1'b1, idx: iss_ldq_idx[i]} : y;
      end
      tt = nt;
    end
    chk(nnop > 0 && nexec_tainted > 0, $sformatf("coverage nops=%0d tainted-nontransmitters=%0d", nnop, nexec_tainted));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
