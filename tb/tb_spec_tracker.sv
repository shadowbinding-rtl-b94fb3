// tb_spec_tracker: directed sequences for the shadow tracker.
//   1. a load behind a store without address (data shadow) stays speculative
//      until the store address arrives, then is broadcast two cycles later;
//   2. a load under an unresolved branch (control shadow) holds back every
//      younger load, since shadows resolve in order;
//   3. at most MEM_WIDTH loads pass the visibility point per cycle;
//   4. a forwarding error keeps a load speculative; a flush removes it;
//   5. a misprediction cuts the queue back; commits advance the head.
module tb_spec_tracker;
  import sb_pkg::*;
  localparam int W = 4, M = 2, NS = 8, NB = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [W-1:0] alloc_ld, alloc_st;
  logic [W-1:0][NB-1:0] alloc_br_mask;
  ldq_idx_t [W-1:0] alloc_ldq_idx;
  logic [W-1:0][2:0] alloc_stq_idx;
  logic ldq_full, stq_full;
  logic [M-1:0] sta_valid;
  logic [M-1:0][2:0] sta_idx;
  logic fwd_err_valid;
  ldq_idx_t fwd_err_idx;
  logic [2:0] ld_commit, st_commit;
  logic [NB-1:0] br_resolve_mask;
  logic rollback_valid;
  ldq_ptr_t rollback_ldq_tail;
  logic [3:0] rollback_stq_tail;
  ldq_ptr_t ldq_head, ldq_tail, ns_ptr;
  ldq_vec_t ldq_valid, ld_nonspec;
  logic [M-1:0] bcast_valid;
  ldq_idx_t [M-1:0] bcast_idx;

  spec_tracker #(.CORE_WIDTH(W), .MEM_WIDTH(M), .STQ_ENTRIES(NS), .MAX_BR(NB)) dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("%0t FAIL %s", $time, what); end
  endtask

  task automatic idle();
    alloc_ld = '0; alloc_st = '0; alloc_br_mask = '0; sta_valid = '0; sta_idx = '0;
    fwd_err_valid = 0; fwd_err_idx = '0; ld_commit = '0; st_commit = '0;
    br_resolve_mask = '0; rollback_valid = 0; rollback_ldq_tail = '0; rollback_stq_tail = '0;
  endtask
  task automatic step(); @(posedge clk); #1; idle(); endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nb;
    idle();
    repeat (3) @(posedge clk);
    rst_n = 1;
    #1;
    // group: S0, L0, L1 (under branch 0), L2
    alloc_st = 4'b0001; alloc_ld = 4'b1110;
    alloc_br_mask[2] = 4'b0001; alloc_br_mask[3] = 4'b0001;
    #1;
    chk(alloc_stq_idx[0] == 0 && alloc_ldq_idx[1] == 0 && alloc_ldq_idx[2] == 1 && alloc_ldq_idx[3] == 2,
        "allocation indices");
    step();
    chk(ldq_tail == 3 && ldq_valid[2:0] == 3'b111, "three loads allocated");
    repeat (3) begin
      step();
      chk(ns_ptr == 0 && bcast_valid == 0 && ld_nonspec == 0, "L0 held by store without address");
    end
    // 1. store address arrives
    sta_valid[0] = 1'b1; sta_idx[0] = 3'd0;
    step();                               // address recorded
    chk(bcast_valid == 0, "no broadcast in the cycle after the address");
    step();                               // pointer passes L0, broadcast visible
    chk(bcast_valid == 2'b01 && bcast_idx[0] == 0, "L0 broadcast two cycles after its store address");
    chk(ns_ptr == 1 && ld_nonspec[0] && !ld_nonspec[1], "visibility point past L0 only");
    // 2. L1, L2 under branch 0: held
    repeat (2) begin step(); chk(ns_ptr == 1 && bcast_valid == 0, "branch shadow holds L1 and L2"); end
    br_resolve_mask = 4'b0001;
    step(); step();
    chk(bcast_valid == 2'b11 && bcast_idx[0] == 1 && bcast_idx[1] == 2, "L1, L2 broadcast together");
    // 3. rate: four unshadowed loads pass two per cycle
    alloc_ld = 4'b1111;
    step();
    step();
    chk(bcast_valid == 2'b11 && bcast_idx[0] == 3 && bcast_idx[1] == 4, "first two of four");
    step();
    chk(bcast_valid == 2'b11 && bcast_idx[0] == 5 && bcast_idx[1] == 6, "second two of four");
    step();
    chk(bcast_valid == 0 && ns_ptr == 7, "all seven non-speculative");
    // commit five loads and the store
    ld_commit = 3'd4; st_commit = 3'd1;
    step();
    ld_commit = 3'd1;
    step();
    chk(ldq_head == 5 && !ldq_valid[0] && !ldq_valid[4] && ldq_valid[5], "head after commits");
    // 4. store S1 then load L7 behind it; forwarding error on L7
    alloc_st = 4'b0001; alloc_ld = 4'b0010;
    step();
    fwd_err_valid = 1'b1; fwd_err_idx = 5'd7;
    sta_valid[0] = 1'b1; sta_idx[0] = 3'd1;
    step();
    repeat (3) begin step(); chk(ns_ptr == 7 && !ld_nonspec[7], "load with forwarding error stays speculative"); end
    rollback_valid = 1'b1; rollback_ldq_tail = 6'd7; rollback_stq_tail = 4'd2;
    step();
    chk(ldq_tail == 7 && !ldq_valid[7], "flush removed L7");
    // 5. two loads under branch 2, mispredicted
    alloc_ld = 4'b0011; alloc_br_mask[0] = 4'b0100; alloc_br_mask[1] = 4'b0100;
    step();
    chk(ldq_tail == 9 && ldq_valid[8:7] == 2'b11, "L7', L8 allocated");
    step();
    chk(ns_ptr == 7, "held by branch 2");
    rollback_valid = 1'b1; rollback_ldq_tail = 6'd7; rollback_stq_tail = 4'd2;
    br_resolve_mask = 4'b0100;
    step();
    chk(ldq_tail == 7 && ldq_valid[8:7] == 2'b00 && ns_ptr == 7, "mispredict cut back");
    // new load after the squash goes straight through
    alloc_ld = 4'b0001;
    #1 chk(alloc_ldq_idx[0] == 7, "index reused");
    step();
    nb = 0;
    repeat (3) begin step(); if (bcast_valid[0] && bcast_idx[0] == 7) nb++; end
    chk(nb == 1 && ns_ptr == 8, "reused entry broadcast once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
