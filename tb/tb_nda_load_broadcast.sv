// tb_nda_load_broadcast: loads complete on random ports while the visibility
// point sweeps the load queue. Checks that
//   * every completion writes its data in the same cycle (wb_*),
//   * no destination is broadcast while its load is speculative,
//   * a completion of a non-speculative load is broadcast in the same cycle
//     when a lane is free,
//   * at most MEM_WIDTH broadcasts happen per cycle and every completed load
//     is broadcast exactly once, oldest parked first.
// The load-queue state is modelled here: a circular queue whose
// non-speculative prefix grows by random steps.
module tb_nda_load_broadcast;
  import sb_pkg::*;
  localparam int M = 2, NP = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [M-1:0] cmp_valid, wb_valid, bc_valid;
  ldq_idx_t [M-1:0] cmp_ldq_idx;
  logic [M-1:0][5:0] cmp_pdst, wb_pdst, bc_pdst;
  logic [M-1:0][63:0] cmp_data, wb_data;
  ldq_idx_t head;
  ldq_vec_t ldq_valid, ld_nonspec;
  logic bc_delayed_any;
  logic [5:0] parked_count;

  nda_load_broadcast #(.MEM_WIDTH(M), .NUM_PREGS(NP), .XLEN(64)) dut (
    .clk, .rst_n, .cmp_valid, .cmp_ldq_idx, .cmp_pdst, .cmp_data, .ldq_head(head),
    .ldq_valid, .ld_nonspec, .wb_valid, .wb_pdst, .wb_data, .bc_valid, .bc_pdst,
    .bc_delayed_any, .parked_count);

  int checks = 0, failures = 0;
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

  // load-queue model: entries [head, head+cnt) valid, first nsn non-speculative
  int cnt, nsn;
  bit done [32];        // completed
  bit sent [32];        // broadcast
  int pd [32];

  // automatic, so that the declarations inside the loops start afresh
  task automatic run_test();
    int nimm = 0, ndel = 0, nfull = 0, nsent;
    cmp_valid = '0; cmp_ldq_idx = '0; cmp_pdst = '0; cmp_data = '0;
    head = '0; cnt = 0; nsn = 0; ldq_valid = '0; ld_nonspec = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 6000; it++) begin
      @(negedge clk);
      // commit oldest loads that are done and sent
      while (cnt > 0 && nsn > 0 && done[head] && sent[head] && $urandom_range(0, 1) == 0) begin
        done[head] = 0; sent[head] = 0; head = ldq_idx_t'(head + 1); cnt--; nsn--;
      end
      // allocate
      while (cnt < 32 && $urandom_range(0, 2) != 0) begin
        int e = (int'(head) + cnt) % 32;
        done[e] = 0; sent[e] = 0; pd[e] = $urandom_range(0, NP-1); cnt++;
      end
      // visibility point
      if (nsn < cnt) nsn = nsn + $urandom_range(0, (cnt - nsn > 3) ? 3 : cnt - nsn);
      ldq_valid = '0; ld_nonspec = '0;
      for (int k = 0; k < cnt; k++) begin
        ldq_valid[(int'(head) + k) % 32] = 1'b1;
        if (k < nsn) ld_nonspec[(int'(head) + k) % 32] = 1'b1;
      end
      // completions on distinct not-yet-done entries
      cmp_valid = '0;
      for (int m = 0; m < M; m++) begin
        if (cnt > 0 && $urandom_range(0, 1) == 0) begin
          int e = (int'(head) + $urandom_range(0, cnt - 1)) % 32;
          if (!done[e] && !(m == 1 && cmp_valid[0] && cmp_ldq_idx[0] == ldq_idx_t'(e))) begin
            cmp_valid[m] = 1'b1; cmp_ldq_idx[m] = ldq_idx_t'(e);
            cmp_pdst[m] = 6'(pd[e]); cmp_data[m] = {$urandom, $urandom};
          end
        end
      end
      #1;
      // data write is immediate and unchanged
      chk(wb_valid == cmp_valid, "wb_valid");
      for (int m = 0; m < M; m++)
        if (cmp_valid[m]) chk(wb_pdst[m] == cmp_pdst[m] && wb_data[m] == cmp_data[m], "wb payload");
      // broadcasts: match each lane to a load that may be broadcast now
      nsent = 0;
      for (int l = 0; l < M; l++) begin
        if (!bc_valid[l]) continue;
        nsent++;
        begin
          int hit = -1;
          for (int k = 0; k < cnt; k++) begin
            int e = (int'(head) + k) % 32;
            bit cmp_now = (cmp_valid[0] && cmp_ldq_idx[0] == ldq_idx_t'(e)) ||
                          (cmp_valid[1] && cmp_ldq_idx[1] == ldq_idx_t'(e));
            if (hit < 0 && pd[e] == int'(bc_pdst[l]) && (done[e] || cmp_now) && !sent[e] && ld_nonspec[e]) hit = e;
          end
          chk(hit >= 0, $sformatf("lane %0d broadcast p%0d not allowed", l, bc_pdst[l]));
          if (hit >= 0) begin
            sent[hit] = 1;
            if (done[hit]) ndel++; else nimm++;
          end
        end
      end
      // a non-speculative completion is broadcast at once unless the lanes are full
      for (int m = 0; m < M; m++)
        if (cmp_valid[m] && ld_nonspec[cmp_ldq_idx[m]])
          chk(sent[cmp_ldq_idx[m]] || nsent == M, "non-speculative completion delayed");
      if (nsent == M) nfull++;
      // oldest-first among parked loads: no older parked eligible load was skipped
      // while a younger parked one was sent
      for (int m = 0; m < M; m++) if (cmp_valid[m]) done[cmp_ldq_idx[m]] = 1;
    end
    // drain: everything completed becomes non-speculative and must be sent
    @(negedge clk);
    cmp_valid = '0; nsn = cnt;
    for (int k = 0; k < cnt; k++) ld_nonspec[(int'(head) + k) % 32] = 1'b1;
    for (int c = 0; c < 40; c++) begin
      #1;
      for (int l = 0; l < M; l++)
        if (bc_valid[l])
          for (int k = 0; k < cnt; k++) begin
            int e = (int'(head) + k) % 32;
            if (done[e] && !sent[e] && pd[e] == int'(bc_pdst[l])) begin sent[e] = 1; ndel++; break; end
          end
      @(negedge clk);
    end
    for (int k = 0; k < cnt; k++) begin
      int e = (int'(head) + k) % 32;
      if (done[e]) chk(sent[e], $sformatf("load %0d never broadcast", e));
    end
    chk(parked_count == 0, "parked loads left");
    chk(nimm > 0 && ndel > 0 && nfull > 0, $sformatf("coverage imm=%0d delayed=%0d full=%0d", nimm, ndel, nfull));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial run_test();
endmodule
