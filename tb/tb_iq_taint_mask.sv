// tb_iq_taint_mask: random YRoT writes, frees and broadcasts against a model
// of the per-entry taint; checks the masked ready vector every cycle and that
// a masked entry becomes ready in the cycle its root is broadcast.
module tb_iq_taint_mask;
  import sb_pkg::*;
  localparam int NQ = 16, P = 4, M = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [P-1:0] set_valid;
  logic [P-1:0][3:0] set_slot;
  yrot_t [P-1:0] set_yrot;
  logic [NQ-1:0] entry_free, ready_in, ready_out, tainted;
  logic [M-1:0] bcast_valid;
  ldq_idx_t [M-1:0] bcast_idx;

  iq_taint_mask #(.IQ_ENTRIES(NQ), .SET_PORTS(P), .MEM_WIDTH(M)) dut (
    .clk, .rst_n, .set_valid, .set_slot, .set_yrot, .entry_free, .bcast_valid, .bcast_idx,
    .ready_in, .ready_out, .tainted);

  int checks = 0, failures = 0;
  yrot_t q [NQ];

  function automatic yrot_t clr(yrot_t y);
    for (int m = 0; m < M; m++) if (bcast_valid[m] && y.valid && y.idx == bcast_idx[m]) return YROT_NONE;
    return y;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [NQ-1:0] exp_ready;
    int nwake = 0, nmask = 0;
    set_valid = '0; entry_free = '0; ready_in = '0; bcast_valid = '0; set_slot = '0;
    set_yrot = '0; bcast_idx = '0;
    foreach (q[e]) q[e] = YROT_NONE;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 5000; it++) begin
      @(negedge clk);
      ready_in   = NQ'($urandom);
      entry_free = NQ'($urandom) & NQ'($urandom) & NQ'($urandom);
      for (int m = 0; m < M; m++) begin
        bcast_valid[m] = $urandom_range(0, 2) == 0;
        bcast_idx[m]   = ldq_idx_t'($urandom_range(0, 7));
      end
      for (int p = 0; p < P; p++) begin
        set_valid[p] = $urandom_range(0, 2) == 0;
        set_slot[p]  = 4'(p * 4 + $urandom_range(0, 3));   // distinct entries per cycle
        set_yrot[p]  = yrot_t'{valid: 1'b1, idx: ldq_idx_t'($urandom_range(0, 7))};
      end
      #1;
      for (int e = 0; e < NQ; e++) begin
        exp_ready[e] = ready_in[e] && !clr(q[e]).valid;
        if (ready_in[e] && q[e].valid && !clr(q[e]).valid) nwake++;
        if (ready_in[e] && clr(q[e]).valid) nmask++;
      end
      checks++;
      if (ready_out !== exp_ready) begin
        failures++;
        if (failures < 10) $display("it=%0d ready %h exp %h", it, ready_out, exp_ready);
      end
      for (int e = 0; e < NQ; e++) q[e] = entry_free[e] ? YROT_NONE : clr(q[e]);
      for (int p = 0; p < P; p++) if (set_valid[p]) q[set_slot[p]] = clr(set_yrot[p]);
    end
    checks++;
    if (nwake == 0 || nmask == 0) begin failures++; $display("coverage wake=%0d mask=%0d", nwake, nmask); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
