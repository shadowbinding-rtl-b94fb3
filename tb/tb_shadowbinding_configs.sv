// tb_shadowbinding_configs: random-stream security check of shadowbinding_top
// at the four core sizes the design is meant for (1-, 2-, 3- and 4-wide
// dispatch; one memory lane for the three smaller cores, two for the 4-wide
// one), with correctly and wrongly predicted branches and forwarding-error
// flushes. Each size runs its own sb_cfg_run instance, one after the other,
// and the checks and failures are summed. Every size must also see at least
// one blocked transmitter, one delayed load wakeup, one wakeup, one
// misprediction and one flush.
module tb_shadowbinding_configs;
  logic clk = 0;
  always #5 clk = ~clk;

  int checks, failures;
  logic [3:0] start, done;
  int c [4], f [4], nn [4], nd [4], nb [4], nm [4], nf [4];

  sb_cfg_run #(.CW(1), .MW(1)) u_small  (.clk, .start(start[0]), .done(done[0]), .checks(c[0]), .failures(f[0]), .n_nop(nn[0]), .n_delayed(nd[0]), .n_bcast(nb[0]), .n_misp(nm[0]), .n_flush(nf[0]));
  sb_cfg_run #(.CW(2), .MW(1)) u_medium (.clk, .start(start[1]), .done(done[1]), .checks(c[1]), .failures(f[1]), .n_nop(nn[1]), .n_delayed(nd[1]), .n_bcast(nb[1]), .n_misp(nm[1]), .n_flush(nf[1]));
  sb_cfg_run #(.CW(3), .MW(1)) u_large  (.clk, .start(start[2]), .done(done[2]), .checks(c[2]), .failures(f[2]), .n_nop(nn[2]), .n_delayed(nd[2]), .n_bcast(nb[2]), .n_misp(nm[2]), .n_flush(nf[2]));
  sb_cfg_run #(.CW(4), .MW(2)) u_mega   (.clk, .start(start[3]), .done(done[3]), .checks(c[3]), .failures(f[3]), .n_nop(nn[3]), .n_delayed(nd[3]), .n_bcast(nb[3]), .n_misp(nm[3]), .n_flush(nf[3]));

  task automatic report();
    checks = 0; failures = 0;
    for (int k = 0; k < 4; k++) begin checks += c[k]; failures += f[k]; end
  endtask

  initial begin
    start = '0;
    for (int k = 0; k < 4; k++) begin
      start[k] = 1'b1;
      wait (done[k]);
      $display("size %0d: checks=%0d failures=%0d blocked=%0d delayed-cycles=%0d wakeups=%0d mispredicts=%0d flushes=%0d",
               k, c[k], f[k], nn[k], nd[k], nb[k], nm[k], nf[k]);
    end
    report();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    report();
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
