// iq_taint_mask: the taint field added to every issue-queue entry.
//
// Each entry can hold a YRoT. A valid YRoT masks the entry's ready signal, so
// a transmitter that depends on speculative data is not selected, until its
// root load is broadcast as non-speculative; the entry then becomes ready
// again with no further action (for STT-Issue this is the replay of a
// transmitter that was turned into a nop).
//
// The YRoT is written through SET_PORTS write ports: at dispatch for
// STT-Rename (the YRoT computed at rename, written only for transmitters) or
// by back-propagation from the issue-stage taint unit for STT-Issue. An entry
// that leaves the queue (issue, squash) is cleared through entry_free.
//
// Timing: ready_out = ready_in & ~taint is combinational and already takes the
// broadcast of the current cycle into account; set and clear act at the clock
// edge. A set and a broadcast naming the same root in the same cycle leave the
// entry untainted. The masking and wakeup follow the text; the port split is
// this design's.
module iq_taint_mask
  import sb_pkg::*;
#(
  parameter int unsigned IQ_ENTRIES = 40,
  parameter int unsigned SET_PORTS  = 4,
  parameter int unsigned MEM_WIDTH  = 2
) (
  input  logic                                       clk,
  input  logic                                       rst_n,
  input  logic [SET_PORTS-1:0]                       set_valid,
  input  logic [SET_PORTS-1:0][$clog2(IQ_ENTRIES)-1:0] set_slot,
  input  yrot_t [SET_PORTS-1:0]                      set_yrot,
  input  logic [IQ_ENTRIES-1:0]                      entry_free,
  input  logic [MEM_WIDTH-1:0]                       bcast_valid,
  input  ldq_idx_t [MEM_WIDTH-1:0]                   bcast_idx,
  input  logic [IQ_ENTRIES-1:0]                      ready_in,
  output logic [IQ_ENTRIES-1:0]                      ready_out,
  output logic [IQ_ENTRIES-1:0]                      tainted
);

  yrot_t [IQ_ENTRIES-1:0] yrot_q;

  ldq_vec_t safe_vec;
  always_comb begin
    safe_vec = '0;
    for (int m = 0; m < MEM_WIDTH; m++)
      if (bcast_valid[m]) safe_vec[bcast_idx[m]] = 1'b1;
  end

  always_comb begin
    for (int e = 0; e < IQ_ENTRIES; e++) begin
      tainted[e]   = yrot_filter(yrot_q[e], safe_vec).valid;
      ready_out[e] = ready_in[e] && !tainted[e];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      yrot_q <= '0;
    end else begin
      for (int e = 0; e < IQ_ENTRIES; e++)
        yrot_q[e] <= entry_free[e] ? YROT_NONE : yrot_filter(yrot_q[e], safe_vec);
      for (int p = 0; p < SET_PORTS; p++)
        if (set_valid[p]) yrot_q[set_slot[p]] <= yrot_filter(set_yrot[p], safe_vec);
    end
  end

endmodule
