// st_issue: store value multiplexer and store issue.
//
// The store allocation at the head of the store allocation queue waits for its
// value. The value is taken from the value channel of the sequence the
// allocation came from (allocations and values of one sequence are in the same
// order, and the allocation queue is in program order, so this multiplexes the
// value channels in program order). When the value arrives:
//   * valid value: the store is issued to the store port and, in the same
//     cycle, pushed into the store commit queue; the allocation is popped.
//   * invalid value (valid bit 0, a misspeculated allocation): nothing is
//     written and nothing enters the commit queue; the allocation is popped.
// A valid store additionally waits while `ld_older_pending` is set, i.e. while
// a load earlier in program order (smaller tag) has not yet been served. This
// keeps younger stores out of memory and out of the commit queue until those
// loads have read, which the paper requires of the commit queue but does not
// spell out as a mechanism; the condition is this design's choice.
//
// Interface: value channels are valid/ready; the store port has no ready: it
// feeds a fixed-latency buffer that always accepts (one store per cycle).
// Timing: combinational; the store is issued in the cycle its value is seen.
module st_issue
  import lsq_pkg::*;
#(
  parameter int N_SEQ = 2,
  localparam int SEQ_W = (N_SEQ > 1) ? $clog2(N_SEQ) : 1
) (
  input  logic                         head_valid,
  input  addr_t                        head_addr,
  input  logic             [SEQ_W-1:0] head_seq,
  input  logic             [N_SEQ-1:0] val_valid,
  output logic             [N_SEQ-1:0] val_ready,
  input  st_val_t                      val [N_SEQ],
  input  logic                         ld_older_pending,
  output logic                         pop,
  output logic                         st_valid,
  output addr_t                        st_addr,
  output data_t                        st_data,
  output logic                         commit_push,
  output st_commit_t                   commit,
  output logic                         dropped
);

  st_val_t v;
  logic    have;

  always_comb begin
    v    = val[head_seq];
    have = head_valid && val_valid[head_seq];
    pop  = have && (!v.valid || !ld_older_pending);
    val_ready           = '0;
    val_ready[head_seq] = pop;
    st_valid    = pop && v.valid;
    st_addr     = head_addr;
    st_data     = v.data;
    commit_push = st_valid;
    commit      = '{addr: head_addr, data: v.data};
    dropped     = pop && !v.valid;
  end

endmodule
