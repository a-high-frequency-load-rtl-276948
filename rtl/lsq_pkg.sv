// lsq_pkg: types and constants shared by the load-store queue (LSQ).
//
// An LSQ allocation is an (address, tag) pair. The tag names a state of memory:
// state 0 is the initial memory, state i is memory after the i-th store of the
// sequential program. A load allocation carries the state it expects to read;
// a store allocation carries the state it creates, so store tags count
// 1, 2, 3, ... in program order. A store value carries a valid bit; a value with
// valid = 0 retires a speculative store allocation without touching memory.
// A store commit is an (address, data) pair in flight to memory; it carries no
// tag, because the commit queue is kept in program order.
//
// The tuple contents follow the paper. The widths (32-bit address, data and
// tag, all unsigned) are this design's choice; tags do not wrap, so one run may
// hold at most 2^32-1 stores per LSQ.
//
// st_q_depth_for() is the paper's compile-time sizing rule for the store
// allocation queue; the integer form of the ceiling is this design's.
package lsq_pkg;

  localparam int ADDR_W = 32;
  localparam int DATA_W = 32;
  localparam int TAG_W  = 32;

  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [DATA_W-1:0] data_t;
  typedef logic [TAG_W-1:0]  tag_t;

  // Load or store allocation: address and memory-state tag.
  typedef struct packed {
    addr_t addr;
    tag_t  tag;
  } alloc_t;

  // Store value from the compute pipeline; valid = 0 marks a misspeculated
  // store allocation that must be dropped.
  typedef struct packed {
    data_t data;
    logic  valid;
  } st_val_t;

  // Store in flight to memory, held for forwarding.
  typedef struct packed {
    addr_t addr;
    data_t data;
  } st_commit_t;

  // One-cycle event pulses of the LSQ, for performance counters.
  typedef struct packed {
    logic ld_wait_tag;       // head load waits for earlier store allocations
    logic ld_wait_conflict;  // load waits on an eq. 1 conflict
    logic ld_forward;        // load served from the commit queue
    logic ld_mem_read;       // load served from memory
    logic ld_ret_stall;      // load waits for room in the return buffer
    logic st_issue;          // valid store written to memory
    logic st_drop;           // invalid store value retired an allocation
    logic st_wait_load;      // store waits for an earlier unserved load
    logic ld_q_full;         // load allocation queue full
    logic st_q_full;         // store allocation queue full
  } lsq_events_t;

  // Store allocation queue size for a loop: enough entries to cover every
  // store allocated between a load and its dependent store at the target
  // initiation interval, ceil(max_ld_to_st_delay / target_ii * n_stores).
  // Evaluated at elaboration time to set ST_Q_DEPTH.
  function automatic int st_q_depth_for(int max_ld_to_st_delay, int target_ii,
                                        int n_stores);
    return (max_ld_to_st_delay * n_stores + target_ii - 1) / target_ii;
  endfunction

endpackage
