// lsq: shift-register load-store queue for one base address.
//
// The LSQ sits between an address generator, which runs ahead and sends tagged
// load and store allocations, and a compute pipeline, which sends store values
// (with a valid bit) and receives load values. It owns N_LD_PORTS load ports
// and one store port of the protected memory. Program order is recovered from tags
// alone: a load tag is the memory state the load expects, a store tag the state
// the store creates.
//
//   load allocations -> ld_alloc_mux -> load allocation queue (shift_queue)
//       -> ld_check_pipe: T tag wait, A eq. 1 against store allocation queue,
//          C forward from commit queue or read memory -> ld_return -> values
//   store allocations -> st_alloc_mux -> st_alloc_queue
//       -> st_issue (waits for the value of the head allocation)
//          -> store port + st_commit_queue, or drop if the value is invalid
//
// The store queue of a classic LSQ is split into the allocation queue, which
// only answers "must this load wait?", and the commit queue, the only place
// that forwards data, so no single stage does an associative search with data
// selection across all stores. Invalid store values retire speculative store
// allocations: they are never written and never forwarded, so misspeculation
// costs no replay.
//
// A valid store is also held while any load that precedes it in program order
// (smaller tag) is still unserved, anywhere between the load allocation inputs
// and the load port. This keeps the commit queue free of stores younger than a
// waiting load and prevents write-after-read hazards in memory; the paper
// states the property, the mechanism is this design's.
//
// Load ports: the load side is built once per load port (a "lane": mux, load
// allocation queue, check pipeline, return path). With N_LD_PORTS = 1 (the
// default, and the organisation of the paper's figure) all load sequences are
// merged in program order onto one lane. With N_LD_PORTS = N_LD_SEQ every
// sequence has its own lane and its loads are checked and served in parallel
// with the others; in general lane p serves sequences p*S .. p*S+S-1 with
// S = N_LD_SEQ / N_LD_PORTS. Loads never conflict with loads, so lanes only
// share the store structures: the store allocation queue and the commit queue
// have one check port per lane, and the older-load guard looks at every lane.
// Serving sequences in parallel when there are enough load ports follows the
// paper; the lane grouping is this design's.
//
// Parameters: N_LD_SEQ/N_ST_SEQ allocation sequences, LD_Q_DEPTH and
// ST_Q_DEPTH allocation queue sizes, ST_LATENCY commit queue size (cycles from
// a store issue until the memory write; loads issued later see the store),
// RET_DEPTH outstanding loads in the return path.
//
// Timing: a load allocation accepted in cycle t is at the queue head in t+1
// and is served in t+3 at the earliest; a read response at least one cycle
// later can leave as a value the cycle after it arrives. Throughput is one load
// per cycle per load port and one store per cycle.
module lsq
  import lsq_pkg::*;
#(
  parameter int N_LD_SEQ   = 2,
  parameter int N_ST_SEQ   = 2,
  parameter int N_LD_PORTS = 1,
  parameter int LD_Q_DEPTH = 4,
  parameter int ST_Q_DEPTH = 8,
  parameter int ST_LATENCY = 4,
  parameter int RET_DEPTH  = 8,
  localparam int LPS    = N_LD_SEQ / N_LD_PORTS,          // load sequences per port
  localparam int LSEQ_W = (LPS > 1) ? $clog2(LPS) : 1,
  localparam int SSEQ_W = (N_ST_SEQ > 1) ? $clog2(N_ST_SEQ) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // load allocations from the address generator
  input  logic [N_LD_SEQ-1:0]   ld_alloc_valid,
  output logic [N_LD_SEQ-1:0]   ld_alloc_ready,
  input  alloc_t                ld_alloc [N_LD_SEQ],
  // store allocations from the address generator
  input  logic [N_ST_SEQ-1:0]   st_alloc_valid,
  output logic [N_ST_SEQ-1:0]   st_alloc_ready,
  input  alloc_t                st_alloc [N_ST_SEQ],
  // store values from the compute pipeline
  input  logic [N_ST_SEQ-1:0]   st_val_valid,
  output logic [N_ST_SEQ-1:0]   st_val_ready,
  input  st_val_t               st_val [N_ST_SEQ],
  // load values to the compute pipeline
  output logic [N_LD_SEQ-1:0]   ld_val_valid,
  input  logic [N_LD_SEQ-1:0]   ld_val_ready,
  output data_t                 ld_val [N_LD_SEQ],
  // memory load ports (responses in request order, no backpressure)
  output logic  [N_LD_PORTS-1:0] mem_rd_valid,
  output addr_t [N_LD_PORTS-1:0] mem_rd_addr,
  input  logic  [N_LD_PORTS-1:0] mem_rsp_valid,
  input  data_t [N_LD_PORTS-1:0] mem_rsp_data,
  // memory store port (always accepts)
  output logic                  mem_wr_valid,
  output addr_t                 mem_wr_addr,
  output data_t                 mem_wr_data,
  // one-cycle event pulses (performance monitoring)
  output lsq_events_t           ev
);

  initial assert (N_LD_PORTS >= 1 && N_LD_SEQ % N_LD_PORTS == 0)
    else $error("lsq: N_LD_SEQ (%0d) must be a multiple of N_LD_PORTS (%0d)", N_LD_SEQ, N_LD_PORTS);

  // ---------------- store side signals used by the load lanes ----------------
  logic              sm_valid, sq_full, sq_pop, sq_head_valid;
  alloc_t            sm_alloc, sq_head;
  logic [SSEQ_W-1:0] sm_seq, sq_head_seq;
  logic              ld_older_pending, commit_push, st_dropped;
  st_commit_t        commit;
  tag_t              last_st_tag;

  // ---------------- load lanes, one per load port ----------------
  alloc_t [N_LD_PORTS-1:0] a_alloc;
  addr_t  [N_LD_PORTS-1:0] c_addr;
  data_t  [N_LD_PORTS-1:0] fwd_data;
  logic   [N_LD_PORTS-1:0] a_conflict, fwd_hit;
  logic   [N_LD_PORTS-1:0] l_pend, l_wait_tag, l_wait_conf, l_fwd, l_ret_stall, l_q_full;

  typedef struct packed {
    alloc_t            alloc;
    logic [LSEQ_W-1:0] seq;
  } ld_ent_t;

  for (genvar p = 0; p < N_LD_PORTS; p++) begin : g_lane
    localparam int S0 = p * LPS;

    logic              lm_valid, lq_full, lq_empty, lq_pop;
    alloc_t            lm_alloc;
    logic [LSEQ_W-1:0] lm_seq;
    ld_ent_t           lq_head;
    ld_ent_t           lq_ent [LD_Q_DEPTH];
    logic [LD_Q_DEPTH-1:0] lq_v;
    alloc_t            in_alloc [LPS];
    data_t             out_data [LPS];
    logic              a_valid, c_valid, iss_ready, iss_valid, iss_fwd;
    tag_t              c_tag;
    data_t             iss_data;
    logic [LSEQ_W-1:0] iss_seq;

    for (genvar k = 0; k < LPS; k++) begin : g_seq
      assign in_alloc[k]    = ld_alloc[S0 + k];
      assign ld_val[S0 + k] = out_data[k];
    end

    ld_alloc_mux #(.N_SEQ(LPS)) u_ld_mux (
      .in_valid  (ld_alloc_valid[S0 +: LPS]),
      .in_ready  (ld_alloc_ready[S0 +: LPS]),
      .in_alloc  (in_alloc),
      .out_valid (lm_valid),
      .out_ready (!lq_full),
      .out_alloc (lm_alloc),
      .out_seq   (lm_seq)
    );

    shift_queue #(.T(ld_ent_t), .DEPTH(LD_Q_DEPTH)) u_ld_q (
      .clk, .rst_n,
      .push        (lm_valid),
      .push_data   ('{alloc: lm_alloc, seq: lm_seq}),
      .pop         (lq_pop),
      .full        (lq_full),
      .empty       (lq_empty),
      .head        (lq_head),
      .entries     (lq_ent),
      .entry_valid (lq_v)
    );

    ld_check_pipe #(.N_SEQ(LPS)) u_ld_pipe (
      .clk, .rst_n,
      .head_valid     (!lq_empty),
      .head_alloc     (lq_head.alloc),
      .head_seq       (lq_head.seq),
      .pop            (lq_pop),
      .last_st_tag    (last_st_tag),
      .a_alloc        (a_alloc[p]),
      .a_valid        (a_valid),
      .a_conflict     (a_conflict[p]),
      .c_addr         (c_addr[p]),
      .c_valid        (c_valid),
      .c_tag          (c_tag),
      .fwd_hit        (fwd_hit[p]),
      .fwd_data       (fwd_data[p]),
      .issue_ready    (iss_ready),
      .issue_valid    (iss_valid),
      .issue_fwd      (iss_fwd),
      .issue_fwd_data (iss_data),
      .issue_seq      (iss_seq),
      .rd_valid       (mem_rd_valid[p]),
      .rd_addr        (mem_rd_addr[p]),
      .wait_tag       (l_wait_tag[p]),
      .wait_conflict  (l_wait_conf[p])
    );

    ld_return #(.DEPTH(RET_DEPTH), .N_SEQ(LPS)) u_ld_ret (
      .clk, .rst_n,
      .issue_valid    (iss_valid),
      .issue_ready    (iss_ready),
      .issue_fwd      (iss_fwd),
      .issue_fwd_data (iss_data),
      .issue_seq      (iss_seq),
      .mem_rvalid     (mem_rsp_valid[p]),
      .mem_rdata      (mem_rsp_data[p]),
      .out_valid      (ld_val_valid[S0 +: LPS]),
      .out_ready      (ld_val_ready[S0 +: LPS]),
      .out_data       (out_data)
    );

    // Unserved loads of this lane earlier in program order than the head store.
    always_comb begin
      l_pend[p] = 1'b0;
      for (int i = 0; i < LPS; i++)
        if (ld_alloc_valid[S0 + i] && in_alloc[i].tag < sq_head.tag) l_pend[p] = 1'b1;
      for (int i = 0; i < LD_Q_DEPTH; i++)
        if (lq_v[i] && lq_ent[i].alloc.tag < sq_head.tag) l_pend[p] = 1'b1;
      if (a_valid && a_alloc[p].tag < sq_head.tag) l_pend[p] = 1'b1;
      if (c_valid && c_tag < sq_head.tag)          l_pend[p] = 1'b1;
    end

    assign l_fwd[p]       = iss_valid && iss_fwd;
    assign l_ret_stall[p] = c_valid && !iss_ready;
    assign l_q_full[p]    = lq_full;
  end

  assign ld_older_pending = |l_pend;

  // ---------------- store side ----------------
  st_alloc_mux #(.N_SEQ(N_ST_SEQ)) u_st_mux (
    .clk,
    .in_valid  (st_alloc_valid),
    .in_ready  (st_alloc_ready),
    .in_alloc  (st_alloc),
    .last_tag  (last_st_tag),
    .out_valid (sm_valid),
    .out_ready (!sq_full),
    .out_alloc (sm_alloc),
    .out_seq   (sm_seq)
  );

  st_alloc_queue #(.DEPTH(ST_Q_DEPTH), .N_SEQ(N_ST_SEQ), .N_CHK(N_LD_PORTS)) u_st_q (
    .clk, .rst_n,
    .push       (sm_valid),
    .push_alloc (sm_alloc),
    .push_seq   (sm_seq),
    .full       (sq_full),
    .pop        (sq_pop),
    .head_valid (sq_head_valid),
    .head_alloc (sq_head),
    .head_seq   (sq_head_seq),
    .last_tag   (last_st_tag),
    .chk_alloc  (a_alloc),
    .conflict   (a_conflict)
  );

  st_issue #(.N_SEQ(N_ST_SEQ)) u_st_issue (
    .head_valid       (sq_head_valid),
    .head_addr        (sq_head.addr),
    .head_seq         (sq_head_seq),
    .val_valid        (st_val_valid),
    .val_ready        (st_val_ready),
    .val              (st_val),
    .ld_older_pending (ld_older_pending),
    .pop              (sq_pop),
    .st_valid         (mem_wr_valid),
    .st_addr          (mem_wr_addr),
    .st_data          (mem_wr_data),
    .commit_push      (commit_push),
    .commit           (commit),
    .dropped          (st_dropped)
  );

  st_commit_queue #(.DEPTH(ST_LATENCY), .N_CHK(N_LD_PORTS)) u_commit_q (
    .clk, .rst_n,
    .push        (commit_push),
    .push_commit (commit),
    .chk_addr    (c_addr),
    .hit         (fwd_hit),
    .hit_data    (fwd_data)
  );

  // ---------------- events ----------------
  always_comb begin
    ev.ld_wait_tag      = |l_wait_tag;
    ev.ld_wait_conflict = |l_wait_conf;
    ev.ld_forward       = |l_fwd;
    ev.ld_mem_read      = |mem_rd_valid;
    ev.ld_ret_stall     = |l_ret_stall;
    ev.st_issue         = mem_wr_valid;
    ev.st_drop          = st_dropped;
    ev.st_wait_load     = sq_head_valid && st_val_valid[sq_head_seq] &&
                          st_val[sq_head_seq].valid && ld_older_pending;
    ev.ld_q_full        = |l_q_full;
    ev.st_q_full        = sq_full;
  end

endmodule
