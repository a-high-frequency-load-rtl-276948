// st_alloc_queue: store allocation queue with the load conflict check.
//
// Holds store allocations (address, tag, source sequence) that have been
// accepted in program order but whose store value has not arrived yet. It is a
// shift register (shift_queue) so that all entries can be compared with one
// load allocation in parallel. A load conflicts with a queued store when
//     load.addr == store.addr  and  load.tag >= store.tag          (eq. 1)
// i.e. the store comes before the load in program order and writes the address
// the load reads, so the load must wait until that store has left this queue
// (been issued to memory and the commit queue, or dropped as misspeculated).
// The register `last_tag` is the tag of the most recently accepted store
// allocation; a load whose tag is above it may still be missing an earlier
// store and must wait before it is checked here at all.
//
// The queue, eq. 1 and the last-accepted-tag comparison follow the paper. The
// depth default of 8 is the paper's histogram configuration; the paper sizes
// this queue per program as ceil(maxLoadToStoreDelay / targetII *
// numStoresInLoop). Reset value 0 of `last_tag` is the initial memory state.
//
// Interface: push when `push && !full`; pop (head leaves) when `pop`.
// `conflict` is combinational from the current queue content and `chk_alloc`.
// There is one (chk_alloc, conflict) pair per load port of the LSQ (N_CHK);
// each is compared with every entry independently.
module st_alloc_queue
  import lsq_pkg::*;
#(
  parameter int DEPTH = 8,
  parameter int N_SEQ = 2,
  parameter int N_CHK = 1,
  localparam int SEQ_W = (N_SEQ > 1) ? $clog2(N_SEQ) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  alloc_t           push_alloc,
  input  logic [SEQ_W-1:0] push_seq,
  output logic             full,
  input  logic             pop,
  output logic             head_valid,
  output alloc_t           head_alloc,
  output logic [SEQ_W-1:0] head_seq,
  output tag_t             last_tag,
  input  alloc_t [N_CHK-1:0] chk_alloc,
  output logic   [N_CHK-1:0] conflict
);

  typedef struct packed {
    alloc_t           alloc;
    logic [SEQ_W-1:0] seq;
  } entry_t;

  entry_t           ent [DEPTH];
  logic [DEPTH-1:0] ent_v;
  entry_t           hd;
  logic             empty;

  shift_queue #(.T(entry_t), .DEPTH(DEPTH)) u_q (
    .clk, .rst_n,
    .push      (push),
    .push_data ('{alloc: push_alloc, seq: push_seq}),
    .pop       (pop),
    .full      (full),
    .empty     (empty),
    .head      (hd),
    .entries   (ent),
    .entry_valid (ent_v)
  );

  assign head_valid = !empty;
  assign head_alloc = hd.alloc;
  assign head_seq   = hd.seq;

  always_ff @(posedge clk) begin
    if (!rst_n)              last_tag <= '0;
    else if (push && !full)  last_tag <= push_alloc.tag;
  end

  // eq. 1 against every queued store allocation
  always_comb begin
    conflict = '0;
    for (int c = 0; c < N_CHK; c++)
      for (int i = 0; i < DEPTH; i++)
        if (ent_v[i] && ent[i].alloc.addr == chk_alloc[c].addr && chk_alloc[c].tag >= ent[i].alloc.tag)
          conflict[c] = 1'b1;
  end

endmodule
