// shift_queue: FIFO built as a shift register with every entry visible.
//
// Entry 0 is the head (oldest). A pop shifts every entry one place towards the
// head; a push writes the first free entry (after the shift, when both happen in
// the same cycle). Because entries never move except all together, the whole
// queue content is available in parallel on `entries`/`entry_valid`, which is
// what the LSQ needs to compare a load against every queued store allocation in
// one stage. The shift-register organisation follows the paper; the free-slot
// write and the `!full` push condition are this design's choices.
//
// Interface: push when `push && !full`; pop when `pop && !empty` (pop on an
// empty queue is ignored). Outputs are registered state: `head` is entry 0.
// Timing: an entry pushed in cycle t is visible from cycle t+1.
module shift_queue #(
  parameter type T     = logic [7:0],
  parameter int  DEPTH = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  T                 push_data,
  input  logic             pop,
  output logic             full,
  output logic             empty,
  output T                 head,
  output T                 entries     [DEPTH],
  output logic [DEPTH-1:0] entry_valid
);

  T                 q     [DEPTH];
  logic [DEPTH-1:0] v;
  logic             do_push, do_pop;

  assign full    = v[DEPTH-1];
  assign empty   = !v[0];
  assign do_push = push && !full;
  assign do_pop  = pop && v[0];
  assign head    = q[0];
  assign entries = q;
  assign entry_valid = v;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v <= '0;
    end else begin
      for (int i = 0; i < DEPTH; i++) begin
        // valid bits stay contiguous from entry 0
        logic vs;
        vs = do_pop ? ((i == DEPTH-1) ? 1'b0 : v[i+1]) : v[i];
        if (do_push && !vs && (i == 0 || (do_pop ? v[i] : v[i-1])))
          vs = 1'b1;
        v[i] <= vs;
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int i = 0; i < DEPTH; i++) begin
      logic vs;
      vs = do_pop ? ((i == DEPTH-1) ? 1'b0 : v[i+1]) : v[i];
      if (do_push && !vs && (i == 0 || (do_pop ? v[i] : v[i-1])))
        q[i] <= push_data;
      else if (do_pop && i < DEPTH-1)
        q[i] <= q[(i < DEPTH-1) ? i+1 : i];
    end
  end

  // Valid bits must form a contiguous run starting at entry 0.
  assert property (@(posedge clk) disable iff (!rst_n)
                   ((v + {{(DEPTH-1){1'b0}}, 1'b1}) & v) == '0)
    else $error("shift_queue: non-contiguous valid bits %b", v);

endmodule
