// ld_check_pipe: the load disambiguation pipeline.
//
// A load allocation at the head of the load allocation queue passes three
// checks, each in its own pipeline stage, so that no single stage compares
// against both store structures:
//   T (queue head): wait while load.tag > last accepted store tag; once it
//     passes, every store that precedes the load in program order is in the
//     LSQ (in the store allocation queue, in the commit queue or in memory).
//   A (register): wait while eq. 1 holds for any entry of the store
//     allocation queue (an earlier store to the same address has not issued).
//   C (register): compare with the store commit queue; on a hit the youngest
//     matching value is forwarded, otherwise a read is issued to the load port.
// The load leaves C ("is served") when the return buffer has room. A stage
// holds its load while it waits; a stage moves when the next one is free or
// moving, so the pipeline accepts one load per cycle when nothing conflicts.
// The stage order and checks follow the paper; the exact stage boundaries are
// this design's choice.
//
// Timing: a load at the queue head in cycle t is issued or forwarded in cycle
// t+2 at the earliest. The A and C registers are exported (valid, tag) so that
// stores can see which loads are still unserved.
module ld_check_pipe
  import lsq_pkg::*;
#(
  parameter int N_SEQ = 2,
  localparam int SEQ_W = (N_SEQ > 1) ? $clog2(N_SEQ) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // load allocation queue head
  input  logic             head_valid,
  input  alloc_t           head_alloc,
  input  logic [SEQ_W-1:0] head_seq,
  output logic             pop,
  // stage T
  input  tag_t             last_st_tag,
  // stage A: eq. 1 check against the store allocation queue
  output alloc_t           a_alloc,
  output logic             a_valid,
  input  logic             a_conflict,
  // stage C: store commit queue check
  output addr_t            c_addr,
  output logic             c_valid,
  output tag_t             c_tag,
  input  logic             fwd_hit,
  input  data_t            fwd_data,
  // issue to the return path and the load port
  input  logic             issue_ready,
  output logic             issue_valid,
  output logic             issue_fwd,
  output data_t            issue_fwd_data,
  output logic [SEQ_W-1:0] issue_seq,
  output logic             rd_valid,
  output addr_t            rd_addr,
  // stall reasons, one pulse per waiting cycle
  output logic             wait_tag,
  output logic             wait_conflict
);

  logic             a_v, c_v;
  alloc_t           a_q, c_q;
  logic [SEQ_W-1:0] a_seq, c_seq;
  logic             t_ok, a_pass, a_move, a_free, c_fire, c_free;

  assign t_ok   = head_valid && (head_alloc.tag <= last_st_tag);
  assign a_pass = a_v && !a_conflict;
  assign c_fire = c_v && issue_ready;
  assign c_free = !c_v || c_fire;
  assign a_move = a_pass && c_free;
  assign a_free = !a_v || a_move;
  assign pop    = t_ok && a_free;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      a_v <= 1'b0;
      c_v <= 1'b0;
    end else begin
      if (a_free) a_v <= t_ok;
      if (c_free) c_v <= a_move;
    end
  end

  always_ff @(posedge clk) begin
    if (a_free && t_ok) begin
      a_q   <= head_alloc;
      a_seq <= head_seq;
    end
    if (a_move) begin
      c_q   <= a_q;
      c_seq <= a_seq;
    end
  end

  assign a_alloc        = a_q;
  assign a_valid        = a_v;
  assign c_addr         = c_q.addr;
  assign c_valid        = c_v;
  assign c_tag          = c_q.tag;
  assign issue_valid    = c_fire;
  assign issue_fwd      = fwd_hit;
  assign issue_fwd_data = fwd_data;
  assign issue_seq      = c_seq;
  assign rd_valid       = c_fire && !fwd_hit;
  assign rd_addr        = c_q.addr;
  assign wait_tag       = head_valid && !t_ok;
  assign wait_conflict  = a_v && a_conflict;

endmodule
