// ld_alloc_mux: program-order multiplexer for load allocation sequences.
//
// Several load operations of one loop (one sequence each) share one load
// port of the LSQ (one mux per port). Each cycle the mux forwards, among the sequences that
// present an allocation, the one earliest in program order: the smallest tag,
// and on equal tags the lowest sequence index (sequences are numbered in the
// program order of their load operations). The index of the chosen sequence
// goes out with the allocation so that the load value can later be returned to
// the right channel (the "load ordering" path).
//
// The paper states that sequences are multiplexed in program order; choosing
// only among sequences that are present (rather than waiting for all of them)
// is this design's choice: it never waits on a sequence that has ended, but it
// relies on the address generator not letting one sequence lag another by a
// store (an allocation arriving after a later-tagged allocation of another
// sequence was already accepted).
//
// Interface: valid/ready channels, purely combinational (zero latency).
module ld_alloc_mux
  import lsq_pkg::*;
#(
  parameter int N_SEQ = 2,
  localparam int SEQ_W = (N_SEQ > 1) ? $clog2(N_SEQ) : 1
) (
  input  logic             [N_SEQ-1:0] in_valid,
  output logic             [N_SEQ-1:0] in_ready,
  input  alloc_t                       in_alloc [N_SEQ],
  output logic                         out_valid,
  input  logic                         out_ready,
  output alloc_t                       out_alloc,
  output logic             [SEQ_W-1:0] out_seq
);

  always_comb begin
    out_valid = 1'b0;
    out_seq   = '0;
    out_alloc = in_alloc[0];
    for (int i = 0; i < N_SEQ; i++) begin
      // strict '<' keeps the lowest index on equal tags
      if (in_valid[i] && (!out_valid || in_alloc[i].tag < out_alloc.tag)) begin
        out_valid = 1'b1;
        out_seq   = SEQ_W'(i);
        out_alloc = in_alloc[i];
      end
    end
    in_ready = '0;
    if (out_valid)
      in_ready[out_seq] = out_ready;
  end

endmodule
