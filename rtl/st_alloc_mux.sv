// st_alloc_mux: program-order multiplexer for store allocation sequences.
//
// Store tags are unique and consecutive in program order (each store
// allocation increments the address generator's tag before using it), so the
// next store in program order is exactly the one whose tag is one above the
// tag of the last store allocation the LSQ accepted. The mux forwards only that
// allocation and holds all others, which serialises every store sequence onto
// the single store path and rules out write-after-write hazards by
// construction. The sequence index travels with the allocation so that the
// store value can be taken from the matching value channel.
//
// Ordering stores in program order follows the paper; using "tag == last + 1"
// to find the next one is this design's way of doing it.
//
// Interface: valid/ready channels, combinational. `last_tag` is the tag of the
// last accepted store allocation (0 before the first store).
module st_alloc_mux
  import lsq_pkg::*;
#(
  parameter int N_SEQ = 2,
  localparam int SEQ_W = (N_SEQ > 1) ? $clog2(N_SEQ) : 1
) (
  input  logic                         clk,
  input  logic             [N_SEQ-1:0] in_valid,
  output logic             [N_SEQ-1:0] in_ready,
  input  alloc_t                       in_alloc [N_SEQ],
  input  tag_t                         last_tag,
  output logic                         out_valid,
  input  logic                         out_ready,
  output alloc_t                       out_alloc,
  output logic             [SEQ_W-1:0] out_seq
);

  logic [N_SEQ-1:0] match;

  always_comb begin
    out_valid = 1'b0;
    out_seq   = '0;
    out_alloc = in_alloc[0];
    for (int i = 0; i < N_SEQ; i++) begin
      match[i] = in_valid[i] && (in_alloc[i].tag == last_tag + tag_t'(1));
      if (match[i] && !out_valid) begin
        out_valid = 1'b1;
        out_seq   = SEQ_W'(i);
        out_alloc = in_alloc[i];
      end
    end
    in_ready = '0;
    if (out_valid)
      in_ready[out_seq] = out_ready;
  end

  // Store tags are unique: two sequences never offer the next tag together.
  assert property (@(posedge clk) $onehot0(match))
    else $error("st_alloc_mux: two store allocations carry tag %0d", last_tag + 1);

endmodule
