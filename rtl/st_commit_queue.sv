// st_commit_queue: store commits in flight to memory, used for forwarding.
//
// A delay line of DEPTH stages that shifts every clock cycle. A store issued to
// memory enters stage 0 together with its address and value and falls off the
// end DEPTH cycles later, by which time the memory is guaranteed to show it.
// DEPTH must therefore cover the store latency: the number of cycles from a
// store issue until a load issued to memory is certain to observe it, including
// any fixed-latency buffers in front of the memory ports. The queue holds no
// tags: it is in program order, and the LSQ never lets a store that comes after
// an unserved load into it, so the youngest entry matching a load address is
// the value the load must see. The search runs from the youngest stage (0) to
// the oldest and the first hit wins.
//
// The delay-line structure, youngest-first forwarding and sizing by store
// latency follow the paper. The default depth of 4 is this design's choice,
// matching the default store path of lsq_bram.
//
// Interface: `push`/`push_commit` enter the store; `chk_addr` is compared
// combinationally, giving `hit` and `hit_data`; there is one such check port
// per load port of the LSQ (N_CHK).
module st_commit_queue
  import lsq_pkg::*;
#(
  parameter int DEPTH = 4,
  parameter int N_CHK = 1
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       push,
  input  st_commit_t push_commit,
  input  addr_t [N_CHK-1:0] chk_addr,
  output logic  [N_CHK-1:0] hit,
  output data_t [N_CHK-1:0] hit_data
);

  st_commit_t       q [DEPTH];
  logic [DEPTH-1:0] v;

  always_ff @(posedge clk) begin
    if (!rst_n) v <= '0;
    else begin
      v[0] <= push;
      for (int i = 1; i < DEPTH; i++) v[i] <= v[i-1];
    end
  end

  always_ff @(posedge clk) begin
    q[0] <= push_commit;
    for (int i = 1; i < DEPTH; i++) q[i] <= q[i-1];
  end

  // youngest (stage 0) first: iterate from oldest so the youngest overwrites
  always_comb begin
    hit      = '0;
    hit_data = '0;
    for (int c = 0; c < N_CHK; c++)
      for (int i = DEPTH-1; i >= 0; i--)
        if (v[i] && q[i].addr == chk_addr[c]) begin
          hit[c]      = 1'b1;
          hit_data[c] = q[i].data;
        end
  end

endmodule
