// sync_fifo: small synchronous FIFO (circular buffer) used for the load return
// path. Push when `push && !full`, pop when `pop && !empty`; `head` is the
// oldest entry, registered state. An entry pushed in cycle t can be popped from
// cycle t+1. Reset empties it. DEPTH must be a power of two.
module sync_fifo #(
  parameter type T     = logic [7:0],
  parameter int  DEPTH = 8,
  localparam int AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic push,
  input  T     push_data,
  input  logic pop,
  output logic full,
  output logic empty,
  output T     head
);

  T            mem [DEPTH];
  logic [AW:0] wp, rp;

  assign empty = (wp == rp);
  assign full  = (wp[AW-1:0] == rp[AW-1:0]) && (wp[AW] != rp[AW]);
  assign head  = mem[rp[AW-1:0]];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (push && !full) wp <= wp + 1'b1;
      if (pop && !empty) rp <= rp + 1'b1;
    end
  end

  always_ff @(posedge clk)
    if (push && !full) mem[wp[AW-1:0]] <= push_data;

  initial assert (DEPTH >= 2 && (DEPTH & (DEPTH - 1)) == 0)
    else $error("sync_fifo: DEPTH must be a power of two >= 2");

endmodule
