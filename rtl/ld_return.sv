// ld_return: in-order return of load values to their sequences.
//
// Every load leaving the check pipeline gets a slot in an order FIFO, in the
// order the loads were served. A forwarded load stores its value in the slot;
// a load sent to memory stores only a marker, and its value arrives later on
// the load port response, which is in request order and goes into a separate
// data FIFO. The slot at the head of the order FIFO completes when its value is
// known (forwarded, or the data FIFO is non-empty) and is then offered on the
// value channel of the sequence the load came from. This puts forwarded and
// memory values back in order and demultiplexes them to the sequences (the
// output mux of the paper's figure), and it decouples the variable memory
// latency from the check pipeline, so the load port never stalls the LSQ as
// long as fewer than DEPTH loads are outstanding.
//
// The paper names this step ("Load / Forward", non-blocking channel back to
// the datapath); the two-FIFO organisation and DEPTH = 8 are this design's.
//
// Interface: `issue_ready` = order FIFO not full. Memory responses have no
// ready: at most DEPTH reads are outstanding, so the data FIFO cannot overflow.
// Value channels are valid/ready; a value can leave one cycle after the slot
// was written.
module ld_return
  import lsq_pkg::*;
#(
  parameter int DEPTH = 8,
  parameter int N_SEQ = 2,
  localparam int SEQ_W = (N_SEQ > 1) ? $clog2(N_SEQ) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             issue_valid,
  output logic             issue_ready,
  input  logic             issue_fwd,
  input  data_t            issue_fwd_data,
  input  logic [SEQ_W-1:0] issue_seq,
  input  logic             mem_rvalid,
  input  data_t            mem_rdata,
  output logic [N_SEQ-1:0] out_valid,
  input  logic [N_SEQ-1:0] out_ready,
  output data_t            out_data [N_SEQ]
);

  typedef struct packed {
    logic             fwd;
    data_t            data;
    logic [SEQ_W-1:0] seq;
  } slot_t;

  slot_t hd;
  data_t mem_hd;
  logic  ord_full, ord_empty, dat_full, dat_empty;
  logic  ready_hd, fire;

  sync_fifo #(.T(slot_t), .DEPTH(DEPTH)) u_order (
    .clk, .rst_n,
    .push      (issue_valid),
    .push_data ('{fwd: issue_fwd, data: issue_fwd_data, seq: issue_seq}),
    .pop       (fire),
    .full      (ord_full),
    .empty     (ord_empty),
    .head      (hd)
  );

  sync_fifo #(.T(data_t), .DEPTH(DEPTH)) u_data (
    .clk, .rst_n,
    .push      (mem_rvalid),
    .push_data (mem_rdata),
    .pop       (fire && !hd.fwd),
    .full      (dat_full),
    .empty     (dat_empty),
    .head      (mem_hd)
  );

  assign issue_ready = !ord_full;
  assign ready_hd    = !ord_empty && (hd.fwd || !dat_empty);
  assign fire        = ready_hd && out_ready[hd.seq];

  always_comb begin
    out_valid = '0;
    out_valid[hd.seq] = ready_hd;
    for (int i = 0; i < N_SEQ; i++)
      out_data[i] = hd.fwd ? hd.data : mem_hd;
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(mem_rvalid && dat_full))
    else $error("ld_return: load response with no free slot");
  assert property (@(posedge clk) disable iff (!rst_n) !(issue_valid && ord_full))
    else $error("ld_return: load issued while return buffer full");

endmodule
