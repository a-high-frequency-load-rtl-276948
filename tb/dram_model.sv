// dram_model: behavioural model of an off-chip memory reached through
// pipelined load/store units. Not synthesizable design content: a testbench
// model only.
//
// Reads are answered in request order after a random latency between MIN_LAT
// and MAX_LAT cycles (never earlier than the previous answer). Writes pass a
// fixed-latency buffer of ST_LAT cycles, as the LSQ requires of its store
// port: a write issued in cycle s is seen by reads issued from cycle
// s+ST_LAT+1. Requests are ignored while rst_n is low. Memory content is
// initialised to init(a) = a * 7 + 3 so that reads of never-written words are
// predictable. The latencies are this model's own; the paper gives none.
module dram_model
  import lsq_pkg::*;
#(
  parameter int          WORDS   = 4096,
  parameter int          ST_LAT  = 4,
  parameter int          MIN_LAT = 1,
  parameter int          MAX_LAT = 1,
  parameter int unsigned SEED    = 3
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  rd_valid,
  input  addr_t rd_addr,
  output logic  rsp_valid,
  output data_t rsp_data,
  input  logic  wr_valid,
  input  addr_t wr_addr,
  input  data_t wr_data
);

  typedef struct { longint t; data_t d; } rsp_t;
  typedef struct { longint t; addr_t a; data_t d; } wr_t;
  data_t  mem [WORDS];
  rsp_t   rq [$];
  wr_t    wq [$];
  longint cyc = 0, last_t = 0;

  initial begin
    void'($urandom(SEED));
    for (int a = 0; a < WORDS; a++) mem[a] = data_t'(a * 7 + 3);
    rsp_valid = 1'b0;
    rsp_data  = '0;
  end

  always @(posedge clk) begin
    longint t;
    // writes that have passed the store buffer (issued ST_LAT cycles ago)
    while (wq.size() > 0 && wq[0].t + ST_LAT <= cyc) begin
      mem[wq[0].a % WORDS] = wq[0].d;
      void'(wq.pop_front());
    end
    if (rd_valid && rst_n) begin
      t = cyc + longint'($urandom_range(MAX_LAT, MIN_LAT));
      if (t <= last_t) t = last_t + 1;
      last_t = t;
      rq.push_back('{t, mem[rd_addr % WORDS]});
    end
    if (wr_valid && rst_n) wq.push_back('{cyc, wr_addr, wr_data});
    rsp_valid <= rq.size() > 0 && rq[0].t == cyc + 1;
    if (rq.size() > 0 && rq[0].t == cyc + 1) begin
      rsp_data <= rq[0].d;
      void'(rq.pop_front());
    end
    cyc++;
  end

endmodule
