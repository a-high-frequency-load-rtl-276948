// lsq_bram: on-chip memory behind the LSQ's load and store ports.
//
// A word-addressed RAM with N_RD read ports (one per LSQ load port, default 1)
// and one write port. Reads are registered: a request in cycle t returns data in cycle t+1, and returns the content
// before any write made at the same clock edge (read-first). Writes pass
// through a latency-insensitive buffer of ST_LAT register stages with a fixed
// write-to-read latency before they reach the array, so a store issued in cycle
// s is written at the end of cycle s+ST_LAT and seen by reads from cycle
// s+ST_LAT+1. The LSQ's commit queue must be at least ST_LAT deep.
//
// The fixed-latency store buffer follows the paper's decoupling of the memory
// ports from the LSQ pipeline; its length, the RAM depth (1024 words) and the
// use of the low address bits as the word index are this design's choices.
// The array has no reset; its initial content is undefined. Address bits above
// the index are ignored on purpose (a lint tool reports them as unused): the
// ports keep the LSQ's full address width so that a deeper RAM is only a
// parameter change.
module lsq_bram
  import lsq_pkg::*;
#(
  parameter int DEPTH  = 1024,
  parameter int ST_LAT = 4,
  parameter int N_RD   = 1,
  localparam int IW = $clog2(DEPTH)
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  [N_RD-1:0] rd_valid,
  input  addr_t [N_RD-1:0] rd_addr,
  output logic  [N_RD-1:0] rsp_valid,
  output data_t [N_RD-1:0] rsp_data,
  input  logic  wr_valid,
  input  addr_t wr_addr,
  input  data_t wr_data
);

  data_t             mem [DEPTH];
  logic [ST_LAT-1:0] wb_v;
  addr_t             wb_addr [ST_LAT];
  data_t             wb_data [ST_LAT];

  // fixed-latency store buffer
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wb_v <= '0;
    end else begin
      wb_v[0] <= wr_valid;
      for (int i = 1; i < ST_LAT; i++) wb_v[i] <= wb_v[i-1];
    end
  end

  always_ff @(posedge clk) begin
    wb_addr[0] <= wr_addr;
    wb_data[0] <= wr_data;
    for (int i = 1; i < ST_LAT; i++) begin
      wb_addr[i] <= wb_addr[i-1];
      wb_data[i] <= wb_data[i-1];
    end
  end

  always_ff @(posedge clk) begin
    if (wb_v[ST_LAT-1]) mem[wb_addr[ST_LAT-1][IW-1:0]] <= wb_data[ST_LAT-1];
    for (int r = 0; r < N_RD; r++) rsp_data[r] <= mem[rd_addr[r][IW-1:0]];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) rsp_valid <= '0;
    else        rsp_valid <= rd_valid;
  end

endmodule
