// lsq_top: a load-store queue protecting an on-chip memory.
//
// The LSQ (lsq) owns both ports of the RAM (lsq_bram), so every access to this
// memory goes through the LSQ. Its allocation, store value and load value
// channels are the top's ports: they connect to the address generating
// pipeline and the compute pipeline that an HLS compiler derives from the
// program, which are not part of this RTL.
//
// Parameters are the LSQ's plus MEM_DEPTH; the RAM gets one read port per LSQ
// load port (N_LD_PORTS). The commit queue is sized from the
// memory's store latency (ST_LATENCY), as the paper prescribes. Channel
// protocol: valid/ready, a transfer happens in a cycle where both are high.
module lsq_top
  import lsq_pkg::*;
#(
  parameter int N_LD_SEQ   = 2,
  parameter int N_ST_SEQ   = 2,
  parameter int N_LD_PORTS = 1,
  parameter int LD_Q_DEPTH = 4,
  parameter int ST_Q_DEPTH = 8,
  parameter int ST_LATENCY = 4,
  parameter int RET_DEPTH  = 8,
  parameter int MEM_DEPTH  = 1024
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [N_LD_SEQ-1:0] ld_alloc_valid,
  output logic [N_LD_SEQ-1:0] ld_alloc_ready,
  input  alloc_t              ld_alloc [N_LD_SEQ],
  input  logic [N_ST_SEQ-1:0] st_alloc_valid,
  output logic [N_ST_SEQ-1:0] st_alloc_ready,
  input  alloc_t              st_alloc [N_ST_SEQ],
  input  logic [N_ST_SEQ-1:0] st_val_valid,
  output logic [N_ST_SEQ-1:0] st_val_ready,
  input  st_val_t             st_val [N_ST_SEQ],
  output logic [N_LD_SEQ-1:0] ld_val_valid,
  input  logic [N_LD_SEQ-1:0] ld_val_ready,
  output data_t               ld_val [N_LD_SEQ],
  output lsq_events_t         ev
);

  logic  [N_LD_PORTS-1:0] rd_valid, rsp_valid;
  addr_t [N_LD_PORTS-1:0] rd_addr;
  data_t [N_LD_PORTS-1:0] rsp_data;
  logic                   wr_valid;
  addr_t                  wr_addr;
  data_t                  wr_data;

  lsq #(
    .N_LD_SEQ   (N_LD_SEQ),
    .N_ST_SEQ   (N_ST_SEQ),
    .N_LD_PORTS (N_LD_PORTS),
    .LD_Q_DEPTH (LD_Q_DEPTH),
    .ST_Q_DEPTH (ST_Q_DEPTH),
    .ST_LATENCY (ST_LATENCY),
    .RET_DEPTH  (RET_DEPTH)
  ) u_lsq (
    .clk, .rst_n,
    .ld_alloc_valid, .ld_alloc_ready, .ld_alloc,
    .st_alloc_valid, .st_alloc_ready, .st_alloc,
    .st_val_valid, .st_val_ready, .st_val,
    .ld_val_valid, .ld_val_ready, .ld_val,
    .mem_rd_valid  (rd_valid),
    .mem_rd_addr   (rd_addr),
    .mem_rsp_valid (rsp_valid),
    .mem_rsp_data  (rsp_data),
    .mem_wr_valid  (wr_valid),
    .mem_wr_addr   (wr_addr),
    .mem_wr_data   (wr_data),
    .ev
  );

  lsq_bram #(.DEPTH(MEM_DEPTH), .ST_LAT(ST_LATENCY), .N_RD(N_LD_PORTS)) u_mem (
    .clk, .rst_n,
    .rd_valid, .rd_addr, .rsp_valid, .rsp_data,
    .wr_valid, .wr_addr, .wr_data
  );

endmodule
