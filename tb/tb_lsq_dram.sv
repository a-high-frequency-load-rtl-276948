// tb_lsq_dram: the LSQ protecting an off-chip style memory (behavioural
// dram_model: reads answered in order after 20..60 cycles, stores through an
// 8-cycle fixed-latency buffer, commit queue grown to 8 to match). Runs the
// random histogram / matching / read-write mix with every load value checked
// against the sequential reference, and reports the achieved cycles per
// iteration. Also checks that the long read latency never blocks the LSQ
// pipeline beyond the return buffer: at least RET_DEPTH loads are in flight at
// some point.
module tb_lsq_dram;
  import lsq_pkg::*;
  localparam int NL = 2, NS = 2, STL = 8, RET = 16, ITERS = 600;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [NL-1:0] ld_alloc_valid, ld_alloc_ready, ld_val_valid, ld_val_ready;
  logic [NS-1:0] st_alloc_valid, st_alloc_ready, st_val_valid, st_val_ready;
  alloc_t        ld_alloc [NL];
  alloc_t        st_alloc [NS];
  st_val_t       st_val   [NS];
  data_t         ld_val   [NL];
  logic          mem_rd_valid, mem_rsp_valid, mem_wr_valid;
  addr_t         mem_rd_addr, mem_wr_addr;
  data_t         mem_rsp_data, mem_wr_data;
  lsq_events_t   ev;
  logic          done;
  int            t_checks, t_failures, work_cycles;
  int            checks = 0, failures = 0, outstanding = 0, max_out = 0;

  lsq #(.N_LD_SEQ(NL), .N_ST_SEQ(NS), .ST_LATENCY(STL), .RET_DEPTH(RET)) dut (.*);
  dram_model #(.WORDS(4096), .ST_LAT(STL), .MIN_LAT(20), .MAX_LAT(60)) mem (
    .clk, .rst_n, .rd_valid(mem_rd_valid), .rd_addr(mem_rd_addr), .rsp_valid(mem_rsp_valid),
    .rsp_data(mem_rsp_data), .wr_valid(mem_wr_valid), .wr_addr(mem_wr_addr), .wr_data(mem_wr_data));

  lsq_traffic #(
    .N_LD_SEQ(NL), .N_ST_SEQ(NS), .WORKLOAD(2), .N_ITERS(ITERS), .ADDR_RANGE(256),
    .COMP_LAT(4), .ALLOC_PCT(100), .READY_PCT(100), .SEED(11)
  ) traffic (
    .clk, .rst_n, .ld_alloc_valid, .ld_alloc_ready, .ld_alloc,
    .st_alloc_valid, .st_alloc_ready, .st_alloc, .st_val_valid, .st_val_ready, .st_val,
    .ld_val_valid, .ld_val_ready, .ld_val, .done,
    .checks(t_checks), .failures(t_failures), .work_cycles
  );

  always @(posedge clk) begin
    outstanding <= outstanding + int'(mem_rd_valid) - int'(mem_rsp_valid);
    if (outstanding > max_out) max_out <= outstanding;
  end

  task automatic finish();
    $display("TB_RESULT checks=%0d failures=%0d", checks + t_checks, failures + t_failures);
    $finish;
  endtask

  initial begin
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    wait (done);
    repeat (100) @(posedge clk);
    $display("DRAM mix: %0d iterations (plus init/read-back) in %0d cycles, up to %0d reads in flight",
             ITERS, work_cycles, max_out);
    checks++;
    if (max_out < RET / 2) begin
      failures++;
      $display("too few reads in flight: %0d", max_out);
    end
    finish();
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog");
    finish();
  end
endmodule
