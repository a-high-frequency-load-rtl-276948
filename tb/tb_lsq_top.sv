// tb_lsq_top: end-to-end test of the LSQ protecting an on-chip RAM, with every
// parameter of lsq_top at its default.
//
// lsq_traffic plays the address generator and the compute pipeline on a random
// mix of histogram and maximal-matching iterations over a small address range,
// so that true hazards are frequent, and checks every load value against a
// sequential reference. The test also counts how often each LSQ mechanism
// occurred (tag wait, eq. 1 conflict wait, forwarding, memory read, return
// stall, store issue, speculative store drop, store waiting for an older load,
// full queues) and counts a failure for any that never did.
module tb_lsq_top;
  import lsq_pkg::*;

  localparam int NL = 2, NS = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [NL-1:0] ld_alloc_valid, ld_alloc_ready, ld_val_valid, ld_val_ready;
  logic [NS-1:0] st_alloc_valid, st_alloc_ready, st_val_valid, st_val_ready;
  alloc_t        ld_alloc [NL];
  alloc_t        st_alloc [NS];
  st_val_t       st_val   [NS];
  data_t         ld_val   [NL];
  lsq_events_t   ev;
  logic          done;
  int            t_checks, t_failures, work_cycles;
  int            checks = 0, failures = 0;

  lsq_top dut (.*);

  lsq_traffic #(
    .N_LD_SEQ(NL), .N_ST_SEQ(NS), .WORKLOAD(2), .N_ITERS(800), .ADDR_RANGE(32),
    .COMP_LAT(3), .ALLOC_PCT(90), .READY_PCT(75), .STALL_EVERY(250), .STALL_LEN(60), .SEED(7)
  ) traffic (
    .clk, .rst_n, .ld_alloc_valid, .ld_alloc_ready, .ld_alloc,
    .st_alloc_valid, .st_alloc_ready, .st_alloc, .st_val_valid, .st_val_ready, .st_val,
    .ld_val_valid, .ld_val_ready, .ld_val, .done,
    .checks(t_checks), .failures(t_failures), .work_cycles
  );

  int n_tag, n_conf, n_fwd, n_rd, n_ret, n_st, n_drop, n_war, n_lqf, n_sqf;
  initial begin
    n_tag = 0; n_conf = 0; n_fwd = 0; n_rd = 0; n_ret = 0;
    n_st = 0; n_drop = 0; n_war = 0; n_lqf = 0; n_sqf = 0;
  end
  always @(posedge clk) if (rst_n) begin
    n_tag  += int'(ev.ld_wait_tag);
    n_conf += int'(ev.ld_wait_conflict);
    n_fwd  += int'(ev.ld_forward);
    n_rd   += int'(ev.ld_mem_read);
    n_ret  += int'(ev.ld_ret_stall);
    n_st   += int'(ev.st_issue);
    n_drop += int'(ev.st_drop);
    n_war  += int'(ev.st_wait_load);
    n_lqf  += int'(ev.ld_q_full);
    n_sqf  += int'(ev.st_q_full);
  end

  task automatic need(string name, int n);
    checks++;
    $display("  %-28s %0d", name, n);
    if (n == 0) begin
      failures++;
      $display("  mechanism never occurred: %s", name);
    end
  endtask

  task automatic finish();
    checks   += t_checks;
    failures += t_failures;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    wait (done);
    repeat (20) @(posedge clk);
    $display("workload finished after %0d cycles", work_cycles);
    need("load waits on tag", n_tag);
    need("load waits on conflict", n_conf);
    need("load forwarded", n_fwd);
    need("load read from memory", n_rd);
    need("return buffer stall", n_ret);
    need("store issued", n_st);
    need("speculative store dropped", n_drop);
    need("store waits for older load", n_war);
    need("load queue full", n_lqf);
    need("store queue full", n_sqf);
    // every store value must have been consumed, every allocation accepted
    checks++;
    if (ld_alloc_valid !== '0 || st_alloc_valid !== '0 || st_val_valid !== '0) begin
      failures++;
      $display("channels not drained");
    end
    finish();
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog: workload did not finish");
    finish();
  end

endmodule
