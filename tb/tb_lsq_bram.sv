// tb_lsq_bram: the on-chip RAM with its fixed-latency store buffer.
// Checks read latency (data in the cycle after the request), the exact store
// latency (a write issued in cycle s is seen by a read issued in cycle
// s+ST_LAT+1 but not by one in s+ST_LAT), and random traffic against a
// reference memory that applies each write ST_LAT+1 cycles after issue.
module tb_lsq_bram;
  import lsq_pkg::*;
  localparam int DEPTH = 64, ST_LAT = 3;

  logic  clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic  rd_valid = 0, rsp_valid, wr_valid = 0;
  addr_t rd_addr = '0, wr_addr = '0;
  data_t rsp_data, wr_data = '0;
  int checks = 0, failures = 0;
  data_t ref_mem [DEPTH];
  typedef struct { int t; int a; data_t d; } w_t;
  w_t pend [$];
  int cyc = 0;
  logic  exp_v;
  data_t exp_d;

  lsq_bram #(.DEPTH(DEPTH), .ST_LAT(ST_LAT)) dut (.*);

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("[%0t] mismatch: %s", $time, what); end
  endtask

  // one cycle: apply pending writes due, drive, sample, advance
  task automatic step(logic rv, int ra, logic wv, int wa, data_t wd);
    rd_valid = rv; rd_addr = addr_t'(ra);
    wr_valid = wv; wr_addr = addr_t'(wa); wr_data = wd;
    #1;
    // the response in this cycle belongs to the read of the previous cycle
    chk(rsp_valid === exp_v, "rsp_valid");
    if (exp_v) chk(rsp_data === exp_d, $sformatf("rsp_data %0h exp %0h", rsp_data, exp_d));
    // reference: reads see writes issued ST_LAT+1 or more cycles before
    while (pend.size() > 0 && pend[0].t + ST_LAT + 1 <= cyc) begin
      ref_mem[pend[0].a] = pend[0].d;
      void'(pend.pop_front());
    end
    exp_v = rv;
    exp_d = ref_mem[ra];
    if (wv) pend.push_back('{cyc, wa, wd});
    @(posedge clk); #1;
    cyc++;
  endtask

  initial begin
    exp_v = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk); #1;
    // initialise the memory
    for (int a = 0; a < DEPTH; a++) step(0, 0, 1, a, data_t'(a));
    repeat (ST_LAT + 2) step(0, 0, 0, 0, '0);
    // exact latency: write 5 <- 'hAA, read it each following cycle
    step(0, 0, 1, 5, 'hAA);
    for (int k = 1; k <= ST_LAT + 2; k++) step(1, 5, 0, 0, '0);
    // random
    for (int k = 0; k < 3000; k++)
      step($urandom_range(1, 0), $urandom_range(7, 0), $urandom_range(1, 0),
           $urandom_range(7, 0), data_t'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
