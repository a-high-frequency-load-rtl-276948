// tb_ld_check_pipe: the load disambiguation pipeline against a model of its
// environment (load queue, last store tag, conflict, commit-queue hit, return
// buffer readiness).
// Directed part: with nothing blocking, 32 back-to-back loads reach the queue
// head from cycle 0; the first is served in cycle 2 and the last in cycle 33
// (one per cycle).
// Random part: checks that loads are served in queue order with their own
// address and sequence; a load leaves the queue head only when its tag is not
// above the last store tag; a load held in stage A by a conflict stays there;
// a served load is forwarded exactly when the commit queue hits and otherwise
// reads memory at its own address; the stall pulses match their conditions.
module tb_ld_check_pipe;
  import lsq_pkg::*;

  logic       clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic       head_valid = 0, pop, a_valid, a_conflict = 0, c_valid, fwd_hit = 0;
  alloc_t     head_alloc = '0, a_alloc;
  logic [0:0] head_seq = '0, issue_seq;
  tag_t       last_st_tag = '0, c_tag;
  addr_t      c_addr, rd_addr;
  data_t      fwd_data = '0, issue_fwd_data;
  logic       issue_ready = 1, issue_valid, issue_fwd, rd_valid, wait_tag, wait_conflict;
  int checks = 0, failures = 0;

  typedef struct { alloc_t a; logic [0:0] s; } ld_t;
  ld_t q [$];       // loads not yet popped
  ld_t inflight [$];

  ld_check_pipe #(.N_SEQ(2)) dut (.*);

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("[%0t] mismatch: %s", $time, what); end
  endtask

  // one cycle of the environment; returns after the edge (+1)
  task automatic step(int p_conf, int p_hit, int p_ready);
    alloc_t a_prev;
    logic   a_held;
    head_valid = q.size() > 0;
    if (q.size() > 0) begin head_alloc = q[0].a; head_seq = q[0].s; end
    a_conflict  = a_valid && ($urandom_range(99, 0) < p_conf);
    fwd_hit     = $urandom_range(99, 0) < p_hit;
    fwd_data    = data_t'($urandom);
    issue_ready = $urandom_range(99, 0) < p_ready;
    #1;
    chk(!pop || (head_valid && head_alloc.tag <= last_st_tag), "pop only when tag allows");
    chk(wait_tag === (head_valid && head_alloc.tag > last_st_tag), "wait_tag");
    chk(wait_conflict === (a_valid && a_conflict), "wait_conflict");
    if (issue_valid) begin
      ld_t e;
      e = inflight.pop_front();
      chk(c_addr === e.a.addr && issue_seq === e.s && c_tag === e.a.tag, "served load order");
      chk(issue_fwd === fwd_hit && issue_fwd_data === fwd_data, "forward");
      chk(rd_valid === !fwd_hit && rd_addr === e.a.addr, "memory read");
    end else
      chk(!rd_valid, "no read without issue");
    a_held = a_valid && a_conflict;
    a_prev = a_alloc;
    if (pop) inflight.push_back(q.pop_front());
    @(posedge clk); #1;
    if (a_held) chk(a_valid && a_alloc === a_prev, "conflict holds stage A");
  endtask

  initial begin
    int n_iss, t0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk); #1;
    // ---- directed throughput ----
    last_st_tag = 100;
    for (int i = 0; i < 32; i++) q.push_back('{'{addr: addr_t'(i), tag: tag_t'(i)}, 1'(i)});
    n_iss = 0; t0 = 0;
    for (int c = 0; c < 40; c++) begin
      if (issue_valid) n_iss++;
      if (n_iss == 32 && t0 == 0) t0 = c;
      step(0, 0, 100);
    end
    if (issue_valid) n_iss++;
    chk(n_iss === 32, "all 32 served");
    chk(t0 === 33, $sformatf("last of 32 loads served in cycle 33 (was %0d)", t0));
    // ---- random ----
    for (int c = 0; c < 4000; c++) begin
      if (q.size() < 3 && $urandom_range(1, 0)) begin
        tag_t t;
        t = (q.size() > 0) ? q[q.size()-1].a.tag + tag_t'($urandom_range(1, 0)) : last_st_tag;
        q.push_back('{'{addr: addr_t'($urandom), tag: t + tag_t'($urandom_range(2, 0))}, 1'($urandom_range(1, 0))});
      end
      if ($urandom_range(3, 0) == 0) last_st_tag++;
      step(40, 30, 70);
    end
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
