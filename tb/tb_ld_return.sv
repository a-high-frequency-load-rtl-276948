// tb_ld_return: random mix of forwarded loads and memory loads, with a memory
// model that answers reads in order after 1..6 cycles, and random readiness on
// the value channels. Every value leaving must be the next one in issue order
// (global order, right sequence, right value). It also checks that a
// forwarded value can leave the cycle after it was issued.
module tb_ld_return;
  import lsq_pkg::*;
  localparam int DEPTH = 4, N = 2;

  logic         clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic         issue_valid = 0, issue_ready, issue_fwd = 0, mem_rvalid = 0;
  data_t        issue_fwd_data = '0, mem_rdata = '0;
  logic [0:0]   issue_seq = '0;
  logic [N-1:0] out_valid, out_ready = '0;
  data_t        out_data [N];
  int checks = 0, failures = 0, n_out = 0;
  typedef struct { logic [0:0] s; data_t d; } exp_t;
  typedef struct { longint t; data_t d; } rsp_t;
  exp_t expq [$];
  rsp_t rspq [$];
  longint cyc = 0, last_rsp_t = 0;

  ld_return #(.DEPTH(DEPTH), .N_SEQ(N)) dut (.*);

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("[%0t] mismatch: %s", $time, what); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk); #1;
    // directed: one forwarded load into an empty buffer leaves one cycle later
    issue_valid = 1; issue_fwd = 1; issue_fwd_data = 32'h1234; issue_seq = 1; out_ready = '1;
    @(posedge clk); #1;
    issue_valid = 0;
    chk(out_valid === 2'b10 && out_data[1] === 32'h1234, "forward latency 1");
    @(posedge clk); #1;
    out_ready = '0;
    for (int k = 0; k < 4000; k++) begin
      cyc++;
      // drive this cycle's inputs
      issue_valid    = issue_ready && $urandom_range(99, 0) < 60;
      issue_fwd      = $urandom_range(1, 0);
      issue_fwd_data = data_t'($urandom);
      issue_seq      = 1'($urandom_range(1, 0));
      out_ready      = N'($urandom_range(3, 0));
      mem_rvalid     = rspq.size() > 0 && rspq[0].t == cyc;
      mem_rdata      = mem_rvalid ? rspq[0].d : '0;
      if (mem_rvalid) void'(rspq.pop_front());
      #1;
      // transfers that happen at the coming edge
      for (int s = 0; s < N; s++)
        if (out_valid[s] && out_ready[s]) begin
          exp_t e;
          n_out++;
          e = expq.pop_front();
          chk(e.s === 1'(s) && out_data[s] === e.d, "value order");
        end
      chk($countones(out_valid) <= 1, "one value at a time");
      if (issue_valid) begin
        expq.push_back('{issue_seq, issue_fwd ? issue_fwd_data : data_t'(k * 13)});
        if (!issue_fwd) begin
          longint t;
          t = cyc + longint'($urandom_range(6, 1));
          if (t <= last_rsp_t) t = last_rsp_t + 1;
          last_rsp_t = t;
          rspq.push_back('{t, data_t'(k * 13)});
        end
      end
      @(posedge clk); #1;
    end
    chk(n_out > 500, "enough traffic");
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
