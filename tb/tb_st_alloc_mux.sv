// tb_st_alloc_mux: three store allocation sequences presenting random tags
// around last_tag (unique per cycle). Only the allocation with tag last_tag+1
// may be forwarded; the test checks selection, data and ready routing.
module tb_st_alloc_mux;
  import lsq_pkg::*;
  localparam int N = 3;

  logic         clk = 1'b0;
  logic [N-1:0] in_valid, in_ready;
  alloc_t       in_alloc [N];
  tag_t         last_tag;
  logic         out_valid, out_ready;
  alloc_t       out_alloc;
  logic [1:0]   out_seq;
  int checks = 0, failures = 0;

  st_alloc_mux #(.N_SEQ(N)) dut (.*);

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("mismatch: %s", what); end
  endtask

  initial begin
    for (int k = 0; k < 4000; k++) begin
      int exp_i;
      int perm [N];
      last_tag = tag_t'($urandom_range(1000, 0));
      // distinct offsets 0..N-1 (+1 .. +N): at most one is last_tag+1
      for (int i = 0; i < N; i++) perm[i] = i;
      perm.shuffle();
      exp_i = -1;
      for (int i = 0; i < N; i++) begin
        in_valid[i]      = $urandom_range(3, 0) != 0;
        in_alloc[i].addr = addr_t'($urandom);
        in_alloc[i].tag  = last_tag + tag_t'(perm[i] + 1);
        if (in_valid[i] && perm[i] == 0) exp_i = i;
      end
      out_ready = $urandom_range(1, 0);
      #1;
      chk(out_valid === (exp_i >= 0), "out_valid");
      if (exp_i >= 0) begin
        chk(out_seq === 2'(exp_i), "out_seq");
        chk(out_alloc === in_alloc[exp_i], "out_alloc");
      end
      for (int i = 0; i < N; i++)
        chk(in_ready[i] === (i === exp_i && out_ready), "in_ready");
      clk = 1'b1; #1; clk = 1'b0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
