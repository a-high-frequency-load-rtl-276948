// tb_ld_alloc_mux: random load allocation heads on three sequences. The
// expected choice is computed by ranking every present allocation by
// (tag, sequence index) and taking the first; the test checks out_valid,
// out_seq, out_alloc and that only the chosen input sees ready (and only when
// out_ready is high).
module tb_ld_alloc_mux;
  import lsq_pkg::*;
  localparam int N = 3;

  logic [N-1:0] in_valid, in_ready;
  alloc_t       in_alloc [N];
  logic         out_valid, out_ready;
  alloc_t       out_alloc;
  logic [1:0]   out_seq;
  int checks = 0, failures = 0;

  ld_alloc_mux #(.N_SEQ(N)) dut (.*);

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("mismatch: %s", what); end
  endtask

  initial begin
    for (int k = 0; k < 4000; k++) begin
      longint best_key;
      int     best;
      for (int i = 0; i < N; i++) begin
        in_valid[i]      = $urandom_range(1, 0);
        in_alloc[i].addr = addr_t'($urandom);
        in_alloc[i].tag  = tag_t'($urandom_range(5, 0));   // many ties
      end
      out_ready = $urandom_range(1, 0);
      // reference: key = tag * N + index, smallest key wins
      best = -1; best_key = 0;
      for (int i = 0; i < N; i++)
        if (in_valid[i] && (best < 0 || longint'(in_alloc[i].tag) * N + i < best_key)) begin
          best = i; best_key = longint'(in_alloc[i].tag) * N + i;
        end
      #1;
      chk(out_valid === (best >= 0), "out_valid");
      if (best >= 0) begin
        chk(out_seq === 2'(best), "out_seq");
        chk(out_alloc === in_alloc[best], "out_alloc");
        for (int i = 0; i < N; i++)
          chk(in_ready[i] === (i === best && out_ready), "in_ready");
      end else
        chk(in_ready === '0, "in_ready idle");
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
