// tb_st_issue: random head allocation, value channels and older-load flag.
// Expected behaviour, written out independently: the value of the head's
// sequence is used; an invalid value retires the allocation (pop, dropped, no
// store, no commit) regardless of older loads; a valid value is issued (store
// port and commit push with the head address and the value) only when no
// older load is pending; nothing happens without a head or a value.
module tb_st_issue;
  import lsq_pkg::*;
  localparam int N = 2;

  logic         head_valid, ld_older_pending;
  addr_t        head_addr;
  logic [0:0]   head_seq;
  logic [N-1:0] val_valid, val_ready;
  st_val_t      val [N];
  logic         pop, st_valid, commit_push, dropped;
  addr_t        st_addr;
  data_t        st_data;
  st_commit_t   commit;
  int checks = 0, failures = 0;

  st_issue #(.N_SEQ(N)) dut (.*);

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("mismatch: %s", what); end
  endtask

  initial begin
    for (int k = 0; k < 4000; k++) begin
      logic e_pop, e_st, e_drop, vv, dv;
      head_valid       = $urandom_range(3, 0) != 0;
      head_addr        = addr_t'($urandom);
      head_seq         = 1'($urandom_range(1, 0));
      ld_older_pending = $urandom_range(1, 0);
      for (int i = 0; i < N; i++) begin
        val_valid[i]  = $urandom_range(1, 0);
        val[i].data   = data_t'($urandom);
        val[i].valid  = $urandom_range(1, 0);
      end
      vv = val_valid[head_seq];
      dv = val[head_seq].valid;
      e_st   = head_valid && vv && dv && !ld_older_pending;
      e_drop = head_valid && vv && !dv;
      e_pop  = e_st || e_drop;
      #1;
      chk(pop === e_pop, "pop");
      chk(st_valid === e_st, "st_valid");
      chk(commit_push === e_st, "commit_push");
      chk(dropped === e_drop, "dropped");
      chk(val_ready[head_seq] === e_pop && val_ready[!head_seq] === 1'b0, "val_ready");
      if (e_st) begin
        chk(st_addr === head_addr && st_data === val[head_seq].data, "store port");
        chk(commit.addr === head_addr && commit.data === val[head_seq].data, "commit");
      end
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
