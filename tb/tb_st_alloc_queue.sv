// tb_st_alloc_queue: random store allocation pushes and pops against a
// reference queue. Each cycle a random load allocation is checked; the
// expected conflict is eq. 1 evaluated over the reference queue (same address
// and load tag >= store tag). Also checks head, full and the last accepted tag.
module tb_st_alloc_queue;
  import lsq_pkg::*;
  localparam int DEPTH = 4;

  logic   clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic   push = 0, pop = 0, full, head_valid, conflict;
  alloc_t push_alloc = '0, head_alloc, chk_alloc = '0;
  logic [0:0] push_seq = '0, head_seq;
  tag_t   last_tag;
  int checks = 0, failures = 0;
  typedef struct { alloc_t a; logic [0:0] s; } ent_t;
  ent_t model [$];
  tag_t m_last;

  st_alloc_queue #(.DEPTH(DEPTH), .N_SEQ(2)) dut (.*);

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("[%0t] mismatch: %s", $time, what); end
  endtask

  initial begin
    tag_t next_tag;
    next_tag = 1; m_last = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk); #1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      logic e_conf;
      int sz;
      // random load check against current content (combinational)
      chk_alloc.addr = addr_t'($urandom_range(3, 0));
      chk_alloc.tag  = next_tag - tag_t'($urandom_range(6, 0));
      #1;
      e_conf = 1'b0;
      foreach (model[i])
        if (model[i].a.addr == chk_alloc.addr && chk_alloc.tag >= model[i].a.tag) e_conf = 1'b1;
      chk(conflict === e_conf, "conflict");
      chk(full === (model.size() === DEPTH), "full");
      chk(head_valid === (model.size() > 0), "head_valid");
      if (model.size() > 0) chk(head_alloc === model[0].a && head_seq === model[0].s, "head");
      chk(last_tag === m_last, "last_tag");
      // drive
      push = $urandom_range(99, 0) < 55;
      pop  = $urandom_range(99, 0) < 45;
      push_alloc.addr = addr_t'($urandom_range(3, 0));
      push_alloc.tag  = next_tag;
      push_seq = 1'($urandom_range(1, 0));
      sz = model.size();
      if (pop && sz > 0) void'(model.pop_front());
      if (push && sz < DEPTH) begin
        model.push_back('{push_alloc, push_seq});
        m_last = next_tag;
        next_tag++;
      end
      @(posedge clk); #1;
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
