// tb_st_commit_queue: random stores over a few addresses; the reference keeps
// the issue cycle of every store. A load address must hit exactly when some
// store to it was issued within the last DEPTH cycles, and must receive the
// value of the most recent such store (the youngest hit).
module tb_st_commit_queue;
  import lsq_pkg::*;
  localparam int DEPTH = 4;

  logic       clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic       push = 0, hit;
  st_commit_t push_commit = '0;
  addr_t      chk_addr = '0;
  data_t      hit_data;
  int checks = 0, failures = 0;
  typedef struct { int cyc; addr_t a; data_t d; } rec_t;
  rec_t hist [$];

  st_commit_queue #(.DEPTH(DEPTH)) dut (.*);

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("[%0t] mismatch: %s", $time, what); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk); #1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      logic  e_hit;
      data_t e_data;
      chk_addr = addr_t'($urandom_range(3, 0));
      #1;
      // stores pushed in cycles cyc-DEPTH .. cyc-1 are visible in cycle cyc
      e_hit = 1'b0; e_data = '0;
      foreach (hist[i])
        if (hist[i].cyc >= cyc - DEPTH && hist[i].a == chk_addr) begin
          e_hit = 1'b1; e_data = hist[i].d;   // later entries are younger
        end
      chk(hit === e_hit, "hit");
      if (e_hit) chk(hit_data === e_data, "hit_data");
      push = $urandom_range(99, 0) < 50;
      push_commit.addr = addr_t'($urandom_range(3, 0));
      push_commit.data = data_t'($urandom);
      if (push) hist.push_back('{cyc, push_commit.addr, push_commit.data});
      while (hist.size() > 0 && hist[0].cyc < cyc - DEPTH) void'(hist.pop_front());
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
