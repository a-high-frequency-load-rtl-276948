// tb_shift_queue: random push/pop against a reference queue. Every cycle it
// compares full, empty, head and the parallel view (entries, entry_valid) with
// the model; it also checks that a pushed entry is visible the next cycle.
module tb_shift_queue;
  localparam int DEPTH = 4;
  typedef logic [7:0] T;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic             push = 1'b0, pop = 1'b0, full, empty;
  T                 push_data = '0, head;
  T                 entries [DEPTH];
  logic [DEPTH-1:0] entry_valid;
  int checks = 0, failures = 0;
  T model [$];

  shift_queue #(.T(T), .DEPTH(DEPTH)) dut (.*);

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("[%0t] mismatch: %s", $time, what);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    #1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      int sz;
      // compare state (1 time unit after the edge: outputs have settled)
      chk(empty === (model.size() === 0), "empty");
      chk(full === (model.size() === DEPTH), "full");
      if (model.size() > 0) chk(head === model[0], "head");
      for (int i = 0; i < DEPTH; i++) begin
        chk(entry_valid[i] === (i < model.size()), "entry_valid");
        if (i < model.size()) chk(entries[i] === model[i], "entries");
      end
      // drive (fill-biased, then drain-biased)
      push      = ($urandom_range(99, 0) < ((cyc % 400) < 200 ? 70 : 30));
      pop       = ($urandom_range(99, 0) < ((cyc % 400) < 200 ? 30 : 70));
      push_data = T'($urandom);
      // reference: push accepted only if not full before the edge
      sz = model.size();
      if (pop && sz > 0) void'(model.pop_front());
      if (push && sz < DEPTH) model.push_back(push_data);
      @(posedge clk);
      #1;
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
