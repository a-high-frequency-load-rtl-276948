// tb_lsq_kernels: three loop kernels on the LSQ with on-chip memory, every
// parameter of lsq_top at its default.
//
//   histogram   : x = h[a]; h[a] = x + 1                  (random a, true hazards)
//   histogramIf : x = h[a]; if (x < 300) h[a] = x + w      (store allocated
//                 speculatively, written invalid when the condition fails)
//   matching    : vs = v[s]; vd = v[d];
//                 if (vs < 0 && vd < 0) { v[s] = d; v[d] = s; }
//
// The kernels are small models of the loop bodies named in the evaluation of
// the LSQ; the array size (64 words), the iteration count and the weights are
// this testbench's choice. Each kernel runs on its own lsq_top. lsq_traffic
// checks every load value against a sequential reference execution. This
// testbench also checks:
//   - every store allocation retires exactly once, as an issued store or as a
//     dropped one (issued + dropped = stores in the program);
//   - histogram drops nothing; histogramIf and matching both issue and drop;
//   - cycle counts lie between one iteration per cycle (the address
//     generator's limit) and fully serialised iterations (COMP_LAT + 12 cycles
//     each).
module tb_lsq_kernels;
  import lsq_pkg::*;
  localparam int N = 1000, R = 64, CL = 4;
  localparam int NK = 3;
  localparam int WL [NK] = '{0, 5, 1};
  localparam int ST_PER_IT [NK] = '{1, 1, 2};

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int tc [NK], tf [NK], wc [NK], n_st [NK], n_drop [NK];
  logic [NK-1:0] done;

  for (genvar g = 0; g < NK; g++) begin : g_k
    logic [1:0] ld_alloc_valid, ld_alloc_ready, ld_val_valid, ld_val_ready;
    logic [1:0] st_alloc_valid, st_alloc_ready, st_val_valid, st_val_ready;
    alloc_t     ld_alloc [2];
    alloc_t     st_alloc [2];
    st_val_t    st_val   [2];
    data_t      ld_val   [2];
    lsq_events_t ev;
    int c, f, w, ns, nd;
    logic d;

    lsq_top dut (
      .clk, .rst_n, .ld_alloc_valid, .ld_alloc_ready, .ld_alloc,
      .st_alloc_valid, .st_alloc_ready, .st_alloc, .st_val_valid, .st_val_ready, .st_val,
      .ld_val_valid, .ld_val_ready, .ld_val, .ev);

    lsq_traffic #(
      .WORKLOAD(WL[g]), .N_ITERS(N), .ADDR_RANGE(R), .COMP_LAT(CL),
      .CHAN_DEPTH(4), .SEED(21 + g)
    ) traffic (
      .clk, .rst_n, .ld_alloc_valid, .ld_alloc_ready, .ld_alloc,
      .st_alloc_valid, .st_alloc_ready, .st_alloc, .st_val_valid, .st_val_ready, .st_val,
      .ld_val_valid, .ld_val_ready, .ld_val, .done(d),
      .checks(c), .failures(f), .work_cycles(w)
    );

    always @(posedge clk)
      if (!rst_n) begin
        ns <= 0;
        nd <= 0;
      end else begin
        ns <= ns + int'(ev.st_issue);
        nd <= nd + int'(ev.st_drop);
      end

    assign done[g]   = d;
    assign tc[g]     = c;
    assign tf[g]     = f;
    assign wc[g]     = w;
    assign n_st[g]   = ns;
    assign n_drop[g] = nd;
  end

  task automatic chk(input logic ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  task automatic finish();
    int c = checks, f = failures;
    for (int k = 0; k < NK; k++) begin
      c += tc[k];
      f += tf[k];
    end
    $display("TB_RESULT checks=%0d failures=%0d", c, f);
    $finish;
  endtask

  initial begin
    string name [NK] = '{"histogram", "histogramIf", "matching"};
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    wait (done == '1);
    repeat (10) @(posedge clk);
    for (int k = 0; k < NK; k++) begin
      $display("%-12s %0d cycles, %0d stores issued, %0d dropped", name[k], wc[k],
               n_st[k], n_drop[k]);
      chk(n_st[k] + n_drop[k] == R + ST_PER_IT[k] * N, "store allocations retired once");
      chk(wc[k] >= N + 2 * R, "faster than one iteration per cycle");
      chk(wc[k] <= (N + 2 * R) * (CL + 12), "slower than serialised iterations");
      if (k == 0) chk(n_drop[k] == 0, "histogram dropped a store");
      else begin
        chk(n_drop[k] > 0, "no store was dropped");
        chk(n_st[k] > R, "no loop store was issued");
      end
    end
    finish();
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    finish();
  end
endmodule
