// tb_lsq_scaling: store allocation queue sizing on the histogram loop.
//
// Two LSQs with on-chip memory run the same histogram (data[idx[i]] += 1 over
// 1024 words, idx[i] = i % 1024, so no true hazards) with a compute latency of
// L = 200 cycles between a load value and its store value. By the sizing rule
// ceil(maxLoadToStoreDelay / targetII * numStoresInLoop), II = 1 needs about L
// store allocations in flight. The first LSQ is sized with
// st_q_depth_for(L + 8, 1, 1) = 208 entries: the load-to-store delay is L plus
// 8 cycles for the load path and the channel buffers. It must reach close to
// one iteration per cycle. The second, with an 8-entry queue, cannot exceed
// about 8 iterations per L cycles. Every load value is checked against the
// sequential reference in both.
module tb_lsq_scaling;
  import lsq_pkg::*;
  localparam int N = 2000, L = 200;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int tc [2], tf [2], wc [2];
  logic [1:0] done;

  for (genvar g = 0; g < 2; g++) begin : g_lsq
    localparam int QD = (g == 0) ? st_q_depth_for(L + 8, 1, 1) : 8;
    logic [1:0] ld_alloc_valid, ld_alloc_ready, ld_val_valid, ld_val_ready;
    logic [1:0] st_alloc_valid, st_alloc_ready, st_val_valid, st_val_ready;
    alloc_t     ld_alloc [2];
    alloc_t     st_alloc [2];
    st_val_t    st_val   [2];
    data_t      ld_val   [2];
    lsq_events_t ev;
    int c, f, w;
    logic d;

    lsq_top #(.ST_Q_DEPTH(QD), .LD_Q_DEPTH(8), .RET_DEPTH(8), .MEM_DEPTH(1024)) dut (
      .clk, .rst_n, .ld_alloc_valid, .ld_alloc_ready, .ld_alloc,
      .st_alloc_valid, .st_alloc_ready, .st_alloc, .st_val_valid, .st_val_ready, .st_val,
      .ld_val_valid, .ld_val_ready, .ld_val, .ev);

    lsq_traffic #(
      .WORKLOAD(3), .N_ITERS(N), .ADDR_RANGE(1024), .COMP_LAT(L),
      .CHAN_DEPTH(4), .SEED(5)
    ) traffic (
      .clk, .rst_n, .ld_alloc_valid, .ld_alloc_ready, .ld_alloc,
      .st_alloc_valid, .st_alloc_ready, .st_alloc, .st_val_valid, .st_val_ready, .st_val,
      .ld_val_valid, .ld_val_ready, .ld_val, .done(d),
      .checks(c), .failures(f), .work_cycles(w)
    );
    assign done[g] = d;
    assign tc[g] = c;
    assign tf[g] = f;
    assign wc[g] = w;
  end

  task automatic finish();
    $display("TB_RESULT checks=%0d failures=%0d", checks + tc[0] + tc[1], failures + tf[0] + tf[1]);
    $finish;
  endtask

  initial begin
    int base;
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    wait (done == 2'b11);
    repeat (10) @(posedge clk);
    // init (1024 stores) and read-back (1024 loads) add about 2048 cycles
    base = 2 * 1024 + L;
    $display("queue %0d: %0d cycles, queue 8: %0d cycles, for %0d iterations",
             st_q_depth_for(L + 8, 1, 1), wc[0], wc[1], N);
    checks++;
    if (wc[0] > base + (N * 12) / 10) begin
      failures++;
      $display("queue sized by the rule did not reach about II=1");
    end
    checks++;
    if (wc[1] < base + (N / 8) * L * 9 / 10) begin
      failures++;
      $display("8-entry queue faster than its size allows");
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
