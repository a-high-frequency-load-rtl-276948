// tb_lsq_ports: one load port against two.
//
// Two copies of lsq_top (on-chip RAM, defaults otherwise) run the same
// two-load accumulate loop d[a] += d[b] (a = i % 256, b = (7i + 3) % 256, one
// load on each of two load sequences and one store per iteration), with every
// load value checked against the sequential reference.
//   * N_LD_PORTS = 1: both load sequences share one port through the
//     program-order mux, so an iteration needs at least two cycles.
//   * N_LD_PORTS = 2: each sequence has its own port, lane and RAM read port,
//     so close to one iteration per cycle is possible; the test also requires
//     cycles in which both read ports are used at once.
// The 256 initialisation stores and 256 read-back loads add about 512 cycles.
module tb_lsq_ports;
  import lsq_pkg::*;
  localparam int N = 2000, R = 256;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0, both = 0;
  int tc [2], tf [2], wc [2];
  logic [1:0] done;

  for (genvar g = 0; g < 2; g++) begin : g_lsq
    logic [1:0] ld_alloc_valid, ld_alloc_ready, ld_val_valid, ld_val_ready;
    logic [1:0] st_alloc_valid, st_alloc_ready, st_val_valid, st_val_ready;
    alloc_t     ld_alloc [2];
    alloc_t     st_alloc [2];
    st_val_t    st_val   [2];
    data_t      ld_val   [2];
    lsq_events_t ev;
    int c, f, w;
    logic d;

    lsq_top #(.N_LD_PORTS(g + 1)) dut (
      .clk, .rst_n, .ld_alloc_valid, .ld_alloc_ready, .ld_alloc,
      .st_alloc_valid, .st_alloc_ready, .st_alloc, .st_val_valid, .st_val_ready, .st_val,
      .ld_val_valid, .ld_val_ready, .ld_val, .ev);

    lsq_traffic #(
      .WORKLOAD(4), .N_ITERS(N), .ADDR_RANGE(R), .COMP_LAT(2), .SEED(9)
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

  always @(posedge clk) if (&g_lsq[1].dut.rd_valid) both <= both + 1;

  task automatic finish();
    $display("TB_RESULT checks=%0d failures=%0d", checks + tc[0] + tc[1], failures + tf[0] + tf[1]);
    $finish;
  endtask

  initial begin
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    wait (done === 2'b11);
    repeat (10) @(posedge clk);
    $display("1 load port: %0d cycles, 2 load ports: %0d cycles, for %0d iterations; %0d cycles with two reads",
             wc[0], wc[1], N, both);
    checks++;
    if (wc[0] < 2 * N) begin
      failures++;
      $display("one load port served more than one load per cycle");
    end
    checks++;
    if (wc[1] > 2 * R + (N * 13) / 10) begin
      failures++;
      $display("two load ports did not reach about one iteration per cycle");
    end
    checks++;
    if (both < N / 2) begin
      failures++;
      $display("too few cycles with both read ports busy");
    end
    finish();
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog");
    finish();
  end
endmodule
