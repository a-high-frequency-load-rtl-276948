// tb_lsq: directed tests of the LSQ on a memory with one-cycle reads.
//   1. Store rate: 32 stores with values ready are issued on 32 consecutive
//      cycles.
//   2. Load rate and latency: 64 independent loads (no stores pending) are
//      accepted one per cycle; the first value appears 5 cycles after its
//      allocation was accepted (queue, stage A, stage C/issue, memory, return
//      buffer) and the rest follow one per cycle. Values must be the stored
//      ones.
//   3. Read-after-write hazard: a store to X whose value comes 12 cycles late
//      and a later load of X; the load must wait and return the new value.
//   4. Speculation: a store allocation to Y retired with an invalid value; a
//      later load of Y must return the old value and memory must be unchanged.
//   5. Two stores to Z, the first with a late value, and a load of Z between
//      them in program order. The load waits for the first store; the second
//      store's value is ready early but must not be issued (and enter the
//      commit queue) before the load is served, so the load returns the first
//      store's value.
module tb_lsq;
  import lsq_pkg::*;
  localparam int NL = 2, NS = 2, STL = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [NL-1:0] ld_alloc_valid = '0, ld_alloc_ready, ld_val_valid, ld_val_ready = '0;
  logic [NS-1:0] st_alloc_valid = '0, st_alloc_ready, st_val_valid = '0, st_val_ready;
  alloc_t        ld_alloc [NL];
  alloc_t        st_alloc [NS];
  st_val_t       st_val   [NS];
  data_t         ld_val   [NL];
  logic          mem_rd_valid, mem_rsp_valid, mem_wr_valid;
  addr_t         mem_rd_addr, mem_wr_addr;
  data_t         mem_rsp_data, mem_wr_data;
  lsq_events_t   ev;
  int checks = 0, failures = 0;
  int cyc = 0;

  lsq #(.N_LD_SEQ(NL), .N_ST_SEQ(NS), .ST_LATENCY(STL)) dut (.*);
  dram_model #(.WORDS(256), .ST_LAT(STL), .MIN_LAT(1), .MAX_LAT(1)) mem (
    .clk, .rst_n, .rd_valid(mem_rd_valid), .rd_addr(mem_rd_addr), .rsp_valid(mem_rsp_valid),
    .rsp_data(mem_rsp_data), .wr_valid(mem_wr_valid), .wr_addr(mem_wr_addr), .wr_data(mem_wr_data));

  always @(posedge clk) cyc <= cyc + 1;

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("[%0t] mismatch: %s", $time, what); end
  endtask

  // value stream recorder: cycle and data of every load value, per sequence
  int    v_cyc [NL][$];
  data_t v_dat [NL][$];
  always @(posedge clk)
    for (int s = 0; s < NL; s++)
      if (ld_val_valid[s] && ld_val_ready[s]) begin
        v_cyc[s].push_back(cyc);
        v_dat[s].push_back(ld_val[s]);
      end
  int st_cyc [$];
  always @(posedge clk) if (mem_wr_valid) st_cyc.push_back(cyc);

  // Channel drivers: items are presented back to back from the falling edge;
  // a transfer happens at the rising edge when ready is seen high. The valid
  // bit drops at the falling edge after the last transfer.
  task automatic send_ld(int s, addr_t a [$], tag_t t [$]);
    foreach (a[i]) begin
      @(negedge clk);
      ld_alloc[s] = '{addr: a[i], tag: t[i]};
      ld_alloc_valid[s] = 1'b1;
      #1;
      while (!ld_alloc_ready[s]) begin @(negedge clk); #1; end
      @(posedge clk);
    end
    @(negedge clk);
    ld_alloc_valid[s] = 1'b0;
  endtask
  task automatic send_st(int s, addr_t a [$], tag_t t [$]);
    foreach (a[i]) begin
      @(negedge clk);
      st_alloc[s] = '{addr: a[i], tag: t[i]};
      st_alloc_valid[s] = 1'b1;
      #1;
      while (!st_alloc_ready[s]) begin @(negedge clk); #1; end
      @(posedge clk);
    end
    @(negedge clk);
    st_alloc_valid[s] = 1'b0;
  endtask
  task automatic send_val(int s, data_t d [$], logic v [$]);
    foreach (d[i]) begin
      @(negedge clk);
      st_val[s] = '{data: d[i], valid: v[i]};
      st_val_valid[s] = 1'b1;
      #1;
      while (!st_val_ready[s]) begin @(negedge clk); #1; end
      @(posedge clk);
    end
    @(negedge clk);
    st_val_valid[s] = 1'b0;
  endtask

  initial begin
    int c0, n;
    for (int s = 0; s < NL; s++) ld_alloc[s] = '0;
    for (int s = 0; s < NS; s++) begin st_alloc[s] = '0; st_val[s] = '0; end
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    ld_val_ready <= '1;
    @(posedge clk);
    // ---- 1. store rate ----
    begin
      addr_t a [$]; tag_t t [$]; data_t d [$]; logic v [$];
      for (int i = 0; i < 32; i++) begin
        a.push_back(addr_t'(i)); t.push_back(tag_t'(i + 1));
        d.push_back(data_t'(32'h1000 + i)); v.push_back(1'b1);
      end
      fork
        send_st(0, a, t);
        send_val(0, d, v);
      join
    end
    repeat (8) @(posedge clk);
    chk(st_cyc.size() === 32, "32 stores issued");
    chk(st_cyc[31] - st_cyc[0] === 31, $sformatf("stores on consecutive cycles (%0d)", st_cyc[31] - st_cyc[0]));
    // ---- 2. load rate and latency ----
    begin
      addr_t a0 [$]; addr_t a1 [$]; tag_t t [$];
      for (int i = 0; i < 32; i++) begin
        a0.push_back(addr_t'((2 * i) % 32)); a1.push_back(addr_t'((2 * i + 1) % 32));
        t.push_back(32);
      end
      @(negedge clk);
      c0 = cyc + 1;   // first allocation transfers at the coming edge
      fork
        send_ld(0, a0, t);
        send_ld(1, a1, t);
      join
    end
    repeat (12) @(posedge clk);
    n = v_cyc[0].size() + v_cyc[1].size();
    chk(n === 64, "64 load values");
    chk(v_cyc[0][0] === c0 + 5, $sformatf("first value 5 cycles after acceptance (%0d)", v_cyc[0][0] - c0));
    chk(v_cyc[1][31] === c0 + 5 + 63, $sformatf("last value 63 cycles later (%0d)", v_cyc[1][31] - c0));
    for (int i = 0; i < 32; i++) begin
      chk(v_dat[0][i] === data_t'(32'h1000 + ((2 * i) % 32)), "load value seq 0");
      chk(v_dat[1][i] === data_t'(32'h1000 + ((2 * i + 1) % 32)), "load value seq 1");
    end
    // ---- 3. RAW hazard: st X (tag 33) late value, ld X (tag 33) ----
    begin
      int sv_cyc, cnt0;
      cnt0 = v_cyc[0].size();
      fork
        send_st(1, '{7}, '{33});
        send_ld(0, '{7}, '{33});
        begin repeat (12) @(posedge clk); sv_cyc = cyc; send_val(1, '{32'hABCD}, '{1'b1}); end
      join
      repeat (12) @(posedge clk);
      chk(v_cyc[0].size() === cnt0 + 1, "RAW load returned");
      chk(v_dat[0][cnt0] === 32'hABCD, $sformatf("RAW load value %0h", v_dat[0][cnt0]));
      chk(v_cyc[0][cnt0] > sv_cyc, "RAW load waited for the store");
    end
    // ---- 4. speculative store dropped: st Y (tag 34) invalid, ld Y (tag 34) ----
    begin
      int cnt0, nst;
      cnt0 = v_cyc[1].size();
      nst = st_cyc.size();
      fork
        send_st(0, '{9}, '{34});
        send_ld(1, '{9}, '{34});
        begin repeat (6) @(posedge clk); send_val(0, '{32'hDEAD}, '{1'b0}); end
      join
      repeat (12) @(posedge clk);
      chk(v_dat[1][cnt0] === data_t'(32'h1000 + 9), "load after dropped store sees old value");
      chk(st_cyc.size() === nst, "dropped store not written");
    end
    // ---- 5. younger store held back: st P (X2, tag 35, late value),
    //         st Q (X2, tag 36, value ready at once), ld (X2, tag 35) ----
    begin
      int cnt0;
      cnt0 = v_cyc[0].size();
      fork
        send_st(0, '{11, 11}, '{35, 36});
        begin repeat (3) @(posedge clk); send_ld(0, '{11}, '{35}); end
        begin repeat (15) @(posedge clk); send_val(0, '{32'h1111, 32'hBEEF}, '{1'b1, 1'b1}); end
      join
      repeat (12) @(posedge clk);
      chk(v_dat[0][cnt0] === 32'h1111, $sformatf("load between two stores sees the first (%0h)", v_dat[0][cnt0]));
      send_ld(0, '{11}, '{36});
      repeat (12) @(posedge clk);
      chk(v_dat[0][cnt0 + 1] === 32'hBEEF, "later load sees the second store");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
