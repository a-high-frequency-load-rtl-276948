// lsq_traffic: address generator, compute pipeline and golden model for LSQ
// testbenches.
//
// It builds a program of loop iterations over ADDR_RANGE words, runs it through
// the LSQ's channels and checks every load value against a sequential
// reference execution of the same program. Iteration kinds:
//   INIT  : data[a] = init(a)                         (one store, seq 0)
//   HIST  : x = data[a]; data[a] = x + 1              (histogram loop:
//           load seq 0, store seq 0)
//   MATCH : vs = v[s]; vd = v[d]; if (vs < 0 && vd < 0) { v[s] = d; v[d] = s; }
//           (maximal matching; loads on seq 0/1, stores on seq 0/1 allocated
//           speculatively, written invalid when the condition is false)
//   RW    : x = data[a]; data[b] = b ^ 'h55           (store independent of
//           the load: its value may be produced before the load is served)
//   ADD   : x = data[a]; y = data[b]; data[a] = x + y (loads on seq 0 and the
//           last seq, store seq 0)
//   HISTIF: x = data[a]; if (x < HIF_LIMIT) data[a] = x + w (conditional
//           histogram with weight w = 1 + i % 5; the store is allocated
//           speculatively on seq 0 and written invalid when x >= HIF_LIMIT)
//   READ  : x = data[a]                               (final read-back)
// Tags follow the address generator rule: a store increments the tag and uses
// it, a load uses the current tag. The address generator pushes all
// allocations of one iteration into per-sequence channel buffers in the same
// cycle (one iteration per cycle at most, ALLOC_PCT percent of cycles). The
// compute side takes load values of one iteration at a time, in order; store
// values are produced in program order, COMP_LAT cycles after the loads they
// depend on (a store that depends on no load, INIT and RW, is produced without
// waiting for loads). READY_PCT throttles how often it is ready for a load
// value, and every STALL_EVERY cycles it stops taking load values for
// STALL_LEN cycles (0 disables).
//
// WORKLOAD: 0 histogram, 1 matching, 2 random mix of histogram, matching and RW,
// 3 histogram with idx[i] = i % ADDR_RANGE (no hazard closer than ADDR_RANGE),
// 4 two-load accumulate d[a] += d[b] with a = i % ADDR_RANGE,
//   b = (7i + 3) % ADDR_RANGE (loads on seq 0 and the last seq, one store),
// 5 conditional histogram (HISTIF) over random addresses.
// Outputs: done when every iteration has completed; checks/failures counted
// here; work_cycles = cycles from reset release to done.
module lsq_traffic
  import lsq_pkg::*;
#(
  parameter int          N_LD_SEQ   = 2,
  parameter int          N_ST_SEQ   = 2,
  parameter int          WORKLOAD   = 2,
  parameter int          N_ITERS    = 200,
  parameter int          ADDR_RANGE = 16,
  parameter int          COMP_LAT   = 3,
  parameter int          ALLOC_PCT  = 100,
  parameter int          READY_PCT  = 100,
  parameter int          CHAN_DEPTH = 4,
  parameter int          STALL_EVERY = 0,
  parameter int          STALL_LEN  = 0,
  parameter int unsigned SEED       = 1
) (
  input  logic                clk,
  input  logic                rst_n,
  output logic [N_LD_SEQ-1:0] ld_alloc_valid,
  input  logic [N_LD_SEQ-1:0] ld_alloc_ready,
  output alloc_t              ld_alloc [N_LD_SEQ],
  output logic [N_ST_SEQ-1:0] st_alloc_valid,
  input  logic [N_ST_SEQ-1:0] st_alloc_ready,
  output alloc_t              st_alloc [N_ST_SEQ],
  output logic [N_ST_SEQ-1:0] st_val_valid,
  input  logic [N_ST_SEQ-1:0] st_val_ready,
  output st_val_t             st_val [N_ST_SEQ],
  input  logic [N_LD_SEQ-1:0] ld_val_valid,
  output logic [N_LD_SEQ-1:0] ld_val_ready,
  input  data_t               ld_val [N_LD_SEQ],
  output logic                done,
  output int                  checks,
  output int                  failures,
  output int                  work_cycles
);

  typedef enum int { K_INIT, K_HIST, K_MATCH, K_RW, K_ADD, K_READ, K_HISTIF } kind_e;
  localparam int HIF_LIMIT = 300;
  typedef struct { kind_e kind; int a0; int a1; } iter_t;
  typedef struct { st_val_t v; longint t; } sv_t;

  iter_t  prog [$];
  alloc_t ldq  [N_LD_SEQ][$];   // channel buffers: load allocations
  alloc_t stq  [N_ST_SEQ][$];   // channel buffers: store allocations
  sv_t    svq  [N_ST_SEQ][$];   // store values waiting for their latency
  data_t  expq [N_LD_SEQ][$];   // expected load values per sequence
  data_t  gmem [];              // reference memory
  int     agu_ptr, cmp_ptr, sv_ptr;
  data_t  got0 [$];             // load values per iteration (seq 0 / last seq)
  data_t  got1 [$];
  tag_t   agu_tag;
  longint cyc;
  data_t  got  [N_LD_SEQ];
  logic [N_LD_SEQ-1:0] have;

  function automatic data_t init_val(int a);
    if (WORKLOAD == 0 || WORKLOAD >= 3) return data_t'(a * 7 + 3);
    return (a % 3 == 0) ? data_t'(a) : '1;   // -1: unmatched vertex
  endfunction

  function automatic logic [N_LD_SEQ-1:0] needs(iter_t it);
    logic [N_LD_SEQ-1:0] n = '0;
    case (it.kind)
      K_HIST, K_READ, K_RW, K_HISTIF: n[0] = 1'b1;
      K_MATCH, K_ADD: begin n[0] = 1'b1; n[N_LD_SEQ-1] = 1'b1; end
      default: ;
    endcase
    return n;
  endfunction

  // Program and reference execution
  initial begin
    int unsigned s;
    s = $urandom(SEED);
    gmem = new[ADDR_RANGE];
    for (int a = 0; a < ADDR_RANGE; a++) prog.push_back('{K_INIT, a, 0});
    for (int i = 0; i < N_ITERS; i++) begin
      int k;
      k = (WORKLOAD == 2) ? int'($urandom_range(4, 0)) % 3 : WORKLOAD;
      if (k == 5)      prog.push_back('{K_HISTIF, int'($urandom_range(ADDR_RANGE-1, 0)), 1 + i % 5});
      else if (k == 3) prog.push_back('{K_HIST, i % ADDR_RANGE, 0});
      else if (k == 4) prog.push_back('{K_ADD, i % ADDR_RANGE, (i * 7 + 3) % ADDR_RANGE});
      else if (k == 0) prog.push_back('{K_HIST, int'($urandom_range(ADDR_RANGE-1, 0)), 0});
      else if (k == 2) prog.push_back('{K_RW, int'($urandom_range(ADDR_RANGE-1, 0)),
                                        int'($urandom_range(ADDR_RANGE-1, 0))});
      else        prog.push_back('{K_MATCH, int'($urandom_range(ADDR_RANGE-1, 0)),
                                   int'($urandom_range(ADDR_RANGE-1, 0))});
    end
    for (int a = 0; a < ADDR_RANGE; a++) prog.push_back('{K_READ, a, 0});
    foreach (prog[i]) begin
      case (prog[i].kind)
        K_INIT: gmem[prog[i].a0] = init_val(prog[i].a0);
        K_HIST: begin
          expq[0].push_back(gmem[prog[i].a0]);
          gmem[prog[i].a0] = gmem[prog[i].a0] + 1;
        end
        K_MATCH: begin
          data_t vs, vd;
          vs = gmem[prog[i].a0];
          vd = gmem[prog[i].a1];
          expq[0].push_back(vs);
          expq[N_LD_SEQ-1].push_back(vd);
          if ($signed(vs) < 0 && $signed(vd) < 0) begin
            gmem[prog[i].a0] = data_t'(prog[i].a1);
            gmem[prog[i].a1] = data_t'(prog[i].a0);
          end
        end
        K_HISTIF: begin
          expq[0].push_back(gmem[prog[i].a0]);
          if (gmem[prog[i].a0] < data_t'(HIF_LIMIT))
            gmem[prog[i].a0] = gmem[prog[i].a0] + data_t'(prog[i].a1);
        end
        K_RW: begin
          expq[0].push_back(gmem[prog[i].a0]);
          gmem[prog[i].a1] = data_t'(prog[i].a1 ^ 'h55);
        end
        K_ADD: begin
          expq[0].push_back(gmem[prog[i].a0]);
          expq[N_LD_SEQ-1].push_back(gmem[prog[i].a1]);
          gmem[prog[i].a0] = gmem[prog[i].a0] + gmem[prog[i].a1];
        end
        K_READ: expq[0].push_back(gmem[prog[i].a0]);
        default: ;
      endcase
    end
    for (int i = 0; i < prog.size(); i++) begin got0.push_back('0); got1.push_back('0); end
  end

  always @(posedge clk) begin
    if (!rst_n) begin
      agu_ptr <= 0; cmp_ptr <= 0; sv_ptr <= 0; agu_tag = '0; cyc <= 0; have <= '0;
      checks <= 0; failures <= 0; done <= 1'b0; work_cycles <= 0;
      ld_alloc_valid <= '0; st_alloc_valid <= '0; st_val_valid <= '0; ld_val_ready <= '0;
      for (int s = 0; s < N_LD_SEQ; s++) ld_alloc[s] <= '0;
      for (int s = 0; s < N_ST_SEQ; s++) begin st_alloc[s] <= '0; st_val[s] <= '0; end
    end else begin
      int ck, fl, cp;
      logic [N_LD_SEQ-1:0] hv;
      ck = checks; fl = failures; cp = cmp_ptr; hv = have;
      cyc <= cyc + 1;
      // ---- channel handshakes ----
      for (int s = 0; s < N_LD_SEQ; s++)
        if (ld_alloc_valid[s] && ld_alloc_ready[s]) void'(ldq[s].pop_front());
      for (int s = 0; s < N_ST_SEQ; s++) begin
        if (st_alloc_valid[s] && st_alloc_ready[s]) void'(stq[s].pop_front());
        if (st_val_valid[s] && st_val_ready[s])     void'(svq[s].pop_front());
      end
      for (int s = 0; s < N_LD_SEQ; s++)
        if (ld_val_valid[s] && ld_val_ready[s]) begin
          data_t e;
          e = expq[s].pop_front();
          ck++;
          if (ld_val[s] !== e) begin
            fl++;
            $display("[%0t] load value seq %0d iter %0d: got %0h expected %0h", $time, s, cp, ld_val[s], e);
          end
          got[s] = ld_val[s];
          hv[s]  = 1'b1;
        end
      // ---- compute, load side: an iteration completes when its loads are in ----
      if (cp < prog.size() && (needs(prog[cp]) & ~hv) == '0) begin
        got0[cp] = got[0];
        got1[cp] = got[N_LD_SEQ-1];
        hv = '0;
        cp++;
      end
      // ---- compute, store side: values in program order ----
      if (sv_ptr < prog.size() &&
          (sv_ptr < cp || prog[sv_ptr].kind inside {K_INIT, K_RW, K_READ})) begin
        iter_t it;
        it = prog[sv_ptr];
        case (it.kind)
          K_INIT: svq[0].push_back('{'{data: init_val(it.a0), valid: 1'b1}, cyc + COMP_LAT});
          K_HIST: svq[0].push_back('{'{data: got0[sv_ptr] + 1, valid: 1'b1}, cyc + COMP_LAT});
          K_RW:   svq[0].push_back('{'{data: data_t'(it.a1 ^ 'h55), valid: 1'b1}, cyc + COMP_LAT});
          K_HISTIF: svq[0].push_back('{'{data: got0[sv_ptr] + data_t'(it.a1),
                                         valid: got0[sv_ptr] < data_t'(HIF_LIMIT)}, cyc + COMP_LAT});
          K_ADD:  svq[0].push_back('{'{data: got0[sv_ptr] + got1[sv_ptr], valid: 1'b1}, cyc + COMP_LAT});
          K_MATCH: begin
            logic c;
            c = $signed(got0[sv_ptr]) < 0 && $signed(got1[sv_ptr]) < 0;
            svq[0].push_back('{'{data: data_t'(it.a1), valid: c}, cyc + COMP_LAT});
            svq[N_ST_SEQ-1].push_back('{'{data: data_t'(it.a0), valid: c}, cyc + COMP_LAT});
          end
          default: ;
        endcase
        sv_ptr <= sv_ptr + 1;
      end
      // ---- address generator: one iteration per cycle when channels have room ----
      if (agu_ptr < prog.size() && int'($urandom_range(99, 0)) < ALLOC_PCT) begin
        logic room;
        room = 1'b1;
        for (int s = 0; s < N_LD_SEQ; s++) if (ldq[s].size() >= CHAN_DEPTH) room = 1'b0;
        for (int s = 0; s < N_ST_SEQ; s++) if (stq[s].size() >= CHAN_DEPTH) room = 1'b0;
        if (room) begin
          iter_t it;
          it = prog[agu_ptr];
          case (it.kind)
            K_INIT: begin agu_tag++; stq[0].push_back('{addr: addr_t'(it.a0), tag: agu_tag}); end
            K_HIST, K_HISTIF: begin
              ldq[0].push_back('{addr: addr_t'(it.a0), tag: agu_tag});
              agu_tag++; stq[0].push_back('{addr: addr_t'(it.a0), tag: agu_tag});
            end
            K_MATCH: begin
              ldq[0].push_back('{addr: addr_t'(it.a0), tag: agu_tag});
              ldq[N_LD_SEQ-1].push_back('{addr: addr_t'(it.a1), tag: agu_tag});
              agu_tag++; stq[0].push_back('{addr: addr_t'(it.a0), tag: agu_tag});
              agu_tag++; stq[N_ST_SEQ-1].push_back('{addr: addr_t'(it.a1), tag: agu_tag});
            end
            K_RW: begin
              ldq[0].push_back('{addr: addr_t'(it.a0), tag: agu_tag});
              agu_tag++; stq[0].push_back('{addr: addr_t'(it.a1), tag: agu_tag});
            end
            K_ADD: begin
              ldq[0].push_back('{addr: addr_t'(it.a0), tag: agu_tag});
              ldq[N_LD_SEQ-1].push_back('{addr: addr_t'(it.a1), tag: agu_tag});
              agu_tag++; stq[0].push_back('{addr: addr_t'(it.a0), tag: agu_tag});
            end
            K_READ: ldq[0].push_back('{addr: addr_t'(it.a0), tag: agu_tag});
            default: ;
          endcase
          agu_ptr <= agu_ptr + 1;
        end
      end
      // ---- drive channels for the next cycle ----
      for (int s = 0; s < N_LD_SEQ; s++) begin
        ld_alloc_valid[s] <= ldq[s].size() > 0;
        if (ldq[s].size() > 0) ld_alloc[s] <= ldq[s][0];
        ld_val_ready[s] <= cp < prog.size() && needs(prog[cp])[s] && !hv[s] &&
                           int'($urandom_range(99, 0)) < READY_PCT &&
                           !(STALL_EVERY > 0 && (cyc % STALL_EVERY) < STALL_LEN);
      end
      for (int s = 0; s < N_ST_SEQ; s++) begin
        st_alloc_valid[s] <= stq[s].size() > 0;
        if (stq[s].size() > 0) st_alloc[s] <= stq[s][0];
        st_val_valid[s] <= svq[s].size() > 0 && svq[s][0].t <= cyc + 1;
        if (svq[s].size() > 0) st_val[s] <= svq[s][0].v;
      end
      have     <= hv;
      cmp_ptr  <= cp;
      checks   <= ck;
      failures <= fl;
      if (cp == prog.size() && sv_ptr == prog.size() && !done) begin
        done        <= 1'b1;
        work_cycles <= int'(cyc);
      end
    end
  end

endmodule
