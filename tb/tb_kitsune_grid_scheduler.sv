// tb_kitsune_grid_scheduler -- end-to-end test of the type-aware grid scheduler,
// at its default size (108 SMs, 32 kernel slots, A100 per-SM limits).
//
// The SMs are modelled behaviourally here: a dispatched CTA stays resident for a
// set number of cycles, then its SM raises `sm_done_valid` with the CTA's kernel
// slot until the scheduler takes it. The test keeps its own record of every SM's
// resources and of every kernel, and checks throughout that no SM is ever
// over-booked, that each kernel's CTAs are dispatched once each and in index
// order, that kernels of one type are served in launch order, and that every
// kernel is reported done exactly once, after its last CTA.
//
// Phases:
//  1. The MeshGraphNets MLP allocation of the running example (three TENSOR
//     kernels of 34, 38 and 36 CTAs, one SIMT LayerNorm kernel of 108 CTAs). With
//     long-running CTAs each SM must receive exactly one CTA of each type, in SM
//     order, and each type must dispatch its 108 CTAs in 108 consecutive cycles.
//  2. The compiler-flow allocation (54 + 54 TENSOR, 107 + 1 SIMT CTAs): the same
//     one-of-each-type pairing must result.
//  2b. The backward pass of a Linear+ReLU layer: seven kernels (dX ReLU, dX GEMM,
//     dW GEMM, dW fan-in, dW reduce, dB fan-in, dB reduce), GEMMs on TENSOR, the
//     rest on SIMT, with the same one-of-each-type placement required.
//  3. The four-kernel pipeline A..D (TENSOR, SIMT, TENSOR, SIMT) with large
//     per-CTA needs, so SMs fill, heads stall and both arbiters hit the same SM.
//  4. Random kernels with random sizes and CTA lifetimes.
// Each mechanism (pairing on an SM, stall on a full GPU, same-SM conflict,
// completion contention, kernel-table full, pointer wrap) is counted, and one
// that never happens counts as a failure.
module tb_kitsune_grid_scheduler;
  import kitsune_pkg::*;
  localparam int NS   = 108;
  localparam int MK   = 32;
  localparam int MAXT = 2048, MAXR = 65536, MAXS = 196608, MAXC = 32;

  logic clk = 0, rst_n = 0;
  logic               launch_valid, launch_ready;
  kernel_hdr_t        launch_hdr;
  logic               disp_valid [NUM_TYPES];
  cta_dispatch_t      disp       [NUM_TYPES];
  logic [NS-1:0]      sm_done_valid;
  logic [KSLOT_W-1:0] sm_done_slot [NS];
  logic [NS-1:0]      sm_done_ready;
  logic               kdone_valid;
  logic [TAG_W-1:0]   kdone_tag;
  logic               stall [NUM_TYPES];
  logic               idle;
  sm_occ_t            sm_occ [NS];

  kitsune_grid_scheduler dut (.*);

  always #5 clk = ~clk;

  // ---------------- bookkeeping ----------------
  typedef struct {
    int ktype; int num; int dispatched; int finished; int done_seen; cta_res_t res; int life;
  } kinfo_t;
  kinfo_t kin [int];                 // by tag
  int     type_order [NUM_TYPES][$]; // tags in launch order per type
  int     r_thr[NS], r_reg[NS], r_smem[NS], r_ctas[NS], r_type[NS][NUM_TYPES];
  typedef struct { int sm; int slot; int tag; int t; int end_cyc; } run_t;
  run_t   running [$];
  int     done_q [NS][$];            // finished CTAs' slots waiting per SM
  int     done_tag_q [NS][$];
  int     first_sm [NUM_TYPES][$];   // SM of each dispatch per type, for phases 1-2
  int     disp_cyc [NUM_TYPES][$];
  int     first_launch_cyc [NUM_TYPES] = '{-1, -1};  // accept edge of a type's first kernel

  int checks = 0, failures = 0;
  int cyc = 0;
  // mechanism counters
  int n_pair = 0, n_stall = 0, n_conflict = 0, n_cmp_contend = 0, n_full = 0, n_wrap = 0;
  int n_kdone = 0;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s (cycle %0d)", what, cyc);
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- SM model and monitors ----------------
  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) if (rst_n) begin
    int nv;
    // mechanism observation on the cycle's settled values
    for (int t = 0; t < NUM_TYPES; t++) if (stall[t]) n_stall++;
    if (dut.gv_tc && dut.head_valid[OP_SIMT] && dut.fit[OP_SIMT][dut.idx_tc] && !dut.fit_both[dut.idx_tc])
      n_conflict++;
    nv = 0;
    for (int s = 0; s < NS; s++) if (sm_done_valid[s]) nv++;
    if (nv > 1) n_cmp_contend++;
    if (!launch_ready) n_full++;
    for (int t = 0; t < NUM_TYPES; t++)
      if (disp_valid[t] && int'(disp[t].sm) == NS - 1) n_wrap++;
  end

  always @(posedge clk) if (rst_n) begin
    // completions taken this edge
    for (int s = 0; s < NS; s++) if (sm_done_valid[s] && sm_done_ready[s]) begin
      int tg;
      tg = done_tag_q[s][0];
      void'(done_q[s].pop_front());
      void'(done_tag_q[s].pop_front());
      r_thr[s]  -= kin[tg].res.threads;
      r_reg[s]  -= kin[tg].res.regs;
      r_smem[s] -= kin[tg].res.smem;
      r_ctas[s]--;
      r_type[s][kin[tg].ktype]--;
      kin[tg].finished++;
    end
    // CTAs that end this cycle
    for (int i = running.size() - 1; i >= 0; i--) if (running[i].end_cyc <= cyc) begin
      done_q[running[i].sm].push_back(running[i].slot);
      done_tag_q[running[i].sm].push_back(running[i].tag);
      running.delete(i);
    end
    // dispatches visible this cycle
    for (int t = 0; t < NUM_TYPES; t++) if (disp_valid[t]) begin
      int s, tg;
      s  = int'(disp[t].sm);
      tg = int'(disp[t].tag);
      check(kin.exists(tg), "dispatch of a launched kernel");
      if (kin.exists(tg)) begin
        check(kin[tg].ktype == t, "dispatch on the arbiter of the kernel's type");
        check(type_order[t].size() > 0 && type_order[t][0] == tg, "in-order kernels within a type");
        check(int'(disp[t].cta_id) == kin[tg].dispatched, "CTA index order");
        kin[tg].dispatched++;
        if (kin[tg].dispatched == kin[tg].num && type_order[t].size() > 0) void'(type_order[t].pop_front());
        r_thr[s]  += kin[tg].res.threads;
        r_reg[s]  += kin[tg].res.regs;
        r_smem[s] += kin[tg].res.smem;
        r_ctas[s]++;
        r_type[s][t]++;
        check(r_thr[s] <= MAXT && r_reg[s] <= MAXR && r_smem[s] <= MAXS && r_ctas[s] <= MAXC,
              "SM never over-booked");
        if (r_type[s][0] > 0 && r_type[s][1] > 0) n_pair++;
        running.push_back('{sm: s, slot: int'(disp[t].kslot), tag: tg, t: t,
                            end_cyc: cyc + kin[tg].life + int'($urandom % 8)});
        first_sm[t].push_back(s);
        disp_cyc[t].push_back(cyc);
      end
    end
    if (kdone_valid) begin
      int tg;
      tg = int'(kdone_tag);
      n_kdone++;
      check(kin.exists(tg) && kin[tg].done_seen == 0, "kernel reported done once");
      if (kin.exists(tg)) begin
        check(kin[tg].finished == kin[tg].num && kin[tg].dispatched == kin[tg].num,
              "kernel done after its last CTA");
        kin[tg].done_seen = 1;
      end
    end
    // Each SM presents its oldest finished CTA from the next cycle on.
    for (int s = 0; s < NS; s++) begin
      sm_done_valid[s] <= done_q[s].size() > 0;
      sm_done_slot[s]  <= (done_q[s].size() > 0) ? KSLOT_W'(done_q[s][0]) : '0;
    end
  end

  // ---------------- stimulus helpers ----------------
  task automatic launch(int tag, op_type_e ty, int num, int thr, int regs, int smem, int life);
    kinfo_t k;
    logic first;
    k.ktype = int'(ty); k.num = num; k.dispatched = 0; k.finished = 0; k.done_seen = 0;
    k.res.threads = THR_W'(thr); k.res.regs = REG_W'(regs); k.res.smem = SMEM_W'(smem);
    k.life = life;
    @(negedge clk);
    launch_valid = 1;
    launch_hdr.tag = TAG_W'(tag); launch_hdr.ktype = ty; launch_hdr.num_ctas = CTA_W'(num);
    launch_hdr.res = k.res;
    kin[tag] = k;
    first = (type_order[int'(ty)].size() == 0) && (first_launch_cyc[int'(ty)] < 0);
    type_order[int'(ty)].push_back(tag);
    while (!launch_ready) @(negedge clk);
    @(posedge clk);
    #1;
    launch_valid = 0;
    if (first) first_launch_cyc[int'(ty)] = cyc;
  endtask

  task automatic wait_idle();
    int guard;
    guard = 0;
    @(posedge clk);
    while (!(idle && running.size() == 0) && guard < 100000) begin @(posedge clk); guard++; end
    check(guard < 100000, "all kernels drained");
    repeat (3) @(posedge clk);
  endtask

  task automatic check_all_done();
    foreach (kin[tg]) check(kin[tg].done_seen == 1, "every launched kernel completed");
    for (int s = 0; s < NS; s++)
      check(sm_occ[s] == '0 && r_ctas[s] == 0, "occupancy returns to zero");
    kin.delete();
  endtask

  // Every SM got exactly one CTA of each type, in SM order, 108 per type in 108
  // consecutive cycles.
  task automatic check_pairing(string name);
    for (int t = 0; t < NUM_TYPES; t++) begin
      check(first_sm[t].size() == NS, {name, ": 108 CTAs of each type"});
      for (int i = 0; i < first_sm[t].size() && i < NS; i++)
        check(first_sm[t][i] == i, {name, ": type arbiter visits SMs in round-robin order"});
      if (disp_cyc[t].size() == NS) begin
        check(disp_cyc[t][NS-1] - disp_cyc[t][0] == NS - 1, {name, ": one CTA per type per cycle"});
        // header accepted at edge k -> CTA chosen before edge k+1 -> on disp after it
        check(disp_cyc[t][0] == first_launch_cyc[t] + 1, {name, ": launch-to-dispatch latency of one cycle"});
      end
      first_launch_cyc[t] = -1;
      first_sm[t].delete();
      disp_cyc[t].delete();
    end
  endtask

  // ---------------- test ----------------
  initial begin
    launch_valid = 0; launch_hdr = '0;
    sm_done_valid = '0;
    for (int s = 0; s < NS; s++) sm_done_slot[s] = '0;
    for (int s = 0; s < NS; s++) begin
      r_thr[s] = 0; r_reg[s] = 0; r_smem[s] = 0; r_ctas[s] = 0; r_type[s][0] = 0; r_type[s][1] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // Phase 1: MeshGraphNets MLP allocation (Linear+ReLU 34, Linear+ReLU 38,
    // Linear 36 on Tensor Cores; LayerNorm 108 on SIMT). CTAs: 256 threads,
    // 128 regs/thread, 64 KB (GEMM) or 16 KB (LayerNorm) shared memory.
    launch(1, OP_TENSOR, 34,  256, 32768, 65536, 400);
    launch(2, OP_TENSOR, 38,  256, 32768, 65536, 400);
    launch(3, OP_TENSOR, 36,  256, 32768, 65536, 400);
    launch(4, OP_SIMT,   108, 256, 16384, 16384, 400);
    wait_idle();
    check_pairing("MLP allocation");
    check_all_done();

    // Phase 2: compiler-flow allocation 54, 54 (TENSOR), 107, 1 (SIMT).
    launch(11, OP_TENSOR, 54,  128, 16384, 32768, 300);
    launch(12, OP_TENSOR, 54,  128, 16384, 32768, 300);
    launch(13, OP_SIMT,   107, 128, 8192,  8192,  300);
    launch(14, OP_SIMT,   1,   128, 8192,  8192,  300);
    wait_idle();
    check_pairing("flow allocation");
    check_all_done();

    // Phase 2b: backward pass of Linear+ReLU (7 kernels). GEMMs on Tensor Cores;
    // element-wise, fan-in and reduce kernels on SIMT. CTA counts are chosen so
    // each type sums to the SM count.
    launch(31, OP_SIMT,   27,  256, 16384, 16384, 300);  // dX (ReLU)
    launch(32, OP_TENSOR, 54,  256, 32768, 65536, 300);  // dX (GEMM)
    launch(33, OP_TENSOR, 54,  256, 32768, 65536, 300);  // dW (GEMM)
    launch(34, OP_SIMT,   27,  256, 16384, 16384, 300);  // dW (fan-in)
    launch(35, OP_SIMT,   1,   256, 16384, 16384, 300);  // dW (reduce)
    launch(36, OP_SIMT,   52,  256, 16384, 16384, 300);  // dB (fan-in)
    launch(37, OP_SIMT,   1,   256, 16384, 16384, 300);  // dB (reduce)
    wait_idle();
    check_pairing("backward pipeline");
    check_all_done();

    // Phase 3: pipeline A..D with large shared-memory needs: a SIMT CTA and a
    // TENSOR CTA do not fit together on one SM, and the GPU fills.
    launch(21, OP_TENSOR, 150, 512, 32768, 120000, 60);
    launch(22, OP_SIMT,   150, 512, 16384, 100000, 40);
    launch(23, OP_TENSOR, 150, 512, 32768, 120000, 60);
    launch(24, OP_SIMT,   150, 512, 16384, 100000, 40);
    wait_idle();
    check_all_done();
    for (int t = 0; t < NUM_TYPES; t++) begin first_sm[t].delete(); disp_cyc[t].delete(); end

    // Phase 4: random kernels, more than the table holds at once.
    for (int i = 0; i < 60; i++) begin
      int thr;
      thr = 32 * (1 + $urandom % 32);
      launch(100 + i, op_type_e'($urandom % 2), 1 + $urandom % 200, thr,
             thr * (16 + $urandom % 48), 1024 * ($urandom % 96), 5 + $urandom % 200);
    end
    wait_idle();
    check_all_done();

    $display("mechanisms: pair=%0d stall=%0d conflict=%0d cmp_contend=%0d table_full=%0d wrap=%0d kdone=%0d",
             n_pair, n_stall, n_conflict, n_cmp_contend, n_full, n_wrap, n_kdone);
    check(n_pair > 0, "mechanism: SIMT and TENSOR CTAs paired on an SM");
    check(n_stall > 0, "mechanism: dispatch stalled on full SMs");
    check(n_conflict > 0, "mechanism: same-SM conflict resolved");
    check(n_cmp_contend > 0, "mechanism: several SMs finishing at once");
    check(n_full > 0, "mechanism: kernel table full");
    check(n_wrap > 0, "mechanism: arbiter pointer wrap");
    check(n_kdone == 79, "mechanism: kernel completion for all 79 kernels");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
