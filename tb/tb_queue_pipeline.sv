// tb_queue_pipeline -- a two-stage spatial pipeline run through the scheduler, with
// its CTAs passing data through ring queues in the L2.
//
// Workload: the queue benchmark configuration -- 54 queues between 54 producer
// CTAs (stage 0) and 54 consumer CTAs (stage 1), 108 CTAs in all; each CTA runs
// 100 iterations of acquire / work / release. It is run three times through the
// scheduler at its default size:
//   TENSOR->SIMT       producer kernel TENSOR, consumer kernel SIMT: every used
//                      SM must hold one producer and one consumer
//   SIMT->SIMT         both kernels SIMT: the one arbiter must spread the 108
//                      CTAs one per SM
//   fan-in/multicast   27 queues with two writers each (parts summed by the
//                      reader, as a parallel reduce) and two readers each (both
//                      receive every entry)
// All CTAs must be resident together, or consumers would wait for producers that
// never start.
//
// The SMs and the L2 are modelled behaviourally in this file. Each dispatched CTA
// becomes a process that runs the queue protocol:
//   queue  = LEN entries, each {seq_n, w_done, r_done, payload}, entry e starting
//            with seq_n = e
//   write acquire of sequence number n: spin on atomic reads of entry n%LEN until
//            its seq_n == n; release: store this writer's part of the payload,
//            then atomic w_done += 1
//   read acquire of n: spin until seq_n == n and w_done == NW (the number of
//            writers); release: atomic r_done += 1; the last of the NR readers
//            clears w_done and r_done and advances seq_n by LEN, handing the
//            entry back to the writers
// Every atomic takes ATOMIC_CYC cycles (100 M atomics per second per CTA at
// 1.4 GHz is about 14 cycles). Stage work takes a few random cycles.
//
// Checked: every payload reaches its consumers in order; all kernels complete;
// the placements above; consumers waited on empty entries and producers on full
// ones (both spin loops ran).
module tb_queue_pipeline;
  import kitsune_pkg::*;
  localparam int NS   = 108;
  localparam int NQ   = 54;     // queues
  localparam int LEN  = 2;      // entries per queue (double buffering)
  localparam int ITER = 100;    // iterations per CTA
  localparam int MAXW = 4;      // most writers per queue
  localparam int ATOMIC_CYC = 14;

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

  // L2-resident queue state
  int q_seq [NQ][LEN], q_wdone [NQ][LEN], q_rdone [NQ][LEN], q_data [NQ][LEN][MAXW];
  int cur_nq = NQ, cur_nw = 1, cur_nr = 1;   // shape of the current run

  int checks = 0, failures = 0;
  int cyc = 0;
  int n_wr_spin = 0, n_rd_spin = 0, n_kdone = 0;
  int per_sm [NS][NUM_TYPES];
  int finished_sm [$], finished_slot [$];
  int done_q [NS][$];
  int t_first_disp = -1, t_last_done = 0;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s (cycle %0d)", what, cyc);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) cyc <= cyc + 1;

  function automatic int payload(int q, int i, int w);
    return (q << 16) ^ (i * 2654435761) ^ (w * 40503);
  endfunction

  task automatic atomic_wait();
    repeat (ATOMIC_CYC) @(posedge clk);
  endtask

  // Stage 0: producer CTA on queue q.
  task automatic producer(int q, int w, int sm, int slot);
    for (int i = 0; i < ITER; i++) begin
      int e;
      logic first;
      e = i % LEN;
      first = 1;
      // wr_acquire: spin until the entry carries this sequence number
      forever begin
        atomic_wait();
        if (q_seq[q][e] == i) break;
        if (first) n_wr_spin++;
        first = 0;
      end
      repeat (1 + $urandom % 6) @(posedge clk);   // stage0_work
      q_data[q][e][w] = payload(q, i, w);          // st.global, this writer's part
      atomic_wait();
      q_wdone[q][e] += 1;                          // release: atomic +1
    end
    finished_sm.push_back(sm);
    finished_slot.push_back(slot);
  endtask

  // Stage 1: consumer CTA on queue q.
  task automatic consumer(int q, int sm, int slot, int nw, int nr);
    for (int i = 0; i < ITER; i++) begin
      int e, v, x;
      logic first;
      e = i % LEN;
      first = 1;
      // rd_acquire: spin on seq_n, then on w_done
      forever begin
        atomic_wait();
        if (q_seq[q][e] == i && q_wdone[q][e] == nw) break;
        if (first) n_rd_spin++;
        first = 0;
      end
      v = 0; x = 0;                                // ld.global, reduce the parts
      for (int w = 0; w < nw; w++) begin
        v += q_data[q][e][w];
        x += payload(q, i, w);
      end
      check(v == x, "payload reaches its consumer in order");
      repeat (1 + $urandom % 6) @(posedge clk);   // stage1_work
      atomic_wait();
      q_rdone[q][e] += 1;                          // release: atomic +1
      if (q_rdone[q][e] == nr) begin               // last reader recycles the entry
        q_wdone[q][e] = 0;
        q_rdone[q][e] = 0;
        q_seq[q][e]   = q_seq[q][e] + LEN;
      end
    end
    finished_sm.push_back(sm);
    finished_slot.push_back(slot);
  endtask

  // SM model: start a process per dispatched CTA, report finished CTAs.
  always @(posedge clk) if (rst_n) begin
    for (int s = 0; s < NS; s++) if (sm_done_valid[s] && sm_done_ready[s]) begin
      void'(done_q[s].pop_front());
      t_last_done = cyc;
    end
    while (finished_sm.size() > 0) begin
      done_q[finished_sm[0]].push_back(finished_slot[0]);
      void'(finished_sm.pop_front());
      void'(finished_slot.pop_front());
    end
    for (int t = 0; t < NUM_TYPES; t++) if (disp_valid[t]) begin
      automatic int q    = int'(disp[t].cta_id);
      automatic int sm   = int'(disp[t].sm);
      automatic int slot = int'(disp[t].kslot);
      if (t_first_disp < 0) t_first_disp = cyc;
      per_sm[sm][t]++;
      // odd tags are producer kernels, even tags consumer kernels
      if (disp[t].tag[0]) begin
        automatic int qq = q / cur_nw, w = q % cur_nw;
        check(qq < cur_nq, "CTA index names a queue");
        fork producer(qq, w, sm, slot); join_none
      end else begin
        automatic int qq = q / cur_nr, nw = cur_nw, nr = cur_nr;
        check(qq < cur_nq, "CTA index names a queue");
        fork consumer(qq, sm, slot, nw, nr); join_none
      end
    end
    if (kdone_valid) n_kdone++;
    for (int s = 0; s < NS; s++) begin
      sm_done_valid[s] <= done_q[s].size() > 0;
      sm_done_slot[s]  <= (done_q[s].size() > 0) ? KSLOT_W'(done_q[s][0]) : '0;
    end
  end

  task automatic launch(int tag, op_type_e ty, int num, int thr, int regs, int smem);
    @(negedge clk);
    launch_valid = 1;
    launch_hdr.tag = TAG_W'(tag); launch_hdr.ktype = ty; launch_hdr.num_ctas = CTA_W'(num);
    launch_hdr.res.threads = THR_W'(thr); launch_hdr.res.regs = REG_W'(regs);
    launch_hdr.res.smem = SMEM_W'(smem);
    while (!launch_ready) @(negedge clk);
    @(posedge clk);
    #1;
    launch_valid = 0;
  endtask

  // One run of the pipeline: producers of type pty, consumers of type cty.
  task automatic run_pipeline(string name, op_type_e pty, op_type_e cty, int kdone_target,
                              int nq, int nw, int nr);
    int np, nc, pair, single;
    cur_nq = nq; cur_nw = nw; cur_nr = nr;
    for (int s = 0; s < NS; s++) begin per_sm[s][0] = 0; per_sm[s][1] = 0; end
    for (int q = 0; q < NQ; q++)
      for (int e = 0; e < LEN; e++) begin
        q_seq[q][e] = e; q_wdone[q][e] = 0; q_rdone[q][e] = 0;
        for (int w = 0; w < MAXW; w++) q_data[q][e][w] = 0;
      end
    t_first_disp = -1;
    // Consumer kernel launched first: its CTAs must not keep the producers out.
    launch(kdone_target, cty, nq * nr, 256, 32768, 65536);
    launch(kdone_target - 1, pty, nq * nw, 256, 32768, 98304);
    while (n_kdone < kdone_target) @(posedge clk);
    repeat (3) @(posedge clk);
    check(idle, {name, ": scheduler idle after the pipeline"});
    np = 0; nc = 0; pair = 0; single = 0;
    for (int s = 0; s < NS; s++) begin
      np += per_sm[s][OP_TENSOR];
      nc += per_sm[s][OP_SIMT];
      if (per_sm[s][OP_TENSOR] == 1 && per_sm[s][OP_SIMT] == 1) pair++;
      if (per_sm[s][OP_TENSOR] + per_sm[s][OP_SIMT] == 1) single++;
    end
    check(np + nc == nq * (nw + nr), {name, ": all CTAs dispatched"});
    if (pty != cty) check(pair == nq * nw, {name, ": each used SM holds one producer and one consumer"});
    else            check(single == NS, {name, ": one CTA on each of the 108 SMs"});
    $display("%s: %0d payloads per queue x %0d queues (%0d writers, %0d readers each) in %0d cycles",
             name, ITER, nq, nw, nr, t_last_done - t_first_disp);
  endtask

  initial begin
    launch_valid = 0; launch_hdr = '0; sm_done_valid = '0;
    for (int s = 0; s < NS; s++) sm_done_slot[s] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // Kitsune placement: TENSOR producers paired with SIMT consumers.
    run_pipeline("TENSOR->SIMT", OP_TENSOR, OP_SIMT, 2, NQ, 1, 1);
    // Both stages of one type: 108 CTAs spread one per SM.
    run_pipeline("SIMT->SIMT", OP_SIMT, OP_SIMT, 4, NQ, 1, 1);
    // Fan-in and multicast: 27 queues, each with two writers whose parts the
    // readers sum (parallel reduce) and two readers that both receive every entry.
    run_pipeline("fan-in/multicast", OP_TENSOR, OP_SIMT, 6, NQ / 2, 2, 2);
    $display("spins: writer %0d reader %0d", n_wr_spin, n_rd_spin);
    check(n_wr_spin > 0, "mechanism: producer waited on a full entry");
    check(n_rd_spin > 0, "mechanism: consumer waited on an empty entry");
    check(n_kdone == 6, "all kernels completed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
