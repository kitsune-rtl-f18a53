// tb_kernel_table -- self-checking test of the kernel table.
//
// A reference model keeps its own slot map, one in-order list of kernels per type,
// and per-kernel counts of CTAs left, next CTA index and CTAs in flight. Random
// launches (mixed SIMT/TENSOR, 1..5 CTAs), random dispatches from each type's head
// and random completions of in-flight CTAs are applied to both; each cycle the
// head of each list, `launch_ready`, the completion resource lookup and the
// kernel-done pulse are compared. Four slots make the table fill up, so refused
// launches are exercised too.
module tb_kernel_table;
  import kitsune_pkg::*;
  localparam int MK = 4;
  localparam int KW = $clog2(MK);

  logic clk = 0, rst_n = 0;
  logic launch_valid, launch_ready;
  kernel_hdr_t launch_hdr;
  logic             head_valid  [NUM_TYPES];
  logic [KW-1:0]    head_slot   [NUM_TYPES];
  cta_res_t         head_res    [NUM_TYPES];
  logic [TAG_W-1:0] head_tag    [NUM_TYPES];
  logic [CTA_W-1:0] head_cta_id [NUM_TYPES];
  logic             disp_fire   [NUM_TYPES];
  logic             cmp_valid;
  logic [KW-1:0]    cmp_slot;
  cta_res_t         cmp_res;
  logic             kdone_valid;
  logic [TAG_W-1:0] kdone_tag;
  logic [KW:0]      active_kernels;

  kernel_table #(.MAX_KERNELS(MK)) dut (.*);

  always #5 clk = ~clk;

  typedef struct {
    int tag; int ktype; int remaining; int next_id; int outstanding; int slot; cta_res_t res;
  } rk_t;
  rk_t kern [int];          // by tag
  int  slot_tag [MK];       // -1 free
  int  tq [NUM_TYPES][$];   // tags in order per type
  int  inflight [$];        // tags of dispatched, unfinished CTAs (one entry per CTA)
  int checks = 0, failures = 0;
  int next_tag = 1, n_full = 0, n_done = 0, n_both = 0;
  int exp_done_tag;
  logic exp_done;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s @%0t", what, $time); end
  endtask

  initial begin
    int free_s, ci;
    launch_valid = 0; launch_hdr = '0; cmp_valid = 0; cmp_slot = '0;
    for (int t = 0; t < NUM_TYPES; t++) disp_fire[t] = 0;
    for (int k = 0; k < MK; k++) slot_tag[k] = -1;
    exp_done = 0; exp_done_tag = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 5000; it++) begin
      @(negedge clk);
      // outputs from the previous edge
      check(kdone_valid == exp_done, "kernel done pulse");
      if (exp_done) check(int'(kdone_tag) == exp_done_tag, "kernel done tag");
      exp_done = 0;
      free_s = -1;
      for (int k = MK - 1; k >= 0; k--) if (slot_tag[k] < 0) free_s = k;
      check(launch_ready == (free_s >= 0), "launch_ready");
      if (free_s < 0) n_full++;
      for (int t = 0; t < NUM_TYPES; t++) begin
        check(head_valid[t] == (tq[t].size() > 0), "head valid");
        if (tq[t].size() > 0) begin
          rk_t h;
          h = kern[tq[t][0]];
          check(int'(head_tag[t]) == h.tag, "head tag");
          check(int'(head_slot[t]) == h.slot, "head slot");
          check(int'(head_cta_id[t]) == h.next_id, "head CTA index");
          check(head_res[t] == h.res, "head resources");
        end
      end
      // stimulus
      launch_valid = ($urandom % 3) == 0;
      launch_hdr.tag      = TAG_W'(next_tag);
      launch_hdr.ktype    = op_type_e'($urandom % 2);
      launch_hdr.num_ctas = CTA_W'(1 + $urandom % 5);
      launch_hdr.res.threads = THR_W'($urandom);
      launch_hdr.res.regs    = REG_W'($urandom);
      launch_hdr.res.smem    = SMEM_W'($urandom);
      for (int t = 0; t < NUM_TYPES; t++) disp_fire[t] = head_valid[t] && ($urandom % 2);
      if (disp_fire[0] && disp_fire[1]) n_both++;
      cmp_valid = (inflight.size() > 0) && ($urandom % 2);
      ci = cmp_valid ? $urandom % inflight.size() : 0;
      if (cmp_valid) cmp_slot = KW'(kern[inflight[ci]].slot);
      #1;
      if (cmp_valid) check(cmp_res == kern[inflight[ci]].res, "completion resource lookup");
      @(posedge clk);
      // reference update (same order as the hardware: launch, dispatch, completion)
      if (launch_valid && free_s >= 0) begin
        rk_t n;
        n.tag = next_tag; n.ktype = int'(launch_hdr.ktype); n.remaining = int'(launch_hdr.num_ctas);
        n.next_id = 0; n.outstanding = 0; n.slot = free_s; n.res = launch_hdr.res;
        kern[next_tag] = n; slot_tag[free_s] = next_tag;
        next_tag = (next_tag % 250) + 1;
      end
      for (int t = 0; t < NUM_TYPES; t++) if (disp_fire[t]) begin
        int tg;
        tg = tq[t][0];
        kern[tg].remaining--; kern[tg].next_id++; kern[tg].outstanding++;
        inflight.push_back(tg);
        if (kern[tg].remaining == 0) void'(tq[t].pop_front());
      end
      if (cmp_valid) begin
        int tg;
        tg = inflight[ci];
        inflight.delete(ci);
        kern[tg].outstanding--;
        if (kern[tg].outstanding == 0 && kern[tg].remaining == 0) begin
          exp_done = 1; exp_done_tag = tg; n_done++;
          slot_tag[kern[tg].slot] = -1;
          kern.delete(tg);
        end
      end
      if (launch_valid && free_s >= 0) tq[kern[(next_tag == 1) ? 250 : next_tag - 1].ktype].push_back((next_tag == 1) ? 250 : next_tag - 1);
    end
    check(n_full > 0, "table filled up at least once");
    check(n_done > 0, "kernels completed");
    check(n_both > 0, "both types dispatched in one cycle");
    $display("full=%0d done=%0d both=%0d", n_full, n_done, n_both);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
