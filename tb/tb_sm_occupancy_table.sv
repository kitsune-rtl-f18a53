// tb_sm_occupancy_table -- self-checking test of the per-SM occupancy table.
//
// Keeps its own record of each SM's threads, registers, shared memory and CTA
// count, and each cycle: draws random per-CTA needs for both types, checks the
// table's fit masks (each type alone, and both together) against the record, then
// books CTAs only on SMs the record says fit (sometimes both types on the same
// SM) and frees random resident CTAs. Runs at the A100 limits with 12 SMs so the
// SMs fill up and both fitting and non-fitting cases occur.
module tb_sm_occupancy_table;
  import kitsune_pkg::*;
  localparam int NS = 12;
  localparam int W  = $clog2(NS);
  localparam int MAXT = 2048, MAXR = 65536, MAXS = 196608, MAXC = 32;

  logic clk = 0, rst_n = 0;
  cta_res_t          need [NUM_TYPES];
  logic [NS-1:0]     fit  [NUM_TYPES];
  logic [NS-1:0]     fit_both;
  logic              alloc_valid [NUM_TYPES];
  logic [W-1:0]      alloc_sm    [NUM_TYPES];
  logic              rel_valid;
  logic [W-1:0]      rel_sm;
  cta_res_t          rel_res;
  sm_occ_t           occ [NS];

  sm_occupancy_table #(.NUM_SM(NS)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int unsigned r_thr[NS], r_reg[NS], r_smem[NS], r_ctas[NS];
  // resident CTAs, for releases
  cta_res_t res_list [NS][$];
  int n_fit = 0, n_nofit = 0, n_pair = 0, n_rel = 0;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s @%0t", what, $time); end
  endtask

  function automatic logic ref_fit(int s, int unsigned t, int unsigned r, int unsigned m, int unsigned c);
    return r_thr[s] + t <= MAXT && r_reg[s] + r <= MAXR && r_smem[s] + m <= MAXS && r_ctas[s] + c <= MAXC;
  endfunction

  function automatic cta_res_t rand_need();
    cta_res_t n;
    n.threads = THR_W'(32 * (1 + $urandom % 16));     // 32..512
    n.regs    = REG_W'(n.threads * (16 + $urandom % 64));
    n.smem    = SMEM_W'(1024 * ($urandom % 80));       // 0..79 KB
    return n;
  endfunction

  initial begin
    for (int t = 0; t < NUM_TYPES; t++) begin need[t] = '0; alloc_valid[t] = 0; alloc_sm[t] = '0; end
    rel_valid = 0; rel_sm = '0; rel_res = '0;
    for (int s = 0; s < NS; s++) begin r_thr[s] = 0; r_reg[s] = 0; r_smem[s] = 0; r_ctas[s] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 4000; it++) begin
      int s0, s1, sr;
      logic f0, f1, fb;
      @(negedge clk);
      need[0] = rand_need();
      need[1] = rand_need();
      #1;
      for (int s = 0; s < NS; s++) begin
        f0 = ref_fit(s, need[0].threads, need[0].regs, need[0].smem, 1);
        f1 = ref_fit(s, need[1].threads, need[1].regs, need[1].smem, 1);
        fb = ref_fit(s, need[0].threads + need[1].threads, need[0].regs + need[1].regs,
                     need[0].smem + need[1].smem, 2);
        check(fit[0][s] == f0, "fit SIMT");
        check(fit[1][s] == f1, "fit TENSOR");
        check(fit_both[s] == fb, "fit both");
        if (f0) n_fit++; else n_nofit++;
        check(occ[s].threads == r_thr[s] && occ[s].regs == r_reg[s] &&
              occ[s].smem == r_smem[s] && occ[s].ctas == r_ctas[s], "occupancy record");
      end
      // bookings
      s0 = $urandom % NS;
      s1 = (($urandom % 3) == 0) ? s0 : $urandom % NS;
      alloc_valid[0] = fit[0][s0] && ($urandom % 3 != 0);
      alloc_valid[1] = fit[1][s1] && ($urandom % 3 != 0);
      if (alloc_valid[0] && alloc_valid[1] && s0 == s1 && !fit_both[s0]) alloc_valid[1] = 0;
      alloc_sm[0] = W'(s0); alloc_sm[1] = W'(s1);
      // release
      sr = $urandom % NS;
      rel_valid = (res_list[sr].size() > 0) && ($urandom % 2 == 0);
      rel_sm = W'(sr);
      rel_res = rel_valid ? res_list[sr][0] : '0;
      @(posedge clk);
      #1;
      if (alloc_valid[0] && alloc_valid[1] && s0 == s1) n_pair++;
      for (int t = 0; t < NUM_TYPES; t++) if (alloc_valid[t]) begin
        int s;
        s = (t == 0) ? s0 : s1;
        r_thr[s] += need[t].threads; r_reg[s] += need[t].regs; r_smem[s] += need[t].smem; r_ctas[s]++;
        res_list[s].push_back(need[t]);
      end
      if (rel_valid) begin
        r_thr[sr] -= rel_res.threads; r_reg[sr] -= rel_res.regs; r_smem[sr] -= rel_res.smem; r_ctas[sr]--;
        void'(res_list[sr].pop_front());
        n_rel++;
      end
      for (int t = 0; t < NUM_TYPES; t++) alloc_valid[t] = 0;
      rel_valid = 0;
    end
    check(n_fit > 0 && n_nofit > 0, "both fitting and full SMs seen");
    check(n_pair > 0, "paired booking on one SM seen");
    check(n_rel > 0, "releases seen");
    $display("fit=%0d nofit=%0d pair=%0d rel=%0d", n_fit, n_nofit, n_pair, n_rel);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
