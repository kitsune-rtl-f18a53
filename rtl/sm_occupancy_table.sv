// sm_occupancy_table -- per-SM record of resources in use, and the fit check.
//
// The grid scheduler keeps, for every SM, how much of its resources the resident
// CTAs take: threads, registers, shared-memory bytes and CTA slots. From that it
// tells, for the CTA at the head of each kernel type, which SMs still have room
// (`fit[t]`), and which SMs have room for one CTA of each type at once
// (`fit_both`), which the scheduler needs when both of its arbiters pick the
// same SM in one cycle.
//
// Interface: `need[t]` is the per-CTA resource need of the kernel type t would
// dispatch next. `alloc_valid[t]`/`alloc_sm[t]` reserve `need[t]` on an SM;
// `rel_valid`/`rel_sm`/`rel_res` give back one finished CTA's resources. All
// updates take effect at the next clock edge; fit masks are combinational from
// the stored state and `need`. Up to two reservations and one release may hit the
// same SM in one cycle.
//
// Timing: the fit masks depend only on registered state, so a reservation made in
// cycle t is seen by the checks of cycle t+1.
//
// From the paper: the table of how much of each SM's resources is consumed, and
// that dispatch checks the occupancy of the SM under consideration. The four
// resources tracked and their A100 limits are this design's choice (the 192 KB of
// shared memory per SM is the paper's figure; 2048 threads, 65536 registers and
// 32 CTAs per SM are the A100's published limits).
module sm_occupancy_table
  import kitsune_pkg::*;
#(
  parameter int unsigned NUM_SM         = 108,
  parameter int unsigned SM_MAX_THREADS = 2048,
  parameter int unsigned SM_MAX_REGS    = 65536,
  parameter int unsigned SM_SMEM_BYTES  = 196608,
  parameter int unsigned SM_MAX_CTAS    = 32,
  parameter int unsigned SM_W           = (NUM_SM > 1) ? $clog2(NUM_SM) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  // fit check
  input  cta_res_t            need     [NUM_TYPES],
  output logic [NUM_SM-1:0]   fit      [NUM_TYPES],
  output logic [NUM_SM-1:0]   fit_both,
  // reservations, one per type
  input  logic                alloc_valid [NUM_TYPES],
  input  logic [SM_W-1:0]     alloc_sm    [NUM_TYPES],
  // release of one finished CTA
  input  logic                rel_valid,
  input  logic [SM_W-1:0]     rel_sm,
  input  cta_res_t            rel_res,
  // state, for observation
  output sm_occ_t             occ      [NUM_SM]
);

  // Can an SM with usage `o` take extra threads/regs/smem/ctas?
  function automatic logic fits(sm_occ_t o, int unsigned thr, int unsigned rg,
                                int unsigned sm, int unsigned nc);
    return (int'(o.threads) + thr <= SM_MAX_THREADS) &&
           (int'(o.regs)    + rg  <= SM_MAX_REGS)    &&
           (int'(o.smem)    + sm  <= SM_SMEM_BYTES)  &&
           (int'(o.ctas)    + nc  <= SM_MAX_CTAS);
  endfunction

  always_comb begin
    for (int s = 0; s < NUM_SM; s++) begin
      for (int t = 0; t < NUM_TYPES; t++) begin
        fit[t][s] = fits(occ[s], int'(need[t].threads), int'(need[t].regs), int'(need[t].smem), 1);
      end
      fit_both[s] = fits(occ[s],
                         int'(need[0].threads) + int'(need[1].threads),
                         int'(need[0].regs)    + int'(need[1].regs),
                         int'(need[0].smem)    + int'(need[1].smem), 2);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < NUM_SM; s++) occ[s] <= '0;
    end else begin
      for (int s = 0; s < NUM_SM; s++) begin
        sm_occ_t n;
        n = occ[s];
        for (int t = 0; t < NUM_TYPES; t++) begin
          if (alloc_valid[t] && int'(alloc_sm[t]) == s) begin
            n.threads = n.threads + need[t].threads;
            n.regs    = n.regs    + need[t].regs;
            n.smem    = n.smem    + need[t].smem;
            n.ctas    = n.ctas    + 1'b1;
          end
        end
        if (rel_valid && int'(rel_sm) == s) begin
          n.threads = n.threads - rel_res.threads;
          n.regs    = n.regs    - rel_res.regs;
          n.smem    = n.smem    - rel_res.smem;
          n.ctas    = n.ctas    - 1'b1;
        end
        occ[s] <= n;
      end
    end
  end

  // Rules of use: reserve only where the CTA fits; release only what is resident.
  for (genvar t = 0; t < NUM_TYPES; t++) begin : g_chk
    a_alloc_fits: assert property (@(posedge clk) disable iff (!rst_n)
      alloc_valid[t] |-> fit[t][alloc_sm[t]])
      else $error("sm_occupancy_table: reservation on full SM %0d", alloc_sm[t]);
  end
  a_pair_fits: assert property (@(posedge clk) disable iff (!rst_n)
    (alloc_valid[0] && alloc_valid[1] && alloc_sm[0] == alloc_sm[1]) |-> fit_both[alloc_sm[0]])
    else $error("sm_occupancy_table: paired reservation overflows SM %0d", alloc_sm[0]);
  a_rel_resident: assert property (@(posedge clk) disable iff (!rst_n)
    rel_valid |-> occ[rel_sm].ctas != 0)
    else $error("sm_occupancy_table: release on empty SM %0d", rel_sm);

  initial begin
    assert (NUM_SM <= (1 << SM_IDX_W)) else $fatal(1, "NUM_SM too large for SM_IDX_W");
    assert (SM_MAX_THREADS < (1 << THR_W) && SM_MAX_REGS < (1 << REG_W) &&
            SM_SMEM_BYTES < (1 << SMEM_W) && SM_MAX_CTAS < (1 << CTAS_W))
      else $fatal(1, "SM limits too large for the occupancy fields");
  end

endmodule
