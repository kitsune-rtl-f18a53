// kitsune_grid_scheduler -- type-aware CTA grid scheduler for spatial pipelines.
//
// In a spatial pipeline every kernel (one per DL operator) runs at the same time,
// its CTAs passing tiles to the next kernel's CTAs through queues in the L2. To keep
// both the Tensor Cores and the SIMT cores of each SM busy, a CTA of a
// Tensor-Core-heavy kernel should share its SM with a CTA of a SIMT-heavy kernel.
// This scheduler does that with two round-robin SM arbiters, one per kernel type,
// each with its own priority pointer: the TENSOR kernels' CTAs are spread over the
// SMs in turn, and so independently are the SIMT kernels', so each SM ends up with
// CTAs of both types. Before a CTA is sent, the SM's recorded occupancy (threads,
// registers, shared memory, CTA slots) must have room for it.
//
// Structure:
//   kernel_table        launch headers, one in-order list per type
//   sm_occupancy_table  resources in use per SM, fit masks
//   rr_arbiter x2       SM choice for the head TENSOR and head SIMT kernel
//   rr_arbiter          one CTA completion per cycle among the SMs
//
// Per cycle: up to one TENSOR and one SIMT CTA are dispatched. The TENSOR arbiter
// chooses first; if both arbiters would pick the same SM and it cannot hold both
// CTAs, that SM is withheld from the SIMT arbiter, which then takes the next SM
// that fits. A type whose head kernel fits on no SM waits (`stall[t]` is high).
//
// Interface and timing: launch headers enter through a valid/ready handshake and
// are dispatchable the next cycle. `disp_valid[t]`/`disp[t]` are registered: a CTA
// chosen in cycle t appears in cycle t+1, when its resources are already booked.
// SMs accept every dispatch (the booking guarantees room). An SM reports a finished
// CTA by holding `sm_done_valid[s]` with the CTA's kernel slot until
// `sm_done_ready[s]`; one completion is taken per cycle. When the last CTA of a
// kernel finishes, `kdone_valid` pulses with its tag.
//
// From the paper: kernel type in the launch header, two type-specific round-robin
// arbiters, arbiter chosen by the arriving kernel's type, occupancy check of the
// SM under consideration. This design's own choices: dispatch of one CTA per type
// per cycle, TENSOR before SIMT on a same-SM conflict, in-order kernels within a
// type, the completion interface and its arbiter, and active-low asynchronous reset.
module kitsune_grid_scheduler
  import kitsune_pkg::*;
#(
  parameter int unsigned NUM_SM         = 108,
  parameter int unsigned MAX_KERNELS    = 32,
  parameter int unsigned SM_MAX_THREADS = 2048,
  parameter int unsigned SM_MAX_REGS    = 65536,
  parameter int unsigned SM_SMEM_BYTES  = 196608,
  parameter int unsigned SM_MAX_CTAS    = 32
) (
  input  logic                clk,
  input  logic                rst_n,
  // kernel launch from the host interface
  input  logic                launch_valid,
  output logic                launch_ready,
  input  kernel_hdr_t         launch_hdr,
  // CTA dispatch to the SMs, index 0 = SIMT, 1 = TENSOR
  output logic                disp_valid [NUM_TYPES],
  output cta_dispatch_t       disp       [NUM_TYPES],
  // CTA completion from the SMs
  input  logic [NUM_SM-1:0]   sm_done_valid,
  input  logic [KSLOT_W-1:0]  sm_done_slot [NUM_SM],
  output logic [NUM_SM-1:0]   sm_done_ready,
  // kernel completion to the host interface
  output logic                kdone_valid,
  output logic [TAG_W-1:0]    kdone_tag,
  // status
  output logic                stall [NUM_TYPES],
  output logic                idle,
  output sm_occ_t             sm_occ [NUM_SM]
);

  localparam int unsigned SM_W = (NUM_SM > 1) ? $clog2(NUM_SM) : 1;
  localparam int unsigned KS_W = (MAX_KERNELS > 1) ? $clog2(MAX_KERNELS) : 1;

  // ---------------- kernel table ----------------
  logic              head_valid  [NUM_TYPES];
  logic [KS_W-1:0]   head_slot   [NUM_TYPES];
  cta_res_t          head_res    [NUM_TYPES];
  logic [TAG_W-1:0]  head_tag    [NUM_TYPES];
  logic [CTA_W-1:0]  head_cta_id [NUM_TYPES];
  logic              fire        [NUM_TYPES];
  logic              cmp_valid;
  logic [KS_W-1:0]   cmp_slot;
  cta_res_t          cmp_res;
  logic [KS_W:0]     active_kernels;

  kernel_table #(.MAX_KERNELS(MAX_KERNELS)) u_ktab (
    .clk, .rst_n,
    .launch_valid, .launch_ready, .launch_hdr,
    .head_valid, .head_slot, .head_res, .head_tag, .head_cta_id,
    .disp_fire (fire),
    .cmp_valid, .cmp_slot, .cmp_res,
    .kdone_valid, .kdone_tag, .active_kernels
  );

  // ---------------- occupancy table ----------------
  logic [NUM_SM-1:0] fit [NUM_TYPES];
  logic [NUM_SM-1:0] fit_both;
  logic [SM_W-1:0]   gnt_idx [NUM_TYPES];
  logic [SM_W-1:0]   cmp_sm;

  sm_occupancy_table #(
    .NUM_SM(NUM_SM), .SM_MAX_THREADS(SM_MAX_THREADS), .SM_MAX_REGS(SM_MAX_REGS),
    .SM_SMEM_BYTES(SM_SMEM_BYTES), .SM_MAX_CTAS(SM_MAX_CTAS)
  ) u_occ (
    .clk, .rst_n,
    .need        (head_res),
    .fit, .fit_both,
    .alloc_valid (fire),
    .alloc_sm    (gnt_idx),
    .rel_valid   (cmp_valid),
    .rel_sm      (cmp_sm),
    .rel_res     (cmp_res),
    .occ         (sm_occ)
  );

  // ---------------- per-type SM arbiters ----------------
  logic [NUM_SM-1:0] req_tc, req_simt, gnt_tc, gnt_simt;
  logic              gv_tc, gv_simt;
  logic [SM_W-1:0]   idx_tc, idx_simt, ptr_tc, ptr_simt;

  assign req_tc   = head_valid[OP_TENSOR] ? fit[OP_TENSOR] : '0;
  // Withhold from SIMT the SM just granted to TENSOR unless it holds both CTAs.
  assign req_simt = (head_valid[OP_SIMT] ? fit[OP_SIMT] : '0) & ~(gnt_tc & ~fit_both);

  rr_arbiter #(.N(NUM_SM), .IDX_W(SM_W)) u_arb_tensor (
    .clk, .rst_n,
    .req (req_tc), .advance (gv_tc),
    .gnt (gnt_tc), .gnt_idx (idx_tc), .gnt_valid (gv_tc), .ptr (ptr_tc)
  );

  rr_arbiter #(.N(NUM_SM), .IDX_W(SM_W)) u_arb_simt (
    .clk, .rst_n,
    .req (req_simt), .advance (gv_simt),
    .gnt (gnt_simt), .gnt_idx (idx_simt), .gnt_valid (gv_simt), .ptr (ptr_simt)
  );

  assign fire[OP_TENSOR]    = gv_tc;
  assign fire[OP_SIMT]      = gv_simt;
  assign gnt_idx[OP_TENSOR] = idx_tc;
  assign gnt_idx[OP_SIMT]   = idx_simt;
  for (genvar t = 0; t < NUM_TYPES; t++) begin : g_stall
    assign stall[t] = head_valid[t] && !fire[t];
  end

  // ---------------- dispatch registers ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int t = 0; t < NUM_TYPES; t++) begin
        disp_valid[t] <= 1'b0;
        disp[t]       <= '0;
      end
    end else begin
      for (int t = 0; t < NUM_TYPES; t++) begin
        disp_valid[t] <= fire[t];
        if (fire[t]) begin
          disp[t].sm     <= SM_IDX_W'(gnt_idx[t]);
          disp[t].kslot  <= KSLOT_W'(head_slot[t]);
          disp[t].tag    <= head_tag[t];
          disp[t].cta_id <= head_cta_id[t];
        end
      end
    end
  end

  // ---------------- completion arbiter ----------------
  logic [NUM_SM-1:0] cmp_gnt;
  logic [SM_W-1:0]   cmp_ptr;

  rr_arbiter #(.N(NUM_SM), .IDX_W(SM_W)) u_cmp_arb (
    .clk, .rst_n,
    .req       (sm_done_valid),
    .advance   (cmp_valid),
    .gnt       (cmp_gnt),
    .gnt_idx   (cmp_sm),
    .gnt_valid (cmp_valid),
    .ptr       (cmp_ptr)
  );

  assign sm_done_ready = cmp_gnt;
  assign cmp_slot      = KS_W'(sm_done_slot[cmp_sm]);

  logic any_disp;
  always_comb begin
    any_disp = 1'b0;
    for (int t = 0; t < NUM_TYPES; t++) any_disp |= disp_valid[t];
  end
  assign idle = (active_kernels == 0) && !any_disp;

  // A completion must name a kernel slot that exists.
  a_cmp_slot: assert property (@(posedge clk) disable iff (!rst_n)
    cmp_valid |-> int'(sm_done_slot[cmp_sm]) < MAX_KERNELS)
    else $error("kitsune_grid_scheduler: bad slot in completion");

endmodule
