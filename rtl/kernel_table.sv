// kernel_table -- the grid scheduler's record of the kernels of a spatial pipeline.
//
// Every kernel of a spatial pipeline must be resident at the same time, so the
// scheduler accepts all of their launch headers and keeps them in a table of
// MAX_KERNELS slots rather than running them one after the other. Each slot holds
// the header (tag, type, per-CTA resources), the number of CTAs still to dispatch,
// the next CTA index, and the number dispatched but not yet finished.
//
// The header's type selects where the kernel waits: one in-order list of slots per
// type. The head of each list is the kernel whose CTAs that type's arbiter
// dispatches next, so SIMT and TENSOR kernels are dispatched side by side, and
// within a type in launch order. A kernel leaves its list when its last CTA is
// dispatched, and frees its slot when its last CTA finishes; `kdone_valid` then
// reports its tag for one cycle.
//
// Interface and timing: `launch_valid`/`launch_ready` is a valid/ready handshake;
// a header accepted in cycle t is at a list head from cycle t+1. `disp_fire[t]`
// takes one CTA from head t at the clock edge. `cmp_valid`/`cmp_slot` report one
// finished CTA; `cmp_res` returns that kernel's per-CTA resources in the same cycle
// so the occupancy table can release them. `kdone_*` is registered.
//
// From the paper: the type carried in the kernel header and the choice of arbiter
// by type. The table, its size (MAX_KERNELS = 32, the A100's number of hardware
// work queues) and launch order within a type are this design's choices.
module kernel_table
  import kitsune_pkg::*;
#(
  parameter int unsigned MAX_KERNELS = 32,
  parameter int unsigned KS_W        = (MAX_KERNELS > 1) ? $clog2(MAX_KERNELS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // launch
  input  logic              launch_valid,
  output logic              launch_ready,
  input  kernel_hdr_t       launch_hdr,
  // head of each type's list
  output logic              head_valid  [NUM_TYPES],
  output logic [KS_W-1:0]   head_slot   [NUM_TYPES],
  output cta_res_t          head_res    [NUM_TYPES],
  output logic [TAG_W-1:0]  head_tag    [NUM_TYPES],
  output logic [CTA_W-1:0]  head_cta_id [NUM_TYPES],
  input  logic              disp_fire   [NUM_TYPES],
  // CTA completion
  input  logic              cmp_valid,
  input  logic [KS_W-1:0]   cmp_slot,
  output cta_res_t          cmp_res,
  // kernel completion
  output logic              kdone_valid,
  output logic [TAG_W-1:0]  kdone_tag,
  output logic [KS_W:0]     active_kernels
);

  typedef struct packed {
    logic             valid;
    logic [TAG_W-1:0] tag;
    op_type_e         ktype;
    cta_res_t         res;
    logic [CTA_W-1:0] remaining;    // CTAs not yet dispatched
    logic [CTA_W-1:0] next_id;      // index of the next CTA to dispatch
    logic [CTA_W-1:0] outstanding;  // dispatched, not yet finished
  } entry_t;

  entry_t            tbl [MAX_KERNELS];
  // One in-order list of slot numbers per type.
  logic [KS_W-1:0]   lst [NUM_TYPES][MAX_KERNELS];
  logic [KS_W-1:0]   lst_rd [NUM_TYPES];
  logic [KS_W-1:0]   lst_wr [NUM_TYPES];
  logic [KS_W:0]     lst_cnt [NUM_TYPES];

  // Lowest free slot.
  logic            free_found;
  logic [KS_W-1:0] free_slot;
  always_comb begin
    free_found = 1'b0;
    free_slot  = '0;
    for (int k = 0; k < MAX_KERNELS; k++) begin
      if (!free_found && !tbl[k].valid) begin
        free_found = 1'b1;
        free_slot  = KS_W'(k);
      end
    end
  end

  assign launch_ready = free_found;
  logic launch_fire;
  assign launch_fire = launch_valid && launch_ready;

  always_comb begin
    for (int t = 0; t < NUM_TYPES; t++) begin
      head_valid[t]  = (lst_cnt[t] != 0);
      head_slot[t]   = lst[t][lst_rd[t]];
      head_res[t]    = tbl[head_slot[t]].res;
      head_tag[t]    = tbl[head_slot[t]].tag;
      head_cta_id[t] = tbl[head_slot[t]].next_id;
    end
  end

  assign cmp_res = tbl[cmp_slot].res;

  function automatic logic [KS_W-1:0] inc(logic [KS_W-1:0] p);
    return (int'(p) == MAX_KERNELS - 1) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < MAX_KERNELS; k++) tbl[k] <= '0;
      for (int t = 0; t < NUM_TYPES; t++) begin
        lst_rd[t]  <= '0;
        lst_wr[t]  <= '0;
        lst_cnt[t] <= '0;
        for (int k = 0; k < MAX_KERNELS; k++) lst[t][k] <= '0;
      end
      kdone_valid    <= 1'b0;
      kdone_tag      <= '0;
      active_kernels <= '0;
    end else begin
      logic [KS_W:0] act;
      act = active_kernels;
      kdone_valid <= 1'b0;
      for (int k = 0; k < MAX_KERNELS; k++) begin
        entry_t e;
        e = tbl[k];
        // Launch into a free slot.
        if (launch_fire && int'(free_slot) == k) begin
          e.valid       = 1'b1;
          e.tag         = launch_hdr.tag;
          e.ktype       = launch_hdr.ktype;
          e.res         = launch_hdr.res;
          e.remaining   = launch_hdr.num_ctas;
          e.next_id     = '0;
          e.outstanding = '0;
          act = act + 1'b1;
        end
        // Dispatch of one CTA from a list head.
        for (int t = 0; t < NUM_TYPES; t++) begin
          if (disp_fire[t] && head_valid[t] && int'(head_slot[t]) == k) begin
            e.remaining   = e.remaining - 1'b1;
            e.next_id     = e.next_id + 1'b1;
            e.outstanding = e.outstanding + 1'b1;
          end
        end
        // Completion of one CTA.
        if (cmp_valid && int'(cmp_slot) == k) begin
          e.outstanding = e.outstanding - 1'b1;
          if (e.outstanding == 0 && e.remaining == 0) begin
            e.valid = 1'b0;
            kdone_valid <= 1'b1;
            kdone_tag   <= e.tag;
            act = act - 1'b1;
          end
        end
        tbl[k] <= e;
      end
      active_kernels <= act;

      for (int t = 0; t < NUM_TYPES; t++) begin
        logic push, pop;
        push = launch_fire && (launch_hdr.ktype == op_type_e'(t));
        pop  = disp_fire[t] && head_valid[t] && (tbl[head_slot[t]].remaining == 1);
        if (push) begin
          lst[t][lst_wr[t]] <= free_slot;
          lst_wr[t] <= inc(lst_wr[t]);
        end
        if (pop) lst_rd[t] <= inc(lst_rd[t]);
        lst_cnt[t] <= lst_cnt[t] + {{KS_W{1'b0}}, push} - {{KS_W{1'b0}}, pop};
      end
    end
  end

  // Handshake and bookkeeping rules.
  a_grid_nonempty: assert property (@(posedge clk) disable iff (!rst_n)
    launch_fire |-> launch_hdr.num_ctas != 0)
    else $error("kernel_table: kernel with an empty grid");
  a_cmp_inflight: assert property (@(posedge clk) disable iff (!rst_n)
    cmp_valid |-> (tbl[cmp_slot].valid && tbl[cmp_slot].outstanding != 0))
    else $error("kernel_table: completion for slot %0d with no CTA in flight", cmp_slot);
  for (genvar t = 0; t < NUM_TYPES; t++) begin : g_chk
    a_disp_head: assert property (@(posedge clk) disable iff (!rst_n)
      disp_fire[t] |-> head_valid[t])
      else $error("kernel_table: dispatch from empty list");
  end

  initial begin
    assert (MAX_KERNELS <= (1 << KSLOT_W)) else $fatal(1, "MAX_KERNELS too large for KSLOT_W");
  end

endmodule
