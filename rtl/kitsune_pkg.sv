// kitsune_pkg -- types and constants shared by the type-aware grid scheduler.
//
// A spatial pipeline is a set of kernels that must all be resident on the GPU at
// once. Each kernel's launch header carries, besides its grid size and per-CTA
// resource needs, the class of SM resource it mainly uses: SIMT cores or Tensor
// Cores. The scheduler keeps one round-robin SM arbiter per class, so that CTAs of
// the two classes are spread independently over the SMs and pair up on them.
//
// The two classes, OP_SIMT and OP_TENSOR, are the paper's. Field widths are this
// design's own choice: wide enough for an A100-class part (108 SMs, 2048 threads,
// 64K registers and 192 KB of shared memory per SM) with room to spare.
package kitsune_pkg;

  // Resource class named in the kernel header (cudaGraphAddNode(..., OP_TENSOR)).
  typedef enum logic [0:0] {
    OP_SIMT   = 1'b0,
    OP_TENSOR = 1'b1
  } op_type_e;

  localparam int unsigned NUM_TYPES = 2;

  // Field widths (upper bounds; modules check their parameters against them).
  localparam int unsigned SM_IDX_W  = 8;   // up to 256 SMs
  localparam int unsigned KSLOT_W   = 6;   // up to 64 kernel-table slots
  localparam int unsigned CTA_W     = 16;  // up to 65535 CTAs per kernel
  localparam int unsigned TAG_W     = 8;   // host-side kernel identifier
  localparam int unsigned THR_W     = 12;  // threads per SM, 0..4095
  localparam int unsigned REG_W     = 17;  // registers per SM, 0..131071
  localparam int unsigned SMEM_W    = 18;  // shared-memory bytes per SM, 0..262143
  localparam int unsigned CTAS_W    = 6;   // resident CTAs per SM, 0..63

  // Resources one CTA takes from an SM while it runs.
  typedef struct packed {
    logic [THR_W-1:0]  threads;
    logic [REG_W-1:0]  regs;
    logic [SMEM_W-1:0] smem;
  } cta_res_t;

  // What an SM currently has in use.
  typedef struct packed {
    logic [THR_W-1:0]  threads;
    logic [REG_W-1:0]  regs;
    logic [SMEM_W-1:0] smem;
    logic [CTAS_W-1:0] ctas;
  } sm_occ_t;

  // Kernel launch header, as the host driver delivers it.
  typedef struct packed {
    logic [TAG_W-1:0] tag;       // kernel identifier returned on completion
    op_type_e         ktype;     // SIMT or TENSOR
    logic [CTA_W-1:0] num_ctas;  // grid size, at least 1
    cta_res_t         res;       // per-CTA resources
  } kernel_hdr_t;

  // One CTA dispatch message to an SM.
  typedef struct packed {
    logic [SM_IDX_W-1:0] sm;      // target SM
    logic [KSLOT_W-1:0]  kslot;   // kernel-table slot; the SM returns it on completion
    logic [TAG_W-1:0]    tag;     // kernel identifier
    logic [CTA_W-1:0]    cta_id;  // CTA index within the grid
  } cta_dispatch_t;

endpackage
