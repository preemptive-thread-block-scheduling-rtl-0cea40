// tbs_pkg: constants and types shared by the thread block scheduler (TBS).
//
// The per-SM resource limits and the SM count are those of the Fermi GTX 480
// configuration the scheduler was evaluated on (15 SMs; 1536 threads, 32768
// registers, 48 KB shared memory, 8 thread blocks and 48 warps per SM; 32
// threads per warp). Eight kernel slots follow the Fermi limit of eight
// concurrent kernels. Counter widths (32-bit cycle counters, 16-bit block
// counts) and the launch descriptor layout are this design's own choices.
package tbs_pkg;

  localparam int unsigned N_SM        = 15;
  localparam int unsigned MAX_KERNELS = 8;
  localparam int unsigned MAX_SLOTS   = 8;      // thread blocks resident per SM
  localparam int unsigned SM_THREADS  = 1536;
  localparam int unsigned SM_REGS     = 32768;
  localparam int unsigned SM_SMEM     = 49152;  // bytes
  localparam int unsigned SM_WARPS    = 48;
  localparam int unsigned WARP_SIZE   = 32;

  localparam int unsigned CYC_W  = 32;          // cycle counters
  localparam int unsigned BLK_W  = 16;          // block counts and block ids
  localparam int unsigned RES_W  = 4;           // residency 0..8
  localparam int unsigned TPB_W  = 11;          // threads per block 1..1024
  localparam int unsigned REG_W  = 6;           // registers per thread 0..63
  localparam int unsigned SMEM_W = 16;          // shared memory bytes per block

  typedef logic [CYC_W-1:0] cycles_t;
  typedef logic [BLK_W-1:0] blocks_t;
  typedef logic [RES_W-1:0] res_t;

  // What the host supplies when it launches a grid.
  typedef struct packed {
    logic [BLK_W-1:0]  blocks;  // thread blocks in the grid
    logic [TPB_W-1:0]  tpb;     // threads per block
    logic [REG_W-1:0]  regs;    // registers per thread
    logic [SMEM_W-1:0] smem;    // shared memory bytes per block
  } kernel_desc_t;

  // Life of a kernel slot under SRTF.
  typedef enum logic [1:0] {
    K_FREE     = 2'd0,  // slot unused
    K_WAIT     = 2'd1,  // launched, queued for sampling (FIFO order)
    K_SAMPLING = 2'd2,  // running alone on the sampling SM
    K_READY    = 2'd3   // has (or needs no) sample prediction; may run anywhere
  } kstate_e;

endpackage
