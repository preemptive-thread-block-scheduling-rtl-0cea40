// sm_resources: resource accounting and block-slot table of one SM.
//
// Each SM holds at most MAX_SLOTS thread blocks, possibly of different kernels.
// For every slot the table keeps whether it is busy and which kernel slot it
// belongs to; from that it sums the threads, warps, registers and shared
// memory in use (combinationally, so the sums can never drift) and tells, per
// kernel, whether one more block of that kernel fits and how many of its
// blocks are resident. The lowest free slot is the one the next block gets;
// its index is the block identifier (0..7) the predictor uses for
// Block_Start. A block is allocated on alloc_valid and released on
// free_valid, both taking effect at the next clock edge; both may happen in
// the same cycle. The limits are the Fermi per-SM limits; the slot-table
// organisation is this design's own.
module sm_resources
  import tbs_pkg::*;
#(
  parameter int unsigned NK       = tbs_pkg::MAX_KERNELS,
  parameter int unsigned NSLOT    = tbs_pkg::MAX_SLOTS,
  parameter int unsigned THREADS  = tbs_pkg::SM_THREADS,
  parameter int unsigned REGS     = tbs_pkg::SM_REGS,
  parameter int unsigned SMEM     = tbs_pkg::SM_SMEM,
  parameter int unsigned WARPS    = tbs_pkg::SM_WARPS,
  parameter int unsigned WARP_THR = tbs_pkg::WARP_SIZE,
  localparam int unsigned KW      = $clog2(NK),
  localparam int unsigned SW      = $clog2(NSLOT)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  kernel_desc_t        desc      [NK],   // descriptors of all kernel slots
  input  logic                alloc_valid,
  input  logic [KW-1:0]       alloc_kid,
  input  logic                free_valid,
  input  logic [SW-1:0]       free_slot,
  output logic [SW-1:0]       alloc_slot,       // slot the next block receives
  output logic                fits      [NK],   // one more block of kernel k fits
  output res_t                res_count [NK],   // resident blocks of kernel k
  output logic [KW-1:0]       slot_kid  [NSLOT],
  output logic                slot_busy [NSLOT]
);

  int unsigned used_thr, used_warp, used_reg, used_smem, used_blk;
  logic        any_free;

  function automatic int unsigned warps_of(kernel_desc_t d);
    return (32'(d.tpb) + WARP_THR - 1) / WARP_THR;
  endfunction

  always_comb begin
    used_thr = 0; used_warp = 0; used_reg = 0; used_smem = 0; used_blk = 0;
    for (int k = 0; k < NK; k++) res_count[k] = '0;
    for (int s = 0; s < NSLOT; s++) begin
      if (slot_busy[s]) begin
        used_thr  += 32'(desc[slot_kid[s]].tpb);
        used_warp += warps_of(desc[slot_kid[s]]);
        used_reg  += 32'(desc[slot_kid[s]].regs) * 32'(desc[slot_kid[s]].tpb);
        used_smem += 32'(desc[slot_kid[s]].smem);
        used_blk  += 1;
        res_count[slot_kid[s]] = res_count[slot_kid[s]] + 1'b1;
      end
    end
    any_free   = 1'b0;
    alloc_slot = '0;
    for (int s = NSLOT - 1; s >= 0; s--) begin
      if (!slot_busy[s]) begin
        any_free   = 1'b1;
        alloc_slot = SW'(s);
      end
    end
    for (int k = 0; k < NK; k++) begin
      fits[k] = any_free &&
                used_thr  + 32'(desc[k].tpb) <= THREADS &&
                used_warp + warps_of(desc[k]) <= WARPS &&
                used_reg  + 32'(desc[k].regs) * 32'(desc[k].tpb) <= REGS &&
                used_smem + 32'(desc[k].smem) <= SMEM &&
                used_blk < NSLOT;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < NSLOT; s++) begin
        slot_busy[s] <= 1'b0;
        slot_kid[s]  <= '0;
      end
    end else begin
      if (free_valid) slot_busy[free_slot] <= 1'b0;
      if (alloc_valid) begin
        slot_busy[alloc_slot] <= 1'b1;
        slot_kid[alloc_slot]  <= alloc_kid;
      end
    end
  end

  // A block is only ever placed where the kernel fits, and only busy slots are freed.
  a_alloc_fits: assert property (@(posedge clk) disable iff (!rst_n)
                                 alloc_valid |-> fits[alloc_kid]);
  a_free_busy:  assert property (@(posedge clk) disable iff (!rst_n)
                                 free_valid |-> slot_busy[free_slot]);

endmodule
