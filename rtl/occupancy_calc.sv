// occupancy_calc: maximum residency R of a grid on one SM.
//
// R is the largest number of thread blocks of one grid that fit on an SM at
// the same time; a grid's resources are allocated a whole block at a time, so
// R is limited by whichever of threads, warps, registers, shared memory or
// block contexts runs out first. The scheduler computes R once per launch, as
// the occupancy-calculator formulae do. Purely combinational: R is valid in
// the cycle the descriptor is presented. Registers are counted as
// regs-per-thread times threads-per-block with no allocation granularity, a
// simplification of this design; the per-SM limits are the Fermi limits.
module occupancy_calc
  import tbs_pkg::*;
#(
  parameter int unsigned MAX_RES    = tbs_pkg::MAX_SLOTS,
  parameter int unsigned THREADS    = tbs_pkg::SM_THREADS,
  parameter int unsigned REGS       = tbs_pkg::SM_REGS,
  parameter int unsigned SMEM       = tbs_pkg::SM_SMEM,
  parameter int unsigned WARPS      = tbs_pkg::SM_WARPS,
  parameter int unsigned WARP_THR   = tbs_pkg::WARP_SIZE
) (
  input  kernel_desc_t desc,
  output res_t         res     // 0 when not even one block fits
);

  int unsigned tpb, warps, regs_blk, smem_blk;

  always_comb begin
    tpb      = 32'(desc.tpb);
    warps    = (tpb + WARP_THR - 1) / WARP_THR;
    regs_blk = 32'(desc.regs) * tpb;
    smem_blk = 32'(desc.smem);
    res      = '0;
    // The limits grow monotonically with i, so the last i that fits is R.
    for (int unsigned i = 1; i <= MAX_RES; i++) begin
      if (i * tpb <= THREADS && i * warps <= WARPS &&
          i * regs_blk <= REGS && i * smem_blk <= SMEM)
        res = res_t'(i);
    end
  end

endmodule
