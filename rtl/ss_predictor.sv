// ss_predictor: Simple Slicing runtime predictor of one SM.
//
// For every kernel slot the predictor keeps the per-SM state of the Simple
// Slicing scheme: Active_Kernel_Cycles, Done_Blocks, Total_Blocks,
// Resident_Blocks, the block duration t, the prediction Pred_Cycles and the
// Reslice flag; Block_Start is kept per block slot of the SM (a slot holds
// one block at a time, so this is the same information with 8 entries
// instead of 8 per kernel). The state follows four events:
//   launch   : Active=Done=0, Total=ceil(Blocks/N_SM), Resident=R, Reslice
//   block start : Block_Start[slot] = now
//   block end   : Done++, and if Reslice: t = now - Block_Start[slot]
//   kernel end  : Reslice for every kernel
// A launch also sets Reslice for all other kernels, because launches and
// ends both begin a new slice for every running kernel. After a block end
// the kernel is marked pending; one pending kernel per cycle (lowest index
// first) then gets
//   Pred = Active + (Total - Done) * t / Resident           (Equation 2)
// computed in one cycle, and Reslice is cleared with the t sample, so t is
// the duration of the first block to end in each slice. A prediction copied
// from the sampling SM (copy_*) seeds Pred = Active + copied remaining time.
// A residency change (res_set_*) updates Resident_Blocks and starts a slice.
// Active counts cycles in which the kernel has a block resident here.
// remaining[k] = Pred - Active (saturating), all ones while no prediction
// exists. pred_evt pulses for one cycle with the kernel whose Pred was just
// written. Counter widths and the one-divide-per-cycle arrangement are this
// design's choices; the state, the events and Equation 2 are the scheme's.
module ss_predictor
  import tbs_pkg::*;
#(
  parameter int unsigned NK    = tbs_pkg::MAX_KERNELS,
  parameter int unsigned NSLOT = tbs_pkg::MAX_SLOTS,
  parameter int unsigned NSM   = tbs_pkg::N_SM,
  localparam int unsigned KW   = $clog2(NK),
  localparam int unsigned SW   = $clog2(NSLOT)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  cycles_t       now,
  // OnLaunch
  input  logic          launch_valid,
  input  logic [KW-1:0] launch_kid,
  input  blocks_t       launch_blocks,
  input  res_t          launch_res,
  // OnKernelEnd
  input  logic          kend_valid,
  input  logic [KW-1:0] kend_kid,
  // OnBlockStart / OnBlockEnd
  input  logic          bstart_valid,
  input  logic [SW-1:0] bstart_slot,
  input  logic          bend_valid,
  input  logic [SW-1:0] bend_slot,
  input  logic [KW-1:0] bend_kid,
  // kernel k has at least one block resident on this SM
  input  logic          resident [NK],
  // initial prediction handed over from the sampling SM
  input  logic          copy_valid,
  input  logic [KW-1:0] copy_kid,
  input  cycles_t       copy_rem,
  // residency limit change (SRTF/Adaptive sharing mode)
  input  logic          res_set_valid,
  input  logic [KW-1:0] res_set_kid,
  input  res_t          res_set_val,
  output logic          pred_valid   [NK],
  output cycles_t       pred_cycles  [NK],
  output cycles_t       remaining    [NK],
  output cycles_t       active_cycles[NK],
  output cycles_t       t_cycles     [NK],
  output blocks_t       done_blocks  [NK],
  output blocks_t       total_blocks [NK],
  output res_t          resident_blocks [NK],
  output logic          reslice      [NK],
  output logic          pred_evt,
  output logic [KW-1:0] pred_evt_kid
);

  localparam cycles_t CYC_MAX = '1;

  cycles_t block_start [NSLOT];
  logic    t_valid     [NK];
  logic    pending     [NK];

  // Equation 2 for the lowest-numbered pending kernel.
  logic          calc_valid;
  logic [KW-1:0] calc_kid;
  localparam int unsigned PW = BLK_W + CYC_W;
  logic [PW-1:0] calc_left, calc_prod, calc_quot;
  logic [PW:0]   calc_sum;
  cycles_t       calc_pred;

  // Restoring division of a PW-bit value by a residency (1..15): one
  // (RES_W+1)-bit subtractor per quotient bit instead of a full-width divider.
  function automatic logic [PW-1:0] div_small(logic [PW-1:0] n, res_t d);
    logic [RES_W:0] r;
    logic [PW-1:0]  q;
    r = '0;
    for (int i = PW - 1; i >= 0; i--) begin
      r = {r[RES_W-1:0], n[i]};
      if (r >= {1'b0, d}) begin
        r    = r - {1'b0, d};
        q[i] = 1'b1;
      end else begin
        q[i] = 1'b0;
      end
    end
    return q;
  endfunction

  always_comb begin
    calc_valid = 1'b0;
    calc_kid   = '0;
    for (int k = NK - 1; k >= 0; k--) begin
      if (pending[k] && t_valid[k]) begin
        calc_valid = 1'b1;
        calc_kid   = KW'(k);
      end
    end
    calc_left = (total_blocks[calc_kid] > done_blocks[calc_kid]) ?
                PW'(total_blocks[calc_kid] - done_blocks[calc_kid]) : '0;
    calc_prod = calc_left * PW'(t_cycles[calc_kid]);
    calc_quot = div_small(calc_prod, (resident_blocks[calc_kid] == '0) ? res_t'(1)
                                                                      : resident_blocks[calc_kid]);
    calc_sum  = (PW+1)'(calc_quot) + (PW+1)'(active_cycles[calc_kid]);
    calc_pred = (calc_sum > (PW+1)'(CYC_MAX)) ? CYC_MAX : calc_sum[CYC_W-1:0];
  end

  always_comb begin
    for (int k = 0; k < NK; k++) begin
      if (!pred_valid[k])                       remaining[k] = CYC_MAX;
      else if (pred_cycles[k] > active_cycles[k]) remaining[k] = pred_cycles[k] - active_cycles[k];
      else                                      remaining[k] = '0;
    end
  end

  function automatic blocks_t ceil_div_nsm(blocks_t b);
    return blocks_t'((32'(b) + NSM - 1) / NSM);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < NSLOT; s++) block_start[s] <= '0;
      for (int k = 0; k < NK; k++) begin
        active_cycles[k]   <= '0;
        done_blocks[k]     <= '0;
        total_blocks[k]    <= '0;
        resident_blocks[k] <= '0;
        t_cycles[k]        <= '0;
        t_valid[k]         <= 1'b0;
        pred_cycles[k]     <= '0;
        pred_valid[k]      <= 1'b0;
        reslice[k]         <= 1'b0;
        pending[k]         <= 1'b0;
      end
      pred_evt     <= 1'b0;
      pred_evt_kid <= '0;
    end else begin
      pred_evt     <= calc_valid;
      pred_evt_kid <= calc_kid;

      if (bstart_valid) block_start[bstart_slot] <= now;

      for (int k = 0; k < NK; k++) begin
        if (resident[k] && active_cycles[k] != CYC_MAX)
          active_cycles[k] <= active_cycles[k] + 1'b1;

        // prediction written; Reslice was already cleared with the t sample
        if (calc_valid && calc_kid == KW'(k)) begin
          pred_cycles[k] <= calc_pred;
          pred_valid[k]  <= 1'b1;
          pending[k]     <= 1'b0;
        end

        if (copy_valid && copy_kid == KW'(k)) begin
          pred_cycles[k] <= (64'(active_cycles[k]) + 64'(copy_rem) > 64'(CYC_MAX)) ?
                            CYC_MAX : active_cycles[k] + copy_rem;
          pred_valid[k]  <= 1'b1;
        end

        if (bend_valid && bend_kid == KW'(k)) begin
          done_blocks[k] <= done_blocks[k] + 1'b1;
          pending[k]     <= 1'b1;
          if (reslice[k]) begin
            t_cycles[k] <= now - block_start[bend_slot];
            t_valid[k]  <= 1'b1;
            reslice[k]  <= 1'b0;
          end
        end

        // slice boundaries for every kernel
        if (launch_valid || kend_valid) reslice[k] <= 1'b1;

        if (res_set_valid && res_set_kid == KW'(k)) begin
          resident_blocks[k] <= res_set_val;
          reslice[k]         <= 1'b1;
        end

        if (kend_valid && kend_kid == KW'(k)) begin
          pred_valid[k] <= 1'b0;
          pending[k]    <= 1'b0;
        end

        if (launch_valid && launch_kid == KW'(k)) begin
          active_cycles[k]   <= '0;
          done_blocks[k]     <= '0;
          total_blocks[k]    <= ceil_div_nsm(launch_blocks);
          resident_blocks[k] <= launch_res;
          t_cycles[k]        <= '0;
          t_valid[k]         <= 1'b0;
          pred_cycles[k]     <= '0;
          pred_valid[k]      <= 1'b0;
          pending[k]         <= 1'b0;
          reslice[k]         <= 1'b1;
        end
      end
    end
  end

endmodule
