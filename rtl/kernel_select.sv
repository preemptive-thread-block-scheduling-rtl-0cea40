// kernel_select: which kernel one SM takes its next thread block from.
//
// Shortest Remaining Time First, decided per SM from that SM's own
// predictions, so an SM switches to another kernel (or back) as soon as its
// predictions say so; blocks already running are never preempted, a switch
// only changes which kernel fills the next free resources (hand-off).
//   * On the sampling SM while a kernel is sampled, only that kernel is
//     issued: the SM waits for the running kernels' blocks to leave.
//   * Otherwise, in exclusive mode, only the runnable kernel with the least
//     remaining time (no prediction counts as the longest; ties go to the
//     lower slot) is issued, up to its maximum residency R.
//   * In sharing mode (SRTF/Adaptive) the fast kernel is issued up to its
//     limit; when it cannot take a block, the runnable kernel with the least
//     remaining time among the others is issued up to its R.
// A block is issued only if it fits in the SM's free resources. Purely
// combinational. The policy is the scheme's; the tie rules are this design's.
module kernel_select
  import tbs_pkg::*;
#(
  parameter int unsigned NK = tbs_pkg::MAX_KERNELS,
  localparam int unsigned KW = $clog2(NK)
) (
  input  logic          eligible  [NK],   // READY with blocks left
  input  logic          left      [NK],   // blocks left to issue
  input  cycles_t       rem       [NK],   // this SM's remaining-time predictions
  input  logic          fits      [NK],   // one more block fits on this SM
  input  res_t          res_count [NK],   // resident blocks on this SM
  input  res_t          res       [NK],   // maximum residency R
  input  logic          sample_here,      // this SM is sampling a kernel
  input  logic [KW-1:0] sampling_kid,
  input  logic          share_mode,
  input  logic [KW-1:0] fast_kid,
  input  res_t          fast_limit,
  output logic          sel_valid,
  output logic [KW-1:0] sel_kid
);

  logic [KW-1:0] first_kid, other_kid;
  logic          first_ok, other_ok;

  function automatic logic can_take(int unsigned k, res_t limit);
    return fits[k] && res_count[k] < limit;
  endfunction

  always_comb begin
    first_ok = 1'b0; first_kid = '0;
    other_ok = 1'b0; other_kid = '0;
    for (int k = NK - 1; k >= 0; k--) begin
      if (eligible[k] && (!first_ok || rem[k] <= rem[first_kid])) begin
        first_ok  = 1'b1;
        first_kid = KW'(k);
      end
      if (eligible[k] && KW'(k) != fast_kid && (!other_ok || rem[k] <= rem[other_kid])) begin
        other_ok  = 1'b1;
        other_kid = KW'(k);
      end
    end

    sel_valid = 1'b0;
    sel_kid   = '0;
    if (sample_here) begin
      if (left[sampling_kid] && can_take(32'(sampling_kid), res[sampling_kid])) begin
        sel_valid = 1'b1;
        sel_kid   = sampling_kid;
      end
    end else if (share_mode) begin
      if (eligible[fast_kid] && can_take(32'(fast_kid), fast_limit)) begin
        sel_valid = 1'b1;
        sel_kid   = fast_kid;
      end else if (other_ok && can_take(32'(other_kid), res[other_kid])) begin
        sel_valid = 1'b1;
        sel_kid   = other_kid;
      end
    end else if (first_ok && can_take(32'(first_kid), res[first_kid])) begin
      sel_valid = 1'b1;
      sel_kid   = first_kid;
    end
  end

endmodule
