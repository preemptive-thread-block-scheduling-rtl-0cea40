// adaptive_ctrl: fairness check of SRTF/Adaptive and its sharing mode.
//
// Under plain SRTF the kernels run one after the other in order of remaining
// time T, so kernel i is slowed down by s_i = (sum of the T of the kernels
// before it + T_i) / T_i and the shortest kernel by 1. If the largest minus
// the smallest slowdown exceeds a threshold (0.5), the schedule is judged
// unfair and the controller enters sharing mode: the kernel with the least
// remaining time is limited to SHARE_RES resident blocks per SM (3, one less
// than half of the 8 block contexts) and the co-running kernels use the rest.
// The test s_i - 1 > NUM/DEN is evaluated without division as
// DEN * prefix_i > NUM * T_i, where prefix_i is the sum of the remaining
// times of the kernels ahead of i (ties broken by lower slot index).
// The decision is re-evaluated whenever the set of runnable kernels with a
// prediction changes (a kernel becomes runnable, issues its last block or
// ends) and is held in between. With enable low the controller stays in
// exclusive (SRTF) mode. On each change of a kernel's residency limit it
// emits res_set_* for one cycle so the predictors resample t. Remaining
// times come from one reference SM (the sampling SM, which has observed
// every sampled kernel). The slowdown formula, threshold and limit of 3 are
// the scheme's; re-evaluating only on set changes and the single reference
// SM are this design's. Shared-mode runtime estimates (NB1, NB2, TS2) are
// not computed.
module adaptive_ctrl
  import tbs_pkg::*;
#(
  parameter int unsigned NK        = tbs_pkg::MAX_KERNELS,
  parameter int unsigned SHARE_RES = 3,
  parameter int unsigned THR_NUM   = 1,
  parameter int unsigned THR_DEN   = 2,
  localparam int unsigned KW       = $clog2(NK)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          enable,           // 1: SRTF/Adaptive, 0: SRTF
  input  logic          eligible  [NK],
  input  logic          known     [NK],   // a prediction exists
  input  cycles_t       rem       [NK],   // remaining-time predictions
  input  res_t          res       [NK],   // maximum residency R of each kernel
  output logic          share_mode,
  output logic [KW-1:0] fast_kid,
  output res_t          fast_limit,       // min(R, SHARE_RES) of the fast kernel
  output logic          res_set_valid,
  output logic [KW-1:0] res_set_kid,
  output res_t          res_set_val,
  output logic          unfair            // combinational result of the check
);

  logic [NK-1:0] set_now, set_last;
  logic [63:0]   prefix [NK];
  logic [KW-1:0] min_kid;
  int unsigned   members;

  always_comb begin
    members = 0;
    for (int k = 0; k < NK; k++) begin
      set_now[k] = eligible[k] && known[k];
      if (set_now[k]) members++;
    end
    min_kid = '0;
    for (int k = NK - 1; k >= 0; k--) begin
      if (set_now[k] && (!set_now[min_kid] || rem[k] <= rem[min_kid])) min_kid = KW'(k);
    end
    unfair = 1'b0;
    for (int i = 0; i < NK; i++) begin
      prefix[i] = '0;
      for (int j = 0; j < NK; j++) begin
        if (set_now[i] && set_now[j] && j != i &&
            (rem[j] < rem[i] || (rem[j] == rem[i] && j < i)))
          prefix[i] += 64'(rem[j]);
      end
      if (set_now[i] && 64'(THR_DEN) * prefix[i] > 64'(THR_NUM) * 64'(rem[i]))
        unfair = 1'b1;
    end
  end

  function automatic res_t limit_of(res_t r);
    return (r > res_t'(SHARE_RES)) ? res_t'(SHARE_RES) : r;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      set_last      <= '0;
      share_mode    <= 1'b0;
      fast_kid      <= '0;
      fast_limit    <= '0;
      res_set_valid <= 1'b0;
      res_set_kid   <= '0;
      res_set_val   <= '0;
    end else begin
      res_set_valid <= 1'b0;
      if (set_now != set_last) begin
        set_last <= set_now;
        if (enable && members >= 2 && unfair) begin
          share_mode <= 1'b1;
          fast_kid   <= min_kid;
          fast_limit <= limit_of(res[min_kid]);
          if (!share_mode || fast_kid != min_kid) begin
            res_set_valid <= 1'b1;
            res_set_kid   <= min_kid;
            res_set_val   <= limit_of(res[min_kid]);
          end
        end else begin
          share_mode <= 1'b0;
          if (share_mode) begin
            // give the former fast kernel its full residency back
            res_set_valid <= 1'b1;
            res_set_kid   <= fast_kid;
            res_set_val   <= res[fast_kid];
          end
        end
      end
    end
  end

endmodule
