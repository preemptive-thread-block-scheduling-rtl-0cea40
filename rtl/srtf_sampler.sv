// srtf_sampler: kernel table and sampling control of the SRTF scheduler.
//
// Launched kernels get the lowest free kernel slot and join a FIFO queue in
// arrival order. One queued kernel at a time is taken from the queue head:
// if no kernel that already runs has blocks left to issue, there is nothing
// to compare it with and it becomes READY at once; otherwise it is SAMPLING:
// it runs on the sampling SM only, until that SM's predictor has its first
// prediction for it (after its first block ends). That sample prediction
// makes the kernel READY and is handed to the other SMs (copy_* pulses for
// one cycle) as their initial prediction. If, while sampling, the running
// kernels run out of blocks to issue, sampling ends early and the kernel
// becomes READY without a prediction, so that no SM idles. Per kernel the
// table keeps the launch descriptor, R, the number of blocks issued (the id
// of the next block) and Total_Blocks_Done, the blocks completed over all
// SMs; when all blocks are done the kernel ends (kend_* pulses, one kernel
// per cycle) and its slot is freed; it is offered to a new launch from the
// cycle after the end pulse. Launch is accepted when launch_ready is high. All outputs are registered except launch_ready/launch_kid and
// left/eligible. Sampling one kernel at a time in FIFO order, the sample on
// one SM and the copy to the other SMs follow the SRTF scheme; the queue,
// the early-end rule and the single-cycle handshakes are this design's.
module srtf_sampler
  import tbs_pkg::*;
#(
  parameter int unsigned NK      = tbs_pkg::MAX_KERNELS,
  parameter int unsigned NSM     = tbs_pkg::N_SM,
  localparam int unsigned KW     = $clog2(NK),
  localparam int unsigned DW     = $clog2(NSM + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  // kernel launch from the host
  input  logic            launch_valid,
  input  kernel_desc_t    launch_desc,
  input  res_t            launch_res,
  output logic            launch_ready,
  output logic [KW-1:0]   launch_kid,
  // a block of disp_kid was issued to some SM
  input  logic            disp_valid,
  input  logic [KW-1:0]   disp_kid,
  // blocks of each kernel that completed this cycle, over all SMs
  input  logic [DW-1:0]   done_inc [NK],
  // first/next prediction written by the sampling SM's predictor
  input  logic            sample_pred_valid,
  input  logic [KW-1:0]   sample_pred_kid,
  input  cycles_t         sample_pred_rem,
  output kstate_e         kstate   [NK],
  output kernel_desc_t    desc     [NK],
  output res_t            res      [NK],
  output blocks_t         issued   [NK],
  output blocks_t         total_done [NK],
  output logic            left     [NK],   // blocks remain to be issued
  output logic            eligible [NK],   // READY with blocks left
  output logic            sampling,
  output logic [KW-1:0]   sampling_kid,
  output logic            copy_valid,
  output logic [KW-1:0]   copy_kid,
  output cycles_t         copy_rem,
  output logic            kend_valid,
  output logic [KW-1:0]   kend_kid
);

  // arrival-order queue of kernel slots
  logic [KW-1:0] q_mem [NK];
  logic [KW:0]   q_rd, q_wr;
  logic          q_empty;
  logic [KW-1:0] q_head;
  logic          any_run_left;
  logic          end_found;
  logic [KW-1:0] end_kid;

  assign q_empty = (q_rd == q_wr);
  assign q_head  = q_mem[q_rd[KW-1:0]];

  always_comb begin
    launch_ready = 1'b0;
    launch_kid   = '0;
    for (int k = NK - 1; k >= 0; k--) begin
      // a slot is reusable once its kernel-end pulse has been seen
      if (kstate[k] == K_FREE && !(kend_valid && kend_kid == KW'(k))) begin
        launch_ready = 1'b1;
        launch_kid   = KW'(k);
      end
    end
    any_run_left = 1'b0;
    end_found    = 1'b0;
    end_kid      = '0;
    for (int k = 0; k < NK; k++) begin
      left[k]     = kstate[k] != K_FREE && issued[k] < desc[k].blocks;
      eligible[k] = kstate[k] == K_READY && left[k];
      if (eligible[k]) any_run_left = 1'b1;
    end
    for (int k = NK - 1; k >= 0; k--) begin
      if (kstate[k] != K_FREE && total_done[k] >= desc[k].blocks) begin
        end_found = 1'b1;
        end_kid   = KW'(k);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < NK; k++) begin
        kstate[k]     <= K_FREE;
        desc[k]       <= '0;
        res[k]        <= '0;
        issued[k]     <= '0;
        total_done[k] <= '0;
        q_mem[k]      <= '0;
      end
      q_rd         <= '0;
      q_wr         <= '0;
      sampling     <= 1'b0;
      sampling_kid <= '0;
      copy_valid   <= 1'b0;
      copy_kid     <= '0;
      copy_rem     <= '0;
      kend_valid   <= 1'b0;
      kend_kid     <= '0;
    end else begin
      copy_valid <= 1'b0;
      kend_valid <= 1'b0;

      for (int k = 0; k < NK; k++) begin
        total_done[k] <= total_done[k] + blocks_t'(done_inc[k]);
        if (disp_valid && disp_kid == KW'(k)) issued[k] <= issued[k] + 1'b1;
      end

      // take the next queued kernel: run it directly or sample it
      if (!sampling && !q_empty) begin
        q_rd <= q_rd + 1'b1;
        if (any_run_left) begin
          kstate[q_head] <= K_SAMPLING;
          sampling       <= 1'b1;
          sampling_kid   <= q_head;
        end else begin
          kstate[q_head] <= K_READY;
        end
      end

      if (sampling) begin
        if (sample_pred_valid && sample_pred_kid == sampling_kid) begin
          // sample prediction made: hand it over to the other SMs
          kstate[sampling_kid] <= K_READY;
          sampling             <= 1'b0;
          copy_valid           <= 1'b1;
          copy_kid             <= sampling_kid;
          copy_rem             <= sample_pred_rem;
        end else if (!any_run_left) begin
          kstate[sampling_kid] <= K_READY;
          sampling             <= 1'b0;
        end
      end

      // kernel end: all of its blocks completed
      if (end_found) begin
        kstate[end_kid] <= K_FREE;
        kend_valid      <= 1'b1;
        kend_kid        <= end_kid;
        if (sampling && sampling_kid == end_kid) sampling <= 1'b0;
      end

      if (launch_valid && launch_ready) begin
        kstate[launch_kid]     <= K_WAIT;
        desc[launch_kid]       <= launch_desc;
        res[launch_kid]        <= launch_res;
        issued[launch_kid]     <= '0;
        total_done[launch_kid] <= '0;
        q_mem[q_wr[KW-1:0]]    <= launch_kid;
        q_wr                   <= q_wr + 1'b1;
      end
    end
  end

  // Never more queued kernels than slots; blocks are only issued from live kernels.
  a_queue_bound: assert property (@(posedge clk) disable iff (!rst_n)
                                  (q_wr - q_rd) <= (KW+1)'(NK));
  a_disp_live:   assert property (@(posedge clk) disable iff (!rst_n)
                                  disp_valid |-> left[disp_kid]);

endmodule
