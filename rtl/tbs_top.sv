// tbs_top: preemptive thread block scheduler (SRTF and SRTF/Adaptive) with
// per-SM Simple Slicing runtime predictors.
//
// The scheduler sits between the kernel launch queue and the SMs. Kernels
// arrive on launch_*; the first kernel on an idle GPU runs at once, later
// ones are sampled one at a time on SM SAMPLE_SM and, once that SM has a
// prediction for them, compete with the running kernels on every SM by
// shortest remaining predicted time (srtf_sampler, kernel_select). Each SM
// has its own resource/slot table (sm_resources) and its own predictor
// (ss_predictor), fed by the block start and end events of that SM. With
// policy_adaptive high, adaptive_ctrl can put the GPU in sharing mode.
// Thread blocks cannot be preempted: a scheduling decision only changes
// which kernel receives the resources freed by the next block end.
//
// Interface and timing. At most one thread block is issued per cycle, to
// the first SM (round robin from the one after the last served) that can
// take one: disp_valid with the SM, the kernel slot, the block slot on the
// SM (0..7) and the block's index in its grid. The SMs accept every issued
// block. An SM reports a finished block with done_valid[s]/done_slot[s], at
// most one per SM per cycle. kend_* pulses once per kernel when its last
// block has finished. Status outputs show sampling, the hand-over of a
// sample prediction and the sharing mode. Issue rate, handshakes and port
// layout are this design's choices; the policies, the predictor and the
// sampling/hand-off behaviour follow the scheme.
module tbs_top
  import tbs_pkg::*;
#(
  parameter int unsigned NSM        = tbs_pkg::N_SM,
  parameter int unsigned NK         = tbs_pkg::MAX_KERNELS,
  parameter int unsigned NSLOT      = tbs_pkg::MAX_SLOTS,
  parameter int unsigned SAMPLE_SM  = 0,
  parameter int unsigned SHARE_RES  = 3,
  localparam int unsigned KW        = $clog2(NK),
  localparam int unsigned SW        = $clog2(NSLOT),
  localparam int unsigned MW        = (NSM > 1) ? $clog2(NSM) : 1,
  localparam int unsigned DW        = $clog2(NSM + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            policy_adaptive,
  // kernel launch
  input  logic            launch_valid,
  input  kernel_desc_t    launch_desc,
  output logic            launch_ready,
  output logic [KW-1:0]   launch_kid,
  // block issue to the SMs
  output logic            disp_valid,
  output logic [MW-1:0]   disp_sm,
  output logic [KW-1:0]   disp_kid,
  output logic [SW-1:0]   disp_slot,
  output blocks_t         disp_block,
  // block completion from the SMs
  input  logic            done_valid [NSM],
  input  logic [SW-1:0]   done_slot  [NSM],
  // kernel completion
  output logic            kend_valid,
  output logic [KW-1:0]   kend_kid,
  // status
  output logic            sampling,
  output logic [KW-1:0]   sampling_kid,
  output logic            sample_copy,
  output logic            share_mode,
  output logic [KW-1:0]   fast_kid
);

  cycles_t      now;
  res_t         launch_res;
  logic         launch_fire;

  kstate_e      kstate     [NK];
  kernel_desc_t desc       [NK];
  res_t         res        [NK];
  blocks_t      issued     [NK];
  blocks_t      total_done [NK];
  logic         left       [NK];
  logic         eligible   [NK];
  logic [DW-1:0] done_inc  [NK];

  logic         copy_valid;
  logic [KW-1:0] copy_kid;
  cycles_t      copy_rem;

  res_t         fast_limit;
  logic         res_set_valid;
  logic [KW-1:0] res_set_kid;
  res_t         res_set_val;
  logic         unfair;

  // per-SM signals
  logic          sel_valid  [NSM];
  logic [KW-1:0] sel_kid    [NSM];
  logic [SW-1:0] alloc_slot [NSM];
  logic [KW-1:0] slot_kid   [NSM][NSLOT];
  logic          pred_evt   [NSM];
  logic [KW-1:0] pred_evt_kid [NSM];
  cycles_t       rem        [NSM][NK];
  logic          known      [NSM][NK];
  logic          bend_valid [NSM];
  logic [KW-1:0] bend_kid   [NSM];

  logic [MW-1:0] rr;
  logic          issue;
  logic [MW-1:0] issue_sm;

  assign launch_fire = launch_valid && launch_ready;
  assign sample_copy = copy_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) now <= '0;
    else        now <= now + 1'b1;
  end

  occupancy_calc u_occ (.desc(launch_desc), .res(launch_res));

  srtf_sampler #(.NK(NK), .NSM(NSM)) u_sampler (
    .clk, .rst_n,
    .launch_valid, .launch_desc, .launch_res, .launch_ready, .launch_kid,
    .disp_valid, .disp_kid, .done_inc,
    .sample_pred_valid (pred_evt[SAMPLE_SM]),
    .sample_pred_kid   (pred_evt_kid[SAMPLE_SM]),
    .sample_pred_rem   (rem[SAMPLE_SM][pred_evt_kid[SAMPLE_SM]]),
    .kstate, .desc, .res, .issued, .total_done, .left, .eligible,
    .sampling, .sampling_kid, .copy_valid, .copy_kid, .copy_rem,
    .kend_valid, .kend_kid
  );

  adaptive_ctrl #(.NK(NK), .SHARE_RES(SHARE_RES)) u_adaptive (
    .clk, .rst_n, .enable(policy_adaptive),
    .eligible, .known(known[SAMPLE_SM]), .rem(rem[SAMPLE_SM]), .res,
    .share_mode, .fast_kid, .fast_limit,
    .res_set_valid, .res_set_kid, .res_set_val, .unfair
  );

  // completed blocks per kernel this cycle
  always_comb begin
    for (int k = 0; k < NK; k++) begin
      done_inc[k] = '0;
      for (int s = 0; s < NSM; s++)
        if (bend_valid[s] && bend_kid[s] == KW'(k)) done_inc[k] = done_inc[k] + 1'b1;
    end
  end

  // round-robin issue of one block per cycle
  always_comb begin
    issue    = 1'b0;
    issue_sm = '0;
    for (int i = NSM; i >= 1; i--) begin
      int unsigned s;
      s = (32'(rr) + 32'(i)) % NSM;
      if (sel_valid[s]) begin
        issue    = 1'b1;
        issue_sm = MW'(s);
      end
    end
    disp_valid = issue;
    disp_sm    = issue_sm;
    disp_kid   = sel_kid[issue_sm];
    disp_slot  = alloc_slot[issue_sm];
    disp_block = issued[sel_kid[issue_sm]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     rr <= MW'(NSM - 1);
    else if (issue) rr <= issue_sm;
  end

  for (genvar s = 0; s < NSM; s++) begin : g_sm
    logic    fits      [NK];
    res_t    res_count [NK];
    logic    slot_busy [NSLOT];
    logic    resident  [NK];
    logic    here;
    logic    unused_pred_outs;
    cycles_t pred_cycles [NK], active_cycles [NK], t_cycles [NK];
    blocks_t done_blocks [NK], total_blocks [NK];
    res_t    resident_blocks [NK];
    logic    reslice [NK];

    assign here          = issue && issue_sm == MW'(s);
    assign bend_valid[s] = done_valid[s];
    assign bend_kid[s]   = slot_kid[s][done_slot[s]];

    always_comb
      for (int k = 0; k < NK; k++) resident[k] = res_count[k] != '0;

    sm_resources #(.NK(NK), .NSLOT(NSLOT)) u_res (
      .clk, .rst_n, .desc,
      .alloc_valid (here), .alloc_kid (sel_kid[s]),
      .free_valid  (done_valid[s]), .free_slot (done_slot[s]),
      .alloc_slot  (alloc_slot[s]), .fits, .res_count,
      .slot_kid    (slot_kid[s]), .slot_busy
    );

    ss_predictor #(.NK(NK), .NSLOT(NSLOT), .NSM(NSM)) u_pred (
      .clk, .rst_n, .now,
      .launch_valid  (launch_fire), .launch_kid (launch_kid),
      .launch_blocks (launch_desc.blocks), .launch_res (launch_res),
      .kend_valid, .kend_kid,
      .bstart_valid  (here), .bstart_slot (alloc_slot[s]),
      .bend_valid    (bend_valid[s]), .bend_slot (done_slot[s]), .bend_kid (bend_kid[s]),
      .resident,
      .copy_valid    (copy_valid && s != SAMPLE_SM), .copy_kid, .copy_rem,
      .res_set_valid, .res_set_kid, .res_set_val,
      .pred_valid    (known[s]), .pred_cycles, .remaining (rem[s]),
      .active_cycles, .t_cycles, .done_blocks, .total_blocks,
      .resident_blocks, .reslice,
      .pred_evt      (pred_evt[s]), .pred_evt_kid (pred_evt_kid[s])
    );

    kernel_select #(.NK(NK)) u_sel (
      .eligible, .left, .rem (rem[s]), .fits, .res_count, .res,
      .sample_here  (sampling && s == SAMPLE_SM), .sampling_kid,
      .share_mode, .fast_kid, .fast_limit,
      .sel_valid    (sel_valid[s]), .sel_kid (sel_kid[s])
    );
  end

endmodule
