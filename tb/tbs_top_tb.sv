// tbs_top_tb: end-to-end test of the thread block scheduler at its default
// size (15 SMs, 8 kernel slots, 8 blocks per SM), with 15 behavioural SMs.
//
// Phase 1 (SRTF): a long kernel A (256 threads/block, R = 6, 600 blocks of
// 300 cycles) runs alone; 200 cycles later a short kernel B (64 threads,
// R = 8, 90 blocks of 60 cycles) arrives. Expected: A starts without
// sampling, B is sampled on SM 0, its sample prediction is handed to the
// other SMs, every SM hands off to B, B ends before A.
// Phase 2 (SRTF/Adaptive): two kernels of similar remaining time; the
// fairness check must enter sharing mode and the fast kernel must then hold
// no more than 3 blocks on any SM.
// Throughout: every block of every grid is issued exactly once, no SM holds
// more blocks of a kernel than its R (computed here independently), and
// every kernel ends once. Each mechanism is counted and must occur.
module tbs_top_tb;
  import tbs_pkg::*;

  localparam int unsigned NSM = tbs_pkg::N_SM;
  localparam int unsigned NK  = tbs_pkg::MAX_KERNELS;
  localparam int unsigned NSL = tbs_pkg::MAX_SLOTS;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic            policy_adaptive;
  logic            launch_valid;
  kernel_desc_t    launch_desc;
  logic            launch_ready;
  logic [2:0]      launch_kid;
  logic            disp_valid;
  logic [3:0]      disp_sm;
  logic [2:0]      disp_kid;
  logic [2:0]      disp_slot;
  blocks_t         disp_block;
  logic            done_valid [NSM];
  logic [2:0]      done_slot  [NSM];
  logic            kend_valid;
  logic [2:0]      kend_kid;
  logic            sampling, sample_copy, share_mode;
  logic [2:0]      sampling_kid, fast_kid;

  tbs_top dut (.*);

  // behavioural SMs; block duration depends on the kernel
  int unsigned dur_of [NK];
  for (genvar s = 0; s < NSM; s++) begin : g_sm
    sm_model #(.NSLOT(NSL)) u_sm (
      .clk, .rst_n,
      .start_valid (disp_valid && disp_sm == 4'(s)),
      .start_slot  (disp_slot),
      .start_dur   (dur_of[disp_kid]),
      .done_valid  (done_valid[s]),
      .done_slot   (done_slot[s])
    );
  end

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s (t=%0t)", what, $time);
    end
  endtask

  // scoreboard
  bit          seen     [NK][4096];
  int unsigned issued_n [NK];
  int unsigned blocks_n [NK];
  int unsigned r_of     [NK];
  int unsigned limit_of [NK];
  int unsigned on_sm    [NSM][NK];
  logic [2:0]  slot_owner [NSM][NSL];
  int unsigned ends     [NK];
  int          end_order[$];
  int          last_kid_on_sm [NSM];
  int unsigned n_sample = 0, n_copy = 0, n_handoff = 0, n_share = 0, n_direct = 0;
  int unsigned n_dup = 0, n_over = 0;
  logic        share_q = 1'b0;

  always @(posedge clk) if (rst_n) begin
    if (disp_valid) begin
      if (seen[disp_kid][disp_block]) n_dup++;
      seen[disp_kid][disp_block] = 1'b1;
      issued_n[disp_kid]++;
      on_sm[disp_sm][disp_kid]++;
      slot_owner[disp_sm][disp_slot] = disp_kid;
      if (on_sm[disp_sm][disp_kid] > r_of[disp_kid]) n_over++;
      if (share_mode && disp_kid == fast_kid && on_sm[disp_sm][disp_kid] > 3) n_over++;
      if (last_kid_on_sm[disp_sm] >= 0 && last_kid_on_sm[disp_sm] != int'(disp_kid) &&
          disp_sm != 0)
        n_handoff++;
      last_kid_on_sm[disp_sm] = disp_kid;
    end
    for (int s = 0; s < NSM; s++)
      if (done_valid[s]) on_sm[s][slot_owner[s][done_slot[s]]]--;
    if (kend_valid) begin
      ends[kend_kid]++;
      end_order.push_back(kend_kid);
    end
    if (sampling && !$past(sampling)) n_sample++;
    if (sample_copy) n_copy++;
    if (share_mode && !share_q) n_share++;
    share_q = share_mode;
  end

  // launch one kernel; returns its slot
  task automatic launch(input int unsigned blocks, tpb, regs, smem, dur, r_exp,
                        output int kid);
    @(negedge clk);
    while (!launch_ready) @(negedge clk);
    launch_valid       = 1'b1;
    launch_desc.blocks = blocks_t'(blocks);
    launch_desc.tpb    = 11'(tpb);
    launch_desc.regs   = 6'(regs);
    launch_desc.smem   = 16'(smem);
    kid                = int'(launch_kid);
    dur_of[kid]        = dur;
    r_of[kid]          = r_exp;
    blocks_n[kid]      = blocks;
    issued_n[kid]      = 0;
    ends[kid]          = 0;
    for (int b = 0; b < 4096; b++) seen[kid][b] = 1'b0;
    @(negedge clk);
    launch_valid = 1'b0;
  endtask

  task automatic wait_end(int kid);
    while (ends[kid] == 0) @(posedge clk);
  endtask

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ka, kb;
    policy_adaptive = 1'b0;
    launch_valid    = 1'b0;
    launch_desc     = '0;
    for (int k = 0; k < NK; k++) dur_of[k] = 10;
    for (int s = 0; s < NSM; s++) begin
      last_kid_on_sm[s] = -1;
      for (int k = 0; k < NK; k++) on_sm[s][k] = 0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // ---------------- phase 1: SRTF ----------------
    // A: 256 threads, 20 regs -> R = 1536/256 = 6. B: 64 threads, 16 regs -> R = 8.
    launch(600, 256, 20, 0, 300, 6, ka);
    repeat (5) @(posedge clk);
    check(!sampling, "first kernel runs without sampling");
    if (!sampling && issued_n[ka] > 0) n_direct++;
    repeat (200) @(posedge clk);
    launch(90, 64, 16, 0, 60, 8, kb);
    wait_end(ka);
    wait_end(kb);
    check(end_order.size() == 2 && end_order[0] == kb,
          "SRTF: short kernel B finishes before long kernel A");
    check(issued_n[ka] == 600 && issued_n[kb] == 90, "phase 1: all blocks issued");
    for (int b = 0; b < 600; b++) check(seen[ka][b], "phase 1: A block issued");
    for (int b = 0; b < 90; b++)  check(seen[kb][b], "phase 1: B block issued");
    check(ends[ka] == 1 && ends[kb] == 1, "phase 1: each kernel ends once");

    // ---------------- phase 2: SRTF/Adaptive ----------------
    repeat (20) @(posedge clk);
    policy_adaptive = 1'b1;
    end_order.delete();
    for (int s = 0; s < NSM; s++) last_kid_on_sm[s] = -1;
    // A: 600 blocks of 300 cycles at R = 6; B: 700 blocks of 200 cycles at R = 8.
    // Remaining times are similar, so serial execution is unfair.
    launch(600, 256, 20, 0, 300, 6, ka);
    repeat (100) @(posedge clk);
    launch(700, 64, 16, 0, 200, 8, kb);
    wait_end(ka);
    wait_end(kb);
    check(issued_n[ka] == 600 && issued_n[kb] == 700, "phase 2: all blocks issued");
    for (int b = 0; b < 600; b++) check(seen[ka][b], "phase 2: A block issued");
    for (int b = 0; b < 700; b++) check(seen[kb][b], "phase 2: B block issued");
    check(ends[ka] == 1 && ends[kb] == 1, "phase 2: each kernel ends once");

    repeat (10) @(posedge clk);
    check(n_dup == 0, "no block issued twice");
    check(n_over == 0, "no SM exceeds a kernel's residency limit");
    // every mechanism happened
    $display("mechanisms: direct=%0d sample=%0d copy=%0d handoff=%0d share=%0d",
             n_direct, n_sample, n_copy, n_handoff, n_share);
    check(n_direct > 0, "direct start of the first kernel");
    check(n_sample > 0, "sampling on the sampling SM");
    check(n_copy > 0, "hand-over of the sample prediction");
    check(n_handoff > 0, "hand-off of SMs to another kernel");
    check(n_share > 0, "SRTF/Adaptive sharing mode");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
