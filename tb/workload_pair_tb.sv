// workload_pair_tb: two-program workloads of the evaluation, at full grid
// size, on the default-size scheduler with 15 behavioural SMs.
//
// Grids use the benchmark table's block counts, threads per block and
// maximum residency; each block runs for the kernel's mean simulated block
// duration t, varied by up to +-5% per block.
//   1. SRTF, RayTracing render (2048 blocks, R = 5, t = 15167) first, then
//      JPEG-d IDCT (512 blocks, R = 8, t = 5238) 100 cycles later. The short
//      kernel must be sampled, win, and finish first; its turnaround may
//      exceed its stand-alone runtime by at most about one sampling delay and
//      one hand-off delay (each about one render block), far below the
//      ~400k cycles it would wait under FIFO.
//   2. SRTF/Adaptive, AES-d (1429 blocks, R = 6, t = 14529) first, then
//      AES-e (1429 blocks, R = 6, t = 14031): of nearly equal length, so
//      serial execution would slow the second by far more than 0.5 and
//      sharing mode must be used.
// Every block must be issued exactly once and every kernel must end once.
module workload_pair_tb;
  import tbs_pkg::*;

  localparam int unsigned NSM = tbs_pkg::N_SM;
  localparam int unsigned NK  = tbs_pkg::MAX_KERNELS;
  localparam int unsigned NSL = tbs_pkg::MAX_SLOTS;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic            policy_adaptive, launch_valid, launch_ready;
  kernel_desc_t    launch_desc;
  logic [2:0]      launch_kid, disp_kid, disp_slot, kend_kid, sampling_kid, fast_kid;
  logic            disp_valid, kend_valid, sampling, sample_copy, share_mode;
  logic [3:0]      disp_sm;
  blocks_t         disp_block;
  logic            done_valid [NSM];
  logic [2:0]      done_slot  [NSM];

  tbs_top dut (.*);

  int unsigned t_of [NK];
  int unsigned blk_dur;
  always_comb blk_dur = t_of[disp_kid] - t_of[disp_kid] / 20 + ($urandom % (t_of[disp_kid] / 10 + 1));

  for (genvar s = 0; s < NSM; s++) begin : g_sm
    sm_model #(.NSLOT(NSL)) u_sm (
      .clk, .rst_n,
      .start_valid (disp_valid && disp_sm == 4'(s)),
      .start_slot  (disp_slot),
      .start_dur   (blk_dur),
      .done_valid  (done_valid[s]),
      .done_slot   (done_slot[s])
    );
  end

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (t=%0t)", what, $time); end
  endtask

  longint unsigned cyc = 0;
  always @(posedge clk) cyc++;

  bit              seen [NK][4096];
  int unsigned     issued_n [NK], ends [NK];
  longint unsigned t_launch [NK], t_end [NK];
  int unsigned     n_copy = 0, n_share = 0, n_dup = 0;
  logic            share_q = 0;

  always @(posedge clk) if (rst_n) begin
    if (disp_valid) begin
      if (seen[disp_kid][disp_block]) n_dup++;
      seen[disp_kid][disp_block] = 1;
      issued_n[disp_kid]++;
    end
    if (kend_valid) begin
      ends[kend_kid]++;
      t_end[kend_kid] = cyc;
    end
    if (sample_copy) n_copy++;
    if (share_mode && !share_q) n_share++;
    share_q = share_mode;
  end

  task automatic launch(int unsigned blocks, tpb, regs, t, output int kid);
    @(negedge clk);
    while (!launch_ready) @(negedge clk);
    launch_valid = 1;
    launch_desc  = '0;
    launch_desc.blocks = blocks_t'(blocks);
    launch_desc.tpb    = 11'(tpb);
    launch_desc.regs   = 6'(regs);
    kid = launch_kid;
    t_of[kid] = t;
    issued_n[kid] = 0; ends[kid] = 0;
    for (int b = 0; b < 4096; b++) seen[kid][b] = 0;
    t_launch[kid] = cyc;
    @(negedge clk);
    launch_valid = 0;
  endtask

  task automatic finish_pair(int a, int b, int na, int nb, string name);
    while (ends[a] == 0 || ends[b] == 0) @(posedge clk);
    check(issued_n[a] == na && issued_n[b] == nb, {name, ": all blocks issued"});
    for (int i = 0; i < na; i++) check(seen[a][i], {name, ": first kernel block"});
    for (int i = 0; i < nb; i++) check(seen[b][i], {name, ": second kernel block"});
    check(ends[a] == 1 && ends[b] == 1, {name, ": one end per kernel"});
    $display("%s: turnaround %0d and %0d cycles", name, t_end[a] - t_launch[a], t_end[b] - t_launch[b]);
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ka, kb, base;
    policy_adaptive = 0; launch_valid = 0; launch_desc = '0;
    for (int k = 0; k < NK; k++) t_of[k] = 100;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // 1. SRTF: RayTracing + JPEG-d
    launch(2048, 128, 48, 15167, ka);      // render: 48 regs/thread -> R = 5
    repeat (100) @(posedge clk);
    launch(512, 64, 16, 5238, kb);         // JPEG-d: R = 8
    finish_pair(ka, kb, 2048, 512, "RayTracing+JPEG-d (SRTF)");
    check(t_end[kb] < t_end[ka], "SRTF: JPEG-d finishes first");
    check(n_copy >= 1, "JPEG-d sampled and handed over");
    // stand-alone: ceil(ceil(512/15)/8) = 5 waves of ~5238 cycles
    base = 5 * 5238 * 105 / 100;
    check(t_end[kb] - t_launch[kb] < base + 3 * 15167 * 105 / 100,
          "JPEG-d turnaround within stand-alone runtime + sampling and hand-off delays");

    // 2. SRTF/Adaptive: AES-d + AES-e
    repeat (50) @(posedge clk);
    policy_adaptive = 1;
    launch(1429, 256, 20, 14529, ka);      // AES-d: R = 6
    repeat (100) @(posedge clk);
    launch(1429, 256, 20, 14031, kb);      // AES-e: R = 6
    finish_pair(ka, kb, 1429, 1429, "AES-d+AES-e (SRTF/Adaptive)");
    check(n_share >= 1, "sharing mode entered");
    check(n_dup == 0, "no block issued twice");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
