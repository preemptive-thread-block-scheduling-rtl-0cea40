// tbs_stress_tb: random multi-kernel traffic on the default-size scheduler.
//
// Up to 60 kernels with random grid sizes, block shapes (threads, registers
// and shared memory chosen so that at least one block fits an SM) and block
// durations arrive at random times, so that up to 8 kernels are live at
// once, several wait to be sampled and the policy switches between SRTF and
// SRTF/Adaptive. Checks: every block of every grid is issued exactly once,
// no SM ever holds more blocks of a kernel than its maximum residency R
// (computed here from the per-resource quotients) or more resources than it
// has, every kernel ends exactly once and only after all of its blocks have
// finished, and the queue keeps moving (watchdog). Counts sampling,
// hand-overs, sharing-mode entries and switch-backs (an SM returning to a
// kernel it had left for another, both still live, outside sharing mode),
// each of which must occur.
module tbs_stress_tb;
  import tbs_pkg::*;

  localparam int unsigned NSM = tbs_pkg::N_SM;
  localparam int unsigned NK  = tbs_pkg::MAX_KERNELS;
  localparam int unsigned NSL = tbs_pkg::MAX_SLOTS;
  localparam int unsigned NKERN = 60;

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
  for (genvar s = 0; s < NSM; s++) begin : g_sm
    sm_model #(.NSLOT(NSL)) u_sm (
      .clk, .rst_n,
      .start_valid (disp_valid && disp_sm == 4'(s)),
      .start_slot  (disp_slot),
      .start_dur   (t_of[disp_kid]),
      .done_valid  (done_valid[s]),
      .done_slot   (done_slot[s])
    );
  end

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (t=%0t)", what, $time); end
  endtask

  kernel_desc_t d_of [NK];
  int unsigned  r_of [NK], issued_n [NK], finished_n [NK], ends [NK];
  bit           live [NK];
  bit           seen [NK][1024];
  int unsigned  on_sm [NSM][NK];
  logic [2:0]   owner [NSM][NSL];
  int unsigned  n_sample = 0, n_copy = 0, n_share = 0, n_ended = 0, n_bad = 0;
  logic         samp_q = 0, share_q = 0;
  // switch-back: an SM goes from kernel X to Y and later back to X while
  // neither has ended (predictions changed their order)
  int           prev1 [NSM], prev2 [NSM];
  int unsigned  n_back = 0;

  function automatic int unsigned ref_r(kernel_desc_t d);
    int unsigned r = 8, w;
    w = (d.tpb + 31) / 32;
    if (1536 / d.tpb < r) r = 1536 / d.tpb;
    if (48 / w < r) r = 48 / w;
    if (d.regs != 0 && 32768 / (d.regs * d.tpb) < r) r = 32768 / (d.regs * d.tpb);
    if (d.smem != 0 && 49152 / d.smem < r) r = 49152 / d.smem;
    return r;
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (disp_valid) begin
      if (!live[disp_kid] || seen[disp_kid][disp_block] || disp_block >= d_of[disp_kid].blocks) begin n_bad++; $display("bad issue k%0d b%0d live%0d", disp_kid, disp_block, live[disp_kid]); end
      seen[disp_kid][disp_block] = 1;
      issued_n[disp_kid]++;
      on_sm[disp_sm][disp_kid]++;
      owner[disp_sm][disp_slot] = disp_kid;
      if (prev1[disp_sm] != int'(disp_kid)) begin
        if (prev2[disp_sm] == int'(disp_kid) && prev1[disp_sm] >= 0 && live[prev1[disp_sm]] &&
            !(sampling && disp_sm == 0) && !share_mode)
          n_back++;
        prev2[disp_sm] = prev1[disp_sm];
        prev1[disp_sm] = disp_kid;
      end
      if (on_sm[disp_sm][disp_kid] > r_of[disp_kid]) begin n_bad++; $display("over R k%0d sm%0d %0d>%0d", disp_kid, disp_sm, on_sm[disp_sm][disp_kid], r_of[disp_kid]); end
      begin
        int unsigned thr, rg, sm;
        thr = 0; rg = 0; sm = 0;
        for (int k = 0; k < NK; k++) begin
          thr += on_sm[disp_sm][k] * d_of[k].tpb;
          rg  += on_sm[disp_sm][k] * d_of[k].tpb * d_of[k].regs;
          sm  += on_sm[disp_sm][k] * d_of[k].smem;
        end
        if (thr > 1536 || rg > 32768 || sm > 49152) begin n_bad++; $display("over res %0d %0d %0d sm%0d k%0d b%0d t=%0t", thr, rg, sm, disp_sm, disp_kid, disp_block, $time); end
      end
    end
    for (int s = 0; s < NSM; s++)
      if (done_valid[s]) begin
        on_sm[s][owner[s][done_slot[s]]]--;
        finished_n[owner[s][done_slot[s]]]++;
      end
    if (kend_valid) begin
      for (int s = 0; s < NSM; s++) begin
        if (prev1[s] == int'(kend_kid)) prev1[s] = -1;
        if (prev2[s] == int'(kend_kid)) prev2[s] = -1;
      end
      if (!live[kend_kid] || finished_n[kend_kid] != d_of[kend_kid].blocks) begin n_bad++; $display("bad end k%0d fin %0d of %0d", kend_kid, finished_n[kend_kid], d_of[kend_kid].blocks); end
      ends[kend_kid]++;
      live[kend_kid] = 0;
      n_ended++;
    end
    if (sampling && !samp_q) n_sample++;
    if (sample_copy) n_copy++;
    if (share_mode && !share_q) n_share++;
    samp_q  = sampling;
    share_q = share_mode;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog, %0d of %0d kernels ended", n_ended, NKERN);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // policy toggles now and then
  initial begin
    policy_adaptive = 0;
    forever begin
      repeat ($urandom_range(2000, 20000)) @(posedge clk);
      policy_adaptive = ~policy_adaptive;
    end
  end

  initial begin
    launch_valid = 0; launch_desc = '0;
    for (int k = 0; k < NK; k++) begin
      live[k] = 0; t_of[k] = 10; d_of[k] = '0; r_of[k] = 8;
      for (int s = 0; s < NSM; s++) on_sm[s][k] = 0;
    end
    for (int s = 0; s < NSM; s++) begin prev1[s] = -1; prev2[s] = -1; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < NKERN; n++) begin
      kernel_desc_t d;
      int kid;
      d = '0;
      d.blocks = blocks_t'($urandom_range(1, 1000));
      d.tpb    = 11'($urandom_range(1, 32) * 32 - $urandom_range(0, 3));
      d.regs   = 6'($urandom_range(0, 32768 / d.tpb > 63 ? 63 : 32768 / d.tpb));
      d.smem   = ($urandom_range(0, 2) == 0) ? 16'($urandom_range(0, 49152)) : 16'd0;
      repeat ($urandom_range(0, 3000)) @(negedge clk);
      while (!launch_ready) @(negedge clk);
      launch_valid = 1;
      launch_desc  = d;
      kid = launch_kid;
      d_of[kid] = d; r_of[kid] = ref_r(d); t_of[kid] = $urandom_range(20, 600);
      issued_n[kid] = 0; finished_n[kid] = 0; ends[kid] = 0; live[kid] = 1;
      for (int b = 0; b < 1024; b++) seen[kid][b] = 0;
      @(negedge clk);
      launch_valid = 0;
    end
    while (n_ended < NKERN) @(posedge clk);
    repeat (5) @(posedge clk);
    check(n_bad == 0, "protocol, residency and resource rules");
    check(n_ended == NKERN, "every kernel ended");
    for (int k = 0; k < NK; k++) check(!live[k], "no kernel left live");
    $display("mechanisms: sample=%0d copy=%0d share=%0d switch-back=%0d", n_sample, n_copy, n_share, n_back);
    check(n_sample > 0 && n_copy > 0 && n_share > 0, "sampling, hand-over and sharing all occurred");
    check(n_back > 0, "an SM switched back to a kernel it had left");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
