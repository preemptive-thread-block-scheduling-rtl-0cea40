// ss_predictor_tb: directed test of one SM's Simple Slicing predictor.
//
// The testbench drives the clock value, launches, block starts and ends,
// residency and kernel-end events, and keeps its own record of Active cycles,
// Done blocks, Total = ceil(Blocks/15), the sampled t and the Reslice flags.
// After each block end it expects the prediction
// Pred = Active + (Total - Done) * t / Resident one cycle later, with t
// re-sampled only on the first block end of a slice (after a launch, a
// kernel end or a residency change), and a copied prediction to become
// Active + remaining.
module ss_predictor_tb;
  import tbs_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  cycles_t    now;
  logic       launch_valid, kend_valid, bstart_valid, bend_valid, copy_valid, res_set_valid;
  logic [2:0] launch_kid, kend_kid, bend_kid, copy_kid, res_set_kid;
  logic [2:0] bstart_slot, bend_slot;
  blocks_t    launch_blocks;
  res_t       launch_res, res_set_val;
  logic       resident [8];
  cycles_t    copy_rem;
  logic       pred_valid [8];
  cycles_t    pred_cycles [8], remaining [8], active_cycles [8], t_cycles [8];
  blocks_t    done_blocks [8], total_blocks [8];
  res_t       resident_blocks [8];
  logic       reslice [8];
  logic       pred_evt;
  logic [2:0] pred_evt_kid;

  ss_predictor dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s t=%0t", what, $time); end
  endtask

  // reference state
  longint unsigned r_act [8], r_t [8], r_total [8], r_done [8], r_res [8];
  bit              r_reslice [8];
  longint unsigned r_start [8];

  always @(posedge clk) begin
    if (!rst_n) now <= '0;
    else        now <= now + 1;
    if (rst_n) for (int k = 0; k < 8; k++) if (resident[k]) r_act[k]++;
  end

  task automatic idle();
    launch_valid = 0; kend_valid = 0; bstart_valid = 0; bend_valid = 0;
    copy_valid = 0; res_set_valid = 0;
  endtask

  task automatic do_launch(int k, int blocks, int r);
    @(negedge clk);
    launch_valid = 1; launch_kid = 3'(k); launch_blocks = blocks_t'(blocks); launch_res = res_t'(r);
    @(posedge clk); #1;
    r_act[k] = 0; r_done[k] = 0; r_total[k] = (blocks + 14) / 15; r_res[k] = r;
    for (int j = 0; j < 8; j++) r_reslice[j] = 1;
    idle();
  endtask

  task automatic do_start(int slot);
    @(negedge clk);
    bstart_valid = 1; bstart_slot = 3'(slot);
    r_start[slot] = now;
    @(posedge clk); #1;
    idle();
  endtask

  // block end; then check the prediction written one cycle later
  task automatic do_end(int slot, int k);
    longint unsigned expect_pred, left;
    @(negedge clk);
    bend_valid = 1; bend_slot = 3'(slot); bend_kid = 3'(k);
    if (r_reslice[k]) begin
      r_t[k] = now - r_start[slot];
      r_reslice[k] = 0;
    end
    r_done[k]++;
    @(posedge clk); #1;
    idle();
    left = (r_total[k] > r_done[k]) ? r_total[k] - r_done[k] : 0;
    expect_pred = r_act[k] + left * r_t[k] / r_res[k];
    check(done_blocks[k] == blocks_t'(r_done[k]), "Done_Blocks");
    check(t_cycles[k] == cycles_t'(r_t[k]), $sformatf("t k%0d exp %0d got %0d", k, r_t[k], t_cycles[k]));
    @(posedge clk); #1;
    check(pred_evt && pred_evt_kid == 3'(k), "prediction event");
    check(pred_valid[k], "prediction valid");
    check(pred_cycles[k] == cycles_t'(expect_pred),
          $sformatf("Pred k%0d exp %0d got %0d", k, expect_pred, pred_cycles[k]));
    check(active_cycles[k] == cycles_t'(r_act[k]), "Active_Kernel_Cycles");
    check(remaining[k] == cycles_t'((expect_pred > r_act[k]) ? expect_pred - r_act[k] : 0),
          "remaining");
  endtask

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    idle();
    launch_kid = 0; kend_kid = 0; bend_kid = 0; copy_kid = 0; res_set_kid = 0;
    bstart_slot = 0; bend_slot = 0; launch_blocks = 0; launch_res = 0; res_set_val = 0;
    copy_rem = 0;
    for (int k = 0; k < 8; k++) begin resident[k] = 0; r_act[k] = 0; r_reslice[k] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;

    // kernel 0: 150 blocks -> Total 10 per SM, R = 5
    do_launch(0, 150, 5);
    check(total_blocks[0] == 10 && resident_blocks[0] == 5 && reslice[0], "OnLaunch state");
    check(!pred_valid[0] && remaining[0] == '1, "no prediction before first block end");
    resident[0] = 1;
    do_start(0);
    do_start(1);
    repeat (97) @(posedge clk);
    do_end(0, 0);                      // first block of the slice: t sampled
    check(!reslice[0], "Reslice cleared after the sample");
    do_start(0);
    repeat (40) @(posedge clk);
    do_end(1, 0);                      // same slice: t kept
    // kernel 1 launches: new slice for everyone
    do_launch(1, 30, 8);
    check(reslice[0] && reslice[1], "launch starts a slice for all kernels");
    check(total_blocks[1] == 2, "Total_Blocks = ceil(30/15)");
    resident[1] = 1;
    do_start(2);
    repeat (20) @(posedge clk);
    do_end(2, 1);                      // t of kernel 1 sampled
    do_start(2);
    repeat (60) @(posedge clk);
    do_end(0, 0);                      // kernel 0 re-samples t in the new slice
    // copied prediction on kernel 2
    do_launch(2, 300, 6);
    @(negedge clk);
    copy_valid = 1; copy_kid = 2; copy_rem = 32'd5000;
    @(posedge clk); #1;
    idle();
    check(pred_valid[2] && pred_cycles[2] == cycles_t'(r_act[2] + 5000), "copied prediction");
    // residency change: new Resident_Blocks, new slice
    @(negedge clk);
    res_set_valid = 1; res_set_kid = 0; res_set_val = 3;
    @(posedge clk); #1;
    idle();
    r_res[0] = 3; r_reslice[0] = 1;
    check(resident_blocks[0] == 3 && reslice[0], "residency change");
    do_start(3);
    repeat (33) @(posedge clk);
    do_end(3, 0);
    // kernel end of kernel 1: slice boundary for kernel 0
    resident[1] = 0;
    @(negedge clk);
    kend_valid = 1; kend_kid = 1;
    @(posedge clk); #1;
    idle();
    for (int j = 0; j < 8; j++) r_reslice[j] = 1;
    check(!pred_valid[1] && reslice[0], "kernel end");
    do_start(4);
    repeat (71) @(posedge clk);
    do_end(4, 0);
    // more ends than Total: remaining work saturates at zero
    for (int i = 0; i < 12; i++) begin
      do_start(5);
      repeat (5) @(posedge clk);
      do_end(5, 0);
    end
    // active cycles stop while nothing is resident
    resident[0] = 0;
    repeat (10) @(posedge clk);
    #1 check(active_cycles[0] == cycles_t'(r_act[0]), "Active stops when not resident");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
