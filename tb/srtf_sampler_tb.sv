// srtf_sampler_tb: directed test of the kernel table and sampling control.
//
// Checks: the first kernel on an idle GPU becomes READY without sampling; a
// kernel that arrives while another has blocks left is sampled; kernels are
// sampled one at a time in arrival order; a sample prediction makes the
// kernel READY and is handed over (copy pulse with the predicted remaining
// time); sampling ends without a prediction once the running kernels have
// no blocks left to issue; issued and completed block counts; one kernel-end
// pulse per kernel when all its blocks are done; slot reuse and a full table.
module srtf_sampler_tb;
  import tbs_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic         launch_valid, launch_ready;
  kernel_desc_t launch_desc;
  res_t         launch_res;
  logic [2:0]   launch_kid;
  logic         disp_valid;
  logic [2:0]   disp_kid;
  logic [3:0]   done_inc [8];
  logic         sample_pred_valid;
  logic [2:0]   sample_pred_kid;
  cycles_t      sample_pred_rem;
  kstate_e      kstate [8];
  kernel_desc_t desc [8];
  res_t         res [8];
  blocks_t      issued [8], total_done [8];
  logic         left [8], eligible [8];
  logic         sampling, copy_valid, kend_valid;
  logic [2:0]   sampling_kid, copy_kid, kend_kid;
  cycles_t      copy_rem;

  srtf_sampler dut (.*);

  int checks = 0, failures = 0;
  int n_kend [8];
  int n_copy = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s t=%0t", what, $time); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (kend_valid) n_kend[kend_kid]++;
    if (copy_valid) n_copy++;
  end

  task automatic launch(int blocks, int r, output int kid);
    @(negedge clk);
    check(launch_ready, "launch accepted");
    launch_valid = 1; launch_desc = '0; launch_desc.blocks = blocks_t'(blocks);
    launch_desc.tpb = 64; launch_res = res_t'(r);
    kid = launch_kid;
    @(negedge clk);
    launch_valid = 0;
  endtask

  task automatic issue(int k, int n);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      disp_valid = 1; disp_kid = 3'(k);
      @(posedge clk); #1 disp_valid = 0;
    end
  endtask

  task automatic complete(int k, int n);
    while (n > 0) begin
      int c;
      c = (n > 3) ? 3 : n;
      @(negedge clk);
      done_inc[k] = 4'(c);
      @(posedge clk); #1 done_inc[k] = 0;
      n -= c;
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a, b, c, d;
    launch_valid = 0; launch_desc = '0; launch_res = 0; disp_valid = 0; disp_kid = 0;
    sample_pred_valid = 0; sample_pred_kid = 0; sample_pred_rem = 0;
    for (int k = 0; k < 8; k++) begin done_inc[k] = 0; n_kend[k] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;

    launch(30, 6, a);
    check(a == 0, "first slot is 0");
    @(negedge clk);
    check(kstate[a] == K_READY && !sampling, "idle GPU: first kernel READY without sampling");
    check(res[a] == 6 && desc[a].blocks == 30, "descriptor stored");
    issue(a, 10);
    check(issued[a] == 10 && left[a] && eligible[a], "issued count");

    launch(20, 8, b);
    launch(5, 8, c);
    @(negedge clk);
    check(sampling && sampling_kid == 3'(b) && kstate[b] == K_SAMPLING, "second kernel sampled");
    check(kstate[c] == K_WAIT, "third kernel waits its turn");
    check(!eligible[b], "kernel under sampling is not eligible everywhere");
    repeat (5) @(negedge clk);
    check(sampling_kid == 3'(b), "still sampling the same kernel");
    // sample prediction from the sampling SM
    sample_pred_valid = 1; sample_pred_kid = 3'(b); sample_pred_rem = 32'd777;
    @(posedge clk); #1 sample_pred_valid = 0;
    check(kstate[b] == K_READY && copy_valid && copy_kid == 3'(b) && copy_rem == 32'd777,
          "sample prediction hands over");
    @(posedge clk);
    @(negedge clk);
    check(sampling && sampling_kid == 3'(c), "next kernel sampled in FIFO order");
    // a prediction for another kernel does not end this sample
    sample_pred_valid = 1; sample_pred_kid = 3'(a); sample_pred_rem = 32'd5;
    @(posedge clk); #1 sample_pred_valid = 0;
    check(sampling && !copy_valid, "prediction of another kernel ignored");
    // running kernels issue all their blocks: sampling ends without a copy
    issue(a, 20);
    issue(b, 20);
    @(negedge clk);
    @(negedge clk);
    check(!sampling && kstate[c] == K_READY, "sampling ends when nothing else can run");
    check(n_copy == 1, "exactly one hand-over");
    check(!left[a] && !left[b], "all blocks issued");
    // completions
    complete(a, 29);
    @(negedge clk);
    check(n_kend[a] == 0 && kstate[a] == K_READY, "no end before the last block");
    check(total_done[a] == 29, "Total_Blocks_Done");
    complete(a, 1);
    repeat (3) @(negedge clk);
    check(n_kend[a] == 1 && kstate[a] == K_FREE, "kernel end after the last block");
    complete(b, 20);
    issue(c, 5);
    complete(c, 5);
    repeat (3) @(negedge clk);
    check(n_kend[b] == 1 && n_kend[c] == 1 && n_kend[a] == 1, "one end per kernel");
    // slot reuse and a full table
    for (int i = 0; i < 8; i++) begin
      launch(4, 8, d);
      check(d == i, "lowest free slot");
    end
    @(negedge clk);
    check(!launch_ready, "table full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
