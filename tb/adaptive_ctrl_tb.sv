// adaptive_ctrl_tb: checks the SRTF/Adaptive fairness test and mode control.
//
// The reference orders the kernels by remaining time, computes each
// kernel's slowdown under serial SRTF execution, (sum of the remaining times
// up to and including it) / its own, in floating point, and calls the
// schedule unfair when max - min slowdown exceeds 0.5. Random sets are
// compared with the combinational verdict; directed cases check entering
// and leaving sharing mode, the choice of the fast kernel, its residency
// limit min(R, 3) and the residency-change events, and that nothing happens
// with the policy disabled.
module adaptive_ctrl_tb;
  import tbs_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic       enable;
  logic       eligible [8], known [8];
  cycles_t    rem [8];
  res_t       res [8];
  logic       share_mode, res_set_valid, unfair;
  logic [2:0] fast_kid, res_set_kid;
  res_t       fast_limit, res_set_val;

  adaptive_ctrl dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s t=%0t", what, $time); end
  endtask

  function automatic bit ref_unfair();
    real smin = 1.0e30, smax = 0.0;
    int n = 0;
    for (int i = 0; i < 8; i++) begin
      if (eligible[i] && known[i]) begin
        real pre = 0.0, s;
        n++;
        for (int j = 0; j < 8; j++)
          if (eligible[j] && known[j] && j != i &&
              (rem[j] < rem[i] || (rem[j] == rem[i] && j < i)))
            pre += real'(rem[j]);
        s = (pre + real'(rem[i])) / real'(rem[i]);
        if (s < smin) smin = s;
        if (s > smax) smax = s;
      end
    end
    return n >= 2 && (smax - smin) > 0.5;
  endfunction

  task automatic clear_all();
    for (int k = 0; k < 8; k++) begin
      eligible[k] = 0; known[k] = 0; rem[k] = 32'd1; res[k] = 4'd8;
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_set;
    logic [7:0] prev_set, cur_set;
    enable = 1;
    clear_all();
    repeat (2) @(negedge clk);
    rst_n = 1;

    // two kernels, T1 = 600 and T2 = 1000: B's slowdown 1.6 -> share
    @(negedge clk);
    eligible[0] = 1; known[0] = 1; rem[0] = 32'd1000; res[0] = 4'd8;
    eligible[1] = 1; known[1] = 1; rem[1] = 32'd600;  res[1] = 4'd6;
    #1 check(unfair == 1, "spread 0.6 is unfair");
    @(posedge clk); #1;
    check(share_mode && fast_kid == 3'd1 && fast_limit == 4'd3, "sharing mode, fast kernel limited to 3");
    check(res_set_valid && res_set_kid == 3'd1 && res_set_val == 4'd3, "residency change event");
    @(posedge clk); #1;
    check(!res_set_valid, "one event only");
    // a prediction update alone does not change the mode
    @(negedge clk);
    rem[1] = 32'd100;
    @(posedge clk); #1;
    check(share_mode, "mode held while the set is unchanged");
    // fast kernel has no blocks left: back to exclusive, R restored
    @(negedge clk);
    eligible[1] = 0;
    @(posedge clk); #1;
    check(!share_mode && res_set_valid && res_set_kid == 3'd1 && res_set_val == 4'd6,
          "leaving sharing mode restores R");

    // T1 = 400, T2 = 1000: spread 0.4 -> stay exclusive
    @(negedge clk);
    clear_all();
    @(posedge clk);
    @(negedge clk);
    eligible[2] = 1; known[2] = 1; rem[2] = 32'd1000;
    eligible[3] = 1; known[3] = 1; rem[3] = 32'd400;
    #1 check(unfair == 0, "spread 0.4 is fair");
    @(posedge clk); #1;
    check(!share_mode, "no sharing for a fair schedule");
    // exactly 0.5 is not above the threshold
    @(negedge clk);
    rem[3] = 32'd500; known[4] = 1;
    #1 check(unfair == 0, "spread 0.5 is not above the threshold");

    // disabled policy never shares
    @(negedge clk);
    clear_all();
    enable = 0;
    @(posedge clk);
    @(negedge clk);
    eligible[0] = 1; known[0] = 1; rem[0] = 32'd1000;
    eligible[1] = 1; known[1] = 1; rem[1] = 32'd900;
    @(posedge clk); #1;
    check(!share_mode, "SRTF mode: no sharing");
    enable = 1;

    // random sets against the floating-point reference
    prev_set = '0;
    for (int k = 0; k < 8; k++) prev_set[k] = eligible[k] && known[k];
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      for (int k = 0; k < 8; k++) begin
        eligible[k] = ($urandom_range(0, 2) == 0);
        known[k]    = ($urandom_range(0, 4) != 0);
        rem[k]      = cycles_t'($urandom_range(1, 100000));
      end
      #1 check(unfair == ref_unfair(), "random fairness verdict");
      @(posedge clk); #1;
      n_set = 0;
      for (int k = 0; k < 8; k++) begin
        cur_set[k] = eligible[k] && known[k];
        if (cur_set[k]) n_set++;
      end
      if (n_set >= 2 && cur_set != prev_set) check(share_mode == ref_unfair(), "random mode");
      prev_set = cur_set;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
