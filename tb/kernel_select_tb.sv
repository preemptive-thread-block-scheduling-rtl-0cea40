// kernel_select_tb: checks the per-SM kernel choice against a reference that
// ranks runnable kernels by (remaining time, slot index) and applies the
// three rules: only the sampled kernel on the sampling SM while sampling;
// only the shortest runnable kernel in exclusive mode; in sharing mode the
// fast kernel up to its limit, else the shortest of the others. A kernel is
// chosen only if it fits and is below its residency limit. Directed cases
// and random inputs.
module kernel_select_tb;
  import tbs_pkg::*;

  logic       eligible [8], left [8], fits [8];
  cycles_t    rem [8];
  res_t       res_count [8], res [8];
  logic       sample_here, share_mode, sel_valid;
  logic [2:0] sampling_kid, fast_kid, sel_kid;
  res_t       fast_limit;

  kernel_select dut (.*);

  int checks = 0, failures = 0;

  // shortest eligible kernel, optionally skipping one slot; -1 if none
  function automatic int shortest(int skip);
    int best = -1;
    for (int k = 0; k < 8; k++)
      if (eligible[k] && k != skip &&
          (best < 0 || rem[k] < rem[best] || (rem[k] == rem[best] && k < best)))
        best = k;
    return best;
  endfunction

  function automatic int ref_sel();
    int f, o;
    if (sample_here)
      return (left[sampling_kid] && fits[sampling_kid] && res_count[sampling_kid] < res[sampling_kid])
             ? int'(sampling_kid) : -1;
    if (share_mode) begin
      if (eligible[fast_kid] && fits[fast_kid] && res_count[fast_kid] < fast_limit)
        return int'(fast_kid);
      o = shortest(int'(fast_kid));
      return (o >= 0 && fits[o] && res_count[o] < res[o]) ? o : -1;
    end
    f = shortest(-1);
    return (f >= 0 && fits[f] && res_count[f] < res[f]) ? f : -1;
  endfunction

  task automatic compare(string what);
    int e;
    #1;
    e = ref_sel();
    checks++;
    if ((e < 0 && sel_valid) || (e >= 0 && (!sel_valid || sel_kid != 3'(e)))) begin
      failures++;
      $display("FAIL: %s expected %0d got %0d/%0d", what, e, sel_valid, sel_kid);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 8; k++) begin
      eligible[k] = 0; left[k] = 0; fits[k] = 1; rem[k] = '1; res_count[k] = 0; res[k] = 8;
    end
    sample_here = 0; share_mode = 0; sampling_kid = 0; fast_kid = 0; fast_limit = 3;

    // A (slot 0) long, B (slot 1) short: B is chosen
    eligible[0] = 1; left[0] = 1; rem[0] = 32'd9000; res[0] = 6;
    eligible[1] = 1; left[1] = 1; rem[1] = 32'd1000;
    #1;
    checks++; if (!(sel_valid && sel_kid == 3'd1)) begin failures++; $display("FAIL: SRTF choice"); end
    // B does not fit: nothing (A is not issued instead)
    fits[1] = 0;
    #1;
    checks++; if (sel_valid) begin failures++; $display("FAIL: no fallback in exclusive mode"); end
    // sampling SM: only the sampled kernel, whatever the predictions
    fits[1] = 1; left[2] = 1; sample_here = 1; sampling_kid = 2;
    #1;
    checks++; if (!(sel_valid && sel_kid == 3'd2)) begin failures++; $display("FAIL: sampling SM"); end
    sample_here = 0;
    // sharing: fast kernel 1 at its limit of 3 -> kernel 0 gets the rest
    share_mode = 1; fast_kid = 1; res_count[1] = 3;
    #1;
    checks++; if (!(sel_valid && sel_kid == 3'd0)) begin failures++; $display("FAIL: sharing fallback"); end
    res_count[1] = 2;
    #1;
    checks++; if (!(sel_valid && sel_kid == 3'd1)) begin failures++; $display("FAIL: sharing fast first"); end
    // kernel at its maximum residency takes no more
    share_mode = 0; res_count[1] = 8;
    #1;
    checks++; if (sel_valid) begin failures++; $display("FAIL: residency limit"); end

    for (int it = 0; it < 20000; it++) begin
      for (int k = 0; k < 8; k++) begin
        eligible[k]  = ($urandom_range(0, 2) == 0);
        left[k]      = eligible[k] || ($urandom_range(0, 3) == 0);
        fits[k]      = ($urandom_range(0, 3) != 0);
        rem[k]       = ($urandom_range(0, 5) == 0) ? '1 : cycles_t'($urandom_range(0, 50));
        res[k]       = res_t'($urandom_range(1, 8));
        res_count[k] = res_t'($urandom_range(0, 8));
      end
      sample_here  = ($urandom_range(0, 3) == 0);
      share_mode   = ($urandom_range(0, 2) == 0);
      sampling_kid = 3'($urandom_range(0, 7));
      fast_kid     = 3'($urandom_range(0, 7));
      fast_limit   = res_t'($urandom_range(1, 3));
      compare("random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
