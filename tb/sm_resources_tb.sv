// sm_resources_tb: random allocate/free traffic on one SM's resource table,
// checked against a reference that keeps the per-slot owners and recomputes
// usage, fit and per-kernel resident counts from scratch every cycle.
module sm_resources_tb;
  import tbs_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  kernel_desc_t desc [8];
  logic       alloc_valid, free_valid;
  logic [2:0] alloc_kid, free_slot, alloc_slot;
  logic       fits [8];
  res_t       res_count [8];
  logic [2:0] slot_kid [8];
  logic       slot_busy [8];

  sm_resources dut (.*);

  int checks = 0, failures = 0;
  bit          m_busy [8];
  int unsigned m_kid  [8];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s t=%0t", what, $time); end
  endtask

  function automatic bit ref_fits(int k);
    int unsigned thr = 0, wr = 0, rg = 0, sm = 0, nb = 0;
    for (int s = 0; s < 8; s++) if (m_busy[s]) begin
      thr += desc[m_kid[s]].tpb;
      wr  += (desc[m_kid[s]].tpb + 31) / 32;
      rg  += desc[m_kid[s]].regs * desc[m_kid[s]].tpb;
      sm  += desc[m_kid[s]].smem;
      nb++;
    end
    return nb < 8 && thr + desc[k].tpb <= 1536 && wr + (desc[k].tpb + 31) / 32 <= 48 &&
           rg + desc[k].regs * desc[k].tpb <= 32768 && sm + desc[k].smem <= 49152;
  endfunction

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // four kinds of kernels of the benchmark table
    for (int k = 0; k < 8; k++) desc[k] = '0;
    desc[0].tpb = 256; desc[0].regs = 20;                 // R = 6
    desc[1].tpb = 64;  desc[1].regs = 16;                 // R = 8
    desc[2].tpb = 128; desc[2].regs = 48;                 // R = 5 (registers)
    desc[3].tpb = 64;  desc[3].smem = 16384;              // R = 3 (shared memory)
    desc[4].tpb = 512; desc[4].regs = 8;                  // R = 3 (threads)
    alloc_valid = 0; free_valid = 0; alloc_kid = 0; free_slot = 0;
    for (int s = 0; s < 8; s++) m_busy[s] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      int unsigned cnt [8];
      int k, fs;
      @(negedge clk);
      // compare outputs with the reference
      for (int kk = 0; kk < 8; kk++) cnt[kk] = 0;
      for (int s = 0; s < 8; s++) begin
        check(slot_busy[s] == m_busy[s], "slot busy");
        if (m_busy[s]) begin
          check(slot_kid[s] == 3'(m_kid[s]), "slot owner");
          cnt[m_kid[s]]++;
        end
      end
      for (int kk = 0; kk < 8; kk++) begin
        check(res_count[kk] == res_t'(cnt[kk]), "resident count");
        check(fits[kk] == ref_fits(kk), "fits");
      end
      begin
        int first_free;
        first_free = -1;
        for (int s = 7; s >= 0; s--) if (!m_busy[s]) first_free = s;
        if (first_free >= 0) check(alloc_slot == 3'(first_free), $sformatf("lowest free slot %0d got %0d", first_free, alloc_slot));
      end
      // next request
      k  = $urandom_range(0, 4);
      fs = $urandom_range(0, 7);
      alloc_valid = fits[k] && ($urandom_range(0, 2) != 0);
      alloc_kid   = 3'(k);
      free_valid  = m_busy[fs] && ($urandom_range(0, 1) != 0);
      free_slot   = 3'(fs);
      begin
        int a;
        a = -1;
        for (int s = 7; s >= 0; s--) if (!m_busy[s]) a = s;
        @(posedge clk);
        #1;
        if (free_valid) m_busy[fs] = 0;
        if (alloc_valid) begin
          m_busy[a] = 1;
          m_kid[a]  = k;
        end
      end
      alloc_valid = 0; free_valid = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
