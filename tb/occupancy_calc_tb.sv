// occupancy_calc_tb: checks the maximum residency against a reference that
// takes the minimum of the per-resource quotients (threads, warps,
// registers, shared memory, 8 block contexts), for grids of the benchmark
// table (AES: 256 threads -> 6; NLM2: 64 threads -> 8; RayTracing render:
// 128 threads with 48 registers/thread -> 5) and for random descriptors.
module occupancy_calc_tb;
  import tbs_pkg::*;

  kernel_desc_t desc;
  res_t         res;
  int checks = 0, failures = 0;

  occupancy_calc dut (.desc, .res);

  function automatic int unsigned ref_r(int unsigned tpb, regs, smem);
    int unsigned r = 8, w;
    if (tpb == 0) return 8;
    w = (tpb + 31) / 32;
    if (1536 / tpb < r) r = 1536 / tpb;
    if (48 / w < r) r = 48 / w;
    if (regs != 0 && 32768 / (regs * tpb) < r) r = 32768 / (regs * tpb);
    if (smem != 0 && 49152 / smem < r) r = 49152 / smem;
    return r;
  endfunction

  task automatic try(int unsigned tpb, regs, smem, int expect_r);
    desc = '0;
    desc.tpb = 11'(tpb); desc.regs = 6'(regs); desc.smem = 16'(smem);
    #1;
    checks++;
    if (int'(res) != ((expect_r >= 0) ? expect_r : int'(ref_r(tpb, regs, smem)))) begin
      failures++;
      $display("FAIL tpb=%0d regs=%0d smem=%0d got %0d", tpb, regs, smem, res);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    try(256, 20, 0, 6);      // AES-d / AES-e
    try(64, 16, 0, 8);       // NLM2, JPEG, SHA1
    try(61, 20, 0, 8);       // SAD mb_sad_calc
    try(128, 48, 0, 5);      // RayTracing render
    try(1024, 0, 0, 1);
    try(64, 0, 49152, 1);
    try(64, 0, 12288, 4);
    for (int i = 0; i < 2000; i++)
      try($urandom_range(1, 1024), $urandom_range(0, 63), $urandom_range(0, 49152), -1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
