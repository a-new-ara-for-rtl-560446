// Self-checking testbench for the memory-ordering issue stall (mem_ordering).
// Random dispatches and completions of vector loads and stores are applied
// while a reference model keeps its own in-flight counts; every cycle the
// three allow signals are compared with the rules: a scalar load waits for
// vector stores, a scalar store waits for all vector memory operations, and
// a vector memory operation waits while a scalar store is pending.
module tb_mem_ordering;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic dl, ds, ld, sd, ssp, sla, ssa, vma;
  logic [3:0] vli, vsi;
  int nl = 0, ns = 0;
  int checks = 0, failures = 0;
  int seen_sla_block = 0, seen_ssa_block = 0, seen_vma_block = 0;

  mem_ordering dut (.clk_i(clk), .rst_ni(rst_n), .disp_load_i(dl), .disp_store_i(ds),
                    .vld_done_i(ld), .vst_done_i(sd), .scalar_store_pending_i(ssp),
                    .scalar_load_allow_o(sla), .scalar_store_allow_o(ssa),
                    .vec_mem_allow_o(vma), .vld_inflight_o(vli), .vst_inflight_o(vsi));

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    {dl, ds, ld, sd, ssp} = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      ssp = ($urandom_range(0, 3) == 0);
      dl = (nl < 12) && ($urandom_range(0, 2) == 0);
      ds = (ns < 12) && ($urandom_range(0, 2) == 0);
      ld = (nl > 0) && ($urandom_range(0, 2) == 0);
      sd = (ns > 0) && ($urandom_range(0, 2) == 0);
      #1;
      checks += 3;
      if (sla !== (ns == 0)) failures++;
      if (ssa !== (nl == 0 && ns == 0)) failures++;
      if (vma !== !ssp) failures++;
      if (!sla) seen_sla_block++;
      if (!ssa) seen_ssa_block++;
      if (!vma) seen_vma_block++;
      @(posedge clk);
      nl = nl + dl - ld;
      ns = ns + ds - sd;
      #1;
      checks++;
      if (vli !== 4'(nl) || vsi !== 4'(ns)) failures++;
    end
    checks++;
    if (seen_sla_block == 0 || seen_ssa_block == 0 || seen_vma_block == 0) failures++;
    $display("blocked: scalar load %0d, scalar store %0d, vector mem %0d",
             seen_sla_block, seen_ssa_block, seen_vma_block);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
