// Self-checking testbench for the invalidation filter (axi_inval_filter).
// Random read and write requests, mostly in sequential streams so that
// several beats fall into the same cache line, are offered with random
// memory-side and cache-side back-pressure. A reference model computes the
// line address of each accepted write, drops it when it repeats the previous
// write's line, and expects the invalidations in that order. Reads must pass
// whenever memory is ready; a write must wait while the invalidation queue is
// full, which the test forces and counts.
module tb_axi_inval_filter;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic iv, ir, iwe, ov, ordy, invv, invr;
  logic [63:0] ia, inva;
  logic [63:0] model[$];
  logic [63:0] last_line;
  bit last_vld = 0;
  int checks = 0, failures = 0, n_inval = 0, n_full_stall = 0;

  axi_inval_filter dut (.clk_i(clk), .rst_ni(rst_n), .in_valid_i(iv), .in_ready_o(ir),
    .in_we_i(iwe), .in_addr_i(ia), .out_valid_o(ov), .out_ready_i(ordy),
    .inval_valid_o(invv), .inval_ready_i(invr), .inval_addr_o(inva));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] addr;
    {iv, iwe, ordy, invr} = '0; ia = 0;
    addr = 64'h1000;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 8000; t++) begin
      @(negedge clk);
      iv = ($urandom_range(0, 3) != 0);
      iwe = ($urandom_range(0, 4) != 0);
      if ($urandom_range(0, 15) == 0) addr = 64'({$urandom} & 32'hffff_ffe0);
      else addr = addr + 64'(8 << $urandom_range(0, 2));
      ia = addr;
      ordy = ($urandom_range(0, 4) != 0);
      invr = (t % 800 < 400) ? ($urandom_range(0, 9) == 0) : ($urandom_range(0, 1) == 0);
      #1;
      checks += 2;
      if (invv !== (model.size() > 0)) failures++;
      if (model.size() > 0 && inva !== model[0]) begin
        failures++;
        if (failures < 10) $display("inval %h exp %h", inva, model[0]);
      end
      if (iv && !iwe) begin
        checks++;
        if (ir !== ordy || ov !== 1'b1) failures++;
      end
      if (iv && iwe && model.size() == 4) begin
        n_full_stall++;
        checks++;
        if (ir || ov) failures++;
      end
      if (!iv) begin
        checks++;
        if (ov) failures++;
      end
      @(posedge clk);
      if (invv && invr && model.size() > 0) begin void'(model.pop_front()); n_inval++; end
      if (iv && iwe && ir) begin
        logic [63:0] line;
        line = {ia[63:5], 5'b0};
        if (!(last_vld && line == last_line)) model.push_back(line);
        last_line = line;
        last_vld = 1;
      end
    end
    checks++;
    if (n_full_stall == 0 || n_inval < 100) failures++;
    $display("invalidations=%0d full stalls=%0d", n_inval, n_full_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
