// Self-checking testbench for the lane multiplier unit (vmfpu).
// Random vmul and vmacc words at every element width are fed in with random
// input gaps and random output back-pressure. Expected words are computed
// element by element and queued at issue; results must leave in order, each
// exactly matching. With no back-pressure the latency from issue to result
// must be two cycles, and back-to-back words must flow at one per cycle.
module tb_vmfpu;
  import ara_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic vi, ri, vo, ro;
  vop_e op;
  vew_e eew;
  logic [63:0] a, b, c, res;
  logic [63:0] model[$];
  int checks = 0, failures = 0;

  vmfpu dut (.clk_i(clk), .rst_ni(rst_n), .valid_i(vi), .ready_o(ri), .op_i(op), .eew_i(eew),
             .a_i(a), .b_i(b), .c_i(c), .valid_o(vo), .ready_i(ro), .result_o(res));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [63:0] ref_word(vop_e o, logic [63:0] x, logic [63:0] y,
                                           logic [63:0] z, vew_e e);
    int w = 8 << e;
    logic [63:0] r = '0, m;
    m = (w == 64) ? '1 : ((64'd1 << w) - 1);
    for (int i = 0; i < 64 / w; i++) begin
      logic [127:0] p;
      p = 128'((x >> (i * w)) & m) * 128'((y >> (i * w)) & m);
      if (o == OP_VMACC) p = p + 128'((z >> (i * w)) & m);
      r |= (64'(p) & m) << (i * w);
    end
    return r;
  endfunction

  task automatic feed(input int n, input bit stall);
    for (int t = 0; t < n; t++) begin
      @(negedge clk);
      ro = stall ? ($urandom_range(0, 2) != 0) : 1'b1;
      if (!vi || ri) begin
        vi = stall ? ($urandom_range(0, 3) != 0) : 1'b1;
        op = $urandom_range(0, 1) ? OP_VMACC : OP_VMUL;
        eew = vew_e'($urandom_range(0, 3));
        a = {$urandom, $urandom}; b = {$urandom, $urandom}; c = {$urandom, $urandom};
      end
      #1;
      // A finished word leaves at the next edge.
      if (vo && ro) begin
        checks++;
        if (model.size() == 0 || res !== model[0]) begin
          failures++;
          if (failures < 10) $display("got %h exp %h", res, model.size() ? model[0] : 64'h0);
        end
        if (model.size()) void'(model.pop_front());
      end
      if (vi && ri) model.push_back(ref_word(op, a, b, c, eew));
    end
  endtask

  initial begin
    vi = 0; ro = 1; op = OP_VMUL; eew = EW8; a = 0; b = 0; c = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    feed(4000, 1);
    @(negedge clk); vi = 0; ro = 0;
    repeat (5) begin
      @(negedge clk);
      ro = 1;
      #1;
      if (vo && ro) begin
        checks++;
        if (model.size() == 0 || res !== model[0]) failures++;
        if (model.size()) void'(model.pop_front());
      end
    end
    checks++;
    if (model.size() != 0) begin failures++; $display("left %0d", model.size()); end
    // Latency and throughput: issue 4 words back to back, results on cycles 2..5.
    @(negedge clk);
    for (int k = 0; k < 4; k++) begin
      vi = 1; op = OP_VMUL; eew = EW64; a = 64'(k + 3); b = 64'd7; c = 0;
      @(negedge clk);
      checks++;
      if (k >= 1 && !(vo && res == 64'((k - 1 + 3) * 7))) begin failures++; $display("lat k=%0d vo=%b res=%0d", k, vo, res); end
    end
    vi = 0;
    @(negedge clk);
    checks++;
    if (!(vo && res == 64'(6 * 7))) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
