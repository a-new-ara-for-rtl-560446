// Dot-product workload on the full vector system (4 lanes, VLEN = 4096).
//
// For vectors of 64, 512 and 4096 bytes with 8-bit and with 64-bit elements,
// two vectors are loaded, multiplied element by element (vmul.vv) and summed
// with vredsum.vs, and the scalar result is stored and compared with a sum
// computed here. The register group grows with the length (LMUL 1, 1 and 8).
// Each case runs twice; the second run, whose registers already carry the
// right element width so that no reshuffle is needed, is timed from the push
// of the multiply until the unit is idle again. The measured cycles are
// printed next to the ideal count of the three-step reduction alone,
// VL_B/(8L) + 1 + log2(L). This design does not chain the multiply into the
// reduction, so the expected count is about the multiply's VL_B/(8L) cycles
// plus the reduction's, plus fixed start-up costs; the test checks that the
// count lies between the ideal and a bound of 3 x ideal + 100 cycles.
// The memory model and the instruction helpers are the same as in the
// end-to-end system test.
module tb_dotp;
  import ara_pkg::*;
  localparam int unsigned NB = 8 * NR_LANES;
  localparam int unsigned MemBytes = 32768;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  int sizes[3] = '{64, 512, 4096};
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // DUT signals
  logic        push_valid = 0, push_ready, commit = 0, flush = 0, is_vector, needs_scalar;
  logic [31:0] push_insn = 0;
  logic [63:0] push_rs1 = 0, push_rs2 = 0;
  logic [4:0]  push_id = 0;
  logic        resp_valid, resp_err;
  logic [63:0] resp_result;
  logic [4:0]  resp_id;
  logic        sst_pending = 0, sld_allow, sst_allow;
  logic        inval_valid, inval_ready = 0;
  logic [63:0] inval_addr;
  logic        vu_idle, reshuffle;
  logic        mem_req_ready = 0;
  logic        mem_req_valid, mem_req_we, mem_resp_valid, mem_resp_ready;
  logic [63:0] mem_req_addr;
  logic [NB*8-1:0] mem_req_wdata, mem_resp_rdata;
  logic [NB-1:0]   mem_req_be;

  ara_system dut (
    .clk_i(clk), .rst_ni(rst_n),
    .push_valid_i(push_valid), .push_ready_o(push_ready), .push_insn_i(push_insn),
    .push_rs1_i(push_rs1), .push_rs2_i(push_rs2), .push_id_i(push_id),
    .commit_i(commit), .flush_i(flush), .is_vector_o(is_vector), .needs_scalar_o(needs_scalar),
    .resp_valid_o(resp_valid), .resp_ready_i(1'b1), .resp_result_o(resp_result),
    .resp_id_o(resp_id), .resp_err_o(resp_err),
    .scalar_store_pending_i(sst_pending), .scalar_load_allow_o(sld_allow), .scalar_store_allow_o(sst_allow),
    .inval_valid_o(inval_valid), .inval_ready_i(inval_ready), .inval_addr_o(inval_addr),
    .vu_idle_o(vu_idle), .reshuffle_o(reshuffle),
    .mem_req_valid_o(mem_req_valid), .mem_req_ready_i(mem_req_ready), .mem_req_we_o(mem_req_we),
    .mem_req_addr_o(mem_req_addr), .mem_req_wdata_o(mem_req_wdata), .mem_req_be_o(mem_req_be),
    .mem_resp_valid_i(mem_resp_valid), .mem_resp_ready_o(mem_resp_ready), .mem_resp_rdata_i(mem_resp_rdata)
  );

  // ---------------- Behavioural memory ----------------
  logic [7:0] mem [MemBytes];
  logic [NB*8-1:0] rq_data [$];
  logic            rq_we [$];
  int unsigned n_wr_beats = 0;
  logic [63:0] wr_lines [$];

  logic            resp_v = 0;
  logic [NB*8-1:0] resp_d = '0;
  assign mem_resp_valid = resp_v;
  assign mem_resp_rdata = resp_d;

  // All handshakes are sampled at the rising edge (pre-edge values) and the
  // memory's outputs are updated with non-blocking assignments.
  always @(posedge clk) begin
    if (resp_v && mem_resp_ready) begin
      void'(rq_data.pop_front());
      void'(rq_we.pop_front());
    end
    if (mem_req_valid && mem_req_ready) begin
      logic [NB*8-1:0] d;
      for (int b = 0; b < NB; b++) begin
        d[8*b +: 8] = mem[(mem_req_addr + b) % MemBytes];
        if (mem_req_we && mem_req_be[b]) mem[(mem_req_addr + b) % MemBytes] = mem_req_wdata[8*b +: 8];
      end
      if (mem_req_we) begin
        n_wr_beats++;
        wr_lines.push_back({mem_req_addr[63:5], 5'b0});
      end
      rq_data.push_back(d);
      rq_we.push_back(mem_req_we);
    end
    resp_v <= (rq_data.size() != 0);
    resp_d <= (rq_data.size() != 0) ? rq_data[0] : '0;
    mem_req_ready <= ($urandom_range(0, 3) != 0);
    inval_ready   <= ($urandom_range(0, 1) != 0);
  end

  // Invalidations received
  logic [63:0] inv_seen [$];
  always @(posedge clk) if (inval_valid && inval_ready) inv_seen.push_back(inval_addr);

  // Mechanism counters
  int n_reshuffle = 0, n_vec_stall = 0, n_sld_block = 0, n_sst_block = 0;
  always @(posedge clk) if (rst_n) begin
    if (reshuffle) n_reshuffle++;
    if (dut.i_acc_dispatcher.req_valid_o == 1'b0 && dut.i_acc_dispatcher.nonspec_q != 0 && !dut.vec_mem_allow) n_vec_stall++;
    if (!sld_allow) n_sld_block++;
    if (!sst_allow) n_sst_block++;
  end

  // ---------------- Instruction encoding ----------------
  function automatic logic [31:0] vsetvli(logic [4:0] rd, logic [4:0] rs1, logic [2:0] sew, logic [2:0] lmul);
    return {1'b0, 3'b000, 1'b0, 1'b0, sew, lmul, rs1, 3'b111, rd, 7'b1010111};
  endfunction
  function automatic logic [31:0] opv(logic [5:0] f6, logic vm, logic [4:0] vs2, logic [4:0] vs1,
                                      logic [2:0] f3, logic [4:0] vd);
    return {f6, vm, vs2, vs1, f3, vd, 7'b1010111};
  endfunction
  function automatic logic [2:0] wfield(int eb);
    return (eb == 1) ? 3'b000 : (eb == 2) ? 3'b101 : (eb == 4) ? 3'b110 : 3'b111;
  endfunction
  function automatic logic [31:0] vle(int eb, logic [4:0] vd);
    return {3'b000, 1'b0, 2'b00, 1'b1, 5'b0, 5'd10, wfield(eb), vd, 7'b0000111};
  endfunction
  function automatic logic [31:0] vse(int eb, logic [4:0] vs3);
    return {3'b000, 1'b0, 2'b00, 1'b1, 5'b0, 5'd10, wfield(eb), vs3, 7'b0100111};
  endfunction
  localparam logic [2:0] IVV = 3'b000, IVX = 3'b100, IVI = 3'b011, MVV = 3'b010, MVX = 3'b110;

  // Push one instruction, commit it and wait for its response.
  int unsigned next_id = 0;
  task automatic issue(input logic [31:0] insn, input logic [63:0] rs1, output logic [63:0] result,
                       output logic err);
    @(negedge clk);
    push_valid = 1; push_insn = insn; push_rs1 = rs1; push_rs2 = 0; push_id = 5'(next_id);
    do @(posedge clk); while (!push_ready);
    @(negedge clk);
    push_valid = 0;
    commit = 1;
    @(negedge clk);
    commit = 0;
    while (!resp_valid) @(negedge clk);
    check(resp_id == 5'(next_id), "response id");
    result = resp_result;
    err    = resp_err;
    next_id++;
    @(negedge clk);
  endtask

  // The response comes when the unit accepts an instruction; a store is
  // complete only once the unit has gone idle.
  task automatic wait_idle();
    int quiet = 0;
    while (quiet < 3) begin
      @(negedge clk);
      quiet = (vu_idle && dut.i_acc_dispatcher.cnt_q == 0) ? quiet + 1 : 0;
    end
  endtask

  task automatic run(input logic [31:0] insn, input logic [63:0] rs1);
    logic [63:0] r; logic e;
    issue(insn, rs1, r, e);
    check(!e, $sformatf("no error for insn %08h", insn));
    if (insn[6:0] == 7'b0100111) wait_idle();
  endtask

  task automatic set_vl(input int avl, input int sew_b, input int lmul, input int exp_vl);
    logic [63:0] r; logic e;
    issue(vsetvli(5'd5, 5'd1, 3'($clog2(sew_b)), 3'($clog2(lmul))), 64'(avl), r, e);
    check(!e && r == 64'(exp_vl), $sformatf("vsetvli avl=%0d sew=%0d gives vl=%0d (got %0d)", avl, sew_b, exp_vl, r));
  endtask

  // Memory helpers
  function automatic logic [63:0] rd(int addr, int eb);
    logic [63:0] v = 0;
    for (int i = 0; i < eb; i++) v[8*i +: 8] = mem[addr + i];
    return v;
  endfunction
  task automatic wr(int addr, int eb, logic [63:0] v);
    for (int i = 0; i < eb; i++) mem[addr + i] = v[8*i +: 8];
  endtask
  function automatic logic [63:0] msk(int eb); return (eb == 8) ? '1 : ((64'd1 << (8*eb)) - 1); endfunction




  localparam int X = 'h0000, Y = 'h2000, R = 'h4000;
  int n_cases = 0;

  initial begin : main
    logic [63:0] r; logic e;
    for (int i = 0; i < MemBytes; i++) mem[i] = 8'($urandom);
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    // v1[0] = 0, the reduction's scalar start value, at both widths.
    for (int i = 0; i < 8; i++) mem[R + 'h100 + i] = 8'h00;
    foreach (sizes[si]) begin
      for (int ei = 0; ei < 2; ei++) begin
        int eb, vlb, vl, lm;
        eb = (ei == 0) ? 1 : 8;
        vlb = sizes[si];
        vl = vlb / eb;
        lm = (vlb > 512) ? vlb / 512 : 1;
        for (int rep = 0; rep < 2; rep++) begin
          longint t0, t1;
          logic [63:0] s;
          set_vl(1, eb, 1, 1);
          run(vle(eb, 1), R + 'h100);
          set_vl(vl, eb, lm, vl);
          run(vle(eb, 8), X);
          run(vle(eb, 16), Y);
          wait_idle();
          t0 = cyc;
          run(opv(6'b100101, 1, 16, 8, MVV, 24), 0);    // vmul.vv v24, v16, v8
          run(opv(6'b000000, 1, 24, 1, MVV, 2), 0);     // vredsum.vs v2, v24, v1
          wait_idle();
          t1 = cyc - 3;
          set_vl(1, eb, 1, 1);
          run(vse(eb, 2), R);
          s = 0;
          for (int i = 0; i < vl; i++) s += rd(X + eb*i, eb) * rd(Y + eb*i, eb);
          check(rd(R, eb) == (s & msk(eb)), $sformatf("dotp %0d B e%0d: got %h exp %h", vlb, 8*eb,
                rd(R, eb), s & msk(eb)));
          if (rep == 1) begin
            int ideal;
            ideal = vlb / (8 * NR_LANES) + 1 + $clog2(NR_LANES);
            $display("dotp %4d B e%0d: %0d cycles (ideal reduction %0d)", vlb, 8*eb, t1 - t0, ideal);
            check(t1 - t0 >= ideal && t1 - t0 <= 3 * ideal + 100,
                  $sformatf("dotp %0d B e%0d cycle count %0d", vlb, 8*eb, t1 - t0));
            n_cases++;
          end
        end
      end
    end
    check(n_cases == 6, "all six cases ran");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
