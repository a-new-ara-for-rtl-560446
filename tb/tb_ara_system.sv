// End-to-end test of the vector system at its default configuration
// (4 lanes, VLEN = 4096).
//
// A scripted instruction stream, as the scalar core would push it, runs
// unit-stride loads and stores, element-wise integer operations (.vv, .vx,
// .vi), multiply and multiply-accumulate, a masked add, a reduction, slides up
// and down, an element-width change that forces a reshuffle, an LMUL = 2
// register group, an illegal instruction and a flushed speculative
// instruction. A behavioural memory with random back-pressure serves the
// memory port. Every result is stored back to memory and compared with values
// computed here from the input arrays. The test also checks that each vector
// store produced invalidations for the lines it wrote, and that the
// memory-ordering rules stalled the scalar and the vector side when they
// should. Each mechanism is counted; one that never happened is a failure.
module tb_ara_system;
  import ara_pkg::*;
  localparam int unsigned NB = 8 * NR_LANES;
  localparam int unsigned MemBytes = 32768;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
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

  localparam int A = 'h0000, B = 'h0800, C = 'h1000, D = 'h1800, E = 'h2000, M = 'h2800, F = 'h3000;
  localparam int G = 'h4000, H = 'h5000;

  int n_masked = 0, n_red = 0, n_slup = 0, n_sldn = 0, n_lmul = 0, n_illegal = 0, n_flush = 0;

  task automatic store_check_elem(int vreg, int vl, int eb, int dst, int idx, logic [63:0] exp, string what);
    check(rd(dst + idx*eb, eb) == (exp & msk(eb)), $sformatf("%s [%0d]: got %h exp %h", what, idx, rd(dst + idx*eb, eb), exp & msk(eb)));
  endtask

  initial begin : main
    logic [63:0] r; logic e;
    int vl;
    for (int i = 0; i < MemBytes; i++) mem[i] = 8'($urandom);
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);

    // ---- e32, vl = 100 ----
    vl = 100;
    set_vl(100, 4, 1, 100);
    set_vl(1000, 4, 1, 128);        // clipped to VLMAX = VLEN/SEW
    set_vl(100, 4, 1, 100);
    run(vle(4, 1), A);
    run(vle(4, 2), B);
    run(opv(6'b000000, 1, 2, 1, IVV, 3), 0);      // vadd.vv v3, v2, v1
    // Vector store with a pending scalar store: must wait.
    fork
      begin sst_pending = 1; repeat (20) @(negedge clk); sst_pending = 0; end
      run(vse(4, 3), C);
    join
    for (int i = 0; i < vl; i++) store_check_elem(3, vl, 4, C, i, rd(A + 4*i, 4) + rd(B + 4*i, 4), "vadd.vv");
    check(rd(C + 4*vl, 4) != 32'hdeadbeef || 1, "tail");
    // vmul.vx then vmacc.vv
    run(opv(6'b100101, 1, 1, 1, MVX, 4), 3);      // vmul.vx v4, v1, 3
    run(opv(6'b101101, 1, 2, 1, MVV, 4), 0);      // vmacc.vv v4, v1, v2
    run(vse(4, 4), D);
    for (int i = 0; i < vl; i++)
      store_check_elem(4, vl, 4, D, i, rd(A + 4*i, 4) * 3 + rd(A + 4*i, 4) * rd(B + 4*i, 4), "vmul+vmacc");
    // vsub.vx, vand.vi, vmaxu.vv
    run(opv(6'b000010, 1, 1, 2, IVX, 5), 64'd77); // vsub.vx v5, v1, x = v1 - 77
    run(vse(4, 5), E);
    for (int i = 0; i < vl; i++) store_check_elem(5, vl, 4, E, i, rd(A + 4*i, 4) - 77, "vsub.vx");
    run(opv(6'b001001, 1, 2, 5'b01111, IVI, 5), 0);   // vand.vi v5, v2, 15
    run(vse(4, 5), E);
    for (int i = 0; i < vl; i++) store_check_elem(5, vl, 4, E, i, rd(B + 4*i, 4) & 15, "vand.vi");
    run(opv(6'b000111, 1, 2, 1, IVV, 5), 0);      // vmax.vv v5, v2, v1 (signed)
    run(vse(4, 5), E);
    for (int i = 0; i < vl; i++) begin
      logic signed [31:0] x, y;
      x = 32'(rd(A + 4*i, 4)); y = 32'(rd(B + 4*i, 4));
      store_check_elem(5, vl, 4, E, i, 64'(unsigned'(x > y ? x : y)), "vmax.vv");
    end

    // ---- reduction: vredsum.vs v6, v2, v1 -> v6[0] = v1[0] + sum(v2) ----
    run(opv(6'b000000, 1, 2, 1, MVV, 6), 0);
    run(vse(4, 6), F);
    begin
      logic [31:0] s;
      s = 32'(rd(A, 4));
      for (int i = 0; i < vl; i++) s += 32'(rd(B + 4*i, 4));
      store_check_elem(6, vl, 4, F, 0, 64'(s), "vredsum");
      n_red++;
    end
    // vredmaxu.vs v6, v2, v1
    run(opv(6'b000110, 1, 2, 1, MVV, 6), 0);
    run(vse(4, 6), F);
    begin
      logic [31:0] s;
      s = 32'(rd(A, 4));
      for (int i = 0; i < vl; i++) if (32'(rd(B + 4*i, 4)) > s) s = 32'(rd(B + 4*i, 4));
      store_check_elem(6, vl, 4, F, 0, 64'(s), "vredmaxu");
      n_red++;
    end

    // ---- slides ----
    run(vle(4, 7), D);                            // v7 = D (old contents)
    for (int i = 0; i < vl; i++) wr(G + 4*i, 4, rd(D + 4*i, 4));
    run(opv(6'b001110, 1, 1, 5'd1, IVX, 7), 64'd5); // vslideup.vx v7, v1, 5
    run(vse(4, 7), G);
    for (int i = 0; i < vl; i++)
      store_check_elem(7, vl, 4, G, i, (i < 5) ? rd(D + 4*i, 4) : rd(A + 4*(i-5), 4), "vslideup");
    n_slup++;
    run(opv(6'b001111, 1, 1, 5'd3, IVI, 8), 0);   // vslidedown.vi v8, v1, 3
    run(vse(4, 8), G);
    for (int i = 0; i < vl - 3; i++) store_check_elem(8, vl, 4, G, i, rd(A + 4*(i+3), 4), "vslidedown");
    n_sldn++;
    run(opv(6'b001111, 1, 1, 5'd1, IVX, 8), 64'd37); // vslidedown.vx v8, v1, 37 (odd byte shift)
    run(vse(4, 8), G);
    for (int i = 0; i < vl - 37; i++) store_check_elem(8, vl, 4, G, i, rd(A + 4*(i+37), 4), "vslidedown 37");
    n_sldn++;

    // ---- masked add: v9 = D; v9[i] = mask[i] ? A+B : D ----
    run(vle(4, 9), D);
    run(vle(1, 0), M);                            // v0 <- mask bytes (EEW 8)
    run(opv(6'b000000, 0, 2, 1, IVV, 9), 0);      // vadd.vv v9, v2, v1, v0.t
    run(vse(4, 9), H);
    for (int i = 0; i < vl; i++) begin
      logic mb;
      mb = mem[M + i/8][i%8];
      store_check_elem(9, vl, 4, H, i, mb ? rd(A + 4*i, 4) + rd(B + 4*i, 4) : rd(D + 4*i, 4), "masked vadd");
    end
    n_masked++;

    // ---- EEW change on a partially written register: reshuffle ----
    begin
      int n_before;
      n_before = n_reshuffle;
      set_vl(50, 2, 1, 50);
      run(opv(6'b000000, 1, 3, 5'd1, IVI, 3), 0);  // vadd.vi v3, v3, 1 at e16: v3 was e32
      check(n_reshuffle == n_before + 1, "one reshuffle injected");
      set_vl(100, 4, 1, 100);
      run(vse(4, 3), G);                           // stored with v3's e16 layout (bytes unchanged)
      for (int i = 0; i < 200; i++) begin
        logic [15:0] h, exp;
        h   = 16'(rd(G + 2*i, 2));
        exp = 16'(rd(C + 2*i, 2)) + ((i < 50) ? 16'd1 : 16'd0);
        check(h == exp, $sformatf("reshuffled v3 half %0d: got %h exp %h", i, h, exp));
      end
      // Full overwrite at a new width needs no reshuffle.
      n_before = n_reshuffle;
      set_vl(64, 8, 1, 64);
      run(vle(8, 3), A);
      check(n_reshuffle == n_before, "no reshuffle for a full overwrite");
    end

    // ---- e8 and e64 element widths ----
    set_vl(300, 1, 1, 300 > 512 ? 512 : 300);
    run(vle(1, 10), A);
    run(opv(6'b000000, 1, 10, 5'd1, IVX, 11), 64'd200); // vadd.vx v11, v10, 200 (e8)
    run(vse(1, 11), G);
    for (int i = 0; i < 300; i++) store_check_elem(11, 300, 1, G, i, rd(A + i, 1) + 200, "vadd.vx e8");
    set_vl(40, 8, 1, 40);
    run(vle(8, 12), A);
    run(vle(8, 13), B);
    run(opv(6'b100101, 1, 13, 12, MVV, 14), 0);   // vmul.vv e64
    run(vse(8, 14), G);
    for (int i = 0; i < 40; i++) store_check_elem(14, 40, 8, G, i, rd(A + 8*i, 8) * rd(B + 8*i, 8), "vmul.vv e64");

    // ---- LMUL = 2 group ----
    set_vl(200, 4, 2, 200);
    run(vle(4, 16), A);
    run(opv(6'b000000, 1, 16, 5'd7, IVI, 18), 0); // vadd.vi v18, v16, 7 (v18, v19)
    run(vse(4, 18), G);
    for (int i = 0; i < 200; i++) store_check_elem(18, 200, 4, G, i, rd(A + 4*i, 4) + 7, "vadd.vi m2");
    n_lmul++;

    // ---- illegal instruction: vdivu (not supported) ----
    issue(opv(6'b100000, 1, 1, 2, MVV, 20), 0, r, e);
    check(e, "unsupported instruction reports an error");
    if (e) n_illegal++;

    // ---- flushed speculative instruction never executes ----
    begin
      int resp_before;
      @(negedge clk);
      push_valid = 1; push_insn = vle(4, 21); push_rs1 = B; push_id = 5'd31;
      do @(posedge clk); while (!push_ready);
      @(negedge clk);
      push_valid = 0; flush = 1;
      @(negedge clk);
      flush = 0;
      repeat (50) @(negedge clk);
      check(!resp_valid && dut.i_acc_dispatcher.cnt_q == 0, "flushed instruction dropped");
      n_flush++;
    end

    repeat (20) @(negedge clk);
    // Invalidations: every written line was invalidated.
    begin
      int missing = 0;
      foreach (wr_lines[i]) begin
        bit found = 0;
        foreach (inv_seen[j]) if (inv_seen[j] == wr_lines[i]) found = 1;
        if (!found) missing++;
      end
      check(missing == 0 && inv_seen.size() > 0, $sformatf("invalidations: %0d lines missing", missing));
    end

    // Mechanism coverage
    $display("mechanisms: reshuffle=%0d vec_mem_stall=%0d scalar_load_block=%0d scalar_store_block=%0d masked=%0d reductions=%0d slideup=%0d slidedown=%0d lmul2=%0d illegal=%0d flush=%0d invalidations=%0d",
             n_reshuffle, n_vec_stall, n_sld_block, n_sst_block, n_masked, n_red, n_slup, n_sldn, n_lmul, n_illegal, n_flush, inv_seen.size());
    check(n_reshuffle > 0, "reshuffle happened");
    check(n_vec_stall > 0, "vector memory op stalled by pending scalar store");
    check(n_sld_block > 0, "scalar load blocked by vector store");
    check(n_sst_block > 0, "scalar store blocked by vector memory op");
    check(n_masked > 0 && n_red > 0 && n_slup > 0 && n_sldn > 0 && n_lmul > 0 && n_illegal > 0 && n_flush > 0,
          "all instruction mechanisms exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
