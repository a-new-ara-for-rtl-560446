// Self-checking testbench for the accelerator dispatcher (acc_dispatcher).
// A reference queue tracks each pushed instruction with its speculative flag.
// Random pushes (vector arithmetic, vector loads and stores, and scalar
// instructions that must be ignored), commits, flushes, memory permission and
// back-pressure are applied; every cycle the request port must present the
// oldest entry exactly when it is committed (and, for memory accesses,
// allowed), the load/store pulses must match, and the pre-decode outputs must
// match the opcode rules. It also checks that a flush drops only speculative
// entries, and that the memory permission really held a request back.
module tb_acc_dispatcher;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic flush, pv, pr, commit, isv, nsc, vma, dl, ds, rv, rr;
  logic [31:0] pinsn, rinsn;
  logic [63:0] prs1, prs2, rrs1, rrs2;
  logic [4:0] pid, rid;
  int checks = 0, failures = 0, n_mem_hold = 0, n_flushed = 0, n_sent = 0;

  typedef struct { logic [31:0] insn; logic [63:0] rs1; logic [4:0] id; bit spec; } ent_t;
  ent_t model[$];

  acc_dispatcher dut (.clk_i(clk), .rst_ni(rst_n), .flush_i(flush), .push_valid_i(pv),
    .push_ready_o(pr), .push_insn_i(pinsn), .push_rs1_i(prs1), .push_rs2_i(prs2), .push_id_i(pid),
    .commit_i(commit), .is_vector_o(isv), .needs_scalar_o(nsc), .vec_mem_allow_i(vma),
    .disp_load_o(dl), .disp_store_o(ds), .req_valid_o(rv), .req_ready_i(rr), .req_insn_o(rinsn),
    .req_rs1_o(rrs1), .req_rs2_o(rrs2), .req_id_o(rid));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] gen_insn();
    logic [31:0] i;
    i = $urandom;
    case ($urandom_range(0, 3))
      0: i[6:0] = 7'b1010111;
      1: begin i[6:0] = 7'b0000111; i[14:12] = 3'b110; end
      2: begin i[6:0] = 7'b0100111; i[14:12] = 3'b111; end
      default: i[6:0] = 7'b0110011;
    endcase
    return i;
  endfunction

  function automatic bit is_mem(logic [31:0] i);
    return i[6:0] == 7'b0000111 || i[6:0] == 7'b0100111;
  endfunction

  initial begin
    int nspec;
    {flush, pv, commit, vma, rr} = '0;
    pinsn = 0; prs1 = 0; prs2 = 0; pid = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 8000; t++) begin
      bit exp_v;
      @(negedge clk);
      nspec = 0;
      foreach (model[k]) if (model[k].spec) nspec++;
      flush = ($urandom_range(0, 60) == 0);
      pv = ($urandom_range(0, 1) == 0);
      pinsn = gen_insn();
      prs1 = {$urandom, $urandom};
      prs2 = {$urandom, $urandom};
      pid = 5'($urandom);
      commit = !flush && nspec > 0 && ($urandom_range(0, 2) == 0);
      vma = ($urandom_range(0, 3) != 0);
      rr = ($urandom_range(0, 2) != 0);
      #1;
      // Pre-decode
      checks += 2;
      if (isv !== (pinsn[6:0] == 7'b1010111 || is_mem(pinsn))) failures++;
      if (nsc !== (is_mem(pinsn) || (pinsn[6:0] == 7'b1010111 && pinsn[14]))) failures++;
      checks++;
      if (pr !== (model.size() < 4 && !flush)) failures++;
      // Request port
      exp_v = model.size() > 0 && !model[0].spec && (!is_mem(model[0].insn) || vma);
      checks++;
      if (rv !== exp_v) begin
        failures++;
        if (failures < 10) $display("t=%0d rv=%b exp=%b", t, rv, exp_v);
      end
      if (model.size() > 0 && !model[0].spec && is_mem(model[0].insn) && !vma) n_mem_hold++;
      if (exp_v) begin
        checks += 4;
        if (rinsn !== model[0].insn || rrs1 !== model[0].rs1 || rid !== model[0].id) failures++;
        if (dl !== (rr && model[0].insn[6:0] == 7'b0000111)) failures++;
        if (ds !== (rr && model[0].insn[6:0] == 7'b0100111)) failures++;
      end else begin
        checks++;
        if (dl || ds) failures++;
      end
      @(posedge clk);
      if (exp_v && rr) begin void'(model.pop_front()); n_sent++; end
      if (flush) begin
        while (model.size() > 0 && model[model.size() - 1].spec) begin
          void'(model.pop_back());
          n_flushed++;
        end
      end else begin
        if (commit) begin
          foreach (model[k]) if (model[k].spec) begin model[k].spec = 0; break; end
        end
        if (pv && pr && isv) model.push_back('{pinsn, prs1, pid, 1'b1});
      end
    end
    checks++;
    if (n_mem_hold == 0 || n_flushed == 0 || n_sent < 100) failures++;
    $display("sent=%0d flushed=%0d mem_hold_cycles=%0d", n_sent, n_flushed, n_mem_hold);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
