// Dispatcher: decodes RVV 1.0 instructions and holds the vector CSRs.
//
// Instructions arrive from the scalar core's accelerator port together with
// the scalar operands rs1/rs2 and a transaction id. vsetvli/vsetvl compute
// and set vl and vtype and return the new vl. Vector arithmetic, slide and
// unit-stride memory instructions are turned into an operation for the main
// sequencer; every accepted instruction gets one response (result, id, err),
// err being set for instructions this unit does not support.
//
// Element-width tracking and reshuffle: because the lanes store element i of
// a register in lane i mod NrLanes, the byte layout of a register depends on
// the element width it was written with. The dispatcher keeps that width for
// each of the 32 registers. When an instruction writes a register with a new
// width and does not overwrite all of it, a reshuffle (a slide by 0 with the
// old width as source and the new width as destination, over the whole
// register) is injected ahead of it, one per register concerned, as the paper
// describes. The width is also passed on for the mask register (v0) and for
// the source of slides and stores, so that those units deshuffle correctly.
//
// Supported (this design's subset): vsetvli, vsetvl; vadd, vsub, vand, vor,
// vxor, vminu, vmin, vmaxu, vmax (.vv/.vx/.vi where defined), vmv.v.v/x/i,
// vmul, vmacc (.vv/.vx), vred{sum,and,or,xor,minu,min,maxu,max}.vs (unmasked),
// vslideup/vslidedown (.vx/.vi), unit-stride vle/vse{8,16,32,64} (unmasked),
// LMUL 1, 2, 4, 8.
module ara_dispatcher import ara_pkg::*; #(
  parameter int unsigned NrLanes = ara_pkg::NR_LANES,
  parameter int unsigned VLEN    = ara_pkg::VLEN
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  // Accelerator request (non-speculative)
  input  logic         acc_req_valid_i,
  output logic         acc_req_ready_o,
  input  logic [31:0]  acc_req_insn_i,
  input  logic [63:0]  acc_req_rs1_i,
  input  logic [63:0]  acc_req_rs2_i,
  input  logic [4:0]   acc_req_id_i,
  // Accelerator response
  output logic         acc_resp_valid_o,
  input  logic         acc_resp_ready_i,
  output logic [63:0]  acc_resp_result_o,
  output logic [4:0]   acc_resp_id_o,
  output logic         acc_resp_err_o,
  // Operation to the main sequencer
  output logic         pe_valid_o,
  input  logic         pe_ready_i,
  output pe_req_t      pe_req_o,
  output logic         reshuffle_o,      // the operation sent is an injected reshuffle
  output logic [VL_W-1:0] vl_o,
  output logic [7:0]   vtype_o
);
  localparam int unsigned VLENB = VLEN / 8;

  // CSRs
  logic [VL_W-1:0] vl_q;
  logic [2:0]      vlmul_q;
  logic [2:0]      vsew_q;
  logic            vta_q, vma_q, vill_q;
  vew_e            eew_q [NR_VREGS];

  assign vl_o    = vl_q;
  assign vtype_o = {vma_q, vta_q, vsew_q, vlmul_q} | (vill_q ? 8'h80 : 8'h00);

  // ---------------- Decode ----------------
  logic [31:0] insn;
  logic [6:0]  opcode;
  logic [2:0]  funct3;
  logic [5:0]  funct6;
  logic        vm;
  logic [4:0]  vs2, vs1, vd;
  assign insn   = acc_req_insn_i;
  assign opcode = insn[6:0];
  assign funct3 = insn[14:12];
  assign funct6 = insn[31:26];
  assign vm     = insn[25];
  assign vs2    = insn[24:20];
  assign vs1    = insn[19:15];
  assign vd     = insn[11:7];

  typedef enum logic [1:0] { D_ILLEGAL, D_VSET, D_OP } dkind_e;
  dkind_e    dkind;
  pe_req_t   dec;
  logic      writes_vd;
  logic [VL_W-1:0] vset_vl;
  logic [10:0]     vset_vtype;
  logic            vset_ill;

  function automatic logic [VL_W+1:0] vlmax_of(logic [2:0] sew, logic [2:0] lmul);
    return (VL_W+2)'(VLEN >> (3 + sew)) << lmul;
  endfunction

  always_comb begin
    dkind      = D_ILLEGAL;
    dec        = '0;
    dec.vs1    = vs1;
    dec.vs2    = vs2;
    dec.vd     = vd;
    dec.vm     = vm;
    dec.vl     = vl_q;
    dec.lmul   = 4'd1 << vlmul_q;
    dec.eew    = vew_e'(vsew_q[1:0]);
    dec.scalar = acc_req_rs1_i;
    writes_vd  = 1'b1;
    vset_vtype = '0;
    vset_vl    = vl_q;
    vset_ill   = 1'b0;

    if (opcode == 7'b1010111) begin
      if (funct3 == 3'b111) begin
        // vsetvli / vsetvl
        if (!insn[31]) begin
          dkind = D_VSET;
          vset_vtype = insn[30:20];
        end else if (insn[31:25] == 7'b1000000) begin
          dkind = D_VSET;
          vset_vtype = acc_req_rs2_i[10:0];
        end
        vset_ill = vset_vtype[2] || vset_vtype[5] || (vset_vtype[10:8] != '0);
        if (vs1 != 5'd0) begin
          vset_vl = (64'(acc_req_rs1_i) > 64'(vlmax_of(vset_vtype[5:3], vset_vtype[2:0])))
                    ? VL_W'(vlmax_of(vset_vtype[5:3], vset_vtype[2:0])) : VL_W'(acc_req_rs1_i);
        end else if (vd != 5'd0) begin
          vset_vl = VL_W'(vlmax_of(vset_vtype[5:3], vset_vtype[2:0]));
        end
        if (vset_ill) vset_vl = '0;
      end else if (!vill_q) begin
        dkind = D_OP;
        unique case (funct3)
          3'b000, 3'b100, 3'b011: begin   // OPIVV, OPIVX, OPIVI
            dec.use_scalar = (funct3 != 3'b000);
            if (funct3 == 3'b011) dec.scalar = {{59{vs1[4]}}, vs1};
            unique case (funct6)
              6'b000000: dec.op = OP_VADD;
              6'b000010: begin dec.op = OP_VSUB;  if (funct3 == 3'b011) dkind = D_ILLEGAL; end
              6'b000100: begin dec.op = OP_VMINU; if (funct3 == 3'b011) dkind = D_ILLEGAL; end
              6'b000101: begin dec.op = OP_VMIN;  if (funct3 == 3'b011) dkind = D_ILLEGAL; end
              6'b000110: begin dec.op = OP_VMAXU; if (funct3 == 3'b011) dkind = D_ILLEGAL; end
              6'b000111: begin dec.op = OP_VMAX;  if (funct3 == 3'b011) dkind = D_ILLEGAL; end
              6'b001001: dec.op = OP_VAND;
              6'b001010: dec.op = OP_VOR;
              6'b001011: dec.op = OP_VXOR;
              6'b001110, 6'b001111: begin
                dec.op = funct6[0] ? OP_VSLIDEDOWN : OP_VSLIDEUP;
                if (funct3 == 3'b000 || !vm) dkind = D_ILLEGAL;
                if (funct3 == 3'b011) dec.scalar = 64'(vs1);   // unsigned offset
                dec.use_scalar = 1'b0;
              end
              6'b010111: begin
                dec.op = OP_VMERGE;
                if (!vm || vs2 != 5'd0) dkind = D_ILLEGAL;
              end
              default: dkind = D_ILLEGAL;
            endcase
          end
          3'b010, 3'b110: begin   // OPMVV, OPMVX
            dec.use_scalar = (funct3 == 3'b110);
            unique case (funct6)
              6'b100101: dec.op = OP_VMUL;
              6'b101101: dec.op = OP_VMACC;
              6'b000000, 6'b000001, 6'b000010, 6'b000011,
              6'b000100, 6'b000101, 6'b000110, 6'b000111: begin
                dec.op = vop_e'(int'(OP_VREDSUM) + int'(funct6[2:0]));
                if (funct3 != 3'b010 || !vm) dkind = D_ILLEGAL;
              end
              default: dkind = D_ILLEGAL;
            endcase
          end
          default: dkind = D_ILLEGAL;
        endcase
      end
    end else if ((opcode == 7'b0000111 || opcode == 7'b0100111) && !vill_q) begin
      // Unit-stride vector load/store: nf = 0, mew = 0, mop = 00, lumop/sumop = 0.
      dkind = D_OP;
      dec.op = (opcode == 7'b0000111) ? OP_VLE : OP_VSE;
      writes_vd = (opcode == 7'b0000111);
      unique case (funct3)
        3'b000: dec.eew = EW8;
        3'b101: dec.eew = EW16;
        3'b110: dec.eew = EW32;
        3'b111: dec.eew = EW64;
        default: dkind = D_ILLEGAL;
      endcase
      if (insn[31:26] != '0 || vs2 != '0 || !vm) dkind = D_ILLEGAL;
    end
    if (dkind == D_OP && dec.op == OP_VSE) writes_vd = 1'b0;
    dec.eew_vs2   = (dec.op == OP_VSE) ? eew_q[vd] : eew_q[vs2];
    dec.eew_vmask = eew_q[0];
  end

  // Registers of the destination group and those that need a reshuffle.
  logic [VL_W+3:0]      wr_bytes;
  logic [NR_VREGS-1:0]  need_rsh;
  logic [4:0]           rsh_reg;
  logic                 rsh_any;
  logic [3:0]           nregs;
  always_comb begin
    wr_bytes = (VL_W+4)'(dec.vl) << dec.eew;
    nregs    = (dec.op inside {OP_VLE}) ? 4'((wr_bytes + (VL_W+4)'(VLENB - 1)) / VLENB) : dec.lmul;
    if (is_red_op(dec.op)) begin
      nregs    = 4'd1;
      wr_bytes = (VL_W+4)'(1) << dec.eew;
    end
    if (nregs == 0) nregs = 4'd1;
    need_rsh = '0;
    for (int r = 0; r < 8; r++) begin
      if (r < nregs && writes_vd && dkind == D_OP) begin
        // Register r of the group is fully overwritten when vl covers it.
        if (eew_q[5'(vd + 5'(r))] != dec.eew && (wr_bytes < (VL_W+4)'((r + 1) * VLENB)))
          need_rsh[5'(vd + 5'(r))] = 1'b1;
      end
    end
    rsh_any = (need_rsh != '0);
    rsh_reg = '0;
    for (int r = NR_VREGS - 1; r >= 0; r--) if (need_rsh[r]) rsh_reg = 5'(r);
  end

  // ---------------- Issue ----------------
  logic resp_pend_q;
  logic can_take;
  assign can_take = !resp_pend_q;

  always_comb begin
    pe_valid_o  = 1'b0;
    pe_req_o    = dec;
    reshuffle_o = 1'b0;
    if (acc_req_valid_i && can_take && dkind == D_OP) begin
      pe_valid_o = 1'b1;
      if (rsh_any) begin
        reshuffle_o      = 1'b1;
        pe_req_o         = '0;
        pe_req_o.op      = OP_VRESHUFFLE;
        pe_req_o.vs2     = rsh_reg;
        pe_req_o.vd      = rsh_reg;
        pe_req_o.vm      = 1'b1;
        pe_req_o.lmul    = 4'd1;
        pe_req_o.eew     = dec.eew;
        pe_req_o.eew_vs2 = eew_q[rsh_reg];
        pe_req_o.vl      = VL_W'(VLENB >> dec.eew);
      end
    end
  end

  // The instruction is consumed when it is not a D_OP, or when its own
  // operation (not a reshuffle) is accepted by the sequencer.
  assign acc_req_ready_o = can_take && (dkind != D_OP || (pe_ready_i && !rsh_any));

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      vl_q    <= '0;
      vlmul_q <= '0;
      vsew_q  <= '0;
      vta_q   <= 1'b0;
      vma_q   <= 1'b0;
      vill_q  <= 1'b0;
      for (int r = 0; r < NR_VREGS; r++) eew_q[r] <= EW8;
      resp_pend_q       <= 1'b0;
      acc_resp_result_o <= '0;
      acc_resp_id_o     <= '0;
      acc_resp_err_o    <= 1'b0;
    end else begin
      if (resp_pend_q && acc_resp_ready_i) resp_pend_q <= 1'b0;
      // Reshuffle accepted: register now has the new encoding.
      if (pe_valid_o && pe_ready_i && reshuffle_o) eew_q[rsh_reg] <= dec.eew;
      if (acc_req_valid_i && acc_req_ready_o) begin
        resp_pend_q       <= 1'b1;
        acc_resp_id_o     <= acc_req_id_i;
        acc_resp_result_o <= '0;
        acc_resp_err_o    <= (dkind == D_ILLEGAL);
        if (dkind == D_VSET) begin
          vl_q    <= vset_vl;
          vlmul_q <= vset_vtype[2:0];
          vsew_q  <= vset_vtype[5:3];
          vta_q   <= vset_vtype[6];
          vma_q   <= vset_vtype[7];
          vill_q  <= vset_ill;
          acc_resp_result_o <= 64'(vset_vl);
        end
        if (dkind == D_OP && writes_vd) begin
          for (int r = 0; r < 8; r++)
            if (r < nregs) eew_q[5'(vd + 5'(r))] <= dec.eew;
        end
      end
    end
  end

  assign acc_resp_valid_o = resp_pend_q;

endmodule
