// Vector ALU of a lane (VALU): SIMD integer arithmetic on 64-bit lane words.
//
// Each 64-bit word holds 8, 4, 2 or 1 elements of 8/16/32/64 bits; all
// elements are processed in the same cycle. Besides element-wise operations
// (add, sub, and, or, xor, signed/unsigned min/max, merge) the VALU holds the
// reduction accumulator used by the three-step reduction of the paper:
//   MODE_ACC   intra-lane step: acc <= op(acc, b) with tail elements replaced by
//              the identity of op, one lane word per cycle;
//   MODE_RIN   inter-lane step: acc <= op(acc, b) where b is the partial result
//              of another lane, delivered by the slide unit;
//   MODE_FINAL SIMD step: the elements of acc are folded pairwise in
//              log2(64/SEW) halvings, then combined with element 0 of a (vs1[0]);
//              the result is in element 0 of result_o;
//   MODE_CLEAR acc <= identity of op.
// The reduction algorithm is the paper's; the fold is done in one cycle here,
// which is this design's choice. The element-wise result is registered: one
// cycle of latency, valid/ready handshake on both sides.
module valu import ara_pkg::*; (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        valid_i,
  output logic        ready_o,
  input  logic [1:0]  mode_i,
  input  vop_e        op_i,
  input  vew_e        eew_i,
  input  logic [63:0] a_i,
  input  logic [63:0] b_i,
  input  logic [7:0]  be_i,      // valid bytes of b (reductions)
  output logic        valid_o,
  input  logic        ready_i,
  output logic [63:0] result_o,
  output logic [63:0] acc_o
);
  localparam logic [1:0] MODE_ELEM = 2'd0, MODE_ACC = 2'd1, MODE_RIN = 2'd2, MODE_FINAL = 2'd3;
  // MODE_CLEAR is MODE_ELEM with a reduction opcode.

  typedef enum logic [3:0] { F_ADD, F_SUB, F_AND, F_OR, F_XOR, F_MINU, F_MIN, F_MAXU, F_MAX, F_MERGE } fn_e;

  function automatic fn_e fn_of(vop_e op);
    unique case (op)
      OP_VADD, OP_VREDSUM:   return F_ADD;
      OP_VSUB:               return F_SUB;
      OP_VAND, OP_VREDAND:   return F_AND;
      OP_VOR, OP_VREDOR:     return F_OR;
      OP_VXOR, OP_VREDXOR:   return F_XOR;
      OP_VMINU, OP_VREDMINU: return F_MINU;
      OP_VMIN, OP_VREDMIN:   return F_MIN;
      OP_VMAXU, OP_VREDMAXU: return F_MAXU;
      OP_VMAX, OP_VREDMAX:   return F_MAX;
      default:               return F_MERGE;
    endcase
  endfunction

  // One element of width w bits (w <= 64), held in the low bits of 64-bit values.
  function automatic logic [63:0] elem(fn_e f, logic [63:0] a, logic [63:0] b, int unsigned w);
    logic [63:0] m, sa, sb;
    logic        lt_u, lt_s;
    m    = (w == 64) ? '1 : ((64'd1 << w) - 1);
    sa   = a & m;
    sb   = b & m;
    lt_u = sb < sa;                                   // b < a, unsigned
    lt_s = (sb[w-1] != sa[w-1]) ? sb[w-1] : lt_u;     // b < a, signed
    unique case (f)
      F_ADD:  return (b + a) & m;
      F_SUB:  return (b - a) & m;                     // vsub: vs2 - vs1
      F_AND:  return sa & sb;
      F_OR:   return sa | sb;
      F_XOR:  return sa ^ sb;
      F_MINU: return lt_u ? sb : sa;
      F_MIN:  return lt_s ? sb : sa;
      F_MAXU: return lt_u ? sa : sb;
      F_MAX:  return lt_s ? sa : sb;
      default: return sa;                             // merge/move: take a
    endcase
  endfunction

  function automatic logic [63:0] simd(fn_e f, logic [63:0] a, logic [63:0] b, vew_e e);
    logic [63:0] r;
    int unsigned w;
    w = 8 << e;
    r = '0;
    for (int i = 0; i < 8; i++) begin
      if (i < (8 >> e)) begin
        r = r | (elem(f, a >> (i * w), b >> (i * w), w) << (i * w));
      end
    end
    return r;
  endfunction

  function automatic logic [63:0] identity(fn_e f, vew_e e);
    unique case (f)
      F_AND, F_MINU: return '1;
      F_MIN:  return replicate(64'h7fff_ffff_ffff_ffff >> (64 - (8 << e)), e);
      F_MAX:  return replicate(64'd1 << ((8 << e) - 1), e);
      default: return '0;
    endcase
  endfunction

  fn_e         fn;
  logic [63:0] acc_q, b_masked, folded, res_d, acc_d;
  logic        valid_q;
  logic [63:0] result_q;

  assign fn = fn_of(op_i);

  always_comb begin
    // Tail bytes of the reduction operand take the identity value.
    for (int i = 0; i < 8; i++)
      b_masked[8*i +: 8] = be_i[i] ? b_i[8*i +: 8] : 8'(identity(fn, eew_i) >> (8*i));
    // SIMD fold of the accumulator: log2(64/SEW) pairwise halvings.
    folded = acc_q;
    for (int s = 2; s >= 0; s--) begin
      if (int'(eew_i) <= s) folded = simd(fn, folded >> (8 << s), folded, eew_i);
    end
    res_d = '0;
    acc_d = acc_q;
    unique case (mode_i)
      MODE_ELEM:  begin
        res_d = simd(fn, a_i, b_i, eew_i);
        if (is_red_op(op_i)) acc_d = identity(fn, eew_i);
      end
      MODE_ACC:   acc_d = simd(fn, acc_q, b_masked, eew_i);
      MODE_RIN:   acc_d = simd(fn, acc_q, b_i, eew_i);
      default:    res_d = simd(fn, a_i, folded, eew_i);
    endcase
  end

  assign ready_o  = !valid_q || ready_i;
  assign valid_o  = valid_q;
  assign result_o = result_q;
  assign acc_o    = acc_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      valid_q  <= 1'b0;
      result_q <= '0;
      acc_q    <= '0;
    end else begin
      if (valid_i && ready_o) begin
        acc_q <= acc_d;
        // Only element-wise and final steps produce a word to write back.
        valid_q  <= ((mode_i == MODE_ELEM) && !is_red_op(op_i)) || (mode_i == MODE_FINAL);
        result_q <= res_d;
      end else if (ready_i) begin
        valid_q <= 1'b0;
      end
    end
  end

endmodule
