// Shared types and constants of the vector unit.
//
// The vector register file (VRF) is split among NR_LANES lanes. Element i of a
// vector register lives in lane (i mod NR_LANES), packed into the lane's 64-bit
// words in order of i / NR_LANES. Register group vd, lane word w is VRF word
// vd*WORDS_PER_REG + w of that lane, so register groups (LMUL > 1) are
// contiguous. The lane count, VLEN and the bank count are the paper's main
// configuration; the operation set, the request structures and their field
// widths are this design's own choices.
package ara_pkg;

  localparam int unsigned NR_LANES = 4;     // 4-lane implemented system
  localparam int unsigned VLEN     = 4096;  // bits per vector register
  localparam int unsigned NR_BANKS = 8;     // 1RW SRAM banks per lane
  localparam int unsigned NR_VREGS = 32;

  // Element width encoding, same as vsew in vtype.
  typedef enum logic [1:0] { EW8 = 2'd0, EW16 = 2'd1, EW32 = 2'd2, EW64 = 2'd3 } vew_e;

  // Operations understood by the back end.
  typedef enum logic [4:0] {
    OP_VADD, OP_VSUB, OP_VAND, OP_VOR, OP_VXOR,
    OP_VMINU, OP_VMIN, OP_VMAXU, OP_VMAX, OP_VMERGE,
    OP_VMUL, OP_VMACC,
    OP_VREDSUM, OP_VREDAND, OP_VREDOR, OP_VREDXOR,
    OP_VREDMINU, OP_VREDMIN, OP_VREDMAXU, OP_VREDMAX,
    OP_VLE, OP_VSE,
    OP_VSLIDEUP, OP_VSLIDEDOWN, OP_VRESHUFFLE
  } vop_e;

  // Maximum vector length in elements: VLEN/8 * LMUL(8).
  localparam int unsigned VL_W = $clog2(VLEN) + 1;

  // Operation issued by the dispatcher to the main sequencer.
  typedef struct packed {
    vop_e             op;
    logic [4:0]       vs1;
    logic [4:0]       vs2;
    logic [4:0]       vd;
    logic             use_scalar;  // vs1 replaced by the scalar operand
    logic [63:0]      scalar;      // rs1 value, immediate, base address or slide offset
    logic             vm;          // 1: unmasked, 0: masked by v0
    logic [VL_W-1:0]  vl;          // number of elements
    logic [3:0]       lmul;        // registers per group: 1, 2, 4 or 8
    vew_e             eew;         // element width of the operation (destination)
    vew_e             eew_vs2;     // recorded encoding of the source for slides/stores
    vew_e             eew_vmask;   // recorded encoding of v0
  } pe_req_t;

  // Lane operation kinds.
  typedef enum logic [1:0] { LOP_ELEM, LOP_RED_INTRA, LOP_RED_FINAL } lop_e;

  typedef struct packed {
    lop_e             kind;
    vop_e             op;
    logic [4:0]       vs1;
    logic [4:0]       vs2;
    logic [4:0]       vd;
    logic             use_scalar;
    logic [63:0]      scalar;
    logic             vm;
    logic [VL_W-1:0]  vl;
    vew_e             eew;
  } lane_req_t;

  function automatic int unsigned ew_bytes(vew_e e);
    return 1 << e;
  endfunction

  function automatic logic is_mul_op(vop_e op);
    return op inside {OP_VMUL, OP_VMACC};
  endfunction

  function automatic logic is_red_op(vop_e op);
    return op inside {OP_VREDSUM, OP_VREDAND, OP_VREDOR, OP_VREDXOR,
                      OP_VREDMINU, OP_VREDMIN, OP_VREDMAXU, OP_VREDMAX};
  endfunction

  // Replicate an element-width scalar over a 64-bit lane word.
  function automatic logic [63:0] replicate(logic [63:0] s, vew_e e);
    unique case (e)
      EW8:  return {8{s[7:0]}};
      EW16: return {4{s[15:0]}};
      EW32: return {2{s[31:0]}};
      default: return s;
    endcase
  endfunction

endpackage
