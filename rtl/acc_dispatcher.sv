// Accelerator dispatcher on the scalar-core side of the vector interface.
//
// The scalar core pre-decodes each instruction just enough to know whether it
// is a vector instruction, whether it accesses memory (for coherence) and
// whether it needs a scalar operand. Vector instructions are pushed here,
// with their scalar operands and a transaction id, while still speculative.
// Each commit_i marks the oldest speculative entry as non-speculative;
// flush_i drops all entries still speculative. The head entry is sent on the
// non-speculative request port (insn, rs1, rs2, id, valid/ready) once it is
// non-speculative and, for a vector memory access, once the memory-ordering
// logic allows it. disp_load_o/disp_store_o pulse when a vector load or store
// is sent. The interface signals are the ones the paper's diagram prints; the
// queue depth, the commit/flush protocol and the id width are this design's
// choices.
module acc_dispatcher #(
  parameter int unsigned Depth = 4
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        flush_i,
  // From decode / issue (speculative)
  input  logic        push_valid_i,
  output logic        push_ready_o,
  input  logic [31:0] push_insn_i,
  input  logic [63:0] push_rs1_i,
  input  logic [63:0] push_rs2_i,
  input  logic [4:0]  push_id_i,
  input  logic        commit_i,
  // Pre-decode results of the instruction being pushed
  output logic        is_vector_o,
  output logic        needs_scalar_o,
  // Memory-ordering permission for vector memory operations
  input  logic        vec_mem_allow_i,
  output logic        disp_load_o,
  output logic        disp_store_o,
  // Non-speculative request to the vector unit
  output logic        req_valid_o,
  input  logic        req_ready_i,
  output logic [31:0] req_insn_o,
  output logic [63:0] req_rs1_o,
  output logic [63:0] req_rs2_o,
  output logic [4:0]  req_id_o
);
  localparam int unsigned PtrW = $clog2(Depth);

  typedef struct packed {
    logic [31:0] insn;
    logic [63:0] rs1;
    logic [63:0] rs2;
    logic [4:0]  id;
    logic        is_load;
    logic        is_store;
  } entry_t;

  // Pre-decode.
  function automatic logic vec_mem(logic [31:0] i);
    return (i[6:0] == 7'b0000111 || i[6:0] == 7'b0100111) &&
           (i[14:12] inside {3'b000, 3'b101, 3'b110, 3'b111});
  endfunction

  logic push_is_load, push_is_store;
  assign push_is_load   = vec_mem(push_insn_i) && (push_insn_i[6:0] == 7'b0000111);
  assign push_is_store  = vec_mem(push_insn_i) && (push_insn_i[6:0] == 7'b0100111);
  assign is_vector_o    = (push_insn_i[6:0] == 7'b1010111) || vec_mem(push_insn_i);
  assign needs_scalar_o = vec_mem(push_insn_i) ||
                          ((push_insn_i[6:0] == 7'b1010111) &&
                           (push_insn_i[14:12] inside {3'b100, 3'b101, 3'b110, 3'b111}));

  entry_t         q [Depth];
  logic [PtrW:0]  cnt_q;        // entries
  logic [PtrW:0]  nonspec_q;    // non-speculative entries (at the head)
  logic [PtrW-1:0] rd_q, wr_q;

  logic head_mem, pop, push;
  assign head_mem    = q[rd_q].is_load || q[rd_q].is_store;
  assign req_valid_o = (nonspec_q != 0) && (!head_mem || vec_mem_allow_i);
  assign req_insn_o  = q[rd_q].insn;
  assign req_rs1_o   = q[rd_q].rs1;
  assign req_rs2_o   = q[rd_q].rs2;
  assign req_id_o    = q[rd_q].id;
  assign pop         = req_valid_o && req_ready_i;
  assign push_ready_o = (cnt_q != (PtrW+1)'(Depth)) && !flush_i;
  assign push        = push_valid_i && push_ready_o && is_vector_o;
  assign disp_load_o  = pop && q[rd_q].is_load;
  assign disp_store_o = pop && q[rd_q].is_store;

  logic commit_ok;
  assign commit_ok = commit_i && (nonspec_q != cnt_q);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cnt_q     <= '0;
      nonspec_q <= '0;
      rd_q      <= '0;
      wr_q      <= '0;
    end else begin
      if (flush_i) begin
        // Keep the non-speculative entries only.
        cnt_q     <= nonspec_q - (PtrW+1)'(pop);
        nonspec_q <= nonspec_q - (PtrW+1)'(pop);
        wr_q      <= PtrW'(32'(rd_q) + 32'(nonspec_q));
        if (pop) rd_q <= rd_q + 1'b1;
      end else begin
        cnt_q     <= cnt_q + (PtrW+1)'(push) - (PtrW+1)'(pop);
        nonspec_q <= nonspec_q + (PtrW+1)'(commit_ok) - (PtrW+1)'(pop);
        if (push) wr_q <= wr_q + 1'b1;
        if (pop)  rd_q <= rd_q + 1'b1;
      end
    end
  end

  always_ff @(posedge clk_i) begin
    if (push) q[wr_q] <= '{insn: push_insn_i, rs1: push_rs1_i, rs2: push_rs2_i,
                           id: push_id_i, is_load: push_is_load, is_store: push_is_store};
  end

  initial assert (Depth == (1 << PtrW)) else $error("Depth must be a power of two");

endmodule
