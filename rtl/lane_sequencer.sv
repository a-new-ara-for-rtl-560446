// Lane sequencer: runs one lane operation at a time inside a lane.
//
// On an accepted request it works out how many elements of the vector live in
// this lane (element i is in lane i mod NrLanes), how many 64-bit VRF words
// they occupy, and starts the operand requesters of the operands the operation
// reads (A = vs1, B = vs2, C = vd for vmacc). It then issues one word per cycle
// to the VALU or the multiplier as soon as every operand needed is at the head
// of its queue, and writes results back to vd with a byte enable that leaves
// tail bytes and masked-off elements untouched. Reductions run as a clear
// cycle plus one accumulate cycle per word (intra-lane step); the final SIMD
// step runs in lane 0 only. done_o pulses when the last result is written (or
// the last word accumulated). The paper names the lane sequencer; its inner
// working here is this design's own.
module lane_sequencer import ara_pkg::*; #(
  parameter int unsigned NrLanes = ara_pkg::NR_LANES,
  parameter int unsigned VLEN    = ara_pkg::VLEN,
  localparam int unsigned WordsPerReg = VLEN / 64 / NrLanes,
  localparam int unsigned AddrW = $clog2(NR_VREGS * WordsPerReg),
  localparam int unsigned LaneW = (NrLanes > 1) ? $clog2(NrLanes) : 1
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic [LaneW-1:0] lane_id_i,
  input  logic             req_valid_i,
  output logic             req_ready_o,
  input  lane_req_t        req_i,
  output logic             done_o,
  // Operation being executed
  output lane_req_t        op_o,
  // Operand requesters
  output logic [2:0]       opr_start_o,   // A, B, C
  output logic [2:0][AddrW-1:0] opr_base_o,
  output logic [AddrW:0]   opr_nwords_o,
  input  logic [2:0]       opq_empty_i,
  output logic [2:0]       opq_pop_o,
  // Functional units
  output logic             valu_valid_o,
  output logic [1:0]       valu_mode_o,
  output logic [7:0]       valu_be_o,
  input  logic             valu_ready_i,
  output logic             mul_valid_o,
  input  logic             mul_ready_i,
  input  logic             res_valid_i,
  output logic             res_ready_o,
  // Result write-back
  output logic             wreq_o,
  output logic [AddrW-1:0] waddr_o,
  output logic [7:0]       wbe_o,
  input  logic             wgnt_i,
  // Mask bytes of the word being written back (from the mask unit)
  output logic [AddrW:0]   mask_widx_o,
  input  logic [7:0]       mask_be_i
);
  typedef enum logic [1:0] { IDLE, CLEAR, RUN } state_e;
  state_e state_q;

  lane_req_t        op_q;
  logic [AddrW:0]   nwords_q, issued_q, written_q;
  logic [AddrW+4:0] nbytes_q;
  logic [2:0]       use_q;

  // Elements and words of this lane for a request.
  logic [VL_W-1:0]  n_elems;
  logic [VL_W+3:0]  n_bytes;
  logic [AddrW:0]   n_words;
  logic [2:0]       use_d;
  logic             final_here;

  always_comb begin
    n_elems = (req_i.vl > VL_W'(lane_id_i)) ? VL_W'((req_i.vl - VL_W'(lane_id_i) - 1) / NrLanes + 1) : '0;
    n_bytes = (VL_W+4)'(n_elems) << req_i.eew;
    n_words = (AddrW+1)'((n_bytes + 7) >> 3);
    final_here = (lane_id_i == '0);
    use_d = '0;
    unique case (req_i.kind)
      LOP_ELEM: begin
        use_d[0] = !req_i.use_scalar;
        use_d[1] = (req_i.op != OP_VMERGE);
        use_d[2] = (req_i.op == OP_VMACC);
      end
      LOP_RED_INTRA: use_d[1] = 1'b1;
      default: use_d[0] = final_here;
    endcase
    if (req_i.kind == LOP_RED_FINAL) n_words = final_here ? (AddrW+1)'(1) : '0;
  end

  assign req_ready_o  = (state_q == IDLE);
  assign opr_start_o  = (req_valid_i && req_ready_o) ? use_d : 3'b000;
  assign opr_base_o[0] = AddrW'(req_i.vs1) * AddrW'(WordsPerReg);
  assign opr_base_o[1] = AddrW'(req_i.vs2) * AddrW'(WordsPerReg);
  assign opr_base_o[2] = AddrW'(req_i.vd)  * AddrW'(WordsPerReg);
  assign opr_nwords_o = n_words;
  assign op_o         = op_q;

  // Issue: all operands in use must be available.
  logic operands_ok, fu_ready, issue;
  logic is_mul;
  assign is_mul      = is_mul_op(op_q.op);
  assign operands_ok = ((opq_empty_i & use_q) == 3'b000);
  assign fu_ready    = is_mul ? mul_ready_i : valu_ready_i;
  assign issue       = (state_q == RUN) && (issued_q != nwords_q) && operands_ok && fu_ready;

  assign opq_pop_o    = issue ? use_q : 3'b000;
  assign valu_valid_o = ((state_q == CLEAR) && valu_ready_i) || (issue && !is_mul);
  assign mul_valid_o  = issue && is_mul;
  always_comb begin
    valu_mode_o = 2'd0;
    if (state_q == RUN) begin
      unique case (op_q.kind)
        LOP_ELEM:      valu_mode_o = 2'd0;
        LOP_RED_INTRA: valu_mode_o = 2'd1;
        default:       valu_mode_o = 2'd3;
      endcase
    end
  end

  // Valid bytes of a word: bytes below the lane's vector length.
  function automatic logic [7:0] tail_be(logic [AddrW:0] w, logic [AddrW+4:0] nb);
    logic [7:0] be;
    for (int i = 0; i < 8; i++) be[i] = ((AddrW+5)'({w, 3'b000}) + (AddrW+5)'(i)) < nb;
    return be;
  endfunction

  assign valu_be_o = tail_be(issued_q, nbytes_q);

  // Write-back.
  assign mask_widx_o = written_q;
  assign wreq_o      = res_valid_i && (state_q == RUN);
  assign waddr_o     = AddrW'(op_q.vd) * AddrW'(WordsPerReg) + AddrW'(written_q);
  always_comb begin
    if (op_q.kind == LOP_RED_FINAL) wbe_o = 8'((1 << (1 << op_q.eew)) - 1);
    else wbe_o = tail_be(written_q, nbytes_q) & (op_q.vm ? 8'hff : mask_be_i);
  end
  assign res_ready_o = wgnt_i;

  logic finished;
  assign finished = (op_q.kind == LOP_RED_INTRA) ? (issued_q == nwords_q)
                                                : (written_q == nwords_q);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q   <= IDLE;
      op_q      <= '0;
      nwords_q  <= '0;
      nbytes_q  <= '0;
      issued_q  <= '0;
      written_q <= '0;
      use_q     <= '0;
      done_o    <= 1'b0;
    end else begin
      done_o <= 1'b0;
      unique case (state_q)
        IDLE: if (req_valid_i) begin
          op_q      <= req_i;
          nwords_q  <= n_words;
          nbytes_q  <= (AddrW+5)'(n_bytes);
          issued_q  <= '0;
          written_q <= '0;
          use_q     <= use_d;
          state_q   <= (req_i.kind == LOP_RED_INTRA) ? CLEAR : RUN;
        end
        CLEAR: if (valu_ready_i) state_q <= RUN;
        default: begin
          if (issue) issued_q <= issued_q + 1'b1;
          if (wreq_o && wgnt_i) written_q <= written_q + 1'b1;
          if (finished) begin
            state_q <= IDLE;
            done_o  <= 1'b1;
          end
        end
      endcase
    end
  end

endmodule
