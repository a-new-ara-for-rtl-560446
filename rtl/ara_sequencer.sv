// Main sequencer: issues each vector operation to the units that execute it.
//
// It takes one operation at a time from the dispatcher and drives it through
// its phases, waiting for every unit involved to report completion:
//   element-wise (VALU, multiplier): [mask fetch by the MASKU if masked], then
//       the operation in all lanes;
//   reduction: intra-lane step in all lanes, inter-lane step in the SLDU,
//       SIMD step and write-back in lane 0;
//   unit-stride load/store: VLSU;   slide and reshuffle: SLDU.
// The paper names the sequencer; the paper's unit overlaps (chains)
// instructions across units, while this sequencer runs one instruction at a
// time to completion, a simplification of this design. vld_done_o and
// vst_done_o pulse when a vector load or store has fully completed, for the
// scalar core's memory-ordering counters.
module ara_sequencer import ara_pkg::*; #(
  parameter int unsigned NrLanes = ara_pkg::NR_LANES
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic               req_valid_i,
  output logic               req_ready_o,
  input  pe_req_t            req_i,
  output logic               idle_o,
  // Lanes
  output logic               lane_valid_o,
  output lane_req_t          lane_req_o,
  input  logic [NrLanes-1:0] lane_ready_i,
  input  logic [NrLanes-1:0] lane_done_i,
  // VLSU
  output logic               vlsu_valid_o,
  input  logic               vlsu_ready_i,
  input  logic               vlsu_done_i,
  // SLDU
  output logic               sldu_valid_o,
  output logic               sldu_red_start_o,
  input  logic               sldu_ready_i,
  input  logic               sldu_done_i,
  // MASKU
  output logic               masku_valid_o,
  input  logic               masku_ready_i,
  input  logic               masku_done_i,
  output pe_req_t            op_o,
  output logic               vld_done_o,
  output logic               vst_done_o
);
  typedef enum logic [3:0] {
    IDLE, DECIDE, MASK_ISSUE, MASK_WAIT, LANE_ISSUE, LANE_WAIT,
    RED_SLDU_ISSUE, RED_SLDU_WAIT, RED_FINAL_ISSUE, RED_FINAL_WAIT,
    UNIT_ISSUE, UNIT_WAIT
  } state_e;
  state_e state_q;
  pe_req_t op_q;
  logic [NrLanes-1:0] done_q;
  logic is_red, is_mem, is_sld;
  lop_e lane_kind_q;

  assign is_red = is_red_op(op_q.op);
  assign is_mem = op_q.op inside {OP_VLE, OP_VSE};
  assign is_sld = op_q.op inside {OP_VSLIDEUP, OP_VSLIDEDOWN, OP_VRESHUFFLE};

  assign req_ready_o = (state_q == IDLE);
  assign idle_o      = (state_q == IDLE);
  assign op_o        = op_q;

  always_comb begin
    lane_req_o            = '0;
    lane_req_o.kind       = lane_kind_q;
    lane_req_o.op         = op_q.op;
    lane_req_o.vs1        = op_q.vs1;
    lane_req_o.vs2        = op_q.vs2;
    lane_req_o.vd         = op_q.vd;
    lane_req_o.use_scalar = op_q.use_scalar;
    lane_req_o.scalar     = op_q.scalar;
    lane_req_o.vm         = op_q.vm;
    lane_req_o.vl         = op_q.vl;
    lane_req_o.eew        = op_q.eew;
  end

  assign lane_valid_o     = (state_q inside {LANE_ISSUE, RED_FINAL_ISSUE}) && (lane_ready_i == '1);
  assign masku_valid_o    = (state_q == MASK_ISSUE) && masku_ready_i;
  assign sldu_red_start_o = (state_q == RED_SLDU_ISSUE) && sldu_ready_i;
  assign sldu_valid_o     = (state_q == UNIT_ISSUE) && is_sld && sldu_ready_i;
  assign vlsu_valid_o     = (state_q == UNIT_ISSUE) && is_mem && vlsu_ready_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q     <= IDLE;
      op_q        <= '0;
      done_q      <= '0;
      lane_kind_q <= LOP_ELEM;
      vld_done_o  <= 1'b0;
      vst_done_o  <= 1'b0;
    end else begin
      vld_done_o <= 1'b0;
      vst_done_o <= 1'b0;
      done_q <= done_q | lane_done_i;
      unique case (state_q)
        IDLE: if (req_valid_i) begin
          op_q    <= req_i;
          state_q <= DECIDE;
        end
        DECIDE: begin
          if (is_mem || is_sld) state_q <= UNIT_ISSUE;
          else if (is_red) begin
            lane_kind_q <= LOP_RED_INTRA;
            state_q     <= LANE_ISSUE;
          end else begin
            lane_kind_q <= LOP_ELEM;
            state_q     <= op_q.vm ? LANE_ISSUE : MASK_ISSUE;
          end
        end
        MASK_ISSUE: if (masku_valid_o) state_q <= MASK_WAIT;
        MASK_WAIT:  if (masku_done_i) state_q <= LANE_ISSUE;
        LANE_ISSUE: if (lane_valid_o) begin
          done_q  <= '0;
          state_q <= LANE_WAIT;
        end
        LANE_WAIT: if ((done_q | lane_done_i) == '1) begin
          state_q <= is_red ? RED_SLDU_ISSUE : IDLE;
        end
        RED_SLDU_ISSUE: if (sldu_red_start_o) state_q <= RED_SLDU_WAIT;
        RED_SLDU_WAIT: if (sldu_done_i) begin
          lane_kind_q <= LOP_RED_FINAL;
          state_q     <= RED_FINAL_ISSUE;
        end
        RED_FINAL_ISSUE: if (lane_valid_o) begin
          done_q  <= '0;
          state_q <= RED_FINAL_WAIT;
        end
        RED_FINAL_WAIT: if ((done_q | lane_done_i) == '1) state_q <= IDLE;
        UNIT_ISSUE: if (sldu_valid_o || vlsu_valid_o) state_q <= UNIT_WAIT;
        default: begin // UNIT_WAIT
          if (vlsu_done_i || sldu_done_i) begin
            state_q    <= IDLE;
            vld_done_o <= (op_q.op == OP_VLE);
            vst_done_o <= (op_q.op == OP_VSE);
          end
        end
      endcase
    end
  end

endmodule
