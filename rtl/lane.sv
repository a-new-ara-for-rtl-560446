// One lane of the vector unit.
//
// A lane holds its chunk of the VRF (8 single-port banks behind a crossbar),
// the lane sequencer, three operand requesters with their operand queues
// (A = vs1, B = vs2, C = vd), the integer VALU and the SIMD multiplier. All
// lanes are identical; the lane index is an input, so one lane design serves
// every position. Cross-lane units reach the VRF through two extra ports: a
// write port (load unit, slide unit) and a read port (store unit, slide unit,
// mask unit). VRF master priority, highest first: external write, result
// write, external read, operand A, B, C. The split VRF, the 8 banks, the
// operand requesters, queues, VALU and VMFPU come from the paper's lane
// diagram; the port set, the priorities and the queue depth are this design's
// choices.
//
// Timing: external ports are granted combinationally (ext_*gnt_o); read data
// return one cycle after the grant on ext_rvalid_o/ext_rdata_o.
module lane import ara_pkg::*; #(
  parameter int unsigned NrLanes = ara_pkg::NR_LANES,
  parameter int unsigned VLEN    = ara_pkg::VLEN,
  parameter int unsigned NrBanks = ara_pkg::NR_BANKS,
  localparam int unsigned WordsPerReg = VLEN / 64 / NrLanes,
  localparam int unsigned AddrW = $clog2(NR_VREGS * WordsPerReg),
  localparam int unsigned LaneW = (NrLanes > 1) ? $clog2(NrLanes) : 1
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic [LaneW-1:0] lane_id_i,
  // Operation from the main sequencer
  input  logic             req_valid_i,
  output logic             req_ready_o,
  input  lane_req_t        req_i,
  output logic             done_o,
  // External VRF write port
  input  logic             ext_wreq_i,
  input  logic [AddrW-1:0] ext_waddr_i,
  input  logic [63:0]      ext_wdata_i,
  input  logic [7:0]       ext_wbe_i,
  output logic             ext_wgnt_o,
  // External VRF read port
  input  logic             ext_rreq_i,
  input  logic [AddrW-1:0] ext_raddr_i,
  output logic             ext_rgnt_o,
  output logic             ext_rvalid_o,
  output logic [63:0]      ext_rdata_o,
  // Mask unit
  output logic [AddrW:0]   mask_widx_o,
  input  logic [7:0]       mask_be_i,
  // Reductions
  output logic [63:0]      red_acc_o,
  input  logic             red_in_valid_i,
  input  logic [63:0]      red_in_data_i
);
  localparam int unsigned QDepth = 4;
  localparam int unsigned QCntW  = $clog2(QDepth + 1);

  lane_req_t op;
  logic [2:0]            opr_start, opq_empty, opq_pop;
  logic [2:0][AddrW-1:0] opr_base;
  logic [AddrW:0]        opr_nwords;
  logic                  valu_valid, valu_ready, mul_valid, mul_ready;
  logic [1:0]            valu_mode;
  logic [7:0]            valu_be;
  logic                  res_valid, res_ready, wreq, wgnt;
  logic [AddrW-1:0]      waddr;
  logic [7:0]            wbe;

  // VRF masters
  localparam int unsigned NM = 6;
  logic [NM-1:0]            m_req, m_we, m_gnt, m_rvalid;
  logic [NM-1:0][AddrW-1:0] m_addr;
  logic [NM-1:0][63:0]      m_wdata, m_rdata;
  logic [NM-1:0][7:0]       m_be;

  logic [2:0]            opr_req;
  logic [2:0][AddrW-1:0] opr_addr;
  logic [2:0][63:0]      opq_data;
  logic [2:0][QCntW-1:0] opq_count;
  logic [63:0]           valu_res, mul_res, res_data;
  logic                  valu_out_valid, mul_out_valid;

  lane_sequencer #(.NrLanes(NrLanes), .VLEN(VLEN)) i_seq (
    .clk_i, .rst_ni, .lane_id_i,
    .req_valid_i, .req_ready_o, .req_i, .done_o,
    .op_o(op),
    .opr_start_o(opr_start), .opr_base_o(opr_base), .opr_nwords_o(opr_nwords),
    .opq_empty_i(opq_empty), .opq_pop_o(opq_pop),
    .valu_valid_o(valu_valid), .valu_mode_o(valu_mode), .valu_be_o(valu_be), .valu_ready_i(valu_ready),
    .mul_valid_o(mul_valid), .mul_ready_i(mul_ready),
    .res_valid_i(res_valid), .res_ready_o(res_ready),
    .wreq_o(wreq), .waddr_o(waddr), .wbe_o(wbe), .wgnt_i(wgnt),
    .mask_widx_o, .mask_be_i
  );

  for (genvar i = 0; i < 3; i++) begin : gen_operand
    operand_requester #(.AddrW(AddrW), .QueueDepth(QDepth)) i_req (
      .clk_i, .rst_ni,
      .start_i(opr_start[i]), .base_i(opr_base[i]), .nwords_i(opr_nwords),
      .queue_count_i(opq_count[i]),
      .req_o(opr_req[i]), .addr_o(opr_addr[i]), .gnt_i(m_gnt[3+i]),
      .rvalid_i(m_rvalid[3+i]), .busy_o()
    );
    operand_queue #(.Width(64), .Depth(QDepth)) i_q (
      .clk_i, .rst_ni, .flush_i(1'b0),
      .push_i(m_rvalid[3+i]), .data_i(m_rdata[3+i]),
      .pop_i(opq_pop[i]), .data_o(opq_data[i]),
      .empty_o(opq_empty[i]), .full_o(), .count_o(opq_count[i])
    );
  end

  // Master 0: external write, 1: result write, 2: external read, 3..5: operands.
  always_comb begin
    m_req   = {opr_req, ext_rreq_i, wreq, ext_wreq_i};
    m_we    = 6'b000011;
    m_addr  = {opr_addr, ext_raddr_i, waddr, ext_waddr_i};
    m_wdata = '0;
    m_wdata[0] = ext_wdata_i;
    m_wdata[1] = res_data;
    m_be    = '0;
    m_be[0] = ext_wbe_i;
    m_be[1] = wbe;
  end

  lane_vrf #(.NrBanks(NrBanks), .NrWords(NR_VREGS * WordsPerReg), .NrMasters(NM)) i_vrf (
    .clk_i, .rst_ni,
    .req_i(m_req), .we_i(m_we), .addr_i(m_addr), .wdata_i(m_wdata), .be_i(m_be),
    .gnt_o(m_gnt), .rvalid_o(m_rvalid), .rdata_o(m_rdata)
  );

  assign ext_wgnt_o   = m_gnt[0];
  assign wgnt         = m_gnt[1];
  assign ext_rgnt_o   = m_gnt[2];
  assign ext_rvalid_o = m_rvalid[2];
  assign ext_rdata_o  = m_rdata[2];

  // Operand A is vs1 or the replicated scalar.
  logic [63:0] opa;
  assign opa = op.use_scalar ? replicate(op.scalar, op.eew) : opq_data[0];

  valu i_valu (
    .clk_i, .rst_ni,
    .valid_i(valu_valid || red_in_valid_i), .ready_o(valu_ready),
    .mode_i(red_in_valid_i ? 2'd2 : valu_mode), .op_i(op.op), .eew_i(op.eew),
    .a_i(opa), .b_i(red_in_valid_i ? red_in_data_i : opq_data[1]), .be_i(valu_be),
    .valid_o(valu_out_valid), .ready_i(res_ready), .result_o(valu_res), .acc_o(red_acc_o)
  );

  vmfpu i_mul (
    .clk_i, .rst_ni,
    .valid_i(mul_valid), .ready_o(mul_ready), .op_i(op.op), .eew_i(op.eew),
    .a_i(opa), .b_i(opq_data[1]), .c_i(opq_data[2]),
    .valid_o(mul_out_valid), .ready_i(res_ready), .result_o(mul_res)
  );

  assign res_valid = valu_out_valid || mul_out_valid;
  assign res_data  = mul_out_valid ? mul_res : valu_res;

endmodule
