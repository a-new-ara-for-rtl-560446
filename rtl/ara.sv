// Vector unit: dispatcher, main sequencer, lanes and cross-lane units.
//
// Instructions come in over the accelerator request port and are answered on
// the response port. The dispatcher decodes them and the main sequencer runs
// them on the NrLanes lanes (element-wise work and reductions), the VLSU
// (memory), the SLDU (slides, reshuffles, inter-lane reduction moves) and the
// MASKU (mask distribution). The three cross-lane units share each lane's
// external VRF write and read ports; since the sequencer runs one operation
// at a time, at most one of them drives a port, and the requests are simply
// merged. The block structure follows the paper's diagram of the vector
// unit; the port protocols are this design's choices. The memory port is the
// VLSU's simplified in-order request/response channel.
module ara import ara_pkg::*; #(
  parameter int unsigned NrLanes = ara_pkg::NR_LANES,
  parameter int unsigned VLEN    = ara_pkg::VLEN,
  parameter int unsigned NrBanks = ara_pkg::NR_BANKS,
  localparam int unsigned NB = 8 * NrLanes
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  // Accelerator interface
  input  logic              acc_req_valid_i,
  output logic              acc_req_ready_o,
  input  logic [31:0]       acc_req_insn_i,
  input  logic [63:0]       acc_req_rs1_i,
  input  logic [63:0]       acc_req_rs2_i,
  input  logic [4:0]        acc_req_id_i,
  output logic              acc_resp_valid_o,
  input  logic              acc_resp_ready_i,
  output logic [63:0]       acc_resp_result_o,
  output logic [4:0]        acc_resp_id_o,
  output logic              acc_resp_err_o,
  // Status for the scalar core
  output logic              idle_o,
  output logic              vld_done_o,
  output logic              vst_done_o,
  output logic              reshuffle_o,
  // Memory port
  output logic              mem_req_valid_o,
  input  logic              mem_req_ready_i,
  output logic              mem_req_we_o,
  output logic [63:0]       mem_req_addr_o,
  output logic [NB*8-1:0]   mem_req_wdata_o,
  output logic [NB-1:0]     mem_req_be_o,
  input  logic              mem_resp_valid_i,
  output logic              mem_resp_ready_o,
  input  logic [NB*8-1:0]   mem_resp_rdata_i
);
  localparam int unsigned WordsPerReg = VLEN / 64 / NrLanes;
  localparam int unsigned AddrW = $clog2(NR_VREGS * WordsPerReg);
  localparam int unsigned LaneW = (NrLanes > 1) ? $clog2(NrLanes) : 1;

  logic    pe_valid, pe_ready, disp_rsh;
  pe_req_t pe_req, seq_op;
  logic [VL_W-1:0] vl;
  logic [7:0]      vtype;

  ara_dispatcher #(.NrLanes(NrLanes), .VLEN(VLEN)) i_dispatcher (
    .clk_i, .rst_ni,
    .acc_req_valid_i, .acc_req_ready_o, .acc_req_insn_i, .acc_req_rs1_i, .acc_req_rs2_i, .acc_req_id_i,
    .acc_resp_valid_o, .acc_resp_ready_i, .acc_resp_result_o, .acc_resp_id_o, .acc_resp_err_o,
    .pe_valid_o(pe_valid), .pe_ready_i(pe_ready), .pe_req_o(pe_req), .reshuffle_o(disp_rsh),
    .vl_o(vl), .vtype_o(vtype)
  );
  assign reshuffle_o = pe_valid && pe_ready && disp_rsh;

  logic               lane_valid;
  lane_req_t          lane_req;
  logic [NrLanes-1:0] lane_ready, lane_done;
  logic vlsu_valid, vlsu_ready, vlsu_done;
  logic sldu_valid, sldu_red_start, sldu_ready, sldu_done;
  logic masku_valid, masku_ready, masku_done;

  ara_sequencer #(.NrLanes(NrLanes)) i_sequencer (
    .clk_i, .rst_ni,
    .req_valid_i(pe_valid), .req_ready_o(pe_ready), .req_i(pe_req), .idle_o,
    .lane_valid_o(lane_valid), .lane_req_o(lane_req), .lane_ready_i(lane_ready), .lane_done_i(lane_done),
    .vlsu_valid_o(vlsu_valid), .vlsu_ready_i(vlsu_ready), .vlsu_done_i(vlsu_done),
    .sldu_valid_o(sldu_valid), .sldu_red_start_o(sldu_red_start), .sldu_ready_i(sldu_ready), .sldu_done_i(sldu_done),
    .masku_valid_o(masku_valid), .masku_ready_i(masku_ready), .masku_done_i(masku_done),
    .op_o(seq_op), .vld_done_o, .vst_done_o
  );

  // Lane external ports, per unit.
  logic [NrLanes-1:0]            ld_wreq, sl_wreq, wgnt, st_rreq, sl_rreq, mk_rreq, rgnt, rvalid;
  logic [NrLanes-1:0][AddrW-1:0] ld_waddr, sl_waddr, st_raddr, sl_raddr, mk_raddr;
  logic [NrLanes-1:0][63:0]      ld_wdata, sl_wdata, rdata, red_acc, red_data;
  logic [NrLanes-1:0][7:0]       ld_wbe, sl_wbe, mask_be;
  logic [NrLanes-1:0][AddrW:0]   mask_widx;
  logic [NrLanes-1:0]            red_valid;

  for (genvar l = 0; l < NrLanes; l++) begin : gen_lane
    logic             wreq, rreq;
    logic [AddrW-1:0] waddr, raddr;
    logic [63:0]      wdata;
    logic [7:0]       wbe;
    always_comb begin
      wreq  = ld_wreq[l] || sl_wreq[l];
      waddr = ld_wreq[l] ? ld_waddr[l] : sl_waddr[l];
      wdata = ld_wreq[l] ? ld_wdata[l] : sl_wdata[l];
      wbe   = ld_wreq[l] ? ld_wbe[l]   : sl_wbe[l];
      rreq  = st_rreq[l] || sl_rreq[l] || mk_rreq[l];
      raddr = st_rreq[l] ? st_raddr[l] : (sl_rreq[l] ? sl_raddr[l] : mk_raddr[l]);
    end
    lane #(.NrLanes(NrLanes), .VLEN(VLEN), .NrBanks(NrBanks)) i_lane (
      .clk_i, .rst_ni, .lane_id_i(LaneW'(l)),
      .req_valid_i(lane_valid), .req_ready_o(lane_ready[l]), .req_i(lane_req), .done_o(lane_done[l]),
      .ext_wreq_i(wreq), .ext_waddr_i(waddr), .ext_wdata_i(wdata), .ext_wbe_i(wbe), .ext_wgnt_o(wgnt[l]),
      .ext_rreq_i(rreq), .ext_raddr_i(raddr), .ext_rgnt_o(rgnt[l]), .ext_rvalid_o(rvalid[l]), .ext_rdata_o(rdata[l]),
      .mask_widx_o(mask_widx[l]), .mask_be_i(mask_be[l]),
      .red_acc_o(red_acc[l]), .red_in_valid_i(red_valid[l]), .red_in_data_i(red_data[l])
    );
  end

  vlsu #(.NrLanes(NrLanes), .VLEN(VLEN)) i_vlsu (
    .clk_i, .rst_ni,
    .req_valid_i(vlsu_valid), .req_ready_o(vlsu_ready), .req_i(seq_op), .done_o(vlsu_done),
    .ld_pending_o(), .st_pending_o(),
    .mem_req_valid_o, .mem_req_ready_i, .mem_req_we_o, .mem_req_addr_o, .mem_req_wdata_o, .mem_req_be_o,
    .mem_resp_valid_i, .mem_resp_ready_o, .mem_resp_rdata_i,
    .wreq_o(ld_wreq), .waddr_o(ld_waddr), .wdata_o(ld_wdata), .wbe_o(ld_wbe), .wgnt_i(wgnt),
    .rreq_o(st_rreq), .raddr_o(st_raddr), .rgnt_i(rgnt), .rvalid_i(rvalid), .rdata_i(rdata)
  );

  sldu #(.NrLanes(NrLanes), .VLEN(VLEN)) i_sldu (
    .clk_i, .rst_ni,
    .req_valid_i(sldu_valid), .req_ready_o(sldu_ready), .req_i(seq_op), .red_start_i(sldu_red_start),
    .done_o(sldu_done),
    .wreq_o(sl_wreq), .waddr_o(sl_waddr), .wdata_o(sl_wdata), .wbe_o(sl_wbe), .wgnt_i(wgnt),
    .rreq_o(sl_rreq), .raddr_o(sl_raddr), .rgnt_i(rgnt), .rvalid_i(rvalid), .rdata_i(rdata),
    .red_acc_i(red_acc), .red_valid_o(red_valid), .red_data_o(red_data)
  );

  masku #(.NrLanes(NrLanes), .VLEN(VLEN)) i_masku (
    .clk_i, .rst_ni,
    .req_valid_i(masku_valid), .req_ready_o(masku_ready), .req_i(seq_op), .done_o(masku_done),
    .rreq_o(mk_rreq), .raddr_o(mk_raddr), .rgnt_i(rgnt), .rvalid_i(rvalid), .rdata_i(rdata),
    .mask_widx_i(mask_widx), .mask_be_o(mask_be)
  );

endmodule
