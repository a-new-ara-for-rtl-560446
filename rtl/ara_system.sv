// Vector system top: the vector unit and its coupling to the scalar core.
//
// This top holds what the paper adds around the vector unit: the scalar
// core's accelerator dispatcher (a queue that releases vector instructions
// once they are non-speculative), the memory-ordering logic that stalls
// scalar and vector memory accesses against each other, the vector unit
// itself, and the invalidation filter that turns vector stores into
// invalidations of the scalar data cache. The scalar core, its caches and the
// memory interconnect are not part of this RTL: their connections are the
// ports of this module (instruction push and commit from the core, scalar
// load/store permissions to its issue stage, invalidations to its data cache,
// and the memory port towards the interconnect). Default parameters are the
// paper's implemented configuration: 4 lanes, VLEN = 4096 (16 KiB of VRF).
module ara_system import ara_pkg::*; #(
  parameter int unsigned NrLanes = ara_pkg::NR_LANES,
  parameter int unsigned VLEN    = ara_pkg::VLEN,
  parameter int unsigned NrBanks = ara_pkg::NR_BANKS,
  parameter int unsigned DCacheLineBytes = 32,
  localparam int unsigned NB = 8 * NrLanes
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  // Scalar core: vector instruction push (speculative), commit, flush
  input  logic              push_valid_i,
  output logic              push_ready_o,
  input  logic [31:0]       push_insn_i,
  input  logic [63:0]       push_rs1_i,
  input  logic [63:0]       push_rs2_i,
  input  logic [4:0]        push_id_i,
  input  logic              commit_i,
  input  logic              flush_i,
  output logic              is_vector_o,
  output logic              needs_scalar_o,
  // Scalar core: commit response
  output logic              resp_valid_o,
  input  logic              resp_ready_i,
  output logic [63:0]       resp_result_o,
  output logic [4:0]        resp_id_o,
  output logic              resp_err_o,
  // Scalar core: memory ordering
  input  logic              scalar_store_pending_i,
  output logic              scalar_load_allow_o,
  output logic              scalar_store_allow_o,
  // Scalar core: D-cache invalidation
  output logic              inval_valid_o,
  input  logic              inval_ready_i,
  output logic [63:0]       inval_addr_o,
  // Vector unit status
  output logic              vu_idle_o,
  output logic              reshuffle_o,
  // Memory port towards the interconnect
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
  logic        acc_valid, acc_ready;
  logic [31:0] acc_insn;
  logic [63:0] acc_rs1, acc_rs2;
  logic [4:0]  acc_id;
  logic        disp_load, disp_store, vld_done, vst_done, vec_mem_allow;
  logic        vu_req_valid, vu_req_ready;

  acc_dispatcher #(.Depth(4)) i_acc_dispatcher (
    .clk_i, .rst_ni, .flush_i,
    .push_valid_i, .push_ready_o, .push_insn_i, .push_rs1_i, .push_rs2_i, .push_id_i, .commit_i,
    .is_vector_o, .needs_scalar_o,
    .vec_mem_allow_i(vec_mem_allow), .disp_load_o(disp_load), .disp_store_o(disp_store),
    .req_valid_o(acc_valid), .req_ready_i(acc_ready),
    .req_insn_o(acc_insn), .req_rs1_o(acc_rs1), .req_rs2_o(acc_rs2), .req_id_o(acc_id)
  );

  mem_ordering #(.CntW(4)) i_mem_ordering (
    .clk_i, .rst_ni,
    .disp_load_i(disp_load), .disp_store_i(disp_store),
    .vld_done_i(vld_done), .vst_done_i(vst_done),
    .scalar_store_pending_i,
    .scalar_load_allow_o, .scalar_store_allow_o, .vec_mem_allow_o(vec_mem_allow),
    .vld_inflight_o(), .vst_inflight_o()
  );

  ara #(.NrLanes(NrLanes), .VLEN(VLEN), .NrBanks(NrBanks)) i_ara (
    .clk_i, .rst_ni,
    .acc_req_valid_i(acc_valid), .acc_req_ready_o(acc_ready),
    .acc_req_insn_i(acc_insn), .acc_req_rs1_i(acc_rs1), .acc_req_rs2_i(acc_rs2), .acc_req_id_i(acc_id),
    .acc_resp_valid_o(resp_valid_o), .acc_resp_ready_i(resp_ready_i),
    .acc_resp_result_o(resp_result_o), .acc_resp_id_o(resp_id_o), .acc_resp_err_o(resp_err_o),
    .idle_o(vu_idle_o), .vld_done_o(vld_done), .vst_done_o(vst_done), .reshuffle_o,
    .mem_req_valid_o(vu_req_valid), .mem_req_ready_i(vu_req_ready), .mem_req_we_o,
    .mem_req_addr_o, .mem_req_wdata_o, .mem_req_be_o,
    .mem_resp_valid_i, .mem_resp_ready_o, .mem_resp_rdata_i
  );

  axi_inval_filter #(.BeatBytes(NB), .LineBytes(DCacheLineBytes), .Depth(4)) i_inval (
    .clk_i, .rst_ni,
    .in_valid_i(vu_req_valid), .in_ready_o(vu_req_ready), .in_we_i(mem_req_we_o), .in_addr_i(mem_req_addr_o),
    .out_valid_o(mem_req_valid_o), .out_ready_i(mem_req_ready_i),
    .inval_valid_o, .inval_ready_i, .inval_addr_o
  );

endmodule
