// Memory-ordering issue stall between the scalar core and the vector unit.
//
// The scalar core has a private write-through L1 data cache while the vector
// unit accesses memory through its own port, yet RISC-V requires one coherent
// view of memory. Besides the write-through policy and the invalidation of
// cache lines written by vector stores, the paper orders the two sides with
// three rules, implemented here:
//   1) a scalar load issues only if no vector store is in flight;
//   2) a scalar store issues only if no vector load or store is in flight;
//   3) a vector load or store is dispatched only if no scalar store is pending.
// A vector access is in flight from its dispatch (disp_*_i) to its completion
// in the vector unit (*_done_i); the counters are this design's way of
// tracking that. The outputs are combinational.
module mem_ordering #(
  parameter int unsigned CntW = 4
) (
  input  logic clk_i,
  input  logic rst_ni,
  input  logic disp_load_i,
  input  logic disp_store_i,
  input  logic vld_done_i,
  input  logic vst_done_i,
  input  logic scalar_store_pending_i,
  output logic scalar_load_allow_o,
  output logic scalar_store_allow_o,
  output logic vec_mem_allow_o,
  output logic [CntW-1:0] vld_inflight_o,
  output logic [CntW-1:0] vst_inflight_o
);
  logic [CntW-1:0] vld_q, vst_q;

  assign scalar_load_allow_o  = (vst_q == '0);
  assign scalar_store_allow_o = (vld_q == '0) && (vst_q == '0);
  assign vec_mem_allow_o      = !scalar_store_pending_i && (vld_q != '1) && (vst_q != '1);
  assign vld_inflight_o       = vld_q;
  assign vst_inflight_o       = vst_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      vld_q <= '0;
      vst_q <= '0;
    end else begin
      vld_q <= vld_q + CntW'(disp_load_i) - CntW'(vld_done_i);
      vst_q <= vst_q + CntW'(disp_store_i) - CntW'(vst_done_i);
    end
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni) vld_done_i |-> (vld_q != '0 || disp_load_i))
    else $error("mem_ordering: vector load completion without a load in flight");
  assert property (@(posedge clk_i) disable iff (!rst_ni) vst_done_i |-> (vst_q != '0 || disp_store_i))
    else $error("mem_ordering: vector store completion without a store in flight");

endmodule
