// Vector load/store unit (VLSU): address generation, load unit and store unit.
//
// Unit-stride loads and stores move whole beats of 8*NrLanes bytes: memory
// beat k of the vector is word k of every lane, remapped by the shuffle
// (loads) or deshuffle (stores) circuit for the element width.
//   Address generation: beat k is at base + k*8*NrLanes; the base must be
//     aligned to a beat (this design's restriction).
//   Load unit: issues one read per beat, shuffles each returned beat with the
//     instruction's EEW and writes it to all lanes through their external
//     write ports; tail bytes (beyond vl elements) are not written.
//   Store unit: reads word k from every lane, deshuffles it with the EEW the
//     register was last written with, and issues the write with a byte strobe
//     that covers only the first vl elements.
// The memory port is a simplified in-order request/response channel standing
// in for the AXI port (one response per request, writes included), which is
// this design's choice. ld_pending_o/st_pending_o tell the scalar core's
// ordering logic that vector loads/stores are in flight.
module vlsu import ara_pkg::*; #(
  parameter int unsigned NrLanes = ara_pkg::NR_LANES,
  parameter int unsigned VLEN    = ara_pkg::VLEN,
  localparam int unsigned WordsPerReg = VLEN / 64 / NrLanes,
  localparam int unsigned AddrW = $clog2(NR_VREGS * WordsPerReg),
  localparam int unsigned NB = 8 * NrLanes
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic                 req_valid_i,
  output logic                 req_ready_o,
  input  pe_req_t              req_i,
  output logic                 done_o,
  output logic                 ld_pending_o,
  output logic                 st_pending_o,
  // Memory port
  output logic                 mem_req_valid_o,
  input  logic                 mem_req_ready_i,
  output logic                 mem_req_we_o,
  output logic [63:0]          mem_req_addr_o,
  output logic [NB*8-1:0]      mem_req_wdata_o,
  output logic [NB-1:0]        mem_req_be_o,
  input  logic                 mem_resp_valid_i,
  output logic                 mem_resp_ready_o,
  input  logic [NB*8-1:0]      mem_resp_rdata_i,
  // Lane VRF ports
  output logic [NrLanes-1:0]             wreq_o,
  output logic [NrLanes-1:0][AddrW-1:0]  waddr_o,
  output logic [NrLanes-1:0][63:0]       wdata_o,
  output logic [NrLanes-1:0][7:0]        wbe_o,
  input  logic [NrLanes-1:0]             wgnt_i,
  output logic [NrLanes-1:0]             rreq_o,
  output logic [NrLanes-1:0][AddrW-1:0]  raddr_o,
  input  logic [NrLanes-1:0]             rgnt_i,
  input  logic [NrLanes-1:0]             rvalid_i,
  input  logic [NrLanes-1:0][63:0]       rdata_i
);
  typedef enum logic [1:0] { IDLE, LOAD, STORE } state_e;
  state_e state_q;
  pe_req_t op_q;

  logic [AddrW:0]   nbeats_q, req_cnt_q, resp_cnt_q;
  logic [VL_W+3:0]  nbytes_q;

  logic [VL_W+3:0]  nbytes_d;
  assign nbytes_d = (VL_W+4)'(req_i.vl) << req_i.eew;

  assign req_ready_o = (state_q == IDLE);

  // Valid bytes of beat k, memory order.
  function automatic logic [NB-1:0] beat_be(logic [AddrW:0] k, logic [VL_W+3:0] nb);
    logic [NB-1:0] be;
    for (int i = 0; i < NB; i++) be[i] = (32'(k) * NB + 32'(i)) < 32'(nb);
    return be;
  endfunction

  // ---------------- Load unit ----------------
  logic [NB-1:0][7:0] ld_shuf;
  logic [NB-1:0]      ld_be_shuf;
  logic [NrLanes-1:0][63:0] ld_data_q;
  logic [NrLanes-1:0][7:0]  ld_be_q;
  logic [NrLanes-1:0]       ld_pend_q;
  logic [AddrW:0]           ld_word_q;

  ara_shuffle #(.NrLanes(NrLanes), .ElemW(8)) i_ld_shuffle (
    .deshuffle_i(1'b0), .eew_i(op_q.eew), .data_i(mem_resp_rdata_i), .data_o(ld_shuf)
  );
  ara_shuffle #(.NrLanes(NrLanes), .ElemW(1)) i_ld_be_shuffle (
    .deshuffle_i(1'b0), .eew_i(op_q.eew), .data_i(beat_be(resp_cnt_q, nbytes_q)), .data_o(ld_be_shuf)
  );

  assign mem_resp_ready_o = (state_q == LOAD) ? (ld_pend_q == '0) : 1'b1;

  for (genvar l = 0; l < NrLanes; l++) begin : gen_lane_ports
    assign wreq_o[l]  = ld_pend_q[l];
    assign waddr_o[l] = AddrW'(op_q.vd) * AddrW'(WordsPerReg) + AddrW'(ld_word_q);
    assign wdata_o[l] = ld_data_q[l];
    assign wbe_o[l]   = ld_be_q[l];
  end

  // ---------------- Store unit ----------------
  logic [NrLanes-1:0][63:0] st_data_q;
  logic [NrLanes-1:0]       st_asked_q, st_got_q;
  logic                     st_full;
  logic [NB-1:0][7:0]       st_deshuf;

  assign st_full = (st_got_q == '1);
  ara_shuffle #(.NrLanes(NrLanes), .ElemW(8)) i_st_deshuffle (
    .deshuffle_i(1'b1), .eew_i(op_q.eew_vs2), .data_i(st_data_q), .data_o(st_deshuf)
  );

  for (genvar l = 0; l < NrLanes; l++) begin : gen_st_rd
    assign rreq_o[l]  = (state_q == STORE) && (req_cnt_q != nbeats_q) && !st_asked_q[l];
    assign raddr_o[l] = AddrW'(op_q.vd) * AddrW'(WordsPerReg) + AddrW'(req_cnt_q);
  end

  // ---------------- Address generation / memory requests ----------------
  always_comb begin
    mem_req_valid_o = 1'b0;
    mem_req_we_o    = 1'b0;
    mem_req_addr_o  = op_q.scalar + 64'(req_cnt_q) * NB;
    mem_req_wdata_o = st_deshuf;
    mem_req_be_o    = '0;
    if (state_q == LOAD) begin
      mem_req_valid_o = (req_cnt_q != nbeats_q);
    end else if (state_q == STORE) begin
      mem_req_valid_o = st_full && (req_cnt_q != nbeats_q);
      mem_req_we_o    = 1'b1;
      mem_req_be_o    = beat_be(req_cnt_q, nbytes_q);
    end
  end

  assign ld_pending_o = (state_q == LOAD);
  assign st_pending_o = (state_q == STORE);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q    <= IDLE;
      op_q       <= '0;
      nbeats_q   <= '0;
      nbytes_q   <= '0;
      req_cnt_q  <= '0;
      resp_cnt_q <= '0;
      ld_data_q  <= '0;
      ld_be_q    <= '0;
      ld_pend_q  <= '0;
      ld_word_q  <= '0;
      st_data_q  <= '0;
      st_asked_q <= '0;
      st_got_q   <= '0;
      done_o     <= 1'b0;
    end else begin
      done_o <= 1'b0;
      unique case (state_q)
        IDLE: if (req_valid_i) begin
          op_q       <= req_i;
          nbytes_q   <= nbytes_d;
          nbeats_q   <= (AddrW+1)'((nbytes_d + (VL_W+4)'(NB - 1)) / NB);
          req_cnt_q  <= '0;
          resp_cnt_q <= '0;
                  st_asked_q <= '0;
          st_got_q   <= '0;
          ld_pend_q  <= '0;
          state_q    <= (req_i.op == OP_VSE) ? STORE : LOAD;
        end
        LOAD: begin
          if (mem_req_valid_o && mem_req_ready_i) req_cnt_q <= req_cnt_q + 1'b1;
          // Lanes accept the pending beat.
          ld_pend_q <= ld_pend_q & ~wgnt_i;
          if (mem_resp_valid_i && mem_resp_ready_o) begin
            ld_data_q  <= ld_shuf;
            ld_be_q    <= ld_be_shuf;
            ld_pend_q  <= '1;
            ld_word_q  <= resp_cnt_q;
            resp_cnt_q <= resp_cnt_q + 1'b1;
          end
          if ((resp_cnt_q == nbeats_q) && ((ld_pend_q & ~wgnt_i) == '0)) begin
            state_q <= IDLE;
            done_o  <= 1'b1;
          end
        end
        default: begin // STORE
          for (int l = 0; l < NrLanes; l++) begin
            if (rreq_o[l] && rgnt_i[l]) st_asked_q[l] <= 1'b1;
            if (rvalid_i[l]) begin
              st_data_q[l] <= rdata_i[l];
              st_got_q[l]  <= 1'b1;
            end
          end
          if (mem_req_valid_o && mem_req_ready_i) begin
            req_cnt_q  <= req_cnt_q + 1'b1;
            st_asked_q <= '0;
            st_got_q   <= '0;
          end
          if (mem_resp_valid_i) resp_cnt_q <= resp_cnt_q + 1'b1;
          if (resp_cnt_q == nbeats_q) begin
            state_q <= IDLE;
            done_o  <= 1'b1;
          end
        end
      endcase
    end
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni)
    (req_valid_i && req_ready_o) |-> (req_i.scalar[$clog2(NB)-1:0] == '0))
    else $error("vlsu: base address not aligned to a beat");

endmodule
