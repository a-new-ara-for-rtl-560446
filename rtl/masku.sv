// Mask unit (MASKU): fetches a mask register and hands each lane its mask bits.
//
// Under RVV 1.0 mask bits are packed one per element from bit 0 of the
// register, so the mask bit of an element is usually held by another lane
// than the element itself. Before a masked operation the unit reads the mask
// register v0 from all lanes, one beat (word k of every lane) at a time,
// deshuffles each beat with the element width v0 was last written with and
// stores the result, a plain VLEN-bit mask vector. While the lanes run the
// operation, each lane asks for the byte enables of the word it is writing
// back: byte j of lane word w of lane l belongs to element
//   ((8*w + j) / SEW_bytes) * NrLanes + l,
// and its enable is that element's mask bit. The mask distribution is the
// paper's; the fetch-then-serve order and the timing are this design's
// choices, as is leaving mask-producing instructions out.
//
// Timing: done_o pulses once the mask vector is complete; the lookups
// (mask_widx_i -> mask_be_o) are combinational.
module masku import ara_pkg::*; #(
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
  // Lane VRF read ports
  output logic [NrLanes-1:0]             rreq_o,
  output logic [NrLanes-1:0][AddrW-1:0]  raddr_o,
  input  logic [NrLanes-1:0]             rgnt_i,
  input  logic [NrLanes-1:0]             rvalid_i,
  input  logic [NrLanes-1:0][63:0]       rdata_i,
  // Mask lookups
  input  logic [NrLanes-1:0][AddrW:0]    mask_widx_i,
  output logic [NrLanes-1:0][7:0]        mask_be_o
);
  typedef enum logic { IDLE, FETCH } state_e;
  state_e state_q;

  logic [VLEN-1:0]          mask_q;
  vew_e                     eew_q, eew_vm_q;
  logic [AddrW:0]           k_q, nbeats_q;
  logic [NrLanes-1:0]       asked_q, got_q;
  logic [NrLanes-1:0][63:0] rd_q;
  logic [NB-1:0][7:0]       deshuf;

  assign req_ready_o = (state_q == IDLE);

  ara_shuffle #(.NrLanes(NrLanes), .ElemW(8)) i_deshuffle (
    .deshuffle_i(1'b1), .eew_i(eew_vm_q), .data_i(rd_q), .data_o(deshuf)
  );

  for (genvar l = 0; l < NrLanes; l++) begin : gen_lane
    assign rreq_o[l]  = (state_q == FETCH) && !asked_q[l] && (k_q != nbeats_q);
    assign raddr_o[l] = AddrW'(k_q);   // v0 starts at VRF word 0
    always_comb begin
      for (int j = 0; j < 8; j++) begin
        logic [AddrW+4:0] e;
        e = ((AddrW+5)'({mask_widx_i[l], 3'b000} + (AddrW+4)'(j)) >> eew_q) * NrLanes + (AddrW+5)'(l);
        mask_be_o[l][j] = (e < (AddrW+5)'(VLEN)) ? mask_q[e[$clog2(VLEN)-1:0]] : 1'b0;
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q  <= IDLE;
      mask_q   <= '0;
      eew_q    <= EW8;
      eew_vm_q <= EW8;
      k_q      <= '0;
      nbeats_q <= '0;
      asked_q  <= '0;
      got_q    <= '0;
      rd_q     <= '0;
      done_o   <= 1'b0;
    end else begin
      done_o <= 1'b0;
      unique case (state_q)
        IDLE: if (req_valid_i) begin
          eew_q    <= req_i.eew;
          eew_vm_q <= req_i.eew_vmask;
          k_q      <= '0;
          // vl mask bits, rounded up to whole beats.
          nbeats_q <= (AddrW+1)'((32'(req_i.vl) + NB * 8 - 1) / (NB * 8));
          asked_q  <= '0;
          got_q    <= '0;
          state_q  <= FETCH;
        end
        default: begin
          for (int l = 0; l < NrLanes; l++) begin
            if (rreq_o[l] && rgnt_i[l]) asked_q[l] <= 1'b1;
            if (rvalid_i[l]) begin
              rd_q[l]  <= rdata_i[l];
              got_q[l] <= 1'b1;
            end
          end
          if (k_q == nbeats_q) begin
            state_q <= IDLE;
            done_o  <= 1'b1;
          end else if (got_q == '1) begin
            mask_q[32'(k_q) * NB * 8 +: NB * 8] <= deshuf;
            asked_q <= '0;
            got_q   <= '0;
            k_q     <= k_q + 1'b1;
          end
        end
      endcase
    end
  end

endmodule
