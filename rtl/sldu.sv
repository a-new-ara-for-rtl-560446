// Slide unit (SLDU): slides, reshuffles and inter-lane reduction moves.
//
// Slides work one beat (word k of every lane, 8*NrLanes bytes) at a time:
// the beat is read from all lanes, deshuffled to memory byte order with the
// encoding the source register was written with, shifted by the slide amount
// in bytes (offset * SEW) together with the previous beat, shuffled with the
// destination element width and written back to all lanes. Byte enables keep
// the elements below the offset (vslideup) and beyond vl untouched.
//   vslideup   vd[i+off] = vs2[i]
//   vslidedown vd[i]     = vs2[i+off], 0 past the end of the register group
//   reshuffle  a slide by 0 over a whole register whose source and destination
//              element widths differ; the paper's way to keep tail elements
//              valid when a register changes its element width.
// For reductions, after the intra-lane step, the unit moves partial results
// among the lanes in log2(NrLanes) steps: in step s, lane l (l mod 2^(s+1) = 0)
// receives the accumulator of lane l + 2^s, which its VALU combines. Each step
// takes two cycles (capture, deliver), modelling the slide-ALU feedback the
// paper describes. The algorithms are the paper's; the beat-serial datapath
// and its timing are this design's choices.
module sldu import ara_pkg::*; #(
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
  input  logic                 red_start_i,   // start the inter-lane reduction
  output logic                 done_o,
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
  input  logic [NrLanes-1:0][63:0]       rdata_i,
  // Reduction network
  input  logic [NrLanes-1:0][63:0]       red_acc_i,
  output logic [NrLanes-1:0]             red_valid_o,
  output logic [NrLanes-1:0][63:0]       red_data_o
);
  localparam int unsigned Steps = $clog2(NrLanes);
  localparam int unsigned SW    = $clog2(NB);

  typedef enum logic [2:0] { IDLE, READ, WRITE, RED_CAP, RED_GIVE } state_e;
  state_e state_q;
  pe_req_t op_q;

  logic [AddrW:0]     k_q, last_k_q, nsrc_q;
  logic [AddrW+6:0]   off_bytes_q;
  logic [SW-1:0]      sh_q;
  logic [AddrW:0]     q_q;
  logic               down_q;
  logic [NB-1:0][7:0] prev_q, cur;
  logic [NrLanes-1:0][63:0] rd_q;
  logic [NrLanes-1:0] asked_q, got_q, wpend_q;
  logic [NrLanes-1:0][63:0] wdata_q;
  logic [NrLanes-1:0][7:0]  wbe_q;
  logic [AddrW:0]     wbeat_q;
  logic [7:0]         step_q;
  logic [NrLanes-1:0][63:0] red_q;

  assign req_ready_o = (state_q == IDLE);

  // Request decoding.
  logic [VL_W+3:0]  nbytes_d;
  logic [AddrW+6:0] offb_d;
  logic [AddrW:0]   nout_d, q_d;
  always_comb begin
    nbytes_d = (VL_W+4)'(req_i.vl) << req_i.eew;
    nout_d   = (AddrW+1)'((nbytes_d + (VL_W+4)'(NB - 1)) / NB);
    offb_d   = (req_i.op == OP_VRESHUFFLE) ? '0 : (AddrW+7)'(req_i.scalar) << req_i.eew;
    q_d      = (AddrW+1)'(offb_d / NB);
  end

  // Source beat, memory byte order; zero past the register group.
  logic [NB-1:0][7:0] src_deshuf;
  ara_shuffle #(.NrLanes(NrLanes), .ElemW(8)) i_src (
    .deshuffle_i(1'b1), .eew_i(op_q.eew_vs2), .data_i(rd_q), .data_o(src_deshuf)
  );
  assign cur = (k_q < nsrc_q) ? src_deshuf : '0;

  // Output beat and its byte enables.
  logic [2*NB-1:0][7:0] cat, shifted;
  logic [NB-1:0][7:0]   out_beat;
  logic [NB-1:0]        out_be;
  logic [AddrW:0]       j;
  logic                 has_out;
  always_comb begin
    cat = {cur, prev_q};
    if (down_q) shifted = cat >> (32'(sh_q) * 8);
    else        shifted = cat >> ((NB - 32'(sh_q)) * 8);
    out_beat = shifted[NB-1:0];
    if (!down_q && sh_q == '0) out_beat = cur;
    if (down_q) begin
      has_out = (k_q > q_q);
      j       = k_q - q_q - 1'b1;
    end else begin
      has_out = 1'b1;
      j       = k_q + q_q;
    end
    for (int b = 0; b < NB; b++) begin
      logic [AddrW+6:0] g, e;
      g = (AddrW+7)'(j) * NB + (AddrW+7)'(b);
      e = g >> op_q.eew;
      out_be[b] = (e < (AddrW+7)'(op_q.vl)) && (down_q || (g >= off_bytes_q));
    end
  end

  logic [NB-1:0][7:0] out_shuf;
  logic [NB-1:0]      be_shuf;
  ara_shuffle #(.NrLanes(NrLanes), .ElemW(8)) i_dst (
    .deshuffle_i(1'b0), .eew_i(op_q.eew), .data_i(out_beat), .data_o(out_shuf)
  );
  ara_shuffle #(.NrLanes(NrLanes), .ElemW(1)) i_dst_be (
    .deshuffle_i(1'b0), .eew_i(op_q.eew), .data_i(out_be), .data_o(be_shuf)
  );

  for (genvar l = 0; l < NrLanes; l++) begin : gen_ports
    assign rreq_o[l]  = (state_q == READ) && !asked_q[l];
    assign raddr_o[l] = AddrW'(op_q.vs2) * AddrW'(WordsPerReg) + AddrW'(k_q);
    assign wreq_o[l]  = (state_q == WRITE) && wpend_q[l];
    assign waddr_o[l] = AddrW'(op_q.vd) * AddrW'(WordsPerReg) + AddrW'(wbeat_q);
    assign wdata_o[l] = wdata_q[l];
    assign wbe_o[l]   = wbe_q[l];
  end

  // Reduction moves.
  always_comb begin
    red_valid_o = '0;
    red_data_o  = red_q;
    if (state_q == RED_GIVE) begin
      for (int l = 0; l < NrLanes; l++)
        if ((l % (2 << step_q)) == 0 && (l + (1 << step_q)) < NrLanes) red_valid_o[l] = 1'b1;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= IDLE;
      op_q <= '0;
      k_q <= '0; last_k_q <= '0; nsrc_q <= '0; off_bytes_q <= '0; sh_q <= '0; q_q <= '0;
      down_q <= 1'b0; prev_q <= '0; rd_q <= '0; asked_q <= '0; got_q <= '0;
      wpend_q <= '0; wdata_q <= '0; wbe_q <= '0; wbeat_q <= '0; step_q <= '0; red_q <= '0;
      done_o <= 1'b0;
    end else begin
      done_o <= 1'b0;
      unique case (state_q)
        IDLE: begin
          if (red_start_i) begin
            step_q  <= '0;
            state_q <= (Steps == 0) ? IDLE : RED_CAP;
            done_o  <= (Steps == 0);
          end else if (req_valid_i) begin
            op_q        <= req_i;
            off_bytes_q <= offb_d;
            sh_q        <= SW'(offb_d % NB);
            q_q         <= q_d;
            down_q      <= (req_i.op == OP_VSLIDEDOWN);
            nsrc_q      <= (AddrW+1)'(req_i.lmul) * (AddrW+1)'(WordsPerReg);
            prev_q      <= '0;
            asked_q     <= '0;
            got_q       <= '0;
            if (req_i.op == OP_VSLIDEDOWN) begin
              k_q      <= q_d;
              last_k_q <= q_d + nout_d;
              state_q  <= (nout_d == 0) ? IDLE : READ;
              done_o   <= (nout_d == 0);
            end else begin
              k_q      <= '0;
              last_k_q <= (nout_d > q_d) ? nout_d - q_d - 1'b1 : '0;
              state_q  <= (nout_d > q_d) ? READ : IDLE;
              done_o   <= !(nout_d > q_d);
            end
          end
        end
        READ: begin
          for (int l = 0; l < NrLanes; l++) begin
            if (rreq_o[l] && rgnt_i[l]) asked_q[l] <= 1'b1;
            if (rvalid_i[l]) begin
              rd_q[l]  <= rdata_i[l];
              got_q[l] <= 1'b1;
            end
          end
          if (got_q == '1) begin
            // A full source beat is available: produce the output beat.
            asked_q <= '0;
            got_q   <= '0;
            if (has_out) begin
              wdata_q <= out_shuf;
              wbe_q   <= be_shuf;
              wbeat_q <= j;
              wpend_q <= '1;
              state_q <= WRITE;
            end else begin
              prev_q <= cur;
              k_q    <= k_q + 1'b1;
            end
          end
        end
        WRITE: begin
          wpend_q <= wpend_q & ~wgnt_i;
          if ((wpend_q & ~wgnt_i) == '0) begin
            prev_q <= cur;
            k_q    <= k_q + 1'b1;
            if (k_q == last_k_q) begin
              state_q <= IDLE;
              done_o  <= 1'b1;
            end else begin
              state_q <= READ;
            end
          end
        end
        RED_CAP: begin
          for (int l = 0; l < NrLanes; l++)
            red_q[l] <= (l + (1 << step_q) < NrLanes) ? red_acc_i[l + (1 << step_q)] : '0;
          state_q <= RED_GIVE;
        end
        default: begin // RED_GIVE
          if (32'(step_q) == Steps - 1) begin
            state_q <= IDLE;
            done_o  <= 1'b1;
          end else begin
            step_q  <= step_q + 1'b1;
            state_q <= RED_CAP;
          end
        end
      endcase
    end
  end

endmodule
