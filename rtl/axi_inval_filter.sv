// Invalidation filter on the vector unit's memory port.
//
// The scalar core's L1 data cache is write-through, so memory is always up to
// date for the vector unit; in the other direction, every line written by a
// vector store must be invalidated in that cache. This filter sits on the
// vector unit's memory request channel: requests pass through unchanged, and
// for every accepted write it queues the address of each cache line the beat
// touches, skipping a line equal to the last one queued. The invalidations
// leave on inval_valid_o/inval_addr_o (valid/ready). A write is held back
// while the queue lacks room for its lines, so no invalidation is lost. The
// 256-bit line follows the paper's D-cache; the queue and the handshake are
// this design's choices.
module axi_inval_filter #(
  parameter int unsigned BeatBytes = 8 * ara_pkg::NR_LANES,
  parameter int unsigned LineBytes = 32,
  parameter int unsigned Depth     = 4
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  // Request channel, vector unit side
  input  logic        in_valid_i,
  output logic        in_ready_o,
  input  logic        in_we_i,
  input  logic [63:0] in_addr_i,
  // Request channel, memory side (data and strobes bypass this block)
  output logic        out_valid_o,
  input  logic        out_ready_i,
  // Invalidations to the L1 data cache
  output logic        inval_valid_o,
  input  logic        inval_ready_i,
  output logic [63:0] inval_addr_o
);
  localparam int unsigned LinesPerBeat = (BeatBytes > LineBytes) ? BeatBytes / LineBytes : 1;
  localparam int unsigned OffW = $clog2(LineBytes);
  localparam int unsigned PtrW = $clog2(Depth);

  logic [63:0]   fifo [Depth];
  logic [PtrW:0] cnt_q;
  logic [PtrW-1:0] rd_q, wr_q;
  logic [63:0]   last_q;
  logic          last_vld_q;

  logic room, wr_acc;
  assign room        = (32'(cnt_q) + LinesPerBeat) <= Depth;
  assign out_valid_o = in_valid_i && (!in_we_i || room);
  assign in_ready_o  = out_ready_i && (!in_we_i || room);
  assign wr_acc      = in_valid_i && in_we_i && in_ready_o;

  assign inval_valid_o = (cnt_q != '0);
  assign inval_addr_o  = fifo[rd_q];

  // Lines touched by the accepted write.
  logic [LinesPerBeat-1:0][63:0] lines;
  logic [LinesPerBeat-1:0]       keep;
  always_comb begin
    for (int i = 0; i < LinesPerBeat; i++) begin
      lines[i] = {in_addr_i[63:OffW], {OffW{1'b0}}} + 64'(i * LineBytes);
      keep[i]  = !(i == 0 && last_vld_q && lines[i] == last_q);
    end
  end

  logic [PtrW:0] npush;
  always_comb begin
    npush = '0;
    for (int i = 0; i < LinesPerBeat; i++) npush = npush + (PtrW+1)'(keep[i]);
    if (!wr_acc) npush = '0;
  end

  logic pop;
  assign pop = inval_valid_o && inval_ready_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cnt_q      <= '0;
      rd_q       <= '0;
      wr_q       <= '0;
      last_q     <= '0;
      last_vld_q <= 1'b0;
    end else begin
      cnt_q <= cnt_q + npush - (PtrW+1)'(pop);
      if (pop) rd_q <= rd_q + 1'b1;
      wr_q  <= wr_q + PtrW'(npush);
      if (wr_acc) begin
        last_q     <= lines[LinesPerBeat-1];
        last_vld_q <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk_i) begin
    if (wr_acc) begin
      logic [PtrW-1:0] p;
      p = wr_q;
      for (int i = 0; i < LinesPerBeat; i++) begin
        if (keep[i]) begin
          fifo[p] <= lines[i];
          p = p + 1'b1;
        end
      end
    end
  end

endmodule
