// Operand requester of one operand of a lane operation.
//
// On start_i it latches the first VRF word address of the operand (register
// number times words per register) and the number of words the lane has to
// read, then requests one word per cycle from the VRF crossbar. A request is
// raised only when the operand queue it feeds has a free slot for it (free
// slots minus reads already in flight), so read data never overflow the queue.
// The paper names the operand requesters and their arbiter; this credit
// scheme and the one-word-per-cycle rate are this design's choices.
//
// Timing: busy_o is high from start_i until the last word is granted; the data
// of a granted request reach the queue one cycle later (rvalid from the VRF).
module operand_requester #(
  parameter int unsigned AddrW = 9,
  parameter int unsigned QueueDepth = 4,
  localparam int unsigned CntW = $clog2(QueueDepth + 1)
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             start_i,
  input  logic [AddrW-1:0] base_i,
  input  logic [AddrW:0]   nwords_i,
  input  logic [CntW-1:0]  queue_count_i,
  output logic             req_o,
  output logic [AddrW-1:0] addr_o,
  input  logic             gnt_i,
  input  logic             rvalid_i,
  output logic             busy_o
);
  logic [AddrW-1:0] addr_q;
  logic [AddrW:0]   left_q;
  logic [CntW:0]    inflight_q;
  logic             credit;

  assign credit = ({1'b0, queue_count_i} + inflight_q) < (CntW+1)'(QueueDepth);
  assign req_o  = (left_q != 0) && credit;
  assign addr_o = addr_q;
  assign busy_o = (left_q != 0);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      addr_q     <= '0;
      left_q     <= '0;
      inflight_q <= '0;
    end else begin
      if (start_i) begin
        addr_q <= base_i;
        left_q <= nwords_i;
      end else if (req_o && gnt_i) begin
        addr_q <= addr_q + 1'b1;
        left_q <= left_q - 1'b1;
      end
      inflight_q <= inflight_q + (CntW+1)'(req_o && gnt_i) - (CntW+1)'(rvalid_i);
    end
  end

endmodule
