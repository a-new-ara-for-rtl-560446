// Operand queue: a small FIFO between the VRF and a functional unit.
//
// Operands read from the VRF arrive one cycle after their bank grant and are
// buffered here until the functional unit consumes them, decoupling bank
// conflicts from the datapath. The paper names the queues (OpQueues) but not
// their depth; Depth = 4 is this design's choice. The queue also reports how
// many entries are free so that the operand requester never has more reads in
// flight than free slots (credit-based flow control).
//
// Interface: push_i/data_i write (ignored when full), pop_i/data_o read the
// head (first-word fall-through), count_o is the current occupancy.
module operand_queue #(
  parameter int unsigned Width = 64,
  parameter int unsigned Depth = 4,
  localparam int unsigned CntW = $clog2(Depth + 1)
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             flush_i,
  input  logic             push_i,
  input  logic [Width-1:0] data_i,
  input  logic             pop_i,
  output logic [Width-1:0] data_o,
  output logic             empty_o,
  output logic             full_o,
  output logic [CntW-1:0]  count_o
);
  localparam int unsigned PtrW = (Depth > 1) ? $clog2(Depth) : 1;

  logic [Width-1:0] mem [Depth];
  logic [PtrW-1:0]  rd_ptr, wr_ptr;
  logic [CntW-1:0]  cnt;
  logic             do_push, do_pop;

  assign empty_o = (cnt == 0);
  assign full_o  = (cnt == CntW'(Depth));
  assign count_o = cnt;
  assign data_o  = mem[rd_ptr];
  assign do_push = push_i && !full_o;
  assign do_pop  = pop_i && !empty_o;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      cnt    <= '0;
    end else if (flush_i) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      cnt    <= '0;
    end else begin
      if (do_push) wr_ptr <= (wr_ptr == PtrW'(Depth - 1)) ? '0 : wr_ptr + 1'b1;
      if (do_pop)  rd_ptr <= (rd_ptr == PtrW'(Depth - 1)) ? '0 : rd_ptr + 1'b1;
      cnt <= cnt + CntW'(do_push) - CntW'(do_pop);
    end
  end

  always_ff @(posedge clk_i) begin
    if (do_push) mem[wr_ptr] <= data_i;
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni) !(push_i && full_o && !pop_i))
    else $error("operand_queue: push into a full queue");

endmodule
