// Self-checking testbench for the operand queue FIFO (operand_queue).
// Random pushes (only when not full) and pops (only when not empty) are
// compared against a reference queue: head data, count, empty and full are
// checked every cycle, and a flush must empty the FIFO in one cycle.
module tb_operand_queue;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic flush, push, pop, empty, full;
  logic [63:0] din, dout;
  logic [2:0] cnt;
  logic [63:0] model[$];
  int checks = 0, failures = 0, nfull = 0;

  operand_queue dut (.clk_i(clk), .rst_ni(rst_n), .flush_i(flush), .push_i(push), .data_i(din),
                     .pop_i(pop), .data_o(dout), .empty_o(empty), .full_o(full), .count_o(cnt));

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    {flush, push, pop} = '0; din = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      checks += 3;
      if (empty !== (model.size() == 0)) failures++;
      if (full !== (model.size() == 4)) failures++;
      if (cnt !== 3'(model.size())) failures++;
      if (model.size() > 0) begin
        checks++;
        if (dout !== model[0]) failures++;
      end
      if (full) nfull++;
      flush = ($urandom_range(0, 199) == 0);
      push = !full && ($urandom_range(0, 2) != 0);
      pop = !empty && ($urandom_range(0, 2) == 0);
      din = {$urandom, $urandom};
      @(posedge clk);
      if (flush) model.delete();
      else begin
        if (pop) void'(model.pop_front());
        if (push) model.push_back(din);
      end
    end
    checks++;
    if (nfull == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
