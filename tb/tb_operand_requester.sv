// Self-checking testbench for the operand requester (operand_requester).
// The requester is attached to a model of the register-file port (random
// grants, read data one cycle after the grant) and to a reference operand
// queue of depth 4 that is popped at random. Each run must request exactly
// nwords consecutive addresses from the base, must never request when the queue and the reads
// in flight would overflow the queue (the credit check), and must then go
// idle. The queue's occupancy is checked never to exceed its depth, and a
// run with no back-pressure must request one word per cycle.
module tb_operand_requester;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, req, gnt, rvalid, busy, pop, empty, full;
  logic [8:0] base, addr;
  logic [9:0] nw;
  logic [2:0] cnt;
  logic [63:0] qd;
  int checks = 0, failures = 0, credit_stalls = 0;

  operand_requester dut (.clk_i(clk), .rst_ni(rst_n), .start_i(start), .base_i(base),
    .nwords_i(nw), .queue_count_i(cnt), .req_o(req), .addr_o(addr), .gnt_i(gnt),
    .rvalid_i(rvalid), .busy_o(busy));
  // Reference operand queue: depth 4, data are the word addresses read.
  logic [8:0] fifo[$];
  assign cnt   = 3'(fifo.size() > 7 ? 7 : fifo.size());
  assign empty = (fifo.size() == 0);
  assign full  = (fifo.size() >= 4);
  assign qd    = empty ? 64'd0 : {55'd0, fifo[0]};
  always @(posedge clk) begin
    if (!rst_n) fifo.delete();
    else begin
      if (pop && fifo.size() > 0) fifo.pop_front();
      if (rvalid) fifo.push_back(addr_q);
    end
  end

  logic [8:0] addr_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rvalid <= 1'b0;
      addr_q <= '0;
    end else begin
      rvalid <= req && gnt;
      addr_q <= addr;
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int b, input int n, input bit stall);
    int expect_addr, got, cyc;
    @(negedge clk);
    start = 1; base = 9'(b); nw = 10'(n);
    @(negedge clk);
    start = 0;
    expect_addr = b; got = 0; cyc = 0;
    while (got < n) begin
      gnt = stall ? ($urandom_range(0, 2) != 0) : 1'b1;
      pop = !empty && (stall ? ($urandom_range(0, 2) == 0) : 1'b1);
      #1;
      if (busy && !req) credit_stalls++;
      if (req) begin
        checks++;
        if (addr !== 9'(expect_addr)) failures++;
      end
      checks++;
      if (fifo.size() > 4) failures++;   // the queue has overflowed
      if (!empty && pop) begin
        checks++;
        if (qd[8:0] !== 9'(b + got)) failures++;
        got++;
      end
      @(posedge clk);
      if (req && gnt) expect_addr = (expect_addr + 1) % 512;
      cyc++;
      @(negedge clk);
      if (cyc > 20000) break;
    end
    checks++;
    if (busy || got != n) failures++;
    if (!stall) begin
      checks++;
      if (cyc > n + 3) failures++;
    end
  endtask

  initial begin
    start = 0; base = 0; nw = 0; gnt = 0; pop = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 200; r++) run($urandom_range(0, 511), $urandom_range(1, 64), r % 4 != 0);
    checks++;
    if (credit_stalls == 0) failures++;
    $display("credit stalls=%0d", credit_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
