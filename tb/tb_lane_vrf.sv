// Self-checking testbench for one lane's banked register file (lane_vrf).
// The whole array is first written through one master so that a reference
// copy is known. Then all six masters issue random reads and byte-enabled
// writes at once. The expected grant of every master is worked out from the
// bank mapping (word address modulo the bank count) and the fixed priority
// (lower master index wins); read data must come back one cycle after the
// grant and match the reference copy, and a write must update only the bytes
// it enables. Bank conflicts are counted, and the test fails if none occur.
module tb_lane_vrf;
  localparam int M = 6, W = 512, B = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [M-1:0] req, we, gnt, rv;
  logic [M-1:0][8:0] addr;
  logic [M-1:0][63:0] wd, rd;
  logic [M-1:0][7:0] be;
  logic [63:0] model [W];
  int checks = 0, failures = 0, conflicts = 0;

  lane_vrf dut (.clk_i(clk), .rst_ni(rst_n), .req_i(req), .we_i(we), .addr_i(addr),
                .wdata_i(wd), .be_i(be), .gnt_o(gnt), .rvalid_o(rv), .rdata_o(rd));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [M-1:0] exp_gnt, exp_rv_next;
    logic [M-1:0][63:0] exp_rd_next;
    bit busy [B];
    req = '0; we = '0; addr = '0; wd = '0; be = '0;
    exp_rv_next = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < W; a++) begin
      @(negedge clk);
      req = 6'b1; we = 6'b1; addr[0] = 9'(a); wd[0] = {$urandom, $urandom}; be[0] = '1;
      model[a] = wd[0];
      @(posedge clk);
    end
    @(negedge clk);
    req = '0;
    for (int t = 0; t < 6000; t++) begin
      @(negedge clk);
      // Check the read data returned for last cycle's grants.
      for (int m = 0; m < M; m++) begin
        checks++;
        if (rv[m] !== exp_rv_next[m] || (exp_rv_next[m] && rd[m] !== exp_rd_next[m])) begin
          failures++;
          if (failures < 10) $display("t=%0d m=%0d rv=%b rd=%h exp=%h", t, m, rv[m], rd[m], exp_rd_next[m]);
        end
      end
      for (int m = 0; m < M; m++) begin
        req[m] = ($urandom_range(0, 2) != 0);
        we[m] = (m < 2) ? ($urandom_range(0, 1) == 0) : 1'b0;
        addr[m] = 9'($urandom);
        wd[m] = {$urandom, $urandom};
        be[m] = 8'($urandom);
      end
      #1;
      exp_gnt = '0;
      foreach (busy[b]) busy[b] = 0;
      for (int m = 0; m < M; m++) begin
        if (req[m]) begin
          if (!busy[addr[m] % B]) begin
            busy[addr[m] % B] = 1;
            exp_gnt[m] = 1;
          end else conflicts++;
        end
      end
      checks++;
      if (gnt !== exp_gnt) begin
        failures++;
        if (failures < 10) $display("t=%0d gnt=%b exp=%b", t, gnt, exp_gnt);
      end
      exp_rv_next = '0;
      for (int m = 0; m < M; m++) begin
        if (exp_gnt[m] && !we[m]) begin
          exp_rv_next[m] = 1;
          exp_rd_next[m] = model[addr[m]];
        end
      end
      @(posedge clk);
      for (int m = 0; m < M; m++) begin
        if (exp_gnt[m] && we[m])
          for (int k = 0; k < 8; k++) if (be[m][k]) model[addr[m]][8*k +: 8] = wd[m][8*k +: 8];
      end
    end
    checks++;
    if (conflicts == 0) failures++;
    $display("bank conflicts=%0d", conflicts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
