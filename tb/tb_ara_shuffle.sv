// Self-checking testbench for the shuffle/deshuffle network (ara_shuffle).
// For every element width it builds random beats and checks, element by
// element, that element n of the memory-order beat lands in lane n mod L at
// slot n div L after a shuffle, that a deshuffle restores memory order, and
// that the one-bit (byte enable) instance follows the same permutation.
// The network is combinational; values are checked after a #1 settle.
module tb_ara_shuffle;
  import ara_pkg::*;
  localparam int L = NR_LANES;
  localparam int NB = 8 * L;
  logic [NB-1:0][7:0] mem_b, lane_b, back_b;
  logic [NB-1:0] mem_e, lane_e;
  vew_e eew;
  int checks = 0, failures = 0;

  ara_shuffle #(.NrLanes(L)) u_sh (.deshuffle_i(1'b0), .eew_i(eew), .data_i(mem_b), .data_o(lane_b));
  ara_shuffle #(.NrLanes(L)) u_de (.deshuffle_i(1'b1), .eew_i(eew), .data_i(lane_b), .data_o(back_b));
  ara_shuffle #(.NrLanes(L), .ElemW(1)) u_be (.deshuffle_i(1'b0), .eew_i(eew), .data_i(mem_e), .data_o(lane_e));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 400; t++) begin
      int eb;
      eew = vew_e'(t % 4);
      eb = 1 << (t % 4);
      for (int i = 0; i < NB; i++) mem_b[i] = 8'($urandom);
      mem_e = '0;
      for (int i = 0; i < NB; i++) mem_e[i] = 1'($urandom);
      #1;
      for (int n = 0; n < NB / eb; n++) begin
        for (int k = 0; k < eb; k++) begin
          int lb;
          lb = (n % L) * 8 + (n / L) * eb + k;
          checks++;
          if (lane_b[lb] !== mem_b[n * eb + k] || lane_e[lb] !== mem_e[n * eb + k]) begin
            failures++;
            if (failures < 10) $display("e%0d elem %0d byte %0d: lane %h mem %h", 8 * eb, n, k,
                                        lane_b[lb], mem_b[n * eb + k]);
          end
        end
      end
      checks++;
      if (back_b !== mem_b) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
