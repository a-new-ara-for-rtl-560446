// Shuffle / deshuffle of one beat between memory byte order and lane order.
//
// A beat is NrLanes*8 bytes: bytes k*8*NrLanes .. (k+1)*8*NrLanes-1 of a
// vector in memory order correspond exactly to word k of every lane. With
// element width EEW = 2^eew bytes, element n of the beat goes to lane
// (n mod NrLanes), at position n / NrLanes inside that lane's word, so
//   lane byte  l*8 + j  <->  memory byte ((j / EEW) * NrLanes + l) * EEW + j mod EEW.
// Shuffle (deshuffle_i = 0) maps memory order to lane order; deshuffle maps
// back. Each output byte is a 4-input multiplexer selected by the element
// width, as described in the paper. ElemW is the width of one byte slot, so
// the same circuit also remaps byte enables (ElemW = 1). Purely combinational.
module ara_shuffle #(
  parameter int unsigned NrLanes = ara_pkg::NR_LANES,
  parameter int unsigned ElemW   = 8,
  localparam int unsigned NB     = 8 * NrLanes
) (
  input  logic                     deshuffle_i,
  input  ara_pkg::vew_e            eew_i,
  input  logic [NB-1:0][ElemW-1:0] data_i,
  output logic [NB-1:0][ElemW-1:0] data_o
);
  // Memory byte index of lane byte p for element width 2^e bytes.
  function automatic int unsigned mem_idx(int unsigned p, int unsigned e);
    int unsigned l, j, eb;
    eb = 1 << e;
    l  = p / 8;
    j  = p % 8;
    return ((j / eb) * NrLanes + l) * eb + (j % eb);
  endfunction

  always_comb begin
    data_o = '0;
    for (int unsigned p = 0; p < NB; p++) begin
      for (int unsigned e = 0; e < 4; e++) begin
        if (eew_i == ara_pkg::vew_e'(e)) begin
          if (deshuffle_i) data_o[mem_idx(p, e)] = data_i[p];
          else             data_o[p] = data_i[mem_idx(p, e)];
        end
      end
    end
  end

endmodule
