// Vector multiplier unit of a lane (integer part of the VMFPU).
//
// SIMD integer multiplier on 64-bit lane words with 8/16/32/64-bit elements:
// vmul returns the low SEW bits of vs2 * vs1, vmacc returns vs1 * vs2 + vd.
// Two pipeline stages: products are registered in the first, the accumulate
// and the output are registered in the second; the whole pipeline stalls when
// the output is not accepted. The paper names the VMFPU as the unit holding
// the SIMD multipliers and the FPU but gives no insides; the floating-point
// part is not built here. The pipeline depth is this design's choice.
//
// Interface: valid_i/ready_o in, valid_o/ready_i out; a_i = vs1 (or the
// replicated scalar), b_i = vs2, c_i = vd (vmacc only).
module vmfpu import ara_pkg::*; (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        valid_i,
  output logic        ready_o,
  input  vop_e        op_i,
  input  vew_e        eew_i,
  input  logic [63:0] a_i,
  input  logic [63:0] b_i,
  input  logic [63:0] c_i,
  output logic        valid_o,
  input  logic        ready_i,
  output logic [63:0] result_o
);
  function automatic logic [63:0] simd_mul(logic [63:0] a, logic [63:0] b, vew_e e);
    logic [63:0] r, m;
    int unsigned w;
    w = 8 << e;
    m = (w == 64) ? '1 : ((64'd1 << w) - 1);
    r = '0;
    for (int i = 0; i < 8; i++)
      if (i < (8 >> e)) r = r | ((((a >> (i * w)) & m) * ((b >> (i * w)) & m) & m) << (i * w));
    return r;
  endfunction

  function automatic logic [63:0] simd_add(logic [63:0] a, logic [63:0] b, vew_e e);
    logic [63:0] r, m;
    int unsigned w;
    w = 8 << e;
    m = (w == 64) ? '1 : ((64'd1 << w) - 1);
    r = '0;
    for (int i = 0; i < 8; i++)
      if (i < (8 >> e)) r = r | (((((a >> (i * w)) & m) + ((b >> (i * w)) & m)) & m) << (i * w));
    return r;
  endfunction

  logic        s1_valid, s2_valid;
  logic [63:0] s1_prod, s1_c, s2_res;
  logic        s1_acc;
  vew_e        s1_eew;
  logic        s1_ready, s2_ready;

  assign s2_ready = !s2_valid || ready_i;
  assign s1_ready = !s1_valid || s2_ready;
  assign ready_o  = s1_ready;
  assign valid_o  = s2_valid;
  assign result_o = s2_res;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      s1_valid <= 1'b0;
      s2_valid <= 1'b0;
      s1_prod  <= '0;
      s1_c     <= '0;
      s1_acc   <= 1'b0;
      s1_eew   <= EW8;
      s2_res   <= '0;
    end else begin
      if (s1_ready) begin
        s1_valid <= valid_i;
        if (valid_i) begin
          s1_prod <= simd_mul(a_i, b_i, eew_i);
          s1_c    <= c_i;
          s1_acc  <= (op_i == OP_VMACC);
          s1_eew  <= eew_i;
        end
      end
      if (s2_ready) begin
        s2_valid <= s1_valid;
        if (s1_valid) s2_res <= s1_acc ? simd_add(s1_prod, s1_c, s1_eew) : s1_prod;
      end
    end
  end

endmodule
