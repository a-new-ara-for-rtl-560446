// Self-checking testbench for the lane integer ALU (valu).
// Drives random element-wise operations at every element width and compares
// each result word, one cycle after issue, with a reference computed element
// by element with the simulator's own signed and unsigned arithmetic. It then
// runs complete reductions: a clear, a run of accumulate steps with random
// tail byte enables, and the final fold combined with a scalar operand, and
// compares the outcome with a sum/max/min/and computed over the valid elements.
module tb_valu;
  import ara_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic valid, ready, ovalid;
  logic [1:0] mode;
  vop_e op;
  vew_e eew;
  logic [63:0] a, b, res, acc;
  logic [7:0] be;
  int checks = 0, failures = 0;

  valu dut (.clk_i(clk), .rst_ni(rst_n), .valid_i(valid), .ready_o(ready), .mode_i(mode),
            .op_i(op), .eew_i(eew), .a_i(a), .b_i(b), .be_i(be), .valid_o(ovalid),
            .ready_i(1'b1), .result_o(res), .acc_o(acc));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint sx(logic [63:0] v, int w);
    return (w == 64) ? longint'(v) : longint'(v << (64 - w)) >>> (64 - w);
  endfunction

  function automatic logic [63:0] ref_elem(vop_e o, logic [63:0] x, logic [63:0] y, int w);
    logic [63:0] m, r;
    m = (w == 64) ? '1 : ((64'd1 << w) - 1);
    x &= m; y &= m;
    case (o)
      OP_VADD, OP_VREDSUM: r = y + x;
      OP_VSUB:  r = y - x;
      OP_VAND, OP_VREDAND:  r = x & y;
      OP_VOR, OP_VREDOR:   r = x | y;
      OP_VXOR, OP_VREDXOR:  r = x ^ y;
      OP_VMINU, OP_VREDMINU: r = (y < x) ? y : x;
      OP_VMAXU, OP_VREDMAXU: r = (y > x) ? y : x;
      OP_VMIN, OP_VREDMIN:  r = (sx(y, w) < sx(x, w)) ? y : x;
      OP_VMAX, OP_VREDMAX:  r = (sx(y, w) > sx(x, w)) ? y : x;
      default:  r = x;
    endcase
    return r & m;
  endfunction

  function automatic logic [63:0] ref_word(vop_e o, logic [63:0] x, logic [63:0] y, vew_e e);
    int w = 8 << e;
    logic [63:0] r = '0;
    for (int i = 0; i < 64 / w; i++) begin
      logic [63:0] xe, ye;
      xe = x >> (i * w);
      ye = y >> (i * w);
      r |= ref_elem(o, xe, ye, w) << (i * w);
    end
    return r;
  endfunction

  task automatic step(input logic [1:0] md, input vop_e o, input vew_e e,
                      input logic [63:0] av, input logic [63:0] bv, input logic [7:0] bev);
    @(negedge clk);
    valid = 1; mode = md; op = o; eew = e; a = av; b = bv; be = bev;
    @(negedge clk);
    valid = 0;
  endtask

  vop_e elem_ops[10] = '{OP_VADD, OP_VSUB, OP_VAND, OP_VOR, OP_VXOR, OP_VMINU, OP_VMIN,
                         OP_VMAXU, OP_VMAX, OP_VMERGE};
  vop_e red_ops[8] = '{OP_VREDSUM, OP_VREDAND, OP_VREDOR, OP_VREDXOR, OP_VREDMINU,
                       OP_VREDMIN, OP_VREDMAXU, OP_VREDMAX};

  initial begin
    valid = 0; mode = 0; op = OP_VADD; eew = EW8; a = 0; b = 0; be = '1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // Element-wise: the result is valid exactly one cycle after issue.
    for (int t = 0; t < 2000; t++) begin
      vop_e o;
      vew_e e;
      logic [63:0] av, bv;
      o = elem_ops[$urandom_range(0, 9)];
      e = vew_e'($urandom_range(0, 3));
      av = {$urandom, $urandom};
      bv = {$urandom, $urandom};
      if (t % 7 == 0) bv = av ^ 64'h8000_0000_8000_0080;   // near-equal operands
      step(2'd0, o, e, av, bv, '1);
      checks++;
      if (!ovalid || res !== ref_word(o, av, bv, e)) begin
        failures++;
        if (failures < 10) $display("ELEM %s e%0d a=%h b=%h got=%h exp=%h v=%b",
                                    o.name(), 8 << e, av, bv, res, ref_word(o, av, bv, e), ovalid);
      end
    end
    // Reductions: clear, accumulate nw words, final fold with scalar s.
    for (int t = 0; t < 300; t++) begin
      vop_e o;
      vew_e e;
      int w, nw, ne;
      logic [63:0] s, exp, wv, first;
      logic [7:0] bev;
      logic have;
      o = red_ops[$urandom_range(0, 7)];
      e = vew_e'($urandom_range(0, 3));
      w = 8 << e;
      nw = $urandom_range(1, 6);
      s = {$urandom, $urandom};
      exp = s & ((w == 64) ? '1 : ((64'd1 << w) - 1));
      step(2'd0, o, e, 64'd0, 64'd0, '1);
      for (int k = 0; k < nw; k++) begin
        wv = {$urandom, $urandom};
        ne = (k == nw - 1) ? $urandom_range(1, 64 / w) : 64 / w;
        bev = 8'((16'd1 << (ne * w / 8)) - 1);
        for (int i = 0; i < ne; i++) exp = ref_elem(o, exp, wv >> (i * w), w);
        step(2'd1, o, e, 64'd0, wv, bev);
      end
      step(2'd3, o, e, s, 64'd0, '1);
      checks++;
      if (!ovalid || (res & ((w == 64) ? '1 : ((64'd1 << w) - 1))) !== exp) begin
        failures++;
        if (failures < 10) $display("RED %s e%0d got=%h exp=%h", o.name(), w, res, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
