// tb_glift_cell: exhaustive check of the shadow-logic cell library.
// For every gate type and every combination of a, b, at, bt, the gate value is
// compared with the Boolean function of the gate, and the taint with a
// brute-force reference: the output is tainted when some choice of values for
// the tainted inputs changes it (precise cell), or when any input is tainted
// (conservative cell). Both variants of the cell are instantiated.
module tb_glift_cell;
  import ift_pkg::*;
  gate_e g;
  logic  a, b, at, bt;
  logic  o_p, ot_p, o_c, ot_c;
  int    checks = 0, failures = 0;

  glift_cell #(.PRECISE(1'b1)) dut_p (.gate(g), .a, .b, .at, .bt, .o(o_p), .ot(ot_p));
  glift_cell #(.PRECISE(1'b0)) dut_c (.gate(g), .a, .b, .at, .bt, .o(o_c), .ot(ot_c));

  function automatic logic ref_f(gate_e gg, logic x, logic y);
    case (gg)
      G_BUF:  return x;
      G_NOT:  return !x;
      G_AND:  return x && y;
      G_OR:   return x || y;
      G_NAND: return !(x && y);
      G_NOR:  return !(x || y);
      G_XOR:  return x != y;
      default: return x == y;
    endcase
  endfunction

  function automatic logic ref_taint(gate_e gg, logic x, logic y, logic xt, logic yt);
    logic r0, xx, yy;
    r0 = ref_f(gg, x, y);
    for (int i = 0; i < 2; i++)
      for (int j = 0; j < 2; j++) begin
        xx = xt ? logic'(i) : x;
        yy = yt ? logic'(j) : y;
        if (gg == G_BUF || gg == G_NOT) yy = y;
        if (ref_f(gg, xx, yy) != r0) return 1'b1;
      end
    return 1'b0;
  endfunction

  initial begin
    for (int gi = 0; gi < 8; gi++)
      for (int v = 0; v < 16; v++) begin
        g  = gate_e'(gi);
        {a, b, at, bt} = 4'(v);
        #1;
        checks += 4;
        if (o_p != ref_f(g, a, b)) begin failures++; $display("value g=%0d v=%0d", gi, v); end
        if (o_c != ref_f(g, a, b)) failures++;
        if (ot_p != ref_taint(g, a, b, at, bt)) begin
          failures++; $display("precise taint g=%0d a=%b b=%b at=%b bt=%b got %b", gi, a, b, at, bt, ot_p);
        end
        if (ot_c != ((g == G_BUF || g == G_NOT) ? at : (at | bt))) failures++;
      end
    // published OR example: b untrusted, a = 1: conservative table marks 1/0
    g = G_OR; a = 1; b = 0; at = 0; bt = 1; #1;
    checks += 2;
    if (ot_c !== 1'b1) failures++;
    if (ot_p !== 1'b0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
