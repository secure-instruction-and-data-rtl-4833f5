// tb_glift_adder: the adder benchmark workload on the gate-level IFT engine and
// policy checker, both at their default sizes (256 inputs, 3840 gates, 160
// outputs).
//
// The circuit is a 128+128-bit ripple-carry adder with 256 inputs and 129
// outputs (128 sum bits and the carry out). Those are the input and output
// counts of the adder benchmark the gate-level tracking was evaluated on. The
// gate structure here is this testbench's own. Per bit i it uses p = a^b,
// g = a&b, s = p^c, t = p&c and c' = g|t, with bit 0 using no carry in. That is
// 2 + 127*5 = 637 gates, built by the testbench.
//
// Each run checks:
//  * the output values against a + b computed in 129-bit arithmetic;
//  * every streamed gate and every output taint against a reference that tries
//    both values of each untrusted gate input (precise tracking);
//  * the first untrusted gate and the untrusted-gate count reported by the
//    policy checker;
//  * the exception, which must pulse when a protected output (the upper 64 sum
//    bits) is untrusted;
//  * the run time of 1 + 637 + 129 cycles.
// Trust patterns are:
//  * all trusted;
//  * a single untrusted bit of a at a random position (sum bits below it must
//    stay trusted);
//  * random sparse untrusted sets;
//  * the whole of b untrusted.
module tb_glift_adder;
  import ift_pkg::*;
  localparam int MI = 256, MG = 3840, MO = 160;
  localparam int GW = $clog2(MG), OW = $clog2(MO);
  localparam int W = 128, NG = 2 + (W - 1) * 5, NO = W + 1;
  logic clk = 0, rst_n = 0;
  logic prog_we, omap_we, start, busy, done, g_valid, g_val, g_taint;
  logic [GW-1:0] prog_addr, g_idx;
  gate_rec_t prog_gate;
  logic [OW-1:0] omap_addr;
  logic [11:0] omap_sel;
  logic [GW:0] n_gates;
  logic [OW:0] n_out;
  logic [MI-1:0] in_val, in_taint;
  logic [MO-1:0] out_val, out_taint, protect, leak;
  gate_e g_type, first_type;
  logic first_valid, exc, leak_any;
  logic [GW-1:0] first_idx;
  logic [GW:0] n_tainted;
  int checks = 0, failures = 0;

  glift_engine dut (.clk, .rst_n, .prog_we, .prog_addr, .prog_gate, .omap_we, .omap_addr,
    .omap_sel, .start, .n_gates, .n_out, .in_val, .in_taint, .busy, .done, .out_val,
    .out_taint, .g_valid, .g_idx, .g_type, .g_val, .g_taint);
  glift_policy_check pc (.clk, .rst_n, .start, .g_valid, .g_idx, .g_type, .g_taint, .done,
    .out_taint, .protect, .first_valid, .first_idx, .first_type, .n_tainted, .exc,
    .leak_any, .leak);

  always #5 clk = ~clk;

  initial begin
    #2_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  gate_e rg[NG];
  int    rs0[NG], rs1[NG];
  int    osel[NO];
  bit    rv[MI+NG], rt[MI+NG];
  int    stream_fail = 0, exc_seen = 0;

  function automatic bit f(gate_e g, bit x, bit y);
    case (g)
      G_AND: return x & y;
      G_OR:  return x | y;
      G_XOR: return x ^ y;
      default: return 1'b0;
    endcase
  endfunction

  // Netlist of the ripple-carry adder; a[i] is input i, b[i] is input W+i.
  task automatic build();
    int k, c;
    k = 0;
    rg[k] = G_XOR; rs0[k] = 0; rs1[k] = W; osel[0] = MI + k; k++;   // s0 = p0
    rg[k] = G_AND; rs0[k] = 0; rs1[k] = W; c = MI + k; k++;         // c1 = g0
    for (int i = 1; i < W; i++) begin
      int p, g, t;
      rg[k] = G_XOR; rs0[k] = i; rs1[k] = W + i; p = MI + k; k++;
      rg[k] = G_AND; rs0[k] = i; rs1[k] = W + i; g = MI + k; k++;
      rg[k] = G_XOR; rs0[k] = p; rs1[k] = c; osel[i] = MI + k; k++;
      rg[k] = G_AND; rs0[k] = p; rs1[k] = c; t = MI + k; k++;
      rg[k] = G_OR;  rs0[k] = g; rs1[k] = t; c = MI + k; k++;
    end
    osel[W] = c;
  endtask

  // Reference evaluation: per gate, the output is untrusted when some value of
  // its untrusted inputs changes it.
  task automatic ref_eval();
    for (int i = 0; i < NG; i++) begin
      bit x, y, xt, yt, o, t, xx, yy;
      x = rv[rs0[i]]; y = rv[rs1[i]]; xt = rt[rs0[i]]; yt = rt[rs1[i]];
      o = f(rg[i], x, y); t = 0;
      for (int p = 0; p < 4; p++) begin
        xx = xt ? p[0] : x; yy = yt ? p[1] : y;
        if (f(rg[i], xx, yy) != o) t = 1;
      end
      rv[MI+i] = o; rt[MI+i] = t;
    end
  endtask

  always @(posedge clk) begin
    if (g_valid && (g_val !== rv[MI+int'(g_idx)] || g_taint !== rt[MI+int'(g_idx)])) stream_fail++;
    if (exc) exc_seen++;
  end

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic run_case(logic [W-1:0] a, logic [W-1:0] b,
                          logic [W-1:0] at, logic [W-1:0] bt, string name);
    logic [W:0] sum;
    int cycles, first, ntaint, lowest_t;
    bit exp_exc;
    for (int i = 0; i < W; i++) begin
      rv[i] = a[i]; rv[W+i] = b[i]; rt[i] = at[i]; rt[W+i] = bt[i];
    end
    ref_eval();
    first = -1; ntaint = 0;
    for (int i = 0; i < NG; i++) if (rt[MI+i]) begin
      ntaint++;
      if (first < 0) first = i;
    end
    sum = {1'b0, a} + {1'b0, b};
    stream_fail = 0; exc_seen = 0;
    @(negedge clk);
    start = 1; n_gates = (GW+1)'(NG); n_out = (OW+1)'(NO);
    in_val = {b, a}; in_taint = {bt, at};
    @(negedge clk); start = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
    repeat (2) @(negedge clk);
    // counted from the negedge after start to the negedge that sees done
    chk(cycles == 1 + NG + NO + 1, $sformatf("%s latency %0d", name, cycles));
    chk(out_val[NO-1:0] == sum, {name, " sum"});
    exp_exc = 0;
    for (int k = 0; k < NO; k++) begin
      chk(out_taint[k] == rt[osel[k]], $sformatf("%s taint of output %0d", name, k));
      if (k >= W - 64 && k < W && rt[osel[k]]) exp_exc = 1;
    end
    chk(stream_fail == 0, $sformatf("%s gate stream (%0d wrong)", name, stream_fail));
    chk(first_valid == (first >= 0), {name, " first valid"});
    if (first >= 0) begin
      chk(first_idx == GW'(first) && first_type == rg[first], {name, " first untrusted gate"});
    end
    chk(n_tainted == (GW+1)'(ntaint), {name, " untrusted gate count"});
    chk((exc_seen != 0) == exp_exc, {name, " exception"});
    // Bits below the lowest untrusted input position cannot be influenced.
    lowest_t = W;
    for (int i = W - 1; i >= 0; i--) if (at[i] || bt[i]) lowest_t = i;
    for (int i = 0; i < lowest_t; i++) chk(!out_taint[i], $sformatf("%s low bit %0d", name, i));
  endtask

  logic [W-1:0] ra, rb, rat, rbt;
  initial begin
    prog_we = 0; omap_we = 0; start = 0; prog_addr = 0; prog_gate = '0; omap_addr = 0;
    omap_sel = 0; n_gates = 0; n_out = 0; in_val = 0; in_taint = 0;
    protect = '0;
    for (int k = W - 64; k < W; k++) protect[k] = 1'b1;
    foreach (rv[i]) begin rv[i] = 0; rt[i] = 0; end
    build();
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < NG; i++) begin
      @(negedge clk); prog_we = 1; prog_addr = GW'(i);
      prog_gate = '{gate: rg[i], src0: 12'(rs0[i]), src1: 12'(rs1[i])};
    end
    @(negedge clk); prog_we = 0;
    for (int k = 0; k < NO; k++) begin
      @(negedge clk); omap_we = 1; omap_addr = OW'(k); omap_sel = 12'(osel[k]);
    end
    @(negedge clk); omap_we = 0;

    for (int r = 0; r < 8; r++) begin
      for (int w = 0; w < 4; w++) begin
        ra[w*32 +: 32] = $urandom; rb[w*32 +: 32] = $urandom;
      end
      rat = '0; rbt = '0;
      case (r)
        0: ;                                              // all trusted
        1, 2, 3: rat[$urandom_range(W-1)] = 1'b1;         // one untrusted bit
        4, 5, 6: for (int w = 0; w < 4; w++) begin        // sparse random
             rat[w*32 +: 32] = $urandom & $urandom & $urandom;
             rbt[w*32 +: 32] = $urandom & $urandom & $urandom;
           end
        default: rbt = '1;                                // all of b untrusted
      endcase
      if (r == 1) begin ra = '1; rb = '0; end             // long carry chain
      run_case(ra, rb, rat, rbt, $sformatf("run%0d", r));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
