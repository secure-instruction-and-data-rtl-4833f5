// tb_glift_engine: the gate-level IFT engine on two netlists.
//  1. The four-gate Trojan example: a, b -> OR; c, d -> OR; the two results ->
//     XOR; XOR result and the trigger T -> NAND -> output O. T is untrusted.
//     For all 32 input patterns the output value and taint are compared with a
//     reference: O is influenced by T exactly when the XOR output is 1.
//  2. Random netlists (300 gates over 40 inputs, random trust labels) are
//     compared gate by gate with a reference evaluation in the testbench, whose
//     per-gate taint is found by trying both values of each untrusted input.
// The run time from start to done must be 1 + gates + outputs cycles.
module tb_glift_engine;
  import ift_pkg::*;
  localparam int MI = 256, MG = 3840, MO = 160;
  localparam int GW = $clog2(MG), OW = $clog2(MO);
  logic clk = 0, rst_n = 0;
  logic prog_we, omap_we, start, busy, done, g_valid, g_val, g_taint;
  logic [GW-1:0] prog_addr, g_idx;
  gate_rec_t prog_gate;
  logic [OW-1:0] omap_addr;
  logic [11:0] omap_sel;
  logic [GW:0] n_gates;
  logic [OW:0] n_out;
  logic [MI-1:0] in_val, in_taint;
  logic [MO-1:0] out_val, out_taint;
  gate_e g_type;
  int checks = 0, failures = 0;

  glift_engine dut (.clk, .rst_n, .prog_we, .prog_addr, .prog_gate, .omap_we, .omap_addr,
    .omap_sel, .start, .n_gates, .n_out, .in_val, .in_taint, .busy, .done, .out_val,
    .out_taint, .g_valid, .g_idx, .g_type, .g_val, .g_taint);

  always #5 clk = ~clk;

  // reference netlist
  gate_e rg[MG];
  int    rs0[MG], rs1[MG];
  bit    rv[MI+MG], rt[MI+MG];
  int    stream_fail = 0;

  function automatic bit f(gate_e g, bit x, bit y);
    case (g)
      G_BUF: return x;  G_NOT: return !x;
      G_AND: return x & y;  G_OR: return x | y;
      G_NAND: return !(x & y);  G_NOR: return !(x | y);
      G_XOR: return x ^ y;  default: return !(x ^ y);
    endcase
  endfunction

  // per-gate precise shadow by trying the untrusted input values
  task automatic ref_eval(int ng);
    for (int i = 0; i < ng; i++) begin
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

  always @(posedge clk) if (g_valid) begin
    if (g_val !== rv[MI+g_idx] || g_taint !== rt[MI+g_idx]) stream_fail++;
  end

  task automatic load(int ng, int no, int osel[]);
    for (int i = 0; i < ng; i++) begin
      @(negedge clk); prog_we = 1; prog_addr = GW'(i);
      prog_gate = '{gate: rg[i], src0: 12'(rs0[i]), src1: 12'(rs1[i])};
    end
    @(negedge clk); prog_we = 0;
    for (int k = 0; k < no; k++) begin
      @(negedge clk); omap_we = 1; omap_addr = OW'(k); omap_sel = 12'(osel[k]);
    end
    @(negedge clk); omap_we = 0;
  endtask

  task automatic run(int ng, int no, output int cycles);
    @(negedge clk); start = 1; n_gates = (GW+1)'(ng); n_out = (OW+1)'(no);
    in_val = '0; in_taint = '0;
    for (int i = 0; i < MI; i++) begin in_val[i] = rv[i]; in_taint[i] = rt[i]; end
    @(negedge clk); start = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
  endtask

  int cyc;
  int osel[];
  initial begin
    prog_we = 0; omap_we = 0; start = 0; prog_addr = 0; prog_gate = '0; omap_addr = 0;
    omap_sel = 0; n_gates = 0; n_out = 0; in_val = 0; in_taint = 0;
    foreach (rv[i]) begin rv[i] = 0; rt[i] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    // ---- 1. Trojan example: inputs a=0 b=1 c=2 d=3 T=4
    rg[0] = G_OR;   rs0[0] = 0;      rs1[0] = 1;
    rg[1] = G_OR;   rs0[1] = 2;      rs1[1] = 3;
    rg[2] = G_XOR;  rs0[2] = MI + 0; rs1[2] = MI + 1;
    rg[3] = G_NAND; rs0[3] = MI + 2; rs1[3] = 4;
    osel = new[1]; osel[0] = MI + 3;
    load(4, 1, osel);
    for (int v = 0; v < 32; v++) begin
      bit x;
      for (int i = 0; i < 5; i++) begin rv[i] = v[i]; rt[i] = (i == 4); end
      ref_eval(4);
      run(4, 1, cyc);
      x = (v[0] | v[1]) ^ (v[2] | v[3]);
      checks += 3;
      if (out_val[0] !== !(x & v[4])) failures++;
      if (out_taint[0] !== x) begin failures++; $display("FAIL trojan taint v=%0d", v); end
      if (cyc != 1 + 4 + 1 + 1) begin failures++; $display("FAIL latency %0d", cyc); end
    end
    // ---- 2. random netlists
    for (int r = 0; r < 20; r++) begin
      int ng, ni, no;
      ng = 300; ni = 40; no = 16;
      for (int i = 0; i < ng; i++) begin
        rg[i]  = gate_e'($urandom_range(0, 7));
        rs0[i] = (i < 8 || $urandom_range(0, 2) == 0) ? $urandom_range(0, ni - 1) : MI + $urandom_range(0, i - 1);
        rs1[i] = (i < 8 || $urandom_range(0, 2) == 0) ? $urandom_range(0, ni - 1) : MI + $urandom_range(0, i - 1);
      end
      osel = new[no];
      for (int k = 0; k < no; k++) osel[k] = MI + ng - 1 - k * 7;
      load(ng, no, osel);
      for (int t = 0; t < 5; t++) begin
        for (int i = 0; i < ni; i++) begin rv[i] = 1'($urandom); rt[i] = ($urandom_range(0, 5) == 0); end
        ref_eval(ng);
        run(ng, no, cyc);
        for (int k = 0; k < no; k++) begin
          checks += 2;
          if (out_val[k] !== rv[osel[k]]) failures++;
          if (out_taint[k] !== rt[osel[k]]) failures++;
        end
        checks++;
        if (cyc != 1 + ng + no + 1) begin failures++; $display("FAIL latency %0d", cyc); end
      end
    end
    checks++;
    if (stream_fail != 0) begin failures++; $display("FAIL gate stream mismatches %0d", stream_fail); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
