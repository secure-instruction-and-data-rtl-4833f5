// tb_glift_policy_check: the policy checker fed with random gate streams. The
// testbench keeps its own record of the first untrusted gate, the count of
// untrusted gates and the protected outputs that were reached, and compares
// them, and the exception pulse, with the unit's outputs after each run.
module tb_glift_policy_check;
  import ift_pkg::*;
  localparam int MG = 64, MO = 8, GW = $clog2(MG);
  logic clk = 0, rst_n = 0;
  logic start, g_valid, g_taint, done, first_valid, exc, leak_any;
  logic [GW-1:0] g_idx, first_idx;
  gate_e g_type, first_type;
  logic [MO-1:0] out_taint, protect, leak;
  logic [GW:0] n_tainted;
  int checks = 0, failures = 0, n_exc = 0;

  glift_policy_check #(.MAX_GATES(MG), .MAX_OUT(MO)) dut (.clk, .rst_n, .start, .g_valid,
    .g_idx, .g_type, .g_taint, .done, .out_taint, .protect, .first_valid, .first_idx,
    .first_type, .n_tainted, .exc, .leak_any, .leak);

  always #5 clk = ~clk;
  always @(negedge clk) if (exc) n_exc++;

  initial begin
    start = 0; g_valid = 0; g_taint = 0; done = 0; g_idx = 0; g_type = G_BUF;
    out_taint = 0; protect = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 200; r++) begin
      int ng, cnt, fi, pexc, density;
      gate_e ft;
      ng = $urandom_range(1, MG - 1); cnt = 0; fi = -1; ft = G_BUF;
      density = $urandom_range(0, 20);
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      n_exc = 0;
      for (int i = 0; i < ng; i++) begin
        g_valid = 1; g_idx = GW'(i); g_type = gate_e'($urandom_range(0, 7));
        g_taint = ($urandom_range(0, 99) < density);
        if (g_taint) begin cnt++; if (fi < 0) begin fi = i; ft = g_type; end end
        @(negedge clk);
      end
      g_valid = 0;
      out_taint = MO'($urandom); protect = MO'($urandom);
      if (density == 0) out_taint = '0;
      done = 1; @(negedge clk); done = 0; @(negedge clk);
      pexc = |(out_taint & protect);
      checks += 6;
      if (first_valid !== (fi >= 0)) failures++;
      if (fi >= 0 && (int'(first_idx) != fi || first_type !== ft)) begin
        failures++; $display("FAIL first %0d/%0d", first_idx, fi);
      end
      if (int'(n_tainted) != cnt) begin failures++; $display("FAIL count %0d/%0d", n_tainted, cnt); end
      if (leak !== (out_taint & protect)) failures++;
      if (leak_any !== |out_taint) failures++;
      if (n_exc != pexc) begin failures++; $display("FAIL exc %0d/%0d", n_exc, pexc); end
    end
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
