// tb_tag_csr: reset values, writes and reads of the control registers, sticky
// status bits set by event pulses, the saturating violation count and the
// clear-on-write status register.
module tb_tag_csr;
  import ift_pkg::*;
  logic clk = 0, rst_n = 0;
  logic csr_we, csr_hit, ev_exc, ev_unc, ev_drop, ev_evict;
  logic [11:0] csr_addr;
  logic [63:0] csr_wdata, csr_rdata, ev_addr, base, mask;
  exc_cause_e  ev_cause;
  logic [6:0]  count;
  logic enable, jen, uen;
  int checks = 0, failures = 0;

  tag_csr #(.CW(7)) dut (.clk, .rst_n, .csr_we, .csr_addr, .csr_wdata, .csr_rdata, .csr_hit,
    .ev_exc, .ev_cause, .ev_addr, .ev_unchecked(ev_unc), .ev_drop, .ev_evict, .count,
    .enable, .jmp_policy_en(jen), .untr_en(uen), .untr_base(base), .untr_mask(mask));

  always #5 clk = ~clk;

  task automatic chk(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: %h expected %h", what, got, exp); end
  endtask
  task automatic rd(logic [11:0] a, logic [63:0] exp, string what);
    csr_addr = a; #1; chk(what, csr_rdata, exp);
  endtask
  task automatic wr(logic [11:0] a, logic [63:0] d);
    @(negedge clk); csr_we = 1; csr_addr = a; csr_wdata = d; @(negedge clk); csr_we = 0;
  endtask

  initial begin
    csr_we = 0; csr_addr = 0; csr_wdata = 0; ev_exc = 0; ev_unc = 0; ev_drop = 0; ev_evict = 0;
    ev_cause = EXC_NONE; ev_addr = 0; count = 7'd5;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    rd(CSR_TAGCTRL, 64'h3, "ctrl reset");
    chk("enable", enable, 1); chk("jen", jen, 1); chk("uen", uen, 0);
    rd(CSR_TAGSTAT, 64'h0, "stat reset");
    rd(CSR_TAGCOUNT, 64'd5, "count");
    csr_addr = 12'h300; #1; chk("miss", csr_hit, 0);
    wr(CSR_UNTR_BASE, 64'h1000_0000);
    wr(CSR_UNTR_MASK, 64'hFFFF_F000);
    wr(CSR_TAGCTRL, 64'h5);
    chk("base", base, 64'h1000_0000); chk("mask", mask, 64'hFFFF_F000);
    chk("uen on", uen, 1); chk("jen off", jen, 0);
    rd(CSR_UNTR_MASK, 64'hFFFF_F000, "mask read");
    // one violation
    @(negedge clk); ev_exc = 1; ev_cause = EXC_RA_TAG; ev_addr = 64'h7f00_0018;
    @(negedge clk); ev_exc = 0;
    rd(CSR_TAGSTAT, 64'h0103, "stat after one");
    rd(CSR_TAGADDR, 64'h7f00_0018, "addr");
    @(negedge clk); ev_unc = 1; ev_drop = 1; ev_evict = 1; @(negedge clk); ev_unc = 0; ev_drop = 0; ev_evict = 0;
    rd(CSR_TAGSTAT, 64'h013B, "sticky bits");
    // saturating count
    @(negedge clk); ev_exc = 1; ev_cause = EXC_TAINT_JMP;
    repeat (300) @(negedge clk);
    ev_exc = 0;
    rd(CSR_TAGSTAT, 64'hFF3D, "saturated");
    wr(CSR_TAGSTAT, 64'h0);
    rd(CSR_TAGSTAT, 64'h0, "cleared");
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
