// tb_cf_ift_top: the integrated design end to end, at its default sizes.
//
// Coarse grain (instruction traces handed to the tag mechanism):
//   - benign call with a short string: no exception;
//   - stack buffer overflow over the saved return address: EXC_RA_TAG;
//   - two return addresses protected in the same tag cache slot (evict), the
//     displaced one restored (unchecked), an untrusted store onto the slot
//     (drop);
//   - indirect jump through an untrusted register: EXC_TAINT_JMP.
// Fine grain:
//   - the four-gate Trojan netlist in the gate-level engine, trigger untrusted:
//     the run that lets the trigger reach the output raises exc_glift and names
//     the NAND gate as the first untrusted gate; the run where the XOR output
//     masks the trigger raises nothing;
//   - AES T-table lookups: trusted index, and index with an untrusted bit and
//     checking on (exc_tt).
// Each mechanism is counted and each must occur at least once.
module tb_cf_ift_top;
  import ift_pkg::*;
  localparam int MI = 256, MG = 3840, MO = 160;
  localparam int GW = $clog2(MG), OW = $clog2(MO);
  logic clk = 0, rst_n = 0;
  logic        in_valid, csr_we, csr_hit;
  logic [31:0] in_instr, rf_tags;
  logic [63:0] in_addr, csr_wdata, csr_rdata, exc_tag_addr;
  logic [11:0] csr_addr;
  logic prog_we, omap_we, g_start, g_busy, g_done, g_first_valid, g_leak_any;
  logic [GW-1:0] prog_addr, g_first_idx;
  gate_rec_t prog_gate;
  logic [OW-1:0] omap_addr;
  logic [11:0] omap_sel;
  logic [GW:0] g_n_gates, g_n_tainted;
  logic [OW:0] g_n_out;
  logic [MI-1:0] g_in_val, g_in_taint;
  logic [MO-1:0] g_protect, g_out_val, g_out_taint, g_leak;
  gate_e g_first_type;
  logic tt_valid, tt_check, tt_out_valid;
  logic [7:0] tt_idx, tt_idx_t;
  logic [31:0] tt_entry, tt_entry_t;
  logic exc_tag, exc_glift, exc_tt, sec_exc;
  exc_cause_e exc_tag_cause, sec_cause;
  logic bm, bw, unc, drop, evict, squash;

  cf_ift_top dut (.*, .ev_bypass_m(bm), .ev_bypass_w(bw), .ev_unchecked(unc),
                  .ev_drop(drop), .ev_evict(evict), .ev_squash(squash));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_bm = 0, n_bw = 0, n_unc = 0, n_drop = 0, n_evict = 0, n_squash = 0;
  int n_ra = 0, n_jmp = 0, n_glift = 0, n_tt = 0, n_sec = 0, n_mask = 0;
  always @(negedge clk) begin
    if (bm) n_bm++;
    if (bw) n_bw++;
    if (unc) n_unc++;
    if (drop) n_drop++;
    if (evict) n_evict++;
    if (squash) n_squash++;
    if (exc_tag && exc_tag_cause == EXC_RA_TAG) n_ra++;
    if (exc_tag && exc_tag_cause == EXC_TAINT_JMP) n_jmp++;
    if (exc_glift) n_glift++;
    if (exc_tt) n_tt++;
    if (sec_exc) n_sec++;
  end

  localparam logic [4:0] RA = 1, SP = 2, T0 = 5, A0 = 10, A1 = 11, A5 = 15;
  localparam logic [63:0] INBUF = 64'h1000_0000;

  function automatic logic [31:0] i_t(logic [11:0] imm, logic [4:0] rs1, logic [2:0] f3,
                                      logic [4:0] rd, logic [6:0] opc);
    return {imm, rs1, f3, rd, opc};
  endfunction
  function automatic logic [31:0] s_t(logic [11:0] imm, logic [4:0] rs2, logic [4:0] rs1,
                                      logic [2:0] f3);
    return {imm[11:5], rs2, rs1, f3, imm[4:0], 7'b0100011};
  endfunction
  task automatic issue(logic [31:0] i, logic [63:0] a);
    @(negedge clk); in_valid = 1; in_instr = i; in_addr = a;
  endtask
  task automatic idle(int n); @(negedge clk); in_valid = 0; repeat (n) @(negedge clk); endtask
  task automatic csr_write(logic [11:0] a, logic [63:0] d);
    @(negedge clk); csr_we = 1; csr_addr = a; csr_wdata = d; @(negedge clk); csr_we = 0;
  endtask
  task automatic chk(string w, logic [63:0] got, logic [63:0] exp);
    checks++; if (got !== exp) begin failures++; $display("FAIL %s: %h expected %h", w, got, exp); end
  endtask
  task automatic need(string w, int n);
    checks++; if (n == 0) begin failures++; $display("FAIL mechanism never happened: %s", w); end
  endtask

  task automatic vuln(int len, logic [63:0] sp);
    logic [63:0] fsp;
    fsp = sp - 32;
    issue(i_t(12'hFE0, SP, 3'b000, SP, 7'b0010011), 0);
    issue(s_t(12'd24, RA, SP, F3_SDTCHECK), fsp + 24);
    issue(i_t(12'd8, SP, 3'b000, A0, 7'b0010011), 0);
    for (int k = 0; k < len; k++) begin
      issue(i_t(12'd0, A1, 3'b100, T0, 7'b0000011), INBUF + 64'(k));
      issue(s_t(12'd0, T0, A0, 3'b000), fsp + 8 + 64'(k));
      issue(i_t(12'd1, A0, 3'b000, A0, 7'b0010011), 0);
      issue(i_t(12'd1, A1, 3'b000, A1, 7'b0010011), 0);
    end
    issue(i_t(12'd24, SP, F3_LDTCHECK, RA, 7'b0000011), fsp + 24);
    issue(i_t(12'd32, SP, 3'b000, SP, 7'b0010011), 0);
    issue(i_t(12'd0, RA, 3'b000, 5'd0, 7'b1100111), 64'h1_0150);
    idle(8);
  endtask

  task automatic glift_run(bit [4:0] v, output int cycles);
    @(negedge clk); g_start = 1; g_n_gates = 4; g_n_out = 1;
    g_in_val = '0; g_in_taint = '0; g_in_val[4:0] = v; g_in_taint[4] = 1'b1;
    g_protect = '0; g_protect[0] = 1'b1;
    @(negedge clk); g_start = 0;
    cycles = 1;
    while (!g_done) begin @(negedge clk); cycles++; end
    repeat (2) @(negedge clk);
    #1;
  endtask

  int n0, cyc;
  initial begin
    in_valid = 0; in_instr = 0; in_addr = 0; csr_we = 0; csr_addr = 0; csr_wdata = 0;
    prog_we = 0; prog_addr = 0; prog_gate = '0; omap_we = 0; omap_addr = 0; omap_sel = 0;
    g_start = 0; g_n_gates = 0; g_n_out = 0; g_in_val = 0; g_in_taint = 0; g_protect = 0;
    tt_valid = 0; tt_check = 0; tt_idx = 0; tt_idx_t = 0;
    repeat (3) @(negedge clk); rst_n = 1;

    // ---------------- coarse grain
    csr_write(CSR_UNTR_BASE, INBUF);
    csr_write(CSR_UNTR_MASK, 64'hFFFF_FFFF_FFFF_F000);
    csr_write(CSR_TAGCTRL, 64'h7);
    vuln(4, 64'h7f7e_9b40);
    chk("benign", n_sec, 0);
    vuln(24, 64'h7f7e_9b40);
    chk("overflow caught", n_ra, 1);
    chk("overflow address", exc_tag_addr, 64'h7f7e_9b40 - 8);
    // slot conflicts: 64 entries x 8 bytes -> addresses 512 bytes apart collide
    issue(s_t(12'd0, RA, SP, F3_SDTCHECK), 64'h7f00_0200);
    issue(s_t(12'd0, RA, SP, F3_SDTCHECK), 64'h7f00_0400);     // evicts the first
    issue(i_t(12'd0, SP, F3_LDTCHECK, RA, 7'b0000011), 64'h7f00_0200);  // unchecked
    issue(i_t(12'd0, A1, 3'b100, T0, 7'b0000011), INBUF);       // t0 untrusted
    issue(s_t(12'd0, T0, SP, 3'b000), 64'h7f00_0600);           // cannot be recorded
    issue(i_t(12'd0, SP, F3_LDTCHECK, RA, 7'b0000011), 64'h7f00_0400);  // passes
    idle(8);
    chk("no exception from the conflicts", n_ra, 1);
    // tainted indirect jump
    issue(i_t(12'd0, A1, 3'b011, A5, 7'b0000011), INBUF + 64'h100);
    issue(i_t(12'd0, A5, 3'b000, 5'd0, 7'b1100111), 64'h4141_4141);
    idle(8);
    chk("tainted jump caught", n_jmp, 1);
    chk("sec_cause path", n_sec, 2);

    // ---------------- fine grain: Trojan netlist a=0 b=1 c=2 d=3 T=4
    begin
      gate_rec_t net[4];
      net[0] = '{gate: G_OR,   src0: 12'd0,       src1: 12'd1};
      net[1] = '{gate: G_OR,   src0: 12'd2,       src1: 12'd3};
      net[2] = '{gate: G_XOR,  src0: 12'(MI),     src1: 12'(MI + 1)};
      net[3] = '{gate: G_NAND, src0: 12'(MI + 2), src1: 12'd4};
      for (int i = 0; i < 4; i++) begin
        @(negedge clk); prog_we = 1; prog_addr = GW'(i); prog_gate = net[i];
      end
      @(negedge clk); prog_we = 0; omap_we = 1; omap_addr = 0; omap_sel = 12'(MI + 3);
      @(negedge clk); omap_we = 0;
    end
    glift_run(5'b1_0001, cyc);          // a=1 -> XOR=1, trigger T=1 reaches O
    chk("glift latency", cyc, 1 + 4 + 1 + 1);
    chk("glift output", g_out_val[0], 1'b0);
    chk("glift output untrusted", g_out_taint[0], 1'b1);
    chk("glift violation", n_glift, 1);
    chk("first untrusted gate is the NAND", g_first_type, G_NAND);
    chk("first untrusted gate index", g_first_idx, 3);
    n0 = n_glift;
    glift_run(5'b1_0011, cyc);          // a=b=1, c=d=0 -> XOR=1 -> tainted again
    glift_run(5'b1_0101, cyc);          // a=1, c=1 -> XOR=0 masks T
    chk("masked trigger: output trusted", g_out_taint[0], 1'b0);
    chk("masked trigger: no violation", n_glift, n0 + 1);
    if (!g_out_taint[0] && !g_first_valid) n_mask++;

    // ---------------- fine grain: T-table
    @(negedge clk); tt_valid = 1; tt_idx = 8'h53; tt_idx_t = 8'h00; tt_check = 1;
    @(negedge clk); tt_valid = 0; tt_check = 0;
    chk("T0[53]", tt_entry, 32'hc1eded2c);
    chk("trusted index, trusted entry", tt_entry_t, 32'h0);
    @(negedge clk); tt_valid = 1; tt_idx = 8'h53; tt_idx_t = 8'h01; tt_check = 1;
    @(negedge clk); tt_valid = 0; tt_check = 0;
    chk("untrusted index bit reaches the entry", tt_entry_t != 0, 1);
    idle(2);

    // ---------------- every mechanism happened
    need("bypass from M", n_bm);
    need("bypass from W", n_bw);
    need("squash on exception", n_squash);
    need("return-address exception", n_ra);
    need("tainted-jump exception", n_jmp);
    need("tag cache evict", n_evict);
    need("unchecked LDTCHECK", n_unc);
    need("dropped untrusted store", n_drop);
    need("gate-level violation", n_glift);
    need("gate-level masking of an untrusted input", n_mask);
    need("T-table violation", n_tt);
    $display("mechanisms: bypassM=%0d bypassW=%0d squash=%0d ra=%0d jmp=%0d evict=%0d unchecked=%0d drop=%0d glift=%0d mask=%0d tt=%0d",
             n_bm, n_bw, n_squash, n_ra, n_jmp, n_evict, n_unc, n_drop, n_glift, n_mask, n_tt);
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
