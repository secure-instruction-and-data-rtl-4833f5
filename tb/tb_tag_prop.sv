// tb_tag_prop: the tag propagation pipeline on its own. The testbench plays the
// tag cache (one word, 0x7f00_0040, holds an untrusted tag) and the tag check
// (it raises a violation for an LDTCHECK). It checks register tags after
// untrusted loads, ALU chains that need the M- and W-stage bypasses, constants
// that clear a tag, the store-data tag offered to the cache, the five-cycle
// exception timing and the discarding of younger instructions.
module tb_tag_prop;
  import ift_pkg::*;
  logic clk = 0, rst_n = 0;
  logic        in_valid;
  logic [31:0] in_instr;
  logic [63:0] in_addr, lk_addr, wr_addr, exc_addr;
  tc_lookup_t  lk;
  logic        wr_en, wr_tag, chk_valid, chk_rs1_tag, chk_exc, exc_valid;
  tag_op_e     wr_op, chk_op;
  exc_cause_e  chk_cause, exc_cause;
  logic [31:0] rf_tags;
  logic        bm, bw, sq;
  int checks = 0, failures = 0, n_bm = 0, n_bw = 0, n_st1 = 0, cyc = 0, exc_cyc = -1, sent_cyc = -1;

  tag_prop dut (.clk, .rst_n, .in_valid, .in_instr, .in_addr,
    .untr_en(1'b1), .untr_base(64'h1000_0000), .untr_mask(64'hFFFF_F000),
    .tc_lk_addr(lk_addr), .tc_lk(lk), .tc_wr_en(wr_en), .tc_wr_op(wr_op),
    .tc_wr_addr(wr_addr), .tc_wr_tag(wr_tag), .chk_valid, .chk_op, .chk_rs1_tag,
    .chk_exc, .chk_cause, .exc_valid, .exc_cause, .exc_addr, .rf_tags,
    .ev_bypass_m(bm), .ev_bypass_w(bw), .ev_squash(sq));

  always #5 clk = ~clk;

  // cache and check played by the testbench
  always_comb begin
    lk = '0;
    if (lk_addr[63:3] == 61'h7f00_0040 >> 3) begin lk.hit = 1; lk.tagbit = 1; end
    chk_exc   = chk_valid && chk_op == TOP_LDT;
    chk_cause = chk_exc ? EXC_RA_TAG : EXC_NONE;
  end
  always @(posedge clk) begin
    cyc++;
    if (bm) n_bm++;
    if (bw) n_bw++;
    if (wr_en && wr_op == TOP_STORE && wr_tag) n_st1++;
  end
  always @(negedge clk) if (exc_valid && exc_cyc < 0) exc_cyc = cyc;

  function automatic logic [31:0] ld(logic [4:0] rd, logic [4:0] rs1, logic [2:0] f3);
    return {12'd0, rs1, f3, rd, 7'b0000011};
  endfunction
  function automatic logic [31:0] alu(logic [4:0] rd, logic [4:0] rs1, logic [4:0] rs2);
    return {7'b0, rs2, rs1, 3'b000, rd, 7'b0110011};
  endfunction
  function automatic logic [31:0] sd(logic [4:0] rs2, logic [4:0] rs1);
    return {7'b0, rs2, rs1, 3'b011, 5'd0, 7'b0100011};
  endfunction

  task automatic send(logic [31:0] i, logic [63:0] a);
    @(negedge clk); in_valid = 1; in_instr = i; in_addr = a;
    @(negedge clk); in_valid = 0;
  endtask
  task automatic send_b2b(logic [31:0] i, logic [63:0] a);   // no bubble after
    @(negedge clk); in_valid = 1; in_instr = i; in_addr = a;
  endtask
  task automatic drain; @(negedge clk); in_valid = 0; repeat (6) @(negedge clk); endtask
  task automatic chk(string w, logic got, logic exp);
    checks++; if (got !== exp) begin failures++; $display("FAIL %s: %b", w, got); end
  endtask

  initial begin
    in_valid = 0; in_instr = 0; in_addr = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    // x10 <- untrusted input byte; x11 = x10 + x0 right behind it (M bypass);
    // x13 = x10 + x0 one later (W bypass); x12 = x11 + x1 (W bypass of x11)
    send_b2b(ld(5'd10, 5'd5, 3'b100), 64'h1000_0004);
    send_b2b(alu(5'd11, 5'd10, 5'd0), 0);
    send_b2b(alu(5'd13, 5'd10, 5'd0), 0);
    send_b2b(alu(5'd12, 5'd11, 5'd1), 0);
    send_b2b(alu(5'd14, 5'd1, 5'd2), 0);
    drain;
    chk("x10 untrusted", rf_tags[10], 1);
    chk("x11 via M bypass", rf_tags[11], 1);
    chk("x12 via W bypass", rf_tags[12], 1);
    chk("x13 via W bypass", rf_tags[13], 1);
    chk("x14 trusted", rf_tags[14], 0);
    chk("x0 trusted", rf_tags[0], 0);
    // lui clears x11; trusted load clears x12; load from tagged word taints x15
    send({20'h1, 5'd11, 7'b0110111}, 0);
    send(ld(5'd12, 5'd2, 3'b011), 64'h7f00_0100);
    send(ld(5'd15, 5'd2, 3'b011), 64'h7f00_0044);
    drain;
    chk("lui clears", rf_tags[11], 0);
    chk("trusted load clears", rf_tags[12], 0);
    chk("tagged word load", rf_tags[15], 1);
    // untrusted store data offered to the cache with tag 1
    send(sd(5'd10, 5'd2), 64'h7f00_0100);
    drain;
    chk("store tag offered", n_st1 == 1, 1);
    // violation: LDTCHECK then two younger writes that must be discarded
    send_b2b({12'd8, 5'd2, 3'b111, 5'd1, 7'b0000011}, 64'h7f00_0018);
    sent_cyc = cyc;
    send_b2b(alu(5'd16, 5'd10, 5'd0), 0);
    send_b2b(alu(5'd1, 5'd10, 5'd0), 0);
    drain;
    chk("exc seen", exc_cyc > 0, 1);
    checks++;
    if (exc_cyc - sent_cyc != 5) begin failures++; $display("FAIL exc latency %0d", exc_cyc - sent_cyc); end
    chk("younger x16 discarded", rf_tags[16], 0);
    chk("ldtcheck rd not written", rf_tags[1], 0);
    checks++; if (exc_addr !== 64'h7f00_0018) failures++;
    chk("bypass M used", n_bm >= 1, 1);
    chk("bypass W used", n_bw >= 1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
