// tb_tag_module: the tag mechanism end to end on instruction traces of a
// stack buffer overflow, as a core would hand them over.
//
// The vulnerable function saves its return address with SDTCHECK, copies a
// string from the untrusted input window into a 5-byte stack buffer one byte at
// a time (lbu/sb), and restores the return address with LDTCHECK.
//   run 1: a 4-character string fits; no exception; the protected entry is
//          released (occupancy back to the count of tagged buffer words).
//   run 2: a 24-character string overruns the buffer and the saved return
//          address; LDTCHECK raises EXC_RA_TAG at the return-address word.
//   run 3: the same attack with checking disabled in TAGCTRL goes unnoticed.
//   run 4: an indirect jump through a register loaded from the untrusted window
//          raises EXC_TAINT_JMP.
// CSR status and address registers are read back after each run.
module tb_tag_module;
  import ift_pkg::*;
  logic clk = 0, rst_n = 0;
  logic        in_valid, csr_we, csr_hit, exc_valid;
  logic [31:0] in_instr, rf_tags;
  logic [63:0] in_addr, csr_wdata, csr_rdata, exc_addr;
  logic [11:0] csr_addr;
  exc_cause_e  exc_cause;
  logic bm, bw, unc, drop, evict, squash;
  int checks = 0, failures = 0, n_exc = 0, n_bm = 0;
  exc_cause_e last_cause;
  logic [63:0] last_addr;

  tag_module #(.TC_ENTRIES(64)) dut (.clk, .rst_n, .in_valid, .in_instr, .in_addr,
    .csr_we, .csr_addr, .csr_wdata, .csr_rdata, .csr_hit,
    .exc_valid, .exc_cause, .exc_addr, .rf_tags,
    .ev_bypass_m(bm), .ev_bypass_w(bw), .ev_unchecked(unc), .ev_drop(drop),
    .ev_evict(evict), .ev_squash(squash));

  always #5 clk = ~clk;
  always @(negedge clk) if (bm) n_bm++;
  always @(negedge clk) if (exc_valid) begin
    n_exc++; last_cause = exc_cause; last_addr = exc_addr;
  end

  localparam logic [4:0] RA = 1, SP = 2, T0 = 5, A0 = 10, A1 = 11, A5 = 15;
  localparam logic [63:0] INBUF = 64'h1000_0000;   // untrusted input window

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
  task automatic csr_read(logic [11:0] a, output logic [63:0] d);
    csr_addr = a; #1; d = csr_rdata;
  endtask
  task automatic chk(string w, logic [63:0] got, logic [63:0] exp);
    checks++; if (got !== exp) begin failures++; $display("FAIL %s: %h expected %h", w, got, exp); end
  endtask

  // vuln(str): char buf[5]; strcpy(buf, str); return;
  task automatic vuln(int len, logic [63:0] sp);
    logic [63:0] fsp = sp - 32;
    issue(i_t(12'hFE0, SP, 3'b000, SP, 7'b0010011), 0);                   // addi sp,sp,-32
    issue(s_t(12'd24, RA, SP, F3_SDTCHECK), fsp + 24);                    // sdtcheck ra,24(sp)
    issue(i_t(12'd8, SP, 3'b000, A0, 7'b0010011), 0);                     // addi a0,sp,8
    for (int k = 0; k < len; k++) begin
      issue(i_t(12'd0, A1, 3'b100, T0, 7'b0000011), INBUF + 64'(k));      // lbu t0,0(a1)
      issue(s_t(12'd0, T0, A0, 3'b000), fsp + 8 + 64'(k));               // sb t0,0(a0)
      issue(i_t(12'd1, A0, 3'b000, A0, 7'b0010011), 0);                   // addi a0,a0,1
      issue(i_t(12'd1, A1, 3'b000, A1, 7'b0010011), 0);                   // addi a1,a1,1
    end
    issue(i_t(12'd24, SP, F3_LDTCHECK, RA, 7'b0000011), fsp + 24);        // ldtcheck ra,24(sp)
    issue(i_t(12'd32, SP, 3'b000, SP, 7'b0010011), 0);                    // addi sp,sp,32
    issue(i_t(12'd0, RA, 3'b000, 5'd0, 7'b1100111), 64'h1_0150);          // ret
    idle(8);
  endtask

  logic [63:0] d;
  initial begin
    in_valid = 0; in_instr = 0; in_addr = 0; csr_we = 0; csr_addr = 0; csr_wdata = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    csr_write(CSR_UNTR_BASE, INBUF);
    csr_write(CSR_UNTR_MASK, 64'hFFFF_FFFF_FFFF_F000);
    csr_write(CSR_TAGCTRL, 64'h7);
    // run 1: benign
    vuln(4, 64'h7f7e_9b40);
    chk("benign: no exception", n_exc, 0);
    csr_read(CSR_TAGCOUNT, d);
    chk("benign: RA entry released, one tagged buffer word", d, 1);
    csr_read(CSR_TAGSTAT, d);
    chk("benign: status clear", d, 0);
    // run 2: overflow
    vuln(24, 64'h7f7e_9b40);
    chk("attack: one exception", n_exc, 1);
    chk("attack: cause", last_cause, EXC_RA_TAG);
    chk("attack: address", last_addr, 64'h7f7e_9b40 - 32 + 24);
    chk("attack: ra not loaded", rf_tags[RA], 0);
    csr_read(CSR_TAGSTAT, d);
    chk("attack: status", d, 64'h0103);
    csr_read(CSR_TAGADDR, d);
    chk("attack: TAGADDR", d, 64'h7f7e_9b40 - 32 + 24);
    csr_write(CSR_TAGSTAT, 0);
    // run 3: same attack, checking disabled
    csr_write(CSR_TAGCTRL, 64'h4);
    vuln(24, 64'h7f7e_8b40);
    chk("disabled: no new exception", n_exc, 1);
    chk("disabled: ra now untrusted", rf_tags[RA], 1);
    // run 4: tainted indirect jump
    csr_write(CSR_TAGCTRL, 64'h7);
    issue(i_t(12'd0, A1, 3'b011, A5, 7'b0000011), INBUF + 64'h100);      // ld a5,0(a1)
    issue(i_t(12'd0, A5, 3'b000, 5'd0, 7'b1100111), 64'h4141_4141);      // jr a5
    idle(8);
    chk("jump: exception", n_exc, 2);
    chk("jump: cause", last_cause, EXC_TAINT_JMP);
    chk("bypass used", n_bm > 0, 1);
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
