// tb_tag_init: decode checks of the tag initialisation stage against
// hand-assembled RISC-V instructions, including the two secure instructions
// and the untrusted-source window.
module tb_tag_init;
  import ift_pkg::*;
  logic        valid;
  logic [31:0] instr;
  logic [63:0] addr, base, mask;
  logic        untr_en;
  tag_uop_t    uop;
  int checks = 0, failures = 0;

  tag_init dut (.valid, .instr, .addr, .untr_en, .untr_base(base), .untr_mask(mask), .uop);

  function automatic logic [31:0] itype(logic [11:0] imm, logic [4:0] rs1, logic [2:0] f3,
                                        logic [4:0] rd, logic [6:0] opc);
    return {imm, rs1, f3, rd, opc};
  endfunction
  function automatic logic [31:0] stype(logic [11:0] imm, logic [4:0] rs2, logic [4:0] rs1,
                                        logic [2:0] f3);
    return {imm[11:5], rs2, rs1, f3, imm[4:0], 7'b0100011};
  endfunction

  task automatic expect_uop(string what, tag_op_e op, logic wr, logic [4:0] rd,
                            logic u1, logic u2, logic it);
    #1;
    checks++;
    if (uop.op !== op || uop.wr_rd !== wr || (wr && uop.rd !== rd) ||
        uop.use_rs1 !== u1 || uop.use_rs2 !== u2 || uop.init_tag !== it || uop.valid !== valid) begin
      failures++;
      $display("FAIL %s: op=%0d wr=%b rd=%0d u1=%b u2=%b it=%b", what, uop.op, uop.wr_rd,
               uop.rd, uop.use_rs1, uop.use_rs2, uop.init_tag);
    end
  endtask

  initial begin
    valid = 1; addr = 64'h1000; base = 64'h1000_0000; mask = 64'hFFFF_F000; untr_en = 1;
    instr = itype(12'd8, 5'd2, 3'b011, 5'd1, 7'b0000011);          // ld ra,8(sp)
    expect_uop("ld", TOP_LOAD, 1, 5'd1, 1, 0, 0);
    instr = itype(12'd8, 5'd2, 3'b111, 5'd1, 7'b0000011);          // ldtcheck ra,8(sp)
    expect_uop("ldtcheck", TOP_LDT, 1, 5'd1, 1, 0, 0);
    instr = stype(12'd8, 5'd1, 5'd2, 3'b011);                      // sd ra,8(sp)
    expect_uop("sd", TOP_STORE, 0, 5'd0, 1, 1, 0);
    instr = stype(12'd8, 5'd1, 5'd2, 3'b111);                      // sdtcheck ra,8(sp)
    expect_uop("sdtcheck", TOP_SDT, 0, 5'd0, 1, 1, 0);
    instr = {7'b0, 5'd3, 5'd4, 3'b000, 5'd5, 7'b0110011};          // add x5,x4,x3
    expect_uop("add", TOP_ALU, 1, 5'd5, 1, 1, 0);
    instr = itype(12'd1, 5'd4, 3'b000, 5'd6, 7'b0010011);          // addi x6,x4,1
    expect_uop("addi", TOP_ALU, 1, 5'd6, 1, 0, 0);
    instr = {20'h12345, 5'd7, 7'b0110111};                          // lui x7
    expect_uop("lui", TOP_CONST, 1, 5'd7, 0, 0, 0);
    instr = itype(12'd0, 5'd1, 3'b000, 5'd0, 7'b1100111);          // jalr x0,0(ra)  (ret)
    expect_uop("ret", TOP_JALR, 0, 5'd0, 1, 0, 0);
    instr = {7'b0, 5'd3, 5'd4, 3'b000, 5'd0, 7'b1100011};          // beq
    expect_uop("beq", TOP_NONE, 0, 5'd0, 1, 1, 0);
    instr = {7'b0, 5'd3, 5'd4, 3'b000, 5'd0, 7'b0110011};          // add x0 -> no write
    expect_uop("add x0", TOP_ALU, 0, 5'd0, 1, 1, 0);
    // load from the untrusted window
    addr = 64'h1000_0123;
    instr = itype(12'd0, 5'd10, 3'b100, 5'd11, 7'b0000011);        // lbu x11,0(x10)
    expect_uop("lbu untrusted", TOP_LOAD, 1, 5'd11, 1, 0, 1);
    untr_en = 0;
    expect_uop("lbu window off", TOP_LOAD, 1, 5'd11, 1, 0, 0);
    untr_en = 1; addr = 64'h1000_1123;
    expect_uop("lbu outside", TOP_LOAD, 1, 5'd11, 1, 0, 0);
    valid = 0; addr = 64'h1000_0123;
    expect_uop("invalid", TOP_NONE, 0, 5'd0, 1, 0, 0);
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
