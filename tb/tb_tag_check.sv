// tb_tag_check: all combinations of the policy inputs against the policy rules
// written out independently in the testbench.
module tb_tag_check;
  import ift_pkg::*;
  logic       enable, jen, valid, rs1_tag, exc, unchecked;
  tag_op_e    op;
  tc_lookup_t lk;
  exc_cause_e cause;
  int checks = 0, failures = 0;

  tag_check dut (.enable, .jmp_policy_en(jen), .valid, .op, .lk, .rs1_tag, .exc, .cause, .unchecked);

  initial begin
    for (int v = 0; v < (1 << 11); v++) begin
      logic e_exc, e_unc;
      exc_cause_e e_cause;
      {enable, jen, valid, rs1_tag, lk} = v[7:0];
      op = tag_op_e'(v[10:8]);
      #1;
      e_exc = 0; e_unc = 0; e_cause = EXC_NONE;
      if (enable && valid && op == TOP_LDT) begin
        if (!lk.prot) e_unc = 1;
        else if (lk.tagbit ^ lk.matchbit) begin e_exc = 1; e_cause = EXC_RA_TAG; end
      end
      if (enable && valid && op == TOP_JALR && jen && rs1_tag) begin e_exc = 1; e_cause = EXC_TAINT_JMP; end
      checks++;
      if (exc !== e_exc || cause !== e_cause || unchecked !== e_unc) begin
        failures++;
        if (failures < 10) $display("FAIL v=%0h exc=%b cause=%0d unc=%b", v, exc, cause, unchecked);
      end
    end
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
