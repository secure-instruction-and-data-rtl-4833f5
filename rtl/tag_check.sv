// tag_check: the tag checking unit, which applies the security policies.
// The return-address rule follows the source design; the tainted-jump rule,
// the 'unchecked' report and the cause codes are this design's own choices.
//
// Two policies are checked on each instruction in the memory stage:
//   1. Return-address integrity. An LDTCHECK reads back a word that SDTCHECK
//      protected. The word's current tag bit must equal the match bit recorded
//      when it was protected. If untrusted data was stored over the saved return
//      address, the tag bit is now 1 and the check fails with EXC_RA_TAG. An
//      LDTCHECK whose word is no longer in the cache (displaced by a later
//      SDTCHECK) cannot be checked; it is reported on `unchecked` and passes.
//   2. Control flow. An indirect jump (JALR) whose target register carries an
//      untrusted tag fails with EXC_TAINT_JMP. This only applies when
//      jmp_policy_en is set. Checking the target address of branches before
//      they are taken follows the source design. Applying that check to JALR
//      only is this design's reading of it: a conditional branch jumps to a
//      PC-relative target that no data tag can reach. Branching on untrusted
//      operands is allowed, since ordinary copy loops do exactly that.
// Nothing is raised unless `enable` is set. Purely combinational.
module tag_check
  import ift_pkg::*;
(
  input  logic       enable,
  input  logic       jmp_policy_en,
  input  logic       valid,
  input  tag_op_e    op,
  input  tc_lookup_t lk,          // tag cache lookup for the access address
  input  logic       rs1_tag,     // tag of the jump target register
  output logic       exc,
  output exc_cause_e cause,
  output logic       unchecked
);
  always_comb begin
    exc       = 1'b0;
    cause     = EXC_NONE;
    unchecked = 1'b0;
    if (enable && valid) begin
      if (op == TOP_LDT) begin
        if (!lk.prot) unchecked = 1'b1;
        else if (lk.tagbit != lk.matchbit) begin
          exc   = 1'b1;
          cause = EXC_RA_TAG;
        end
      end else if (op == TOP_JALR && jmp_policy_en && rs1_tag) begin
        exc   = 1'b1;
        cause = EXC_TAINT_JMP;
      end
    end
  end
endmodule
