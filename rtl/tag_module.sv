// tag_module: the coarse-grained, instruction-level information flow tracking
// unit that sits beside the RISC-V core.
//
// It joins the four parts of the tag mechanism:
//   tag_prop   five-stage shadow pipeline with per-register tags; it contains
//              tag initialisation (tag_init) in its decode stage
//   tag_cache  separate direct-mapped store of 1-bit tags for data words
//   tag_check  security policies: return-address tag match on LDTCHECK,
//              no indirect jump through an untrusted register
//   tag_csr    custom CSRs for control, the untrusted-source window, status
//
// Interface to the core: each fetched instruction with the memory address it
// uses (in_valid / in_instr / in_addr), a CSR write/read port, and the
// exception output (exc_valid pulse with cause and address), which the core
// takes as a trap that stops the program. The tag pipeline never stalls the
// core. An exception appears five cycles after the instruction was handed in
// (F, D, E, M, then the W register).
//
// Typical use, as for the stack protection shown in the text: the function
// prologue saves the return address with SDTCHECK instead of a plain store,
// and the epilogue restores it with LDTCHECK. User input is loaded from the
// untrusted window and its tag follows the data into registers and memory. If
// a buffer overflow writes that data over the saved return address, the
// LDTCHECK sees tagbit != matchbit and raises EXC_RA_TAG.
module tag_module
  import ift_pkg::*;
#(
  parameter int unsigned TC_ENTRIES = 64
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  logic [31:0]     in_instr,
  input  logic [XLEN-1:0] in_addr,
  input  logic            csr_we,
  input  logic [11:0]     csr_addr,
  input  logic [XLEN-1:0] csr_wdata,
  output logic [XLEN-1:0] csr_rdata,
  output logic            csr_hit,
  output logic            exc_valid,
  output exc_cause_e      exc_cause,
  output logic [XLEN-1:0] exc_addr,
  output logic [NREGS-1:0] rf_tags,
  output logic            ev_bypass_m,
  output logic            ev_bypass_w,
  output logic            ev_unchecked,
  output logic            ev_drop,
  output logic            ev_evict,
  output logic            ev_squash
);
  localparam int unsigned CW = $clog2(TC_ENTRIES + 1);

  logic            enable, jmp_en, untr_en;
  logic [XLEN-1:0] untr_base, untr_mask;
  logic [XLEN-1:0] lk_addr, wr_addr;
  tc_lookup_t      lk;
  logic            wr_en, wr_tag;
  tag_op_e         wr_op;
  logic            chk_valid, chk_rs1_tag, chk_exc;
  tag_op_e         chk_op;
  exc_cause_e      chk_cause;
  logic [CW-1:0]   count;

  tag_prop u_prop (
    .clk, .rst_n, .in_valid, .in_instr, .in_addr,
    .untr_en, .untr_base, .untr_mask,
    .tc_lk_addr(lk_addr), .tc_lk(lk),
    .tc_wr_en(wr_en), .tc_wr_op(wr_op), .tc_wr_addr(wr_addr), .tc_wr_tag(wr_tag),
    .chk_valid, .chk_op, .chk_rs1_tag, .chk_exc, .chk_cause,
    .exc_valid, .exc_cause, .exc_addr, .rf_tags,
    .ev_bypass_m, .ev_bypass_w, .ev_squash
  );

  tag_cache #(.ENTRIES(TC_ENTRIES), .AW(XLEN)) u_cache (
    .clk, .rst_n, .lk_addr, .lk,
    .wr_en, .wr_op, .wr_addr, .wr_tag,
    .count, .drop(ev_drop), .evict(ev_evict)
  );

  tag_check u_check (
    .enable, .jmp_policy_en(jmp_en), .valid(chk_valid), .op(chk_op), .lk,
    .rs1_tag(chk_rs1_tag), .exc(chk_exc), .cause(chk_cause), .unchecked(ev_unchecked)
  );

  tag_csr #(.CW(CW)) u_csr (
    .clk, .rst_n, .csr_we, .csr_addr, .csr_wdata, .csr_rdata, .csr_hit,
    .ev_exc(chk_exc), .ev_cause(chk_cause), .ev_addr(lk_addr),
    .ev_unchecked, .ev_drop, .ev_evict, .count,
    .enable, .jmp_policy_en(jmp_en), .untr_en, .untr_base, .untr_mask
  );
endmodule
