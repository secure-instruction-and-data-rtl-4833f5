// tag_prop: tag propagation pipeline.
//
// A five-stage shadow pipeline (fetch, decode, execute, memory access, write
// back) runs in lockstep with the core and carries a 1-bit tag for every value
// the core computes. It keeps one tag per architectural register (x0 is always
// trusted). The core hands over each instruction as it is fetched: the word
// and the memory address the instruction uses (load/store effective address,
// jump target). Bubbles are cycles with in_valid = 0; the pipeline never stalls.
//
//   F  latch instruction and address
//   D  tag_init decodes the instruction into a tag micro-op
//   E  read source register tags (with bypass from M and W); the result tag of
//      an ALU operation is the OR of its source tags; constants and links are
//      trusted; the store-data tag is the rs2 tag
//   M  access the tag cache: stores write the data tag for the word, SDTCHECK
//      protects it, loads read it (a load from the untrusted window is always
//      untrusted), LDTCHECK reads and releases it; tag_check decides whether
//      the instruction violates a policy
//   W  write the register tag; report a violation
//
// When tag_check raises an exception in M, that instruction does not write its
// register tag, and the younger instructions in F, D and E (and one arriving
// that cycle) are discarded: execution stops at the violating instruction.
// exc_valid is a one-cycle pulse one clock after the instruction leaves M.
// The stage split follows the five propagation stages of the tag module; the
// bypass network, the address handed over at fetch, and the squash on
// exception are this design's own choices.
module tag_prop
  import ift_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  // instruction stream from the core
  input  logic            in_valid,
  input  logic [31:0]     in_instr,
  input  logic [XLEN-1:0] in_addr,
  // untrusted-source window (from the CSRs)
  input  logic            untr_en,
  input  logic [XLEN-1:0] untr_base,
  input  logic [XLEN-1:0] untr_mask,
  // tag cache
  output logic [XLEN-1:0] tc_lk_addr,
  input  tc_lookup_t      tc_lk,
  output logic            tc_wr_en,
  output tag_op_e         tc_wr_op,
  output logic [XLEN-1:0] tc_wr_addr,
  output logic            tc_wr_tag,
  // tag check
  output logic            chk_valid,
  output tag_op_e         chk_op,
  output logic            chk_rs1_tag,
  input  logic            chk_exc,
  input  exc_cause_e      chk_cause,
  // results
  output logic            exc_valid,
  output exc_cause_e      exc_cause,
  output logic [XLEN-1:0] exc_addr,
  output logic [NREGS-1:0] rf_tags,
  output logic            ev_bypass_m,   // a source tag came from the M stage
  output logic            ev_bypass_w,   // a source tag came from the W stage
  output logic            ev_squash      // younger instructions were discarded
);
  // ---------------------------------------------------------------- F
  logic            f_valid;
  logic [31:0]     f_instr;
  logic [XLEN-1:0] f_addr;
  // ---------------------------------------------------------------- D
  tag_uop_t        d_uop_q;
  logic [XLEN-1:0] d_addr;
  // ---------------------------------------------------------------- E
  tag_uop_t        e_uop;
  logic [XLEN-1:0] e_addr;
  // ---------------------------------------------------------------- M
  tag_uop_t        m_uop;
  logic [XLEN-1:0] m_addr;
  logic            m_res_tag, m_st_tag, m_rs1_tag;
  // ---------------------------------------------------------------- W
  logic            w_wr;
  logic [4:0]      w_rd;
  logic            w_tag;

  logic [NREGS-1:0] rf_q;
  logic             squash;
  logic             m_tag;

  assign squash = chk_exc;

  // decode stage
  tag_uop_t d_uop;
  tag_init u_init (
    .valid(f_valid), .instr(f_instr), .addr(f_addr),
    .untr_en, .untr_base, .untr_mask, .uop(d_uop)
  );

  // execute stage: source tags with bypass
  logic m_fwd;
  assign m_fwd = m_uop.valid && m_uop.wr_rd && !squash;

  function automatic logic src_tag(input logic [4:0] r, output logic bm, output logic bw);
    bm = 1'b0;
    bw = 1'b0;
    if (r == 5'd0) return 1'b0;
    if (m_fwd && m_uop.rd == r) begin bm = 1'b1; return m_tag; end
    if (w_wr && w_rd == r)      begin bw = 1'b1; return w_tag; end
    return rf_q[r];
  endfunction

  logic t1, t2, bm1, bw1, bm2, bw2, e_res_tag;
  always_comb begin
    t1 = src_tag(e_uop.rs1, bm1, bw1);
    t2 = src_tag(e_uop.rs2, bm2, bw2);
    unique case (e_uop.op)
      TOP_ALU:   e_res_tag = (e_uop.use_rs1 & t1) | (e_uop.use_rs2 & t2);
      default:   e_res_tag = e_uop.init_tag;
    endcase
  end
  assign ev_bypass_m = e_uop.valid && ((e_uop.use_rs1 && bm1) || (e_uop.use_rs2 && bm2));
  assign ev_bypass_w = e_uop.valid && ((e_uop.use_rs1 && bw1) || (e_uop.use_rs2 && bw2));

  // memory stage
  assign tc_lk_addr = m_addr;
  always_comb begin
    unique case (m_uop.op)
      TOP_LOAD: m_tag = tc_lk.tagbit | m_uop.init_tag;
      TOP_LDT:  m_tag = tc_lk.tagbit;
      default:  m_tag = m_res_tag;
    endcase
  end
  assign tc_wr_en    = m_uop.valid && !squash &&
                       (m_uop.op inside {TOP_STORE, TOP_SDT, TOP_LDT});
  assign tc_wr_op    = m_uop.op;
  assign tc_wr_addr  = m_addr;
  assign tc_wr_tag   = m_st_tag;
  assign chk_valid   = m_uop.valid;
  assign chk_op      = m_uop.op;
  assign chk_rs1_tag = m_rs1_tag;
  assign ev_squash   = squash;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      f_valid   <= 1'b0;
      d_uop_q   <= '0;
      e_uop     <= '0;
      m_uop     <= '0;
      w_wr      <= 1'b0;
      exc_valid <= 1'b0;
      exc_cause <= EXC_NONE;
      rf_q      <= '0;
    end else begin
      // F
      f_valid <= in_valid && !squash;
      // D
      d_uop_q <= squash ? '0 : d_uop;
      // E
      e_uop   <= squash ? '0 : d_uop_q;
      // M
      m_uop   <= squash ? '0 : e_uop;
      // W
      w_wr      <= m_uop.valid && m_uop.wr_rd && !squash;
      exc_valid <= squash;
      exc_cause <= squash ? chk_cause : EXC_NONE;
      if (w_wr) rf_q[w_rd] <= w_tag;
    end
  end

  always_ff @(posedge clk) begin
    f_instr   <= in_instr;
    f_addr    <= in_addr;
    d_addr    <= f_addr;
    e_addr    <= d_addr;
    m_addr    <= e_addr;
    m_res_tag <= e_res_tag;
    m_st_tag  <= t2;
    m_rs1_tag <= t1;
    w_rd      <= m_uop.rd;
    w_tag     <= m_tag;
    if (squash) exc_addr <= m_addr;
  end

  assign rf_tags = rf_q;

  // a violation can only come from a valid instruction in M
  assert property (@(posedge clk) disable iff (!rst_n) chk_exc |-> m_uop.valid);
endmodule
