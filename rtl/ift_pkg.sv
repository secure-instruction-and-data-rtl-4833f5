// ift_pkg: types and constants shared by the integrated coarse/fine-grained
// information-flow-tracking (CF-IFT) design.
//
// The coarse-grained half is a tag mechanism beside a 64-bit RISC-V core. It
// adds two instructions. LDTCHECK sits in the LOAD major opcode and SDTCHECK in
// the STORE major opcode, as the new instructions are described. The funct3
// values chosen here (3'b111 in both) are this design's own choice: they are
// the codes RV64 leaves unused in those two opcodes. The fine-grained half is
// gate-level IFT (GLIFT) built on a shadow-logic cell library. This package
// holds the gate-type encoding of that library, and the evaluation function the
// cells and the netlist engine share.
//
// The custom CSR numbers lie in the user read/write custom range 0x800-0x8FF,
// which the architecture leaves to extensions. The exact numbers are this
// design's own choice.
package ift_pkg;

  // ---------------------------------------------------------------- core
  localparam int unsigned XLEN  = 64;
  localparam int unsigned NREGS = 32;

  typedef enum logic [6:0] {
    OPC_LOAD     = 7'b0000011,
    OPC_OPIMM    = 7'b0010011,
    OPC_AUIPC    = 7'b0010111,
    OPC_OPIMM32  = 7'b0011011,
    OPC_STORE    = 7'b0100011,
    OPC_OP       = 7'b0110011,
    OPC_LUI      = 7'b0110111,
    OPC_OP32     = 7'b0111011,
    OPC_BRANCH   = 7'b1100011,
    OPC_JALR     = 7'b1100111,
    OPC_JAL      = 7'b1101111,
    OPC_SYSTEM   = 7'b1110011
  } opcode_e;

  // funct3 of the two secure instructions (unused load/store widths in RV64)
  localparam logic [2:0] F3_LDTCHECK = 3'b111;
  localparam logic [2:0] F3_SDTCHECK = 3'b111;

  // Match/mask pairs in the form the toolchain's opcode table uses
  localparam logic [31:0] MASK_TCHECK  = 32'h0000_707F;
  localparam logic [31:0] MATCH_LDTCHK = {17'b0, F3_LDTCHECK, 5'b0, OPC_LOAD};
  localparam logic [31:0] MATCH_SDTCHK = {17'b0, F3_SDTCHECK, 5'b0, OPC_STORE};

  // ---------------------------------------------------------------- CSRs
  localparam logic [11:0] CSR_TAGCTRL   = 12'h8C0; // [0] enable, [1] jump policy
  localparam logic [11:0] CSR_TAGSTAT   = 12'h8C1; // sticky status, write clears
  localparam logic [11:0] CSR_TAGADDR   = 12'h8C2; // address of last violation
  localparam logic [11:0] CSR_UNTR_BASE = 12'h8C3; // untrusted source window base
  localparam logic [11:0] CSR_UNTR_MASK = 12'h8C4; // untrusted source window mask
  localparam logic [11:0] CSR_TAGCOUNT  = 12'h8C5; // occupied tag cache entries

  typedef enum logic [1:0] {
    EXC_NONE      = 2'd0,
    EXC_RA_TAG    = 2'd1,  // LDTCHECK: tag bit differs from match bit
    EXC_TAINT_JMP = 2'd2,  // indirect jump through an untrusted register
    EXC_GLIFT     = 2'd3   // gate-level IFT policy violation
  } exc_cause_e;

  // Kinds of tag micro-operation carried down the tag pipeline
  typedef enum logic [2:0] {
    TOP_NONE  = 3'd0,  // no register result, no memory access (branch, fence...)
    TOP_ALU   = 3'd1,  // rd tag = OR of used source tags
    TOP_CONST = 3'd2,  // rd tag = initial tag (LUI, AUIPC, JAL, CSR read)
    TOP_LOAD  = 3'd3,  // rd tag = tag of memory word / untrusted window
    TOP_STORE = 3'd4,  // memory word tag = rs2 tag
    TOP_LDT   = 3'd5,  // LDTCHECK: load and check the return-address tag
    TOP_SDT   = 3'd6,  // SDTCHECK: store and protect the return-address tag
    TOP_JALR  = 3'd7   // indirect jump: rs1 tag is checked, rd tag = 0
  } tag_op_e;

  typedef struct packed {
    logic          valid;
    tag_op_e       op;
    logic [4:0]    rd;
    logic [4:0]    rs1;
    logic [4:0]    rs2;
    logic          use_rs1;
    logic          use_rs2;
    logic          wr_rd;     // writes a register tag (rd != x0)
    logic          init_tag;  // tag attached at initialisation
  } tag_uop_t;

  // Result of a tag cache lookup
  typedef struct packed {
    logic hit;
    logic prot;      // entry was written by SDTCHECK (holds a return address)
    logic tagbit;    // current tag of the word
    logic matchbit;  // tag the word had when SDTCHECK protected it
  } tc_lookup_t;

  // ---------------------------------------------------------------- GLIFT
  typedef enum logic [2:0] {
    G_BUF  = 3'd0,
    G_NOT  = 3'd1,
    G_AND  = 3'd2,
    G_OR   = 3'd3,
    G_NAND = 3'd4,
    G_NOR  = 3'd5,
    G_XOR  = 3'd6,
    G_XNOR = 3'd7
  } gate_e;

  // Shadow-logic evaluation of one two-input gate. Returns {value, taint}.
  // precise = 1: the output is tainted only when flipping the untrusted
  //   inputs can change it (the three product terms of the shadow circuit).
  // precise = 0: the output is tainted whenever an input is tainted, as the
  //   OR-gate table of the shadow library lists it (1/0 even when a = 1).
  function automatic logic [1:0] glift_eval(gate_e g, logic a, logic b,
                                            logic at, logic bt, logic precise);
    logic o, t;
    unique case (g)
      G_BUF:  begin o =  a;       t = at; end
      G_NOT:  begin o = ~a;       t = at; end
      G_AND:  begin o =   a & b;  t = (a & bt) | (b & at) | (at & bt); end
      G_NAND: begin o = ~(a & b); t = (a & bt) | (b & at) | (at & bt); end
      G_OR:   begin o =   a | b;  t = (~a & bt) | (~b & at) | (at & bt); end
      G_NOR:  begin o = ~(a | b); t = (~a & bt) | (~b & at) | (at & bt); end
      G_XOR:  begin o =   a ^ b;  t = at | bt; end
      G_XNOR: begin o = ~(a ^ b); t = at | bt; end
      default: begin o = 1'b0;    t = 1'b0; end
    endcase
    if (!precise) t = (g == G_BUF || g == G_NOT) ? at : (at | bt);
    return {o, t};
  endfunction

  // Netlist entry of the gate-level IFT engine
  typedef struct packed {
    gate_e       gate;
    logic [11:0] src0;   // signal index: inputs first, then gate outputs
    logic [11:0] src1;
  } gate_rec_t;

endpackage
