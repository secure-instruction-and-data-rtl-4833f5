// tag_init: tag initialisation stage of the tag mechanism.
//
// Each instruction that enters the tag pipeline is decoded here into a tag
// micro-operation (tag_uop_t): which register tags it reads, which it writes,
// whether it touches memory, and whether it is one of the two secure
// instructions. LDTCHECK is a load-format instruction and SDTCHECK a
// store-format instruction; both are recognised by their major opcode and
// funct3 (see ift_pkg).
//
// The micro-op also carries the 1-bit tag attached at initialisation
// (init_tag). Results built from constants or the program counter (LUI, AUIPC,
// JAL link, JALR link) start trusted (0). A load whose address falls in the
// untrusted-source window ((addr & untr_mask) == untr_base, when untr_en is
// set) is where untrusted data enters the core, for instance a receive buffer
// of an external channel: its result is marked untrusted (init_tag = 1). Other
// loads take their tag from the tag cache in the memory stage. The window
// registers are this design's way of naming the untrusted sources.
//
// Purely combinational. Inputs: instruction word, valid and the instruction's
// memory address; the window. Output: the micro-op. The register numbers in
// the micro-op (rd, rs1, rs2) are the instruction's own bit fields, so a
// synthesis tool sees those output bits wired straight to the input; that is
// the intended decode, not a missing function.
module tag_init
  import ift_pkg::*;
(
  input  logic        valid,
  input  logic [31:0] instr,
  input  logic [XLEN-1:0] addr,
  input  logic        untr_en,
  input  logic [XLEN-1:0] untr_base,
  input  logic [XLEN-1:0] untr_mask,
  output tag_uop_t    uop
);
  logic [6:0] opc;
  logic [2:0] f3;
  assign opc = instr[6:0];
  assign f3  = instr[14:12];

  always_comb begin
    uop          = '0;
    uop.valid    = valid;
    uop.rd       = instr[11:7];
    uop.rs1      = instr[19:15];
    uop.rs2      = instr[24:20];
    uop.op       = TOP_NONE;
    uop.init_tag = 1'b0;
    unique case (opc)
      OPC_LOAD: begin
        uop.op       = (f3 == F3_LDTCHECK) ? TOP_LDT : TOP_LOAD;
        uop.use_rs1  = 1'b1;
        uop.wr_rd    = 1'b1;
        uop.init_tag = untr_en && ((addr & untr_mask) == untr_base);
      end
      OPC_STORE: begin
        uop.op      = (f3 == F3_SDTCHECK) ? TOP_SDT : TOP_STORE;
        uop.use_rs1 = 1'b1;
        uop.use_rs2 = 1'b1;
      end
      OPC_OP, OPC_OP32: begin
        uop.op      = TOP_ALU;
        uop.use_rs1 = 1'b1;
        uop.use_rs2 = 1'b1;
        uop.wr_rd   = 1'b1;
      end
      OPC_OPIMM, OPC_OPIMM32: begin
        uop.op      = TOP_ALU;
        uop.use_rs1 = 1'b1;
        uop.wr_rd   = 1'b1;
      end
      OPC_LUI, OPC_AUIPC, OPC_JAL: begin
        uop.op      = TOP_CONST;
        uop.wr_rd   = 1'b1;
      end
      OPC_SYSTEM: begin
        // CSR reads give trusted values; ecall/ebreak have rd = x0
        uop.op      = TOP_CONST;
        uop.wr_rd   = (f3 != 3'b000);
      end
      OPC_JALR: begin
        uop.op      = TOP_JALR;
        uop.use_rs1 = 1'b1;
        uop.wr_rd   = 1'b1;
      end
      OPC_BRANCH: begin
        uop.op      = TOP_NONE;
        uop.use_rs1 = 1'b1;
        uop.use_rs2 = 1'b1;
      end
      default: uop.op = TOP_NONE;
    endcase
    if (uop.rd == 5'd0) uop.wr_rd = 1'b0;
    if (!valid) begin
      uop.wr_rd    = 1'b0;
      uop.op       = TOP_NONE;
      uop.init_tag = 1'b0;
    end
  end
endmodule
