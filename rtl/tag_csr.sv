// tag_csr: custom control and status registers of the tag mechanism.
//
// The registers sit in the custom user CSR space (addresses in ift_pkg):
//   TAGCTRL   [0] tag checking enable  [1] tainted-jump policy enable
//             [2] untrusted-source window enable        reset: 3'b011
//   TAGSTAT   [0] violation seen  [2:1] cause of the last violation
//             [3] an LDTCHECK could not be checked  [4] an untrusted store
//             could not be recorded  [5] a protected entry was displaced
//             [15:8] number of violations (saturates at 255)
//             read only; any write clears it
//   TAGADDR   memory address of the last violation (read only)
//   UNTR_BASE / UNTR_MASK   untrusted-source window, reset 0
//   TAGCOUNT  occupied tag cache entries (read only)
// Status bits are sticky and are set from single-cycle event pulses.
// Timing: writes land at the next rising edge; reads are combinational.
// The register map is this design's own; the text only says that unused custom
// CSR addresses hold the tag status and mismatch conditions.
module tag_csr
  import ift_pkg::*;
#(
  parameter int unsigned CW = 7    // width of the tag cache occupancy count
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            csr_we,
  input  logic [11:0]     csr_addr,
  input  logic [XLEN-1:0] csr_wdata,
  output logic [XLEN-1:0] csr_rdata,
  output logic            csr_hit,      // csr_addr names one of these registers
  // events
  input  logic            ev_exc,
  input  exc_cause_e      ev_cause,
  input  logic [XLEN-1:0] ev_addr,
  input  logic            ev_unchecked,
  input  logic            ev_drop,
  input  logic            ev_evict,
  input  logic [CW-1:0]   count,
  // controls
  output logic            enable,
  output logic            jmp_policy_en,
  output logic            untr_en,
  output logic [XLEN-1:0] untr_base,
  output logic [XLEN-1:0] untr_mask
);
  logic [2:0]      ctrl_q;
  logic [15:0]     stat_q;
  logic [XLEN-1:0] addr_q, base_q, mask_q;

  assign enable        = ctrl_q[0];
  assign jmp_policy_en = ctrl_q[1];
  assign untr_en       = ctrl_q[2];
  assign untr_base     = base_q;
  assign untr_mask     = mask_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ctrl_q <= 3'b011;
      stat_q <= '0;
      addr_q <= '0;
      base_q <= '0;
      mask_q <= '0;
    end else begin
      if (csr_we) begin
        unique case (csr_addr)
          CSR_TAGCTRL:   ctrl_q <= csr_wdata[2:0];
          CSR_UNTR_BASE: base_q <= csr_wdata;
          CSR_UNTR_MASK: mask_q <= csr_wdata;
          default: ;
        endcase
      end
      if (csr_we && csr_addr == CSR_TAGSTAT) stat_q <= '0;
      else begin
        if (ev_exc) begin
          stat_q[0]   <= 1'b1;
          stat_q[2:1] <= ev_cause;
          if (stat_q[15:8] != 8'hFF) stat_q[15:8] <= stat_q[15:8] + 8'd1;
        end
        if (ev_unchecked) stat_q[3] <= 1'b1;
        if (ev_drop)      stat_q[4] <= 1'b1;
        if (ev_evict)     stat_q[5] <= 1'b1;
      end
      if (ev_exc) addr_q <= ev_addr;
    end
  end

  always_comb begin
    csr_hit   = 1'b1;
    csr_rdata = '0;
    unique case (csr_addr)
      CSR_TAGCTRL:   csr_rdata = XLEN'(ctrl_q);
      CSR_TAGSTAT:   csr_rdata = XLEN'(stat_q);
      CSR_TAGADDR:   csr_rdata = addr_q;
      CSR_UNTR_BASE: csr_rdata = base_q;
      CSR_UNTR_MASK: csr_rdata = mask_q;
      CSR_TAGCOUNT:  csr_rdata = XLEN'(count);
      default:       csr_hit   = 1'b0;
    endcase
  end
endmodule
