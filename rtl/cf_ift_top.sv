// cf_ift_top: integrated coarse- and fine-grained information flow tracking
// (CF-IFT) for a RISC-V system.
//
// Two trackers work side by side and share one security exception:
//   - tag_module (coarse grain, instruction level): shadows the core's
//     instruction stream with 1-bit tags, protects saved return addresses
//     through the LDTCHECK/SDTCHECK instructions and a separate tag cache, and
//     refuses indirect jumps through untrusted registers.
//   - gate-level IFT (fine grain, data level) for security-critical modules:
//     glift_engine evaluates a loaded gate netlist with the shadow-logic
//     library, glift_policy_check applies the policy to the result, and
//     aes_ttable_glift is the AES T-table entry with its shadow logic.
//
// The core, its caches and the system bus are not part of this RTL. Where they
// attach, the top has plain ports: the core's instruction trace and CSR port,
// and a request/response port for each gate-level tracker.
//
// Exceptions: exc_tag (from tag_module, with cause and address), exc_glift
// (a protected output of the tracked netlist depends on untrusted inputs) and
// exc_tt (a T-table lookup with tt_check set produced an untrusted entry bit).
// Each is a one-cycle pulse. sec_exc is their OR, and sec_cause names the
// first of them in that priority order.
module cf_ift_top
  import ift_pkg::*;
#(
  parameter int unsigned TC_ENTRIES = 64,
  parameter int unsigned MAX_IN     = 256,
  parameter int unsigned MAX_GATES  = 3840,
  parameter int unsigned MAX_OUT    = 160,
  parameter bit          PRECISE    = 1'b1,
  localparam int unsigned GW = $clog2(MAX_GATES),
  localparam int unsigned OW = $clog2(MAX_OUT)
) (
  input  logic               clk,
  input  logic               rst_n,
  // core instruction trace and CSR port
  input  logic               in_valid,
  input  logic [31:0]        in_instr,
  input  logic [XLEN-1:0]    in_addr,
  input  logic               csr_we,
  input  logic [11:0]        csr_addr,
  input  logic [XLEN-1:0]    csr_wdata,
  output logic [XLEN-1:0]    csr_rdata,
  output logic               csr_hit,
  output logic [NREGS-1:0]   rf_tags,
  // gate-level IFT engine
  input  logic               prog_we,
  input  logic [GW-1:0]      prog_addr,
  input  gate_rec_t          prog_gate,
  input  logic               omap_we,
  input  logic [OW-1:0]      omap_addr,
  input  logic [11:0]        omap_sel,
  input  logic               g_start,
  input  logic [GW:0]        g_n_gates,
  input  logic [OW:0]        g_n_out,
  input  logic [MAX_IN-1:0]  g_in_val,
  input  logic [MAX_IN-1:0]  g_in_taint,
  input  logic [MAX_OUT-1:0] g_protect,
  output logic               g_busy,
  output logic               g_done,
  output logic [MAX_OUT-1:0] g_out_val,
  output logic [MAX_OUT-1:0] g_out_taint,
  output logic               g_first_valid,
  output logic [GW-1:0]      g_first_idx,
  output gate_e              g_first_type,
  output logic [GW:0]        g_n_tainted,
  output logic [MAX_OUT-1:0] g_leak,
  output logic               g_leak_any,
  // AES T-table tracked sub-module
  input  logic               tt_valid,
  input  logic [7:0]         tt_idx,
  input  logic [7:0]         tt_idx_t,
  input  logic               tt_check,
  output logic               tt_out_valid,
  output logic [31:0]        tt_entry,
  output logic [31:0]        tt_entry_t,
  // security exceptions
  output logic               exc_tag,
  output exc_cause_e         exc_tag_cause,
  output logic [XLEN-1:0]    exc_tag_addr,
  output logic               exc_glift,
  output logic               exc_tt,
  output logic               sec_exc,
  output exc_cause_e         sec_cause,
  // tag mechanism events
  output logic               ev_bypass_m,
  output logic               ev_bypass_w,
  output logic               ev_unchecked,
  output logic               ev_drop,
  output logic               ev_evict,
  output logic               ev_squash
);
  // ---------------------------------------------------------------- coarse
  tag_module #(.TC_ENTRIES(TC_ENTRIES)) u_tag (
    .clk, .rst_n, .in_valid, .in_instr, .in_addr,
    .csr_we, .csr_addr, .csr_wdata, .csr_rdata, .csr_hit,
    .exc_valid(exc_tag), .exc_cause(exc_tag_cause), .exc_addr(exc_tag_addr),
    .rf_tags, .ev_bypass_m, .ev_bypass_w, .ev_unchecked, .ev_drop, .ev_evict,
    .ev_squash
  );

  // ---------------------------------------------------------------- fine
  logic          gv, gval, gtaint;
  logic [GW-1:0] gidx;
  gate_e         gtype;

  glift_engine #(.MAX_IN(MAX_IN), .MAX_GATES(MAX_GATES), .MAX_OUT(MAX_OUT),
                 .PRECISE(PRECISE)) u_engine (
    .clk, .rst_n, .prog_we, .prog_addr, .prog_gate,
    .omap_we, .omap_addr, .omap_sel,
    .start(g_start), .n_gates(g_n_gates), .n_out(g_n_out),
    .in_val(g_in_val), .in_taint(g_in_taint),
    .busy(g_busy), .done(g_done), .out_val(g_out_val), .out_taint(g_out_taint),
    .g_valid(gv), .g_idx(gidx), .g_type(gtype), .g_val(gval), .g_taint(gtaint)
  );

  glift_policy_check #(.MAX_GATES(MAX_GATES), .MAX_OUT(MAX_OUT)) u_policy (
    .clk, .rst_n, .start(g_start && !g_busy),
    .g_valid(gv), .g_idx(gidx), .g_type(gtype), .g_taint(gtaint),
    .done(g_done), .out_taint(g_out_taint), .protect(g_protect),
    .first_valid(g_first_valid), .first_idx(g_first_idx), .first_type(g_first_type),
    .n_tainted(g_n_tainted), .exc(exc_glift), .leak_any(g_leak_any), .leak(g_leak)
  );

  aes_ttable_glift #(.PRECISE(PRECISE)) u_ttable (
    .clk, .rst_n, .in_valid(tt_valid), .idx(tt_idx), .idx_t(tt_idx_t),
    .out_valid(tt_out_valid), .entry(tt_entry), .entry_t(tt_entry_t)
  );

  logic tt_check_q;
  always_ff @(posedge clk) tt_check_q <= tt_check;
  assign exc_tt = tt_out_valid && tt_check_q && (|tt_entry_t);

  // ---------------------------------------------------------------- merge
  assign sec_exc   = exc_tag || exc_glift || exc_tt;
  assign sec_cause = exc_tag   ? exc_tag_cause :
                     (exc_glift || exc_tt) ? EXC_GLIFT : EXC_NONE;
endmodule
