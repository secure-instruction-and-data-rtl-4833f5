// glift_engine: gate-level information flow tracking of a security-critical
// sub-module, evaluated from its gate netlist.
//
// The sub-module to be tracked is first converted to a netlist of basic gates,
// sorted so that every gate comes after the gates that drive it. The netlist is
// loaded through the program port: gate i is {type, src0, src1}, where a
// source index below MAX_IN names a primary input and index MAX_IN+j names the
// output of gate j. The output map gives, for each module output k, the
// signal index it is read from.
//
// A run starts with `start`, the input values and one trust label per input
// (in_taint = 1: untrusted). The engine then evaluates one gate per clock, in
// netlist order, through a shadow-library cell (glift_cell). Each cell gives the
// gate's value and whether untrusted inputs influence it. Each evaluated gate
// is also put on the gate stream (g_valid, g_idx, g_type, g_val, g_taint) for
// the policy checker. After the last gate the outputs are gathered, one per
// clock, and `done` pulses.
//
// Latency: 1 (input load) + n_gates + n_out clock cycles from start to done.
// `start` is ignored while busy.
//
// Sizes: MAX_IN = 256 and MAX_GATES = 3840 (4096 signals, the 12-bit source
// index of gate_rec_t) and MAX_OUT = 160 are this design's choice. They hold
// the c432 example (36 inputs, 7 outputs, 160 gates) and the 256-input,
// 129-output adder benchmark cited with it. The paper gives no size for the
// unit. Gate-by-gate evaluation is also this design's choice; the text
// describes tracking gate by gate against a shadow-logic library, not how the
// hardware schedules it.
module glift_engine
  import ift_pkg::*;
#(
  parameter int unsigned MAX_IN    = 256,
  parameter int unsigned MAX_GATES = 3840,
  parameter int unsigned MAX_OUT   = 160,
  parameter bit          PRECISE   = 1'b1,
  localparam int unsigned GW = $clog2(MAX_GATES),
  localparam int unsigned OW = $clog2(MAX_OUT)
) (
  input  logic               clk,
  input  logic               rst_n,
  // netlist program port
  input  logic               prog_we,
  input  logic [GW-1:0]      prog_addr,
  input  gate_rec_t          prog_gate,
  // output map port
  input  logic               omap_we,
  input  logic [OW-1:0]      omap_addr,
  input  logic [11:0]        omap_sel,
  // run
  input  logic               start,
  input  logic [GW:0]        n_gates,
  input  logic [OW:0]        n_out,
  input  logic [MAX_IN-1:0]  in_val,
  input  logic [MAX_IN-1:0]  in_taint,
  output logic               busy,
  output logic               done,
  output logic [MAX_OUT-1:0] out_val,
  output logic [MAX_OUT-1:0] out_taint,
  // per-gate stream
  output logic               g_valid,
  output logic [GW-1:0]      g_idx,
  output gate_e              g_type,
  output logic               g_val,
  output logic               g_taint
);
  localparam int unsigned NSIG = MAX_IN + MAX_GATES;

  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_EVAL, S_OUT} state_e;

  state_e            state;
  gate_rec_t         net  [MAX_GATES];
  logic [11:0]       omap [MAX_OUT];
  logic [NSIG-1:0]   sig_v, sig_t;
  logic [GW:0]       cnt;
  logic [GW:0]       ng_q;
  logic [OW:0]       no_q;
  logic [MAX_IN-1:0] inv_q, int_q;

  always_ff @(posedge clk) if (prog_we) net[prog_addr]  <= prog_gate;
  always_ff @(posedge clk) if (omap_we) omap[omap_addr] <= omap_sel;

  // current gate
  gate_rec_t cur;
  logic      a, b, at, bt, o, ot;
  assign cur = net[cnt[GW-1:0]];
  assign a   = sig_v[cur.src0];
  assign b   = sig_v[cur.src1];
  assign at  = sig_t[cur.src0];
  assign bt  = sig_t[cur.src1];

  glift_cell #(.PRECISE(PRECISE)) u_cell (
    .gate(cur.gate), .a, .b, .at, .bt, .o, .ot
  );

  assign busy    = (state != S_IDLE);
  assign g_valid = (state == S_EVAL);
  assign g_idx   = cnt[GW-1:0];
  assign g_type  = cur.gate;
  assign g_val   = o;
  assign g_taint = ot;

  logic [11:0] osel;
  assign osel = omap[cnt[OW-1:0]];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      cnt   <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          inv_q <= in_val;
          int_q <= in_taint;
          ng_q  <= n_gates;
          no_q  <= n_out;
          cnt       <= '0;
          out_val   <= '0;
          out_taint <= '0;
          state     <= S_LOAD;
        end
        S_LOAD: begin
          sig_v[MAX_IN-1:0] <= inv_q;
          sig_t[MAX_IN-1:0] <= int_q;
          state <= (ng_q == 0) ? S_OUT : S_EVAL;
        end
        S_EVAL: begin
          sig_v[MAX_IN + 32'(cnt[GW-1:0])] <= o;
          sig_t[MAX_IN + 32'(cnt[GW-1:0])] <= ot;
          if (cnt + 1'b1 == ng_q) begin
            cnt   <= '0;
            state <= S_OUT;
          end else cnt <= cnt + 1'b1;
        end
        S_OUT: begin
          if (no_q == 0) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            out_val[cnt[OW-1:0]]   <= sig_v[osel];
            out_taint[cnt[OW-1:0]] <= sig_t[osel];
            if (cnt + 1'b1 >= (GW+1)'(no_q)) begin
              cnt   <= '0;
              state <= S_IDLE;
              done  <= 1'b1;
            end else cnt <= cnt + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // netlist order: a gate may only read inputs and earlier gates
  assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_EVAL) |-> (32'(cur.src0) < MAX_IN + 32'(cnt) &&
                           32'(cur.src1) < MAX_IN + 32'(cnt)));
  initial assert (MAX_IN + MAX_GATES <= 4096);
endmodule
