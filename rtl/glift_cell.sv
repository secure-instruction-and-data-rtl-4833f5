// glift_cell: one cell of the shadow-logic library for gate-level information
// flow tracking (GLIFT).
//
// Every basic two-input gate (AND, OR, NAND, NOR, XOR, XNOR) and the one-input
// BUF and NOT are covered; the gate is chosen at run time by `gate`. The cell
// produces the gate's ordinary output `o` and its shadow output `ot`. `ot` is 1
// when untrusted ("tainted") inputs may influence `o`. For one-input gates `b`
// and `bt` are ignored.
//
// Two shadow rules are available, chosen by the PRECISE parameter:
//   PRECISE = 1 (default): the shadow circuit of each gate is the OR of three
//     product terms, as drawn for the shadow logic of the OR and AND gates. For
//     OR: ot = ~a&bt | ~b&at | at&bt; for AND: ot = a&bt | b&at | at&bt. An
//     untrusted input masked by a controlling trusted input (a = 1 for OR,
//     a = 0 for AND) leaves the output trusted. This is the precise rule, and it
//     matches the stated aim of tracking without false conservative flows.
//   PRECISE = 0: an output is tainted whenever one of its inputs is. This
//     reproduces the published OR-gate shadow table, where an untrusted b
//     gives an output marked 1/0 even when a = 1.
// XOR and XNOR are tainted by any tainted input under both rules.
// The cell is purely combinational; no clock.
module glift_cell
  import ift_pkg::*;
#(
  parameter bit PRECISE = 1'b1
) (
  input  gate_e gate,
  input  logic  a,
  input  logic  b,
  input  logic  at,   // taint of a (1 = untrusted)
  input  logic  bt,   // taint of b
  output logic  o,
  output logic  ot
);
  always_comb {o, ot} = glift_eval(gate, a, b, at, bt, PRECISE);
endmodule
