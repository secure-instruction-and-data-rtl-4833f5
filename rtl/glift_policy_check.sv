// glift_policy_check: information flow policy checking unit of the gate-level
// IFT.
//
// It watches the per-gate stream of a glift_engine run and applies the
// information flow policy to it:
//   - it counts the gates whose output untrusted inputs influence;
//   - it records the first such gate in netlist order, with its gate type.
//     This is where untrusted data first reaches the logic, reported in the
//     way the example run names the offending gate ("nand");
//   - when the run ends (`done`), it compares the output taints with the
//     policy's mask of protected outputs. Any protected output that untrusted
//     inputs influence is a violation: `leak` lists those outputs, and `exc`
//     pulses for one cycle. Outputs that untrusted inputs reach but that the
//     policy does not protect are only reported in `leak_any`.
// `start` clears the record for a new run. Results are registered: exc and the
// final fields are valid in the cycle after `done`.
module glift_policy_check
  import ift_pkg::*;
#(
  parameter int unsigned MAX_GATES = 3840,
  parameter int unsigned MAX_OUT   = 160,
  localparam int unsigned GW = $clog2(MAX_GATES)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic               g_valid,
  input  logic [GW-1:0]      g_idx,
  input  gate_e              g_type,
  input  logic               g_taint,
  input  logic               done,
  input  logic [MAX_OUT-1:0] out_taint,
  input  logic [MAX_OUT-1:0] protect,      // policy: outputs that must stay trusted
  output logic               first_valid,
  output logic [GW-1:0]      first_idx,
  output gate_e              first_type,
  output logic [GW:0]        n_tainted,
  output logic               exc,
  output logic               leak_any,
  output logic [MAX_OUT-1:0] leak
);
  always_ff @(posedge clk) begin
    if (!rst_n || start) begin
      first_valid <= 1'b0;
      first_idx   <= '0;
      first_type  <= G_BUF;
      n_tainted   <= '0;
      exc         <= 1'b0;
      leak_any    <= 1'b0;
      leak        <= '0;
    end else begin
      exc <= 1'b0;
      if (g_valid && g_taint) begin
        n_tainted <= n_tainted + 1'b1;
        if (!first_valid) begin
          first_valid <= 1'b1;
          first_idx   <= g_idx;
          first_type  <= g_type;
        end
      end
      if (done) begin
        leak     <= out_taint & protect;
        leak_any <= |out_taint;
        exc      <= |(out_taint & protect);
      end
    end
  end
endmodule
