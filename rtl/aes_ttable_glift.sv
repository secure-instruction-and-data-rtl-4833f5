// aes_ttable_glift: AES T-table entry lookup with gate-level information flow
// tracking.
//
// In T-table implementations of AES, the SubBytes and MixColumns steps of a
// round are merged into four 256-entry tables of 32-bit words. This module is
// table T0: for an 8-bit index x with S = SBox(x),
//     T0[x] = {02*S, S, S, 03*S}   (bytes from most to least significant,
//                                    products in GF(2^8) mod x^8+x^4+x^3+x+1)
// The other three tables are byte rotations of T0. The table is computed at
// elaboration time from the S-box definition (multiplicative inverse in GF(2^8)
// followed by the affine map with constant 0x63); no data file is needed.
//
// The T-table sub-module is the one singled out for fine-grained tracking,
// because it can leak through cache timing or be altered. Next to the lookup,
// a shadow circuit computes, for every bit of the entry, whether the untrusted
// bits of the index (idx_t) can change it:
//   PRECISE = 1 (default): bit j is tainted exactly when two indices that agree
//     on all trusted bits give entries that differ in bit j (exact gate-level
//     flow for the whole lookup).
//   PRECISE = 0: every entry bit is tainted when any index bit is.
//
// Timing: one register stage; out_valid, entry and entry_t follow in_valid,
// idx and idx_t by one clock. Reset (synchronous, active low) clears out_valid.
module aes_ttable_glift #(
  parameter bit PRECISE = 1'b1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic [7:0]  idx,
  input  logic [7:0]  idx_t,     // 1 = this index bit is untrusted
  output logic        out_valid,
  output logic [31:0] entry,
  output logic [31:0] entry_t    // 1 = this entry bit depends on untrusted bits
);
  function automatic logic [7:0] xt(input logic [7:0] v);
    return {v[6:0], 1'b0} ^ (v[7] ? 8'h1B : 8'h00);
  endfunction

  function automatic logic [7:0] gmul(input logic [7:0] p, input logic [7:0] q);
    logic [7:0] r, aa;
    r  = 8'h00;
    aa = p;
    for (int i = 0; i < 8; i++) begin
      if (q[i]) r = r ^ aa;
      aa = xt(aa);
    end
    return r;
  endfunction

  function automatic logic [7:0] sbox(input logic [7:0] v);
    logic [7:0] inv, sq, s;
    // v^254 = multiplicative inverse (0 maps to 0)
    inv = 8'h01;
    sq  = v;
    for (int i = 0; i < 8; i++) begin
      if (i != 0) inv = gmul(inv, sq);
      sq = gmul(sq, sq);
    end
    s = inv ^ {inv[6:0], inv[7]} ^ {inv[5:0], inv[7:6]} ^
        {inv[4:0], inv[7:5]} ^ {inv[3:0], inv[7:4]} ^ 8'h63;
    return s;
  endfunction

  function automatic logic [255:0][31:0] gen_t0();
    logic [255:0][31:0] t;
    logic [7:0] s;
    for (int x = 0; x < 256; x++) begin
      s    = sbox(8'(x));
      t[x] = {xt(s), s, s, xt(s) ^ s};
    end
    return t;
  endfunction

  localparam logic [255:0][31:0] T0 = gen_t0();

  logic [31:0] e_d, t_d, acc_or, acc_and;
  always_comb begin
    e_d     = T0[idx];
    acc_or  = '0;
    acc_and = '1;
    for (int v = 0; v < 256; v++) begin
      if (((8'(v) ^ idx) & ~idx_t) == 8'h00) begin
        acc_or  = acc_or  | T0[v];
        acc_and = acc_and & T0[v];
      end
    end
    t_d = PRECISE ? (acc_or ^ acc_and) : {32{|idx_t}};
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
    entry   <= e_d;
    entry_t <= t_d;
  end
endmodule
