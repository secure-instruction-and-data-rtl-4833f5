// tb_aes_ttable_glift: the T-table entry and its shadow logic.
// The table is checked at published T0 words and, for all 256 indices, against
// an S-box the testbench builds by searching for each multiplicative inverse
// (a different method from the module's). The shadow output is checked against
// a reference that collects, bit by bit, the values the entry can take over
// every index agreeing with the trusted index bits. Both the precise and the
// conservative variant are instantiated. Latency: one cycle.
module tb_aes_ttable_glift;
  logic clk = 0, rst_n = 0;
  logic in_valid, ov_p, ov_c;
  logic [7:0] idx, idx_t;
  logic [31:0] e_p, t_p, e_c, t_c;
  int checks = 0, failures = 0;

  aes_ttable_glift #(.PRECISE(1'b1)) dut_p (.clk, .rst_n, .in_valid, .idx, .idx_t,
    .out_valid(ov_p), .entry(e_p), .entry_t(t_p));
  aes_ttable_glift #(.PRECISE(1'b0)) dut_c (.clk, .rst_n, .in_valid, .idx, .idx_t,
    .out_valid(ov_c), .entry(e_c), .entry_t(t_c));

  always #5 clk = ~clk;

  function automatic bit [7:0] mul(bit [7:0] a, bit [7:0] b);
    bit [7:0] r = 0;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) r ^= a;
      a = a[7] ? ((a << 1) ^ 8'h1b) : (a << 1);
    end
    return r;
  endfunction

  bit [7:0]  sb[256];
  bit [31:0] t0[256];

  task automatic lookup(bit [7:0] x, bit [7:0] xt);
    @(negedge clk); in_valid = 1; idx = x; idx_t = xt;
    @(negedge clk); in_valid = 0;
  endtask

  initial begin
    // reference S-box by inverse search
    for (int x = 0; x < 256; x++) begin
      bit [7:0] inv, s;
      inv = 0;
      for (int y = 1; y < 256; y++) if (mul(8'(x), 8'(y)) == 8'h01) inv = 8'(y);
      s = 8'h63;
      for (int i = 0; i < 8; i++)
        s[i] = s[i] ^ inv[i] ^ inv[(i + 4) % 8] ^ inv[(i + 5) % 8] ^ inv[(i + 6) % 8] ^ inv[(i + 7) % 8];
      sb[x] = s;
      t0[x] = {mul(s, 8'h02), s, s, mul(s, 8'h03)};
    end
    // published T0 words
    checks += 4;
    if (t0[8'h00] != 32'hc66363a5) failures++;
    if (t0[8'h01] != 32'hf87c7c84) failures++;
    if (t0[8'h53] != 32'hc1eded2c) failures++;
    if (t0[8'hff] != 32'h2c16163a) failures++;
    in_valid = 0; idx = 0; idx_t = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int x = 0; x < 256; x++) begin
      lookup(8'(x), 8'h00);
      checks += 4;
      if (!ov_p) failures++;
      if (e_p !== t0[x] || e_c !== t0[x]) begin failures++; $display("FAIL T0[%0h]=%h", x, e_p); end
      if (t_p !== 0) failures++;
      if (t_c !== 0) failures++;
    end
    for (int r = 0; r < 600; r++) begin
      bit [7:0] x, xt;
      bit [31:0] seen0, seen1, exp_t;
      x = 8'($urandom); seen0 = 0; seen1 = 0;
      case (r % 4)
        0: xt = 8'(1 << $urandom_range(0, 7));
        1: xt = 8'($urandom) & 8'($urandom);
        2: xt = 8'($urandom);
        default: xt = 8'h00;
      endcase
      for (int v = 0; v < 256; v++)
        if ((8'(v) & ~xt) == (x & ~xt)) begin seen1 |= t0[v]; seen0 |= ~t0[v]; end
      exp_t = seen1 & seen0;
      lookup(x, xt);
      checks += 3;
      if (e_p !== t0[x]) failures++;
      if (t_p !== exp_t) begin failures++; $display("FAIL taint x=%h xt=%h got %h exp %h", x, xt, t_p, exp_t); end
      if (t_c !== {32{|xt}}) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
