// tb_tag_cache: random stores, SDTCHECKs and LDTCHECKs over a small address
// range (so that entries collide) against a reference model that keeps the same
// direct-mapped record in testbench arrays. Lookups, the occupancy counter and
// the drop/evict pulses are compared every cycle. A directed part replays the
// return-address case: protect, overwrite with untrusted data, check.
module tb_tag_cache;
  import ift_pkg::*;
  localparam int E = 8;
  logic clk = 0, rst_n = 0;
  logic [63:0] lk_addr, wr_addr;
  tc_lookup_t  lk;
  logic        wr_en, wr_tag, drop, evict;
  tag_op_e     wr_op;
  logic [$clog2(E+1)-1:0] count;
  int checks = 0, failures = 0;

  tag_cache #(.ENTRIES(E), .AW(64)) dut (.clk, .rst_n, .lk_addr, .lk, .wr_en, .wr_op,
    .wr_addr, .wr_tag, .count, .drop, .evict);

  always #5 clk = ~clk;

  // reference: per slot
  bit        r_v[E], r_p[E], r_t[E], r_m[E];
  bit [63:0] r_a[E];   // full word address
  int        r_cnt;

  function automatic int slot(logic [63:0] ad); return int'(ad[3 +: 3]); endfunction

  task automatic do_op(tag_op_e op, logic [63:0] ad, logic t);
    int s = slot(ad);
    bit hit = r_v[s] && (r_a[s] == {ad[63:3], 3'b0});
    bit e_drop = 0, e_evict = 0;
    @(negedge clk);
    wr_en = 1; wr_op = op; wr_addr = ad; wr_tag = t; #1;
    case (op)
      TOP_STORE: if (hit) begin
                   if (!r_p[s] && !t) begin r_v[s] = 0; r_cnt--; end else r_t[s] = t;
                 end else if (t) begin
                   if (r_v[s] && r_p[s]) e_drop = 1;
                   else begin
                     if (!r_v[s]) r_cnt++;
                     r_v[s] = 1; r_p[s] = 0; r_a[s] = {ad[63:3], 3'b0}; r_t[s] = 1; r_m[s] = 0;
                   end
                 end
      TOP_SDT: begin
                 e_evict = r_v[s] && r_p[s] && !hit;
                 if (!r_v[s]) r_cnt++;
                 r_v[s] = 1; r_p[s] = 1; r_a[s] = {ad[63:3], 3'b0}; r_t[s] = t; r_m[s] = t;
               end
      TOP_LDT: if (hit && r_p[s] && r_t[s] == r_m[s]) begin r_v[s] = 0; r_cnt--; end
      default: ;
    endcase
    checks++;
    if (drop !== e_drop || evict !== e_evict) begin
      failures++; $display("FAIL pulses op=%0d a=%h drop=%b evict=%b", op, ad, drop, evict);
    end
    @(negedge clk);
    wr_en = 0;
  endtask

  task automatic check_lookup(logic [63:0] ad);
    int s = slot(ad);
    bit hit = r_v[s] && (r_a[s] == {ad[63:3], 3'b0});
    lk_addr = ad; #1;
    checks++;
    if (lk.hit !== hit || (hit && (lk.prot !== r_p[s] || lk.tagbit !== r_t[s] ||
        lk.matchbit !== r_m[s])) || (!hit && (lk.prot || lk.tagbit || lk.matchbit))) begin
      failures++;
      $display("FAIL lookup a=%h hit=%b/%b prot=%b tag=%b match=%b", ad, lk.hit, hit, lk.prot, lk.tagbit, lk.matchbit);
    end
    checks++;
    if (int'(count) != r_cnt) begin failures++; $display("FAIL count %0d vs %0d", count, r_cnt); end
  endtask

  initial begin
    wr_en = 0; wr_op = TOP_STORE; wr_addr = 0; wr_tag = 0; lk_addr = 0; r_cnt = 0;
    foreach (r_v[i]) begin r_v[i] = 0; r_p[i] = 0; r_t[i] = 0; r_m[i] = 0; r_a[i] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // directed: protect the saved return address at 0x7f00_0018
    do_op(TOP_SDT, 64'h7f00_0018, 1'b0);
    check_lookup(64'h7f00_0018);
    checks++; if (!(lk.prot && !lk.tagbit && !lk.matchbit)) failures++;
    do_op(TOP_STORE, 64'h7f00_001b, 1'b1);       // overflowing byte store, untrusted
    check_lookup(64'h7f00_0018);
    checks++; if (!(lk.tagbit && !lk.matchbit)) failures++;
    do_op(TOP_LDT, 64'h7f00_0018, 1'b0);         // mismatch: entry kept
    check_lookup(64'h7f00_0018);
    checks++; if (!lk.hit) failures++;
    // random
    for (int i = 0; i < 3000; i++) begin
      logic [63:0] ad;
      int k;
      tag_op_e op;
      ad = 64'h7f00_0000 + 64'($urandom_range(0, 31) * 8 + $urandom_range(0, 7));
      k = $urandom_range(0, 9);
      op = (k < 6) ? TOP_STORE : (k < 8) ? TOP_SDT : TOP_LDT;
      do_op(op, ad, 1'($urandom_range(0, 1)));
      check_lookup(64'h7f00_0000 + 64'($urandom_range(0, 255)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
