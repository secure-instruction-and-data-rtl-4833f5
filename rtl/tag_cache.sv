// tag_cache: the separate store of 1-bit data tags used by the tag mechanism.
//
// The cache is direct-mapped over 8-byte words: address bits [IDXW+2:3] pick
// one of ENTRIES entries and the bits above them are kept as the entry's
// address tag. Each entry holds, after the tag-cache record of the paper's
// pseudo code (index, matchbit, tagbit):
//   valid, prot     occupied; prot = written by SDTCHECK (a saved return address)
//   addr            upper address bits
//   tagbit          current tag of the word (1 = untrusted data was stored there)
//   matchbit        the tag the word had when SDTCHECK protected it
// A counter keeps the number of occupied entries.
//
// Only tagged words occupy entries: a word that misses is trusted, so a store
// of trusted data to an unprotected word frees its entry. Protected entries are
// never displaced by ordinary stores. An untrusted store that maps onto a
// protected entry of another address cannot be recorded and pulses `drop`. An
// SDTCHECK that replaces another protected entry pulses `evict`. On LDTCHECK the
// protected entry is released when tagbit == matchbit; a mismatching entry stays
// so that the mismatch remains visible.
//
// Timing: lookup is combinational from lk_addr; writes take effect at the next
// rising clock edge. Reset (active low, synchronous) empties the cache.
// ENTRIES is this design's choice; the paper gives no size.
module tag_cache
  import ift_pkg::*;
#(
  parameter int unsigned ENTRIES = 64,
  parameter int unsigned AW      = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  // lookup
  input  logic [AW-1:0]     lk_addr,
  output tc_lookup_t        lk,
  // update
  input  logic              wr_en,
  input  tag_op_e           wr_op,      // TOP_STORE, TOP_SDT or TOP_LDT
  input  logic [AW-1:0]     wr_addr,
  input  logic              wr_tag,     // tag of the data being stored
  // status
  output logic [$clog2(ENTRIES+1)-1:0] count,
  output logic              drop,
  output logic              evict
);
  localparam int unsigned IDXW = $clog2(ENTRIES);
  localparam int unsigned TAGW = AW - 3 - IDXW;

  typedef struct packed {
    logic            prot;
    logic [TAGW-1:0] addr;
    logic            tagbit;
    logic            matchbit;
  } entry_t;

  logic   [ENTRIES-1:0] valid_q;
  entry_t               ent_q [ENTRIES];

  // ---------------------------------------------------------------- lookup
  logic [IDXW-1:0] lk_idx;
  logic [TAGW-1:0] lk_tag;
  assign lk_idx = lk_addr[3 +: IDXW];
  assign lk_tag = lk_addr[AW-1 -: TAGW];

  always_comb begin
    lk.hit      = valid_q[lk_idx] && (ent_q[lk_idx].addr == lk_tag);
    lk.prot     = lk.hit && ent_q[lk_idx].prot;
    lk.tagbit   = lk.hit && ent_q[lk_idx].tagbit;
    lk.matchbit = lk.hit && ent_q[lk_idx].matchbit;
  end

  // ---------------------------------------------------------------- update
  logic [IDXW-1:0] w_idx;
  logic [TAGW-1:0] w_tag;
  logic            w_hit, w_slot_prot, w_slot_valid;
  assign w_idx        = wr_addr[3 +: IDXW];
  assign w_tag        = wr_addr[AW-1 -: TAGW];
  assign w_slot_valid = valid_q[w_idx];
  assign w_slot_prot  = w_slot_valid && ent_q[w_idx].prot;
  assign w_hit        = w_slot_valid && (ent_q[w_idx].addr == w_tag);

  logic   set_valid, clr_valid, wr_ent;
  entry_t new_ent;

  always_comb begin
    set_valid = 1'b0;
    clr_valid = 1'b0;
    wr_ent    = 1'b0;
    new_ent   = ent_q[w_idx];
    drop      = 1'b0;
    evict     = 1'b0;
    if (wr_en) begin
      unique case (wr_op)
        TOP_STORE: begin
          if (w_hit) begin
            if (!ent_q[w_idx].prot && !wr_tag) clr_valid = 1'b1;
            else begin
              wr_ent         = 1'b1;
              new_ent.tagbit = wr_tag;
            end
          end else if (wr_tag) begin
            if (w_slot_prot) drop = 1'b1;
            else begin
              set_valid = 1'b1;
              wr_ent    = 1'b1;
              new_ent   = '{prot: 1'b0, addr: w_tag, tagbit: 1'b1, matchbit: 1'b0};
            end
          end
        end
        TOP_SDT: begin
          evict     = w_slot_prot && !w_hit;
          set_valid = 1'b1;
          wr_ent    = 1'b1;
          new_ent   = '{prot: 1'b1, addr: w_tag, tagbit: wr_tag, matchbit: wr_tag};
        end
        TOP_LDT: begin
          if (w_hit && ent_q[w_idx].prot &&
              (ent_q[w_idx].tagbit == ent_q[w_idx].matchbit))
            clr_valid = 1'b1;
        end
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      valid_q <= '0;
      count   <= '0;
    end else begin
      if (set_valid) valid_q[w_idx] <= 1'b1;
      if (clr_valid) valid_q[w_idx] <= 1'b0;
      if (set_valid && !w_slot_valid) count <= count + 1'b1;
      if (clr_valid)                  count <= count - 1'b1;
    end
  end

  always_ff @(posedge clk) if (wr_ent) ent_q[w_idx] <= new_ent;

  // the counter can never exceed the number of entries
  assert property (@(posedge clk) disable iff (!rst_n) 32'(count) <= ENTRIES);
endmodule
