// fts_portion -- the FIGCache tag store (FTS) portion of one bank.
//
// One entry per in-DRAM cache slot of the bank (512 by default: 64 cache
// rows x 8 row segments). An entry holds the tag (original address of the
// cached row segment), a valid bit, a dirty bit and a 5-bit saturating
// benefit counter. The portion is fully associative: a lookup compares the
// tag with every valid entry in parallel.
//   lookup : lk_tag -> lk_hit, lk_slot, lk_entry (combinational)
//   hit    : upd_hit with upd_slot: benefit += 1 unless saturated; the dirty
//            bit is set when upd_write
//   insert : ins with ins_slot/ins_tag: entry becomes {tag, V=1, D=0, B=0}
//            and the replacement state advances (see figcache_repl)
// The victim for the next insertion (vic_slot, vic_free and the victim's
// entry) is always available. Updates take effect at the clock edge.
//
// From the paper: entry fields and widths, per-bank fully associative
// portion, counter saturation, dirty on write hit. Own choices: a newly
// inserted segment starts with benefit 0 and clean (the request that
// inserted it is served from the home row before the copy is made).
// Tool notes: the replacement block's drain_row/drain_mask outputs (its
// internal row register and bit vector) are left open here on purpose; they
// are observed only by its own testbench.
module fts_portion
  import figaro_pkg::*;
#(
  parameter int unsigned ROWS  = 64,
  parameter int unsigned SEGS  = 8,
  localparam int unsigned ENTRIES = ROWS * SEGS,
  localparam int unsigned SLOT_W  = $clog2(ENTRIES)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [TAG_W-1:0]   lk_tag,
  output logic               lk_hit,
  output logic [SLOT_W-1:0]  lk_slot,
  output fts_entry_t         lk_entry,
  input  logic               upd_hit,
  input  logic               upd_write,
  input  logic [SLOT_W-1:0]  upd_slot,
  input  logic               ins,
  input  logic [SLOT_W-1:0]  ins_slot,
  input  logic [TAG_W-1:0]   ins_tag,
  output logic [SLOT_W-1:0]  vic_slot,
  output logic               vic_free,
  output logic               vic_new_row,
  output fts_entry_t         vic_entry
);
  fts_entry_t                      ent [ENTRIES];
  logic [ENTRIES-1:0]              valid;
  logic [ENTRIES-1:0][BEN_W-1:0]   benefit;

  always_comb begin
    for (int i = 0; i < ENTRIES; i++) begin
      valid[i]   = ent[i].v;
      benefit[i] = ent[i].benefit;
    end
  end

  always_comb begin
    lk_hit  = 1'b0;
    lk_slot = '0;
    for (int i = ENTRIES - 1; i >= 0; i--)
      if (ent[i].v && ent[i].tag == lk_tag) begin
        lk_hit  = 1'b1;
        lk_slot = SLOT_W'(i);
      end
    lk_entry  = ent[lk_slot];
    vic_entry = ent[vic_slot];
  end

  figcache_repl #(.ROWS(ROWS), .SEGS(SEGS), .BEN_W(BEN_W)) u_repl (
    .clk, .rst_n, .valid, .benefit, .commit(ins),
    .vic_slot, .vic_free, .new_row(vic_new_row),
    .drain_row(), .drain_mask()
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) ent[i] <= '0;
    end else begin
      if (upd_hit) begin
        if (ent[upd_slot].benefit != '1) ent[upd_slot].benefit <= ent[upd_slot].benefit + 1'b1;
        if (upd_write) ent[upd_slot].d <= 1'b1;
      end
      if (ins) ent[ins_slot] <= '{tag: ins_tag, v: 1'b1, d: 1'b0, benefit: '0};
    end
  end

  // the controller inserts into the slot the replacement logic named
  assert property (@(posedge clk) disable iff (!rst_n) ins |-> ins_slot == vic_slot);
endmodule
