// fts -- FIGCache tag store of one channel: one fts_portion per bank.
//
// The memory controller looks up the portion of the bank a request goes to
// and updates only that portion. All portions are separate, fully
// associative structures (512 entries of 26 bits each by default: 19-bit
// tag, valid, dirty, 5-bit benefit), so a channel of 16 banks holds 26 KB.
//
// Interface: bank selects the portion for lookup, victim and update; all the
// other ports are those of fts_portion (combinational lookup, updates at the
// clock edge). Only the selected portion sees upd_hit / ins.
//
// From the paper: one fixed portion per bank, entry format and count.
// Own choice: a single shared lookup/update port, since the controller
// handles one request at a time.
module fts
  import figaro_pkg::*;
#(
  parameter int unsigned N_BANKS = 16,
  parameter int unsigned ROWS    = 64,
  parameter int unsigned SEGS    = 8,
  localparam int unsigned ENTRIES = ROWS * SEGS,
  localparam int unsigned SLOT_W  = $clog2(ENTRIES),
  localparam int unsigned BK_W    = (N_BANKS > 1) ? $clog2(N_BANKS) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [BK_W-1:0]    bank,
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
  logic [N_BANKS-1:0]              p_hit, p_free, p_new;
  logic [N_BANKS-1:0][SLOT_W-1:0]  p_slot, p_vslot;
  fts_entry_t [N_BANKS-1:0]        p_entry, p_ventry;

  for (genvar b = 0; b < N_BANKS; b++) begin : g_bank
    wire sel = (int'(bank) == b);
    fts_portion #(.ROWS(ROWS), .SEGS(SEGS)) u_portion (
      .clk, .rst_n, .lk_tag,
      .lk_hit(p_hit[b]), .lk_slot(p_slot[b]), .lk_entry(p_entry[b]),
      .upd_hit(upd_hit && sel), .upd_write, .upd_slot,
      .ins(ins && sel), .ins_slot, .ins_tag,
      .vic_slot(p_vslot[b]), .vic_free(p_free[b]), .vic_new_row(p_new[b]),
      .vic_entry(p_ventry[b])
    );
  end

  always_comb begin
    lk_hit      = p_hit[bank];
    lk_slot     = p_slot[bank];
    lk_entry    = p_entry[bank];
    vic_slot    = p_vslot[bank];
    vic_free    = p_free[bank];
    vic_new_row = p_new[bank];
    vic_entry   = p_ventry[bank];
  end
endmodule
