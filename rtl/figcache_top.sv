// figcache_top -- one memory channel with FIGCache: controller, tag store and
// a rank of FIGARO-enabled DRAM banks.
//
// A 64 B request enters at req_*; figcache_ctrl looks it up in the FTS
// (fts, one fully associative portion per bank), issues ACT / RD / WR / PRE /
// RELOC commands on the command bus, and the bank named in the command
// (figaro_bank: FIGARO peripheral logic plus a behavioural model of the cell
// arrays and row buffers) carries them out. Row segments are copied between
// the slow subarrays and the cache rows entirely inside the bank, without
// using the data bus.
//
// Interface: req_valid/req_ready handshake, resp_valid pulse with resp_rdata
// for reads (see figcache_ctrl for the address map and timing). ev are the
// controller's event strobes, proto_err/multi_drive report any illegal command
// sequence seen by a bank. Defaults give the main configuration (FIGCache with
// two fast subarrays per bank); FAST_CACHE = 0 selects the variant with 64
// reserved rows in one slow subarray per bank.
// Tool notes: lint reports rst_n as used both asynchronously and
// synchronously. The synchronous use is only the 'disable iff' of assertions
// in the sub-blocks, not a flip-flop, so the reset stays purely asynchronous.
module figcache_top
  import figaro_pkg::*;
#(
  parameter int unsigned N_BANKS    = 16,
  parameter bit          FAST_CACHE = 1'b1,
  parameter int unsigned N_SLOW_SA  = 64,
  parameter int unsigned N_FAST_SA  = FAST_CACHE ? 2 : 0,
  parameter int unsigned ROWS_SLOW  = 512,
  parameter int unsigned ROWS_FAST  = 32,
  parameter int unsigned N_COLS     = 128,
  parameter int unsigned CACHE_ROWS = 64,
  parameter int unsigned SEGS       = 8,
  parameter int unsigned DATA_W     = 512,
  localparam int unsigned BK_W      = (N_BANKS > 1) ? $clog2(N_BANKS) : 1,
  localparam int unsigned A_W       = GROW_W + BK_W + COL_W,
  localparam int unsigned SLOT_W    = $clog2(CACHE_ROWS * SEGS)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               req_valid,
  output logic               req_ready,
  input  logic [A_W-1:0]     req_addr,
  input  logic               req_write,
  input  logic [DATA_W-1:0]  req_wdata,
  output logic               resp_valid,
  output logic [DATA_W-1:0]  resp_rdata,
  output fig_events_t        ev,
  output logic               proto_err,
  output logic               multi_drive
);
  logic [BK_W-1:0]   fts_bank;
  logic [TAG_W-1:0]  fts_tag, fts_ins_tag;
  logic              fts_hit, fts_upd_hit, fts_upd_write, fts_ins;
  logic              fts_vic_free, fts_vic_new_row;
  logic [SLOT_W-1:0] fts_slot, fts_upd_slot, fts_ins_slot, fts_vic_slot;
  fts_entry_t        fts_lk_entry, fts_vic_entry;

  logic              cmd_valid;
  dram_cmd_t         cmd;
  logic [DATA_W-1:0] cmd_wdata, dram_rdata;
  logic [BK_W-1:0]   last_bank_q;

  logic [N_BANKS-1:0]             b_err, b_multi;
  logic [N_BANKS-1:0][DATA_W-1:0] b_rdata;

  figcache_ctrl #(
    .N_BANKS(N_BANKS), .FAST_CACHE(FAST_CACHE), .N_SLOW_SA(N_SLOW_SA),
    .ROWS_SLOW(ROWS_SLOW), .ROWS_FAST(ROWS_FAST), .CACHE_ROWS(CACHE_ROWS),
    .SEGS(SEGS), .BLKS(N_COLS / SEGS), .DATA_W(DATA_W)
  ) u_ctrl (
    .clk, .rst_n,
    .req_valid, .req_ready, .req_addr, .req_write, .req_wdata,
    .resp_valid, .resp_rdata,
    .fts_bank, .fts_tag, .fts_hit, .fts_slot,
    .fts_upd_hit, .fts_upd_write, .fts_upd_slot,
    .fts_ins, .fts_ins_slot, .fts_ins_tag,
    .fts_vic_slot, .fts_vic_free, .fts_vic_new_row, .fts_vic_entry,
    .cmd_valid, .cmd, .cmd_wdata, .dram_rdata, .ev
  );

  fts #(.N_BANKS(N_BANKS), .ROWS(CACHE_ROWS), .SEGS(SEGS)) u_fts (
    .clk, .rst_n, .bank(fts_bank), .lk_tag(fts_tag),
    .lk_hit(fts_hit), .lk_slot(fts_slot), .lk_entry(fts_lk_entry),
    .upd_hit(fts_upd_hit), .upd_write(fts_upd_write), .upd_slot(fts_upd_slot),
    .ins(fts_ins), .ins_slot(fts_ins_slot), .ins_tag(fts_ins_tag),
    .vic_slot(fts_vic_slot), .vic_free(fts_vic_free),
    .vic_new_row(fts_vic_new_row), .vic_entry(fts_vic_entry)
  );

  for (genvar b = 0; b < N_BANKS; b++) begin : g_bank
    figaro_bank #(
      .N_SLOW_SA(N_SLOW_SA), .N_FAST_SA(N_FAST_SA), .ROWS_SLOW(ROWS_SLOW),
      .ROWS_FAST(ROWS_FAST), .N_COLS(N_COLS), .DATA_W(DATA_W)
    ) u_bank (
      .clk, .rst_n,
      .cmd_valid(cmd_valid && int'(cmd.bank) == b), .cmd,
      .wdata(cmd_wdata), .rdata(b_rdata[b]),
      .proto_err(b_err[b]), .multi_drive(b_multi[b])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         last_bank_q <= '0;
    else if (cmd_valid) last_bank_q <= BK_W'(cmd.bank);
  end

  assign dram_rdata  = b_rdata[last_bank_q];
  assign proto_err   = |b_err;
  assign multi_drive = |b_multi;

  // the hit entry is read by the controller only through fts_slot
  logic unused_lk;
  assign unused_lk = ^fts_lk_entry;
endmodule
