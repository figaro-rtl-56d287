// figaro_pkg -- shared constants, types and helper functions of the FIGARO
// relocation substrate and the FIGCache in-DRAM cache.
//
// The default sizes describe one DDR4 channel of the main configuration:
// one rank, 16 banks (4 bank groups x 4 banks), 64 slow subarrays of 512 rows
// per bank plus 2 fast subarrays of 32 rows that hold the cache, an 8 KB rank
// row of 128 columns of 64 B, row segments of 16 columns (1/8 of a row), and a
// 512-entry tag-store portion per bank. These numbers follow the paper's
// configuration table and hardware-overhead section. The command encoding
// below is abstract (a decoded command, not DDR4 pin levels); the paper only
// says RELOC takes one of the reserved DDR4 encodings.
package figaro_pkg;

  // ---------------- DRAM organisation ----------------
  localparam int unsigned N_BANKS      = 16;   // 4 bank groups x 4 banks
  localparam int unsigned N_SLOW_SA    = 64;   // slow subarrays per bank
  localparam int unsigned N_FAST_SA    = 2;    // fast subarrays per bank (cache)
  localparam int unsigned ROWS_SLOW    = 512;  // rows per slow subarray
  localparam int unsigned ROWS_FAST    = 32;   // rows per fast subarray
  localparam int unsigned N_COLS       = 128;  // 64 B columns per 8 KB rank row
  localparam int unsigned DATA_W       = 512;  // one rank-level column (8 chips x 64 bit)

  localparam int unsigned SA_W         = 7;    // subarray index (RELOC destination field)
  localparam int unsigned COL_W        = 7;    // column index
  localparam int unsigned LROW_W       = 9;    // row index inside a subarray
  localparam int unsigned GROW_W       = 15;   // global row index: {slow subarray, local row}
  localparam int unsigned BANK_W       = 4;
  localparam int unsigned PRED_W       = 40;   // predecoded row address: five 3-to-8 groups

  // ---------------- FIGCache ----------------
  localparam int unsigned SEGS_PER_ROW = 8;    // row segment = 1/8 row
  localparam int unsigned BLKS_PER_SEG = 16;   // 16 cache blocks per segment
  localparam int unsigned CACHE_ROWS   = 64;   // in-DRAM cache rows per bank
  localparam int unsigned FTS_ENTRIES  = 512;  // CACHE_ROWS * SEGS_PER_ROW
  localparam int unsigned TAG_W        = 19;   // tag field width of an FTS entry
  localparam int unsigned BEN_W        = 5;    // benefit counter width
  localparam int unsigned ADDR_W       = GROW_W + BANK_W + COL_W; // 64 B block address

  // ---------------- commands ----------------
  typedef enum logic [2:0] {
    CMD_NOP   = 3'd0,
    CMD_ACT   = 3'd1,
    CMD_RD    = 3'd2,
    CMD_WR    = 3'd3,
    CMD_PRE   = 3'd4,
    CMD_RELOC = 3'd5
  } dram_cmd_e;

  // One command on the command/address bus. For ACT, {sa, row} is the row
  // address. For RD/WR, col is the column. For RELOC, col is the source
  // column in the open source row, dst_sa/dst_col the destination (7+7+7 bits).
  typedef struct packed {
    dram_cmd_e              cmd;
    logic [BANK_W-1:0]      bank;
    logic [SA_W-1:0]        sa;
    logic [LROW_W-1:0]      row;
    logic [COL_W-1:0]       col;
    logic [SA_W-1:0]        dst_sa;
    logic [COL_W-1:0]       dst_col;
  } dram_cmd_t;

  // Role of one subarray's column path in the current cycle.
  typedef enum logic [1:0] {
    ROLE_NONE = 2'd0,
    ROLE_SRC  = 2'd1,   // selected LRB column drives the global bitlines
    ROLE_DST  = 2'd2    // global bitlines drive the selected LRB column
  } col_role_e;

  // One FTS entry: tag (original row segment address), valid, dirty, benefit.
  typedef struct packed {
    logic [TAG_W-1:0] tag;
    logic             v;
    logic             d;
    logic [BEN_W-1:0] benefit;
  } fts_entry_t;

  // Event strobes counted by testbenches and performance counters.
  typedef struct packed {
    logic fts_hit;        // request served from the in-DRAM cache
    logic fts_miss;       // request missed in the FTS
    logic insert;         // row segment relocated into the cache
    logic writeback;      // dirty row segment relocated back home
    logic evict;          // valid segment evicted (clean or dirty)
    logic new_victim_row; // replacement picked a new cache row to drain
    logic uncacheable;    // miss that may not be cached (same subarray as cache rows)
    logic row_hit;        // column command to an already open row
    logic row_conflict;   // open row had to be closed first
    logic reloc;          // one RELOC command issued
    logic unaligned;      // RELOC with source column != destination column
  } fig_events_t;

  // 15-bit row address -> 40-bit partially predecoded form (five one-hot
  // groups of 8, least significant group first).
  function automatic logic [PRED_W-1:0] predecode_row(input logic [GROW_W-1:0] r);
    logic [PRED_W-1:0] p;
    p = '0;
    for (int g = 0; g < 5; g++) p[g*8 + int'(r[g*3 +: 3])] = 1'b1;
    return p;
  endfunction

  // Inverse of predecode_row for the lowest LROW_W bits (three groups), as
  // the local row decoder of a subarray uses it.
  function automatic logic [LROW_W-1:0] local_row_of(input logic [PRED_W-1:0] p);
    logic [LROW_W-1:0] r;
    r = '0;
    for (int g = 0; g < 3; g++)
      for (int i = 0; i < 8; i++)
        if (p[g*8 + i]) r[g*3 +: 3] = 3'(i);
    return r;
  endfunction

endpackage
