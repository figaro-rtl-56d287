// figcache_repl -- RowBenefit replacement of one bank's in-DRAM cache.
//
// The cache of a bank holds ROWS cache rows of SEGS row-segment slots each
// (slot = row*SEGS + position). The block names the slot that the next
// insertion will use:
//   1. If any slot is invalid, the lowest-numbered invalid slot (no eviction).
//   2. Otherwise eviction works a whole cache row at a time. A row register
//      (6 bits by default) names the row being drained and a bit vector
//      (8 bits) marks its segments not yet evicted. When the vector is empty,
//      the row whose benefit counters sum lowest is chosen and all its
//      segments are marked. Of the marked segments the one with the lowest
//      benefit counter is the victim.
// commit (one cycle, at the insertion) clears the victim's bit and, if a new
// row was chosen, loads the row register. Ties go to the lowest index.
//
// Interface: valid and benefit of every slot in; vic_slot / vic_free /
// new_row out, combinational from the inputs and the two registers.
// Timing: one insertion decision per cycle at most; the sum and minimum
// search are a single combinational stage.
//
// From the paper: insertion into free slots first, row-granularity
// eviction by lowest summed benefit, lowest individual benefit among the
// marked segments, the row register and bit vector and their sizes. Own
// choices: tie-breaking, the order free slots are filled, and that the
// search is done in one cycle.
module figcache_repl #(
  parameter int unsigned ROWS  = 64,
  parameter int unsigned SEGS  = 8,
  parameter int unsigned BEN_W = 5,
  localparam int unsigned ENTRIES = ROWS * SEGS,
  localparam int unsigned SLOT_W  = $clog2(ENTRIES),
  localparam int unsigned ROW_W   = $clog2(ROWS),
  localparam int unsigned SEG_W   = $clog2(SEGS),
  localparam int unsigned SUM_W   = BEN_W + SEG_W
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic [ENTRIES-1:0]             valid,
  input  logic [ENTRIES-1:0][BEN_W-1:0]  benefit,
  input  logic                           commit,
  output logic [SLOT_W-1:0]              vic_slot,
  output logic                           vic_free,
  output logic                           new_row,
  output logic [ROW_W-1:0]               drain_row,   // row register
  output logic [SEGS-1:0]                drain_mask   // segments still marked
);
  logic [ROW_W-1:0] row_q;
  logic [SEGS-1:0]  mask_q;

  logic [ROW_W-1:0] row_pick, min_row;
  logic [SEGS-1:0]  mask_pick;
  logic [SEG_W-1:0] seg_pick;
  logic [SLOT_W-1:0] free_slot;
  logic             any_free;

  always_comb begin
    // first free slot
    any_free  = 1'b0;
    free_slot = '0;
    for (int i = ENTRIES - 1; i >= 0; i--)
      if (!valid[i]) begin
        any_free  = 1'b1;
        free_slot = SLOT_W'(i);
      end
  end

  always_comb begin
    // row with the lowest cumulative benefit
    logic [SUM_W-1:0] best, sum;
    best    = '1;
    min_row = '0;
    for (int r = 0; r < ROWS; r++) begin
      sum = '0;
      for (int s = 0; s < SEGS; s++) sum += SUM_W'(benefit[r*SEGS + s]);
      if (r == 0 || sum < best) begin
        best    = sum;
        min_row = ROW_W'(r);
      end
    end
  end

  always_comb begin
    logic [BEN_W-1:0] bbest;
    logic             found;
    new_row   = (mask_q == '0);
    row_pick  = new_row ? min_row : row_q;
    mask_pick = new_row ? '1 : mask_q;
    bbest     = '1;
    found     = 1'b0;
    seg_pick  = '0;
    for (int s = 0; s < SEGS; s++)
      if (mask_pick[s] && (!found || benefit[int'(row_pick)*SEGS + s] < bbest)) begin
        found    = 1'b1;
        bbest    = benefit[int'(row_pick)*SEGS + s];
        seg_pick = SEG_W'(s);
      end
    vic_free = any_free;
    vic_slot = any_free ? free_slot : SLOT_W'({row_pick, seg_pick});
    if (any_free) new_row = 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row_q  <= '0;
      mask_q <= '0;
    end else if (commit && !any_free) begin
      row_q  <= row_pick;
      mask_q <= mask_pick & ~(SEGS'(1) << seg_pick);
    end
  end

  assign drain_row  = row_q;
  assign drain_mask = mask_q;
endmodule
