// tb_figcache_repl -- checks the RowBenefit replacement against a reference
// written independently in the testbench. Phase 1: with invalid slots the
// lowest invalid slot must be named and nothing is evicted. Phase 2: with a
// full cache and random benefit counters (changed between insertions, as
// hits would), every victim, every "new row" decision and the drained row
// must match the reference: lowest summed row first, then its segments in
// order of increasing benefit, one per insertion, until the row is empty.
module tb_figcache_repl;
  localparam int ROWS = 64, SEGS = 8, BW = 5, E = ROWS * SEGS;
  logic clk = 0, rst_n = 0;
  logic [E-1:0] valid;
  logic [E-1:0][BW-1:0] benefit;
  logic commit = 0;
  logic [$clog2(E)-1:0] vic_slot;
  logic vic_free, new_row;
  logic [$clog2(ROWS)-1:0] drain_row;
  logic [SEGS-1:0] drain_mask;
  int checks = 0, failures = 0, new_rows = 0;
  int m_row;
  logic [SEGS-1:0] m_mask;

  figcache_repl #(.ROWS(ROWS), .SEGS(SEGS), .BEN_W(BW)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // reference: returns the victim and whether a new row is chosen
  function automatic int ref_victim(output bit fresh, output int row, output logic [SEGS-1:0] mask);
    int best, bs, seg;
    for (int i = 0; i < E; i++) if (!valid[i]) begin fresh = 0; row = m_row; mask = m_mask; return i; end
    fresh = (m_mask == 0);
    row = m_row; mask = m_mask;
    if (fresh) begin
      best = 1 << 30;
      for (int r = 0; r < ROWS; r++) begin
        int s = 0;
        for (int k = 0; k < SEGS; k++) s += benefit[r*SEGS + k];
        if (s < best) begin best = s; row = r; end
      end
      mask = '1;
    end
    bs = 1 << 30; seg = 0;
    for (int k = 0; k < SEGS; k++)
      if (mask[k] && benefit[row*SEGS + k] < bs) begin bs = benefit[row*SEGS + k]; seg = k; end
    mask[seg] = 1'b0;
    return row * SEGS + seg;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit fresh; int row, exp; logic [SEGS-1:0] mask;
    valid = '0; benefit = '0; m_row = 0; m_mask = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // phase 1: filling free slots
    for (int i = 0; i < E; i++) begin
      @(negedge clk);
      if (i % 37 == 5) valid[i+1] = 1'b1;        // out-of-order fills
      #1;
      exp = ref_victim(fresh, row, mask);
      check(vic_free && vic_slot == exp[$clog2(E)-1:0] && !new_row, "free slot first");
      commit = 1; @(negedge clk); commit = 0;
      valid[vic_slot] = 1'b1;
      if (&valid) break;
    end
    // phase 2: full cache, row-granularity eviction
    for (int it = 0; it < 200; it++) begin
      @(negedge clk);
      for (int j = 0; j < 40; j++) benefit[$urandom_range(0, E-1)] = BW'($urandom);
      #1;
      exp = ref_victim(fresh, row, mask);
      check(!vic_free && vic_slot == exp[$clog2(E)-1:0], "victim slot");
      check(new_row == fresh, "new row decision");
      if (fresh) new_rows++;
      commit = 1;
      @(negedge clk);
      commit = 0;
      m_row = row; m_mask = mask;
      check(drain_row == m_row[$clog2(ROWS)-1:0] && drain_mask == m_mask, "row register and bit vector");
      benefit[exp] = '0;                          // the inserted segment starts at 0
    end
    check(new_rows >= 20, "several rows drained");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
