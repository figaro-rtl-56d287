// tb_fts_portion -- self-checking test of one FTS portion (default size: 512
// entries, 64 cache rows x 8 segments).
//
// The testbench keeps its own copy of every entry. Random operations insert
// new tags into the slot the replacement logic names, or update a hit entry
// (read or write). After each operation it looks up a cached tag and an
// uncached tag and compares lk_hit, lk_slot, lk_entry and the victim entry
// with its copy. This checks the associative match, the saturating benefit
// counter (entries are hit far more than 31 times) and the dirty bit set on a
// write hit. A watchdog stops a hung run.
`timescale 1ns/1ps
module tb_fts_portion;
  import figaro_pkg::*;
  localparam int ENTRIES = CACHE_ROWS * SEGS_PER_ROW;
  localparam int SLOT_W  = $clog2(ENTRIES);

  logic clk = 1'b0, rst_n = 1'b0;
  logic [TAG_W-1:0]  lk_tag = '0, ins_tag = '0;
  logic              lk_hit, upd_hit = 1'b0, upd_write = 1'b0, ins = 1'b0;
  logic              vic_free, vic_new_row;
  logic [SLOT_W-1:0] lk_slot, upd_slot = '0, ins_slot = '0, vic_slot;
  fts_entry_t        lk_entry, vic_entry;

  fts_portion dut (
    .clk, .rst_n, .lk_tag, .lk_hit, .lk_slot, .lk_entry,
    .upd_hit, .upd_write, .upd_slot, .ins, .ins_slot, .ins_tag,
    .vic_slot, .vic_free, .vic_new_row, .vic_entry
  );
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  fts_entry_t model [ENTRIES];
  int         slot_of [int];   // tag -> slot

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic probe(logic [TAG_W-1:0] t);
    lk_tag = t;
    #1;
    if (slot_of.exists(int'(t))) begin
      check("hit", lk_hit === 1'b1);
      check("slot", lk_slot === SLOT_W'(slot_of[int'(t)]));
      check("entry", lk_entry === model[slot_of[int'(t)]]);
    end else
      check("miss", lk_hit === 1'b0);
    check("victim entry", vic_entry === model[vic_slot]);
  endtask

  initial begin : watchdog
    #(50_000_000);
    $display("WATCHDOG");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < ENTRIES; i++) model[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int n = 0; n < 20000; n++) begin
      automatic int k = int'($urandom % 100);
      if (k < 15 || slot_of.num() == 0) begin
        // insert a new tag (bit 18 stays 0, as the controller's tags do)
        automatic logic [TAG_W-1:0] t;
        do t = TAG_W'($urandom % (1 << (TAG_W - 1)));
        while (slot_of.exists(int'(t)));
        ins = 1'b1; ins_slot = vic_slot; ins_tag = t;
        if (model[vic_slot].v) slot_of.delete(int'(model[vic_slot].tag));
        model[vic_slot] = '{tag: t, v: 1'b1, d: 1'b0, benefit: '0};
        slot_of[int'(t)] = int'(vic_slot);
      end else begin
        // hit on a random cached tag; a few tags are hit very often
        automatic int idx = (k < 60) ? int'($urandom % 4) : int'($urandom % slot_of.num());
        automatic int t, s;
        void'(slot_of.first(t));
        for (int j = 0; j < idx % slot_of.num(); j++) void'(slot_of.next(t));
        s = slot_of[t];
        upd_hit = 1'b1; upd_slot = SLOT_W'(s); upd_write = ($urandom % 100) < 20;
        if (model[s].benefit != '1) model[s].benefit++;
        if (upd_write) model[s].d = 1'b1;
      end
      @(negedge clk);
      ins = 1'b0; upd_hit = 1'b0; upd_write = 1'b0;
      begin
        automatic int t;
        void'(slot_of.first(t));
        probe(TAG_W'(t));
      end
      probe(TAG_W'((1 << (TAG_W - 1)) | ($urandom % 1000)));   // never inserted
    end
    // saturation must have been reached by the frequently hit entries
    begin
      automatic int sat = 0;
      for (int i = 0; i < ENTRIES; i++) sat += int'(model[i].benefit == '1);
      check("some counter saturated", sat > 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
