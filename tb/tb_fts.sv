// tb_fts -- self-checking test of the channel tag store (default size: 16
// bank portions of 512 entries).
//
// Random tags are inserted into random banks at the victim slot the selected
// portion names, and random cached tags are hit (read or write). A copy of
// every portion kept by the testbench is compared after each operation: a tag
// must hit only in the bank it was inserted into, with the right slot and
// entry, and an update must change only the selected bank's entry. A watchdog
// stops a hung run.
`timescale 1ns/1ps
module tb_fts;
  import figaro_pkg::*;
  localparam int ENTRIES = CACHE_ROWS * SEGS_PER_ROW;
  localparam int SLOT_W  = $clog2(ENTRIES);

  logic clk = 1'b0, rst_n = 1'b0;
  logic [3:0]        bank = '0;
  logic [TAG_W-1:0]  lk_tag = '0, ins_tag = '0;
  logic              lk_hit, upd_hit = 1'b0, upd_write = 1'b0, ins = 1'b0;
  logic              vic_free, vic_new_row;
  logic [SLOT_W-1:0] lk_slot, upd_slot = '0, ins_slot = '0, vic_slot;
  fts_entry_t        lk_entry, vic_entry;

  fts dut (
    .clk, .rst_n, .bank, .lk_tag, .lk_hit, .lk_slot, .lk_entry,
    .upd_hit, .upd_write, .upd_slot, .ins, .ins_slot, .ins_tag,
    .vic_slot, .vic_free, .vic_new_row, .vic_entry
  );
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  fts_entry_t model [N_BANKS][ENTRIES];
  int tags [$];      // inserted tags (unique over all banks)
  int tag_bank [int];
  int tag_slot [int];

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    #(50_000_000);
    $display("WATCHDOG");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int b = 0; b < N_BANKS; b++)
      for (int i = 0; i < ENTRIES; i++) model[b][i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int n = 0; n < 4000; n++) begin
      automatic int t, b;
      if (tags.size() < 20 || ($urandom % 100) < 50) begin
        b = int'($urandom % N_BANKS);
        bank = 4'(b);
        do t = int'($urandom % (1 << (TAG_W - 1)));
        while (tag_bank.exists(t));
        #1;
        ins = 1'b1; ins_slot = vic_slot; ins_tag = TAG_W'(t);
        if (model[b][vic_slot].v) tag_bank.delete(int'(model[b][vic_slot].tag));
        model[b][vic_slot] = '{tag: TAG_W'(t), v: 1'b1, d: 1'b0, benefit: '0};
        tags.push_back(t); tag_bank[t] = b; tag_slot[t] = int'(vic_slot);
      end else begin
        t = tags[$urandom % tags.size()];
        if (tag_bank.exists(t)) begin
          b = tag_bank[t];
          bank = 4'(b);
          upd_hit = 1'b1; upd_slot = SLOT_W'(tag_slot[t]); upd_write = $urandom % 2;
          if (model[b][tag_slot[t]].benefit != '1) model[b][tag_slot[t]].benefit++;
          if (upd_write) model[b][tag_slot[t]].d = 1'b1;
        end
      end
      @(negedge clk);
      ins = 1'b0; upd_hit = 1'b0;
      // look a random known tag up in every bank
      t = tags[$urandom % tags.size()];
      lk_tag = TAG_W'(t);
      for (int q = 0; q < N_BANKS; q++) begin
        bank = 4'(q);
        #1;
        if (tag_bank.exists(t) && tag_bank[t] == q) begin
          check("hit in own bank", lk_hit === 1'b1 && lk_slot === SLOT_W'(tag_slot[t]));
          check("entry", lk_entry === model[q][tag_slot[t]]);
        end else
          check("no hit in other bank", lk_hit === 1'b0);
        check("victim entry", vic_entry === model[q][vic_slot]);
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
