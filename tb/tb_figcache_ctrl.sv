// tb_figcache_ctrl -- self-checking test of the FIGCache controller in its
// reserved-row variant (FAST_CACHE = 0: the 64 cache rows of a bank are the
// top rows of one slow subarray), wired here to the FTS and to two
// FIGARO-enabled banks of full size.
//
// A random request stream is checked read by read against a reference memory.
// Besides the mechanisms of the fast-subarray cache (hit, miss, insertion,
// eviction, write-back, new drain row, row hit, row conflict, RELOC, unaligned
// RELOC) this variant must also show uncacheable misses: requests to the
// subarray that holds the reserved rows are served but never inserted. The
// row pool is drawn so that a part of it lies in that subarray. Illegal
// command sequences or multiple row buffers on the global bitlines fail the
// test. The latency check compares a read from an open cache row with a read
// that has to open a slow row. A watchdog ends a run that hangs.
`timescale 1ns/1ps
module tb_figcache_ctrl;
  import figaro_pkg::*;
  localparam int NB = 2;
  localparam int A_W = GROW_W + 1 + COL_W;

  logic              clk = 1'b0, rst_n = 1'b0;
  logic              req_valid = 1'b0, req_ready, req_write = 1'b0;
  logic [A_W-1:0]    req_addr = '0;
  logic [DATA_W-1:0] req_wdata = '0, resp_rdata;
  logic              resp_valid, proto_err, multi_drive;
  fig_events_t       ev;

  localparam int SLOT_W = $clog2(CACHE_ROWS * SEGS_PER_ROW);
  logic              fts_bank;
  logic [TAG_W-1:0]  fts_tag, fts_ins_tag;
  logic              fts_hit, fts_upd_hit, fts_upd_write, fts_ins;
  logic              fts_vic_free, fts_vic_new_row;
  logic [SLOT_W-1:0] fts_slot, fts_upd_slot, fts_ins_slot, fts_vic_slot;
  fts_entry_t        fts_lk_entry, fts_vic_entry;
  logic              cmd_valid;
  dram_cmd_t         cmd;
  logic [DATA_W-1:0] cmd_wdata, dram_rdata;
  logic              last_bank_q;
  logic [NB-1:0]     b_err, b_multi;
  logic [NB-1:0][DATA_W-1:0] b_rdata;

  figcache_ctrl #(.N_BANKS(NB), .FAST_CACHE(1'b0)) dut (
    .clk, .rst_n,
    .req_valid, .req_ready, .req_addr, .req_write, .req_wdata,
    .resp_valid, .resp_rdata,
    .fts_bank, .fts_tag, .fts_hit, .fts_slot,
    .fts_upd_hit, .fts_upd_write, .fts_upd_slot,
    .fts_ins, .fts_ins_slot, .fts_ins_tag,
    .fts_vic_slot, .fts_vic_free, .fts_vic_new_row, .fts_vic_entry,
    .cmd_valid, .cmd, .cmd_wdata, .dram_rdata, .ev
  );
  fts #(.N_BANKS(NB)) u_fts (
    .clk, .rst_n, .bank(fts_bank), .lk_tag(fts_tag),
    .lk_hit(fts_hit), .lk_slot(fts_slot), .lk_entry(fts_lk_entry),
    .upd_hit(fts_upd_hit), .upd_write(fts_upd_write), .upd_slot(fts_upd_slot),
    .ins(fts_ins), .ins_slot(fts_ins_slot), .ins_tag(fts_ins_tag),
    .vic_slot(fts_vic_slot), .vic_free(fts_vic_free),
    .vic_new_row(fts_vic_new_row), .vic_entry(fts_vic_entry)
  );
  for (genvar b = 0; b < NB; b++) begin : g_bank
    figaro_bank #(.N_FAST_SA(0)) u_bank (
      .clk, .rst_n,
      .cmd_valid(cmd_valid && int'(cmd.bank) == b), .cmd,
      .wdata(cmd_wdata), .rdata(b_rdata[b]),
      .proto_err(b_err[b]), .multi_drive(b_multi[b])
    );
  end
  always @(posedge clk) if (cmd_valid) last_bank_q <= cmd.bank[0];
  assign dram_rdata  = b_rdata[last_bank_q];
  assign proto_err   = |b_err;
  assign multi_drive = |b_multi;

  always #0.625 clk = ~clk;

  int checks = 0, failures = 0;
  int n_hit = 0, n_miss = 0, n_ins = 0, n_wb = 0, n_evict = 0, n_newrow = 0;
  int n_rowhit = 0, n_conf = 0, n_reloc = 0, n_unal = 0, n_unc = 0;
  int n_err = 0, n_multi = 0;
  logic [DATA_W-1:0] ref_mem [longint unsigned];

  always @(posedge clk) if (rst_n) begin
    n_hit    += int'(ev.fts_hit);
    n_miss   += int'(ev.fts_miss);
    n_ins    += int'(ev.insert);
    n_wb     += int'(ev.writeback);
    n_evict  += int'(ev.evict);
    n_newrow += int'(ev.new_victim_row);
    n_unc    += int'(ev.uncacheable);
    n_rowhit += int'(ev.row_hit);
    n_conf   += int'(ev.row_conflict);
    n_reloc  += int'(ev.reloc);
    n_unal   += int'(ev.unaligned);
    n_err    += int'(proto_err);
    n_multi  += int'(multi_drive);
  end

  function automatic logic [DATA_W-1:0] rand_data();
    logic [DATA_W-1:0] d;
    for (int i = 0; i < DATA_W / 32; i++) d[i*32 +: 32] = $urandom;
    return d;
  endfunction

  // one request; returns its latency in cycles (request accepted -> response)
  task automatic do_req(input logic [A_W-1:0] a, input logic w, output int lat);
    logic [DATA_W-1:0] d, exp;
    int t;
    d = rand_data();
    while (!req_ready) @(posedge clk);
    req_valid <= 1'b1; req_addr <= a; req_write <= w; req_wdata <= d;
    @(posedge clk);
    req_valid <= 1'b0;
    t = 0;
    while (!resp_valid) begin
      @(posedge clk);
      t++;
      if (t > 5000) begin
        $display("WATCHDOG: request %h never completed", a);
        failures++;
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
    lat = t;
    if (w) ref_mem[longint'(a)] = d;
    else begin
      exp = ref_mem.exists(longint'(a)) ? ref_mem[longint'(a)] : '0;
      checks++;
      if (resp_rdata !== exp) begin
        failures++;
        if (failures < 10) $display("FAIL read %h: got %h... exp %h...", a,
                                    resp_rdata[31:0], exp[31:0]);
      end
    end
  endtask

  function automatic logic [A_W-1:0] mk_addr(int row, int bank, int col);
    return {GROW_W'(row), 1'(bank), COL_W'(col)};
  endfunction

  task automatic expect_nonzero(string name, int n);
    checks++;
    if (n == 0) begin
      failures++;
      $display("FAIL mechanism never seen: %s", name);
    end
  endtask

  int pool [160];
  int lat, lat_fast, lat_slow;
  logic [A_W-1:0] a, last_a;

  initial begin : watchdog
    #(4_000_000);
    $display("WATCHDOG: global time limit");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 160; i++)
      pool[i] = (i % 4 == 3) ? (63 * 512 + int'($urandom % 448)) : int'($urandom % (63 * 512));
    last_bank_q = 1'b0;
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    repeat (2) @(posedge clk);

    // directed: fill a segment, read it back from the cache, latency check
    a = mk_addr(pool[0], 1, 5);
    do_req(a, 1'b1, lat);             // miss: write home, insert
    do_req(a, 1'b0, lat);             // hit: cache row opened (fast)
    do_req(a, 1'b0, lat_fast);        // hit on the open cache row
    do_req(mk_addr(pool[1], 1, 9), 1'b0, lat_slow); // miss: conflict, slow ACT
    checks++;
    if (!(lat_fast < lat_slow)) begin
      failures++;
      $display("FAIL latency: open cache row %0d, slow row miss %0d", lat_fast, lat_slow);
    end

    // random traffic
    last_a = a;
    for (int n = 0; n < 6000; n++) begin
      automatic int k = int'($urandom % 100);
      if (k < 25)      a = last_a;                                       // same block
      else if (k < 45) a = {last_a[A_W-1:COL_W], COL_W'($urandom)};      // same row
      else a = mk_addr(pool[$urandom % 160], int'($urandom % 2), int'($urandom % N_COLS));
      do_req(a, ($urandom % 100) < 40, lat);
      last_a = a;
    end
    // read everything back
    foreach (ref_mem[k]) do_req(A_W'(k), 1'b0, lat);

    expect_nonzero("fts_hit", n_hit);
    expect_nonzero("fts_miss", n_miss);
    expect_nonzero("insert", n_ins);
    expect_nonzero("writeback", n_wb);
    expect_nonzero("evict", n_evict);
    expect_nonzero("new_victim_row", n_newrow);
    expect_nonzero("row_hit", n_rowhit);
    expect_nonzero("row_conflict", n_conf);
    expect_nonzero("reloc", n_reloc);
    expect_nonzero("unaligned", n_unal);
    expect_nonzero("uncacheable", n_unc);
    checks++;
    if (n_err != 0 || n_multi != 0) begin
      failures++;
      $display("FAIL bank protocol errors %0d, multiple drivers %0d", n_err, n_multi);
    end
    $display("events: hit=%0d miss=%0d ins=%0d wb=%0d evict=%0d newrow=%0d rowhit=%0d conflict=%0d reloc=%0d unaligned=%0d uncacheable=%0d",
             n_hit, n_miss, n_ins, n_wb, n_evict, n_newrow, n_rowhit, n_conf, n_reloc, n_unal, n_unc);
    $display("latency: open cache row %0d cycles, slow row miss %0d cycles", lat_fast, lat_slow);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
