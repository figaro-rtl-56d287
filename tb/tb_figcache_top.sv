// tb_figcache_top -- end-to-end self-checking test of one FIGCache channel at
// its default (full) size: 16 banks of 64 slow + 2 fast subarrays, 512 B-rows
// of 128 x 64 B columns, 512-entry FTS portions.
//
// A random request stream (reads and writes, concentrated on two banks and a
// pool of rows so that the 512-segment cache of a bank overflows) is sent one
// request at a time. Every read is compared with a reference memory kept in
// the testbench, which checks that insertions, hits in the cache copy and
// write-backs of dirty segments by RELOC all keep the data correct. The
// controller's event strobes are counted; the test fails if any mechanism
// that this configuration can show (FTS hit/miss, insertion, eviction,
// write-back, new drain row, row hit, row conflict, RELOC, unaligned RELOC)
// never happened, or if a bank ever saw an illegal command sequence or two
// row buffers driving the global bitlines. One timing check compares the
// latency of a read served from an open fast cache row with a read that must
// open a slow row. A watchdog ends the run if a request never completes.
`timescale 1ns/1ps
module tb_figcache_top;
  import figaro_pkg::*;
  localparam int A_W = GROW_W + 4 + COL_W;

  logic              clk = 1'b0, rst_n = 1'b0;
  logic              req_valid = 1'b0, req_ready, req_write = 1'b0;
  logic [A_W-1:0]    req_addr = '0;
  logic [DATA_W-1:0] req_wdata = '0, resp_rdata;
  logic              resp_valid, proto_err, multi_drive;
  fig_events_t       ev;

  figcache_top dut (
    .clk, .rst_n, .req_valid, .req_ready, .req_addr, .req_write, .req_wdata,
    .resp_valid, .resp_rdata, .ev, .proto_err, .multi_drive
  );

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
    return {GROW_W'(row), 4'(bank), COL_W'(col)};
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
    for (int i = 0; i < 160; i++) pool[i] = int'($urandom % (1 << GROW_W));
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    repeat (2) @(posedge clk);

    // directed: fill a segment, read it back from the cache, latency check
    a = mk_addr(pool[0], 3, 5);
    do_req(a, 1'b1, lat);             // miss: write home, insert
    do_req(a, 1'b0, lat);             // hit: cache row opened (fast)
    do_req(a, 1'b0, lat_fast);        // hit on the open fast cache row
    do_req(mk_addr(pool[1], 3, 9), 1'b0, lat_slow); // miss: conflict, slow ACT
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
    checks++;
    if (n_unc != 0) begin
      failures++;
      $display("FAIL uncacheable miss with the fast-subarray cache");
    end
    checks++;
    if (n_err != 0 || n_multi != 0) begin
      failures++;
      $display("FAIL bank protocol errors %0d, multiple drivers %0d", n_err, n_multi);
    end
    $display("events: hit=%0d miss=%0d ins=%0d wb=%0d evict=%0d newrow=%0d rowhit=%0d conflict=%0d reloc=%0d unaligned=%0d",
             n_hit, n_miss, n_ins, n_wb, n_evict, n_newrow, n_rowhit, n_conf, n_reloc, n_unal);
    $display("latency: open fast cache row %0d cycles, slow row miss %0d cycles", lat_fast, lat_slow);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
