// tb_figaro_bank -- command-level test of one FIGARO bank at its default size.
// First the example of the relocation figure: subarray A's row holds
// A0..A3, subarray B's row B0..B3; ACT A, RELOC column 3 -> B column 1,
// ACT B, PRE; B's row must then read B0 A3 B2 B3. Then 40 random
// relocations (random source/destination subarrays including the fast ones,
// 1..16 unaligned columns each) are checked against a shadow memory kept by
// the testbench, and no command may raise proto_err.
module tb_figaro_bank;
  import figaro_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0;
  dram_cmd_t cmd;
  logic [DATA_W-1:0] wdata, rdata;
  logic proto_err, multi_drive;
  logic [DATA_W-1:0] shadow [longint unsigned];
  int checks = 0, failures = 0, errs = 0;

  figaro_bank dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && (proto_err || multi_drive)) errs++;

  function automatic longint unsigned key(int s, int r, int c);
    return (longint'(s) * 512 + r) * 128 + c;
  endfunction
  function automatic logic [DATA_W-1:0] sh(int s, int r, int c);
    return shadow.exists(key(s, r, c)) ? shadow[key(s, r, c)] : '0;
  endfunction
  function automatic logic [DATA_W-1:0] rnd();
    logic [DATA_W-1:0] d;
    for (int i = 0; i < DATA_W / 32; i++) d[i*32 +: 32] = $urandom;
    return d;
  endfunction

  task automatic issue(dram_cmd_e c, int sa = 0, int row = 0, int col = 0, int dsa = 0, int dcol = 0);
    @(negedge clk);
    cmd = '0; cmd.cmd = c; cmd.sa = SA_W'(sa); cmd.row = LROW_W'(row); cmd.col = COL_W'(col);
    cmd.dst_sa = SA_W'(dsa); cmd.dst_col = COL_W'(dcol);
    cmd_valid = 1;
    @(negedge clk);
    cmd_valid = 0;
  endtask
  task automatic wr_col(int s, int r, int c, logic [DATA_W-1:0] d);
    wdata = d; issue(CMD_WR, 0, 0, c); shadow[key(s, r, c)] = d;
  endtask
  task automatic check_col(int s, int r, int c, string what);
    issue(CMD_RD, 0, 0, c);
    checks++;
    if (rdata !== sh(s, r, c)) begin
      failures++; $display("FAIL %s: sa%0d row%0d col%0d", what, s, r, c);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cmd = '0; wdata = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // ---- the figure's example: A = subarray 10 row 7, B = subarray 40 row 3
    issue(CMD_ACT, 10, 7);
    for (int c = 0; c < 4; c++) wr_col(10, 7, c, DATA_W'(32'hA0 + c));
    issue(CMD_PRE);
    issue(CMD_ACT, 40, 3);
    for (int c = 0; c < 4; c++) wr_col(40, 3, c, DATA_W'(32'hB0 + c));
    issue(CMD_PRE);
    issue(CMD_ACT, 10, 7);
    issue(CMD_RELOC, 0, 0, 3, 40, 1);
    issue(CMD_ACT, 40, 3);
    issue(CMD_PRE);
    issue(CMD_ACT, 40, 3);
    for (int c = 0; c < 4; c++) begin
      issue(CMD_RD, 0, 0, c);
      checks++;
      if (rdata !== DATA_W'(c == 1 ? 32'hA3 : 32'hB0 + c)) begin
        failures++; $display("FAIL figure example col %0d = %h", c, rdata[31:0]);
      end
    end
    issue(CMD_PRE);
    shadow[key(40, 3, 1)] = DATA_W'(32'hA3);
    // ---- random relocations
    for (int it = 0; it < 40; it++) begin
      int ss, sr, ds, dr, n, sc0, dc0;
      ss = $urandom_range(0, 65);
      do ds = $urandom_range(0, 65); while (ds == ss);
      sr = $urandom_range(0, ss >= 64 ? 31 : 511);
      dr = $urandom_range(0, ds >= 64 ? 31 : 511);
      n  = $urandom_range(1, 16);
      sc0 = $urandom_range(0, 127 - n);
      dc0 = $urandom_range(0, 127 - n);
      // give the source row fresh data
      issue(CMD_ACT, ss, sr);
      for (int c = 0; c < n; c++) wr_col(ss, sr, sc0 + c, rnd());
      for (int c = 0; c < n; c++) begin
        issue(CMD_RELOC, 0, 0, sc0 + c, ds, dc0 + c);
        shadow[key(ds, dr, dc0 + c)] = sh(ss, sr, sc0 + c);
      end
      issue(CMD_ACT, ds, dr);
      issue(CMD_PRE);
      // destination row: relocated columns and two neighbours
      issue(CMD_ACT, ds, dr);
      for (int c = (dc0 > 0 ? dc0 - 1 : 0); c <= dc0 + n && c < 128; c++)
        check_col(ds, dr, c, "random relocation");
      issue(CMD_PRE);
    end
    checks++;
    if (errs != 0) begin failures++; $display("FAIL %0d protocol errors", errs); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
