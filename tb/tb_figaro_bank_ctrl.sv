// tb_figaro_bank_ctrl -- directed test of the FIGARO bank control. It walks
// through the command sequence of a relocation (ACT source, RELOC x2 with
// unaligned columns, ACT destination, READ, PRE) and a set of illegal
// commands, and checks per-subarray selects, roles, column buses, the
// predecoded row bus and the error flag against hand-computed values.
module tb_figaro_bank_ctrl;
  import figaro_pkg::*;
  localparam int N_SA = 8;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0;
  dram_cmd_t cmd;
  logic [N_SA-1:0] act_sel, open_mask;
  logic pre, rd, wr, proto_err;
  col_role_e [N_SA-1:0] role;
  logic [COL_W-1:0] col_src, col_dst;
  logic [PRED_W-1:0] row_bus_pred;
  int checks = 0, failures = 0;

  figaro_bank_ctrl #(.N_SA(N_SA)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic issue(input dram_cmd_e c, input int sa, input int row, input int col,
                       input int dsa, input int dcol);
    @(negedge clk);
    cmd = '0;
    cmd.cmd = c; cmd.sa = SA_W'(sa); cmd.row = LROW_W'(row); cmd.col = COL_W'(col);
    cmd.dst_sa = SA_W'(dsa); cmd.dst_col = COL_W'(dcol);
    cmd_valid = 1;
    #1;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cmd = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // ACT subarray 5 row 17
    issue(CMD_ACT, 5, 17, 0, 0, 0);
    check(act_sel == 8'b0010_0000, "ACT selects subarray 5");
    check(row_bus_pred == predecode_row(15'({7'd5, 9'd17})), "predecoded row bus");
    check(!proto_err, "ACT legal");
    // RELOC col 3 -> subarray 2 col 1 (Fig. 4 style)
    issue(CMD_RELOC, 0, 0, 3, 2, 1);
    check(role[5] == ROLE_SRC && role[2] == ROLE_DST, "RELOC roles");
    check(role[0] == ROLE_NONE && role[7] == ROLE_NONE, "others idle");
    check(col_src == 3 && col_dst == 1, "two column addresses");
    check(act_sel == 0 && !proto_err, "RELOC legal, no activation");
    issue(CMD_RELOC, 0, 0, 100, 2, 7);
    check(col_src == 100 && col_dst == 7 && role[2] == ROLE_DST, "second RELOC");
    // RELOC into the source subarray is illegal
    issue(CMD_RELOC, 0, 0, 1, 5, 2);
    check(proto_err && role[5] == ROLE_NONE, "RELOC into source flagged");
    // ACT destination subarray 2 without precharge
    issue(CMD_ACT, 2, 300, 0, 0, 0);
    check(act_sel == 8'b0000_0100 && !proto_err, "second ACT without PRE");
    @(negedge clk); cmd_valid = 0; #1;
    check(open_mask == 8'b0010_0100, "two open subarrays");
    // RELOC into an open subarray is illegal
    issue(CMD_RELOC, 0, 0, 1, 2, 2);
    check(proto_err, "RELOC into open subarray flagged");
    // READ goes to the last activated subarray
    issue(CMD_RD, 0, 0, 9, 0, 0);
    check(rd && role[2] == ROLE_SRC && col_src == 9 && !proto_err, "READ from last ACT");
    issue(CMD_WR, 0, 0, 11, 0, 0);
    check(wr && role[2] == ROLE_DST && col_dst == 11, "WRITE to last ACT");
    // ACT to an open subarray is illegal
    issue(CMD_ACT, 5, 1, 0, 0, 0);
    check(proto_err, "ACT to open subarray flagged");
    issue(CMD_PRE, 0, 0, 0, 0, 0);
    check(pre, "PRE");
    @(negedge clk); cmd_valid = 0; #1;
    check(open_mask == 0, "all closed");
    issue(CMD_RELOC, 0, 0, 1, 3, 1);
    check(proto_err, "RELOC with nothing open flagged");
    issue(CMD_RD, 0, 0, 1, 0, 0);
    check(proto_err, "READ with nothing open flagged");
    // new source after PRE
    issue(CMD_ACT, 6, 2, 0, 0, 0);
    issue(CMD_RELOC, 0, 0, 4, 1, 5);
    check(role[6] == ROLE_SRC && role[1] == ROLE_DST && !proto_err, "source follows first ACT after PRE");
    @(negedge clk); cmd_valid = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
