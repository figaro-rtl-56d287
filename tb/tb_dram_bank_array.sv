// tb_dram_bank_array -- test of the behavioural bank model driven at the
// level of its analog controls. It writes known data, relocates a column
// from an open row into the precharged LRB of another subarray, activates
// the destination row and checks that only the relocated column changed and
// that reads return what a shadow copy in the testbench predicts.
module tb_dram_bank_array;
  localparam int N_SA = 4, ROWS = 16, NC = 8, CW = 3, DW = 32, PW = 40;
  logic clk = 0;
  logic [N_SA-1:0] act_sel, wl_on, lrb_to_gbl, gbl_to_lrb;
  logic [N_SA-1:0][PW-1:0] wl_pred;
  logic [N_SA-1:0][CW-1:0] col;
  logic pre, wr, multi_drive;
  logic [DW-1:0] wdata, rdata;
  logic [DW-1:0] ref_mem [N_SA][ROWS][NC];
  int checks = 0, failures = 0;

  dram_bank_array #(.N_SA(N_SA), .N_SLOW_SA(N_SA), .ROWS_SLOW(ROWS), .ROWS_FAST(ROWS),
                    .N_COLS(NC), .COL_W(CW), .DATA_W(DW), .PRED_W(PW)) dut (.*);
  always #5 clk = ~clk;

  function automatic logic [PW-1:0] pd(int r);
    logic [PW-1:0] p = '0;
    for (int g = 0; g < 5; g++) p[g*8 + ((r >> (g*3)) & 7)] = 1'b1;
    return p;
  endfunction

  task automatic idle();
    act_sel = '0; lrb_to_gbl = '0; gbl_to_lrb = '0; pre = 0; wr = 0;
  endtask
  task automatic act(int s, int r);
    @(negedge clk); idle(); act_sel[s] = 1; wl_on[s] = 1; wl_pred[s] = pd(r);
    @(negedge clk); idle();
  endtask
  task automatic prech();
    @(negedge clk); idle(); pre = 1; wl_on = '0;
    @(negedge clk); idle();
  endtask
  task automatic write(int s, int c, logic [DW-1:0] d);
    @(negedge clk); idle(); gbl_to_lrb[s] = 1; col[s] = CW'(c); wr = 1; wdata = d;
    @(negedge clk); idle();
  endtask
  task automatic read(int s, int c, output logic [DW-1:0] d);
    @(negedge clk); idle(); lrb_to_gbl[s] = 1; col[s] = CW'(c);
    @(negedge clk); idle(); d = rdata;
  endtask
  task automatic reloc(int ss, int sc, int ds, int dc);
    @(negedge clk); idle(); lrb_to_gbl[ss] = 1; col[ss] = CW'(sc); gbl_to_lrb[ds] = 1; col[ds] = CW'(dc);
    @(negedge clk); idle();
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [DW-1:0] d;
    idle(); wl_on = '0; wl_pred = '0; col = '0; wdata = '0;
    // fill rows 2 of subarray 0 and 5 of subarray 1 and 2
    for (int s = 0; s < 3; s++) begin
      automatic int r = (s == 0) ? 2 : 5;
      act(s, r);
      for (int c = 0; c < NC; c++) begin
        d = $urandom; write(s, c, d); ref_mem[s][r][c] = d;
      end
      prech();
    end
    // relocate columns 3 and 6 of (0,2) to columns 1 and 4 of (1,5)
    act(0, 2);
    reloc(0, 3, 1, 1); ref_mem[1][5][1] = ref_mem[0][2][3];
    reloc(0, 6, 1, 4); ref_mem[1][5][4] = ref_mem[0][2][6];
    act(1, 5);
    prech();
    // read back both rows
    for (int s = 0; s < 3; s++) begin
      automatic int r = (s == 0) ? 2 : 5;
      act(s, r);
      for (int c = 0; c < NC; c++) begin
        read(s, c, d);
        checks++;
        if (d !== ref_mem[s][r][c]) begin
          failures++; $display("FAIL sa%0d row%0d col%0d: %h vs %h", s, r, c, d, ref_mem[s][r][c]);
        end
      end
      prech();
    end
    // two sources at once are reported
    act(0, 2); act(2, 5);
    @(negedge clk); idle(); lrb_to_gbl[0] = 1; lrb_to_gbl[2] = 1;
    @(negedge clk); idle();
    checks++; if (!multi_drive) begin failures++; $display("FAIL multi_drive"); end
    prech();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
