// tb_figaro_row_addr_latch -- self-checking test of the per-subarray row
// address latch and row MUX. It activates the subarray with a random
// predecoded address, then moves the shared row bus to other values (a
// second ACTIVATE elsewhere in the bank) and checks that the local row
// decoder keeps seeing the first address and the wordline stays up until a
// precharge. Expected values come from a shadow copy kept by the testbench.
module tb_figaro_row_addr_latch;
  import figaro_pkg::*;
  logic clk = 0, rst_n = 0;
  logic act_sel = 0, pre = 0;
  logic [PRED_W-1:0] bus = '0, wl_pred, held;
  logic wl_on, held_on;
  int checks = 0, failures = 0;

  figaro_row_addr_latch #(.PRED_W(PRED_W)) dut (.*, .row_bus_pred(bus));

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    held_on = 0; held = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 200; it++) begin
      logic [GROW_W-1:0] r;
      int op;
      @(negedge clk);
      op = $urandom_range(0, 3);
      r  = GROW_W'($urandom);
      bus = predecode_row(r);
      act_sel = (op == 0);
      pre     = (op == 1);
      #1;
      if (act_sel) begin
        check(wl_on && wl_pred == bus, "activate passes the live bus");
        held = bus; held_on = 1;
      end else if (pre) begin
        check(!wl_on, "precharge drops the wordline");
        held_on = 0;
      end else begin
        check(wl_on == held_on, "wordline held between commands");
        if (held_on) check(wl_pred == held, "latched address while bus moves");
        check(local_row_of(wl_pred) == local_row_of(held_on ? held : wl_pred), "local row");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
