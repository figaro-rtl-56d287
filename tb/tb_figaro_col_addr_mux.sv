// tb_figaro_col_addr_mux -- exhaustive check of the per-subarray column
// address MUX: for every role and random source/destination addresses the
// chosen column and the direction enables must match the rule
// (source role -> source column, LRB drives; destination role ->
// destination column, global bitlines drive; no role -> disconnected).
module tb_figaro_col_addr_mux;
  import figaro_pkg::*;
  col_role_e role;
  logic [COL_W-1:0] col_src, col_dst, col;
  logic lrb_to_gbl, gbl_to_lrb;
  int checks = 0, failures = 0;

  figaro_col_addr_mux #(.COL_W(COL_W)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 300; it++) begin
      role    = col_role_e'(it % 3);
      col_src = COL_W'($urandom);
      col_dst = COL_W'($urandom);
      if (it % 7 == 0) col_dst = col_src + 1;   // unaligned neighbour
      #1;
      checks++;
      case (role)
        ROLE_SRC: if (!(col == col_src && lrb_to_gbl && !gbl_to_lrb)) begin failures++; $display("FAIL src"); end
        ROLE_DST: if (!(col == col_dst && !lrb_to_gbl && gbl_to_lrb)) begin failures++; $display("FAIL dst"); end
        default:  if (lrb_to_gbl || gbl_to_lrb) begin failures++; $display("FAIL none"); end
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
