// figaro_col_addr_mux -- per-subarray column address MUX of FIGARO.
//
// A conventional bank sends one column address to every local row buffer.
// For RELOC the bank receives two column addresses at once: the source column
// (in the open source row) and the destination column (in another subarray).
// This MUX, placed in front of each subarray's existing column decoder,
// picks the address that applies to its subarray's role in the cycle: the
// source column when the subarray is the RELOC/READ source (its LRB drives the
// global bitlines), the destination column when it is the RELOC/WRITE
// destination (the global bitlines drive its LRB). With no role the column
// path stays disconnected.
//
// Interface: role comes from the bank control, col_src/col_dst are the two
// shared column address buses. Outputs go to the column decoder: col (the
// chosen address), lrb_to_gbl and gbl_to_lrb (direction enables, at most one
// high). Purely combinational.
//
// From the paper: a MUX per subarray choosing one of the two column
// addresses by whether the subarray holds the source or the destination LRB.
// Own choice: the direction enables are produced here from the same role.
module figaro_col_addr_mux
  import figaro_pkg::*;
#(
  parameter int unsigned COL_W = 7
) (
  input  col_role_e          role,
  input  logic [COL_W-1:0]   col_src,
  input  logic [COL_W-1:0]   col_dst,
  output logic [COL_W-1:0]   col,
  output logic               lrb_to_gbl,
  output logic               gbl_to_lrb
);
  always_comb begin
    unique case (role)
      ROLE_SRC: begin col = col_src; lrb_to_gbl = 1'b1; gbl_to_lrb = 1'b0; end
      ROLE_DST: begin col = col_dst; lrb_to_gbl = 1'b0; gbl_to_lrb = 1'b1; end
      default:  begin col = '0;      lrb_to_gbl = 1'b0; gbl_to_lrb = 1'b0; end
    endcase
  end
endmodule
