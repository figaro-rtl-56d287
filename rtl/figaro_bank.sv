// figaro_bank -- one FIGARO-enabled DRAM bank (rank level, 8 chips in lockstep).
//
// It joins the digital peripheral logic that FIGARO adds to a bank with a
// behavioural model of the cell arrays and row buffers:
//   figaro_bank_ctrl       decodes ACT / RD / WR / PRE / RELOC for the bank
//   figaro_row_addr_latch  one per subarray: row address latch + row MUX
//   figaro_col_addr_mux    one per subarray: source/destination column MUX
//   dram_bank_array        cells, LRBs, global bitlines and GRB (model)
// A RELOC moves one 64 B column from the LRB of the open source row to any
// column of the LRB of another subarray in one command cycle; a following ACT
// of the destination row writes the relocated columns into its cells and
// keeps the others.
//
// Interface: cmd_valid/cmd (already selected for this bank), wdata with a WR,
// rdata one cycle after a RD (the model's GRB). proto_err and multi_drive
// report illegal command sequences. Subarrays 0..N_SLOW_SA-1 are the slow
// subarrays, the ones above them the fast subarrays.
module figaro_bank
  import figaro_pkg::*;
#(
  parameter int unsigned N_SLOW_SA = 64,
  parameter int unsigned N_FAST_SA = 2,
  parameter int unsigned ROWS_SLOW = 512,
  parameter int unsigned ROWS_FAST = 32,
  parameter int unsigned N_COLS    = 128,
  parameter int unsigned DATA_W    = 512
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               cmd_valid,
  input  dram_cmd_t          cmd,
  input  logic [DATA_W-1:0]  wdata,
  output logic [DATA_W-1:0]  rdata,
  output logic               proto_err,
  output logic               multi_drive
);
  localparam int unsigned N_SA = N_SLOW_SA + N_FAST_SA;

  logic [N_SA-1:0]              act_sel, wl_on, lrb_to_gbl, gbl_to_lrb, open_mask;
  col_role_e [N_SA-1:0]         role;
  logic [N_SA-1:0][PRED_W-1:0]  wl_pred;
  logic [N_SA-1:0][COL_W-1:0]   col;
  logic [COL_W-1:0]             col_src, col_dst;
  logic [PRED_W-1:0]            row_bus_pred;
  logic                         pre, rd, wr;

  figaro_bank_ctrl #(.N_SA(N_SA), .SA_W(SA_W), .COL_W(COL_W), .LROW_W(LROW_W),
                     .PRED_W(PRED_W)) u_ctrl (
    .clk, .rst_n, .cmd_valid, .cmd,
    .act_sel, .pre, .role, .col_src, .col_dst, .row_bus_pred,
    .rd, .wr, .open_mask, .proto_err
  );

  for (genvar s = 0; s < N_SA; s++) begin : g_sa
    figaro_row_addr_latch #(.PRED_W(PRED_W)) u_row (
      .clk, .rst_n, .act_sel(act_sel[s]), .pre, .row_bus_pred,
      .wl_on(wl_on[s]), .wl_pred(wl_pred[s])
    );
    figaro_col_addr_mux #(.COL_W(COL_W)) u_col (
      .role(role[s]), .col_src, .col_dst,
      .col(col[s]), .lrb_to_gbl(lrb_to_gbl[s]), .gbl_to_lrb(gbl_to_lrb[s])
    );
  end

  dram_bank_array #(.N_SA(N_SA), .N_SLOW_SA(N_SLOW_SA), .ROWS_SLOW(ROWS_SLOW),
                    .ROWS_FAST(ROWS_FAST), .N_COLS(N_COLS), .COL_W(COL_W),
                    .DATA_W(DATA_W), .PRED_W(PRED_W)) u_array (
    .clk, .act_sel, .wl_on, .wl_pred, .col, .lrb_to_gbl, .gbl_to_lrb,
    .pre, .wr, .wdata, .rdata, .multi_drive
  );

  // rd only selects the GRB as the I/O source; the model always shows the GRB
  logic unused_rd;
  assign unused_rd = rd;
endmodule
